// fastscaleconv_fsm: controller of the DPRT-based 2D convolution system.
//
// After the forward DPRT of the image block is complete (done_G), the N+1
// directions are convolved in L = ceil((N+1)/J) groups of J. In group p,
// for i = 0..J-1, direction pJ+i is read from the image DPRT memory (port A)
// and from the kernel DPRT memory in cycle i of the group; one cycle later
// convolver i performs its parallel load (E_G = E_H = s_H = 1) and then, for
// N-1 cycles, its circular right shifts (E_H = 1, s_H = 0). Each group lasts
// J+N cycles, so the loads are staggered by one cycle and the convolvers
// finish one after the other: when convolver i raises v_conv[i] for the
// (p+1)-th time, its result is written back over direction pJ+i of the image DPRT memory through port X
// (wb_sel tells the datapath which convolver to route). Directions above N in
// the last group are skipped. After all N+1 results are written, start_inv
// starts the inverse DPRT and port X is handed to it (inv_iRAM_en /
// inv_iRAM_addr pass through to GRAM_enx / GRAM_addrx). done pulses when the
// inverse DPRT reports done_inv.
//
// Timing: the last group is not waited out: with r = N+1-(L-1)J directions in
// it, the last write-back comes (L-1)(J+N) + r + N + ceil(log2 N) + 1 cycles
// after done_G and start_inv two cycles later (the published count for the
// convolution phase is L(J+N) + ceil(log2 N) + 1). The write-back address is
// pJ+i, with p counted per convolver from its own result pulses, so it is
// right even when J < ceil(log2 N) + 1 and a convolver is reloaded before its
// previous result has left the pipeline.
//
// The group schedule (one load per cycle, J+N cycles per group) and the
// signal names follow the published timing diagrams and system diagram; the
// write-back through port X of the image DPRT memory follows the diagram's
// Fo -> GRAM_DRix connection. Encodings and the exact handover are this
// implementation's choices.
module fastscaleconv_fsm #(
  parameter int N = 41,
  parameter int J = 32
) (
  input  logic                       clk,
  input  logic                       rst,
  input  logic                       done_G,
  input  logic [J-1:0]               v_conv,
  input  logic                       done_inv,
  input  logic                       inv_iRAM_en,
  input  logic [$clog2(N+1)-1:0]     inv_iRAM_addr,
  output logic                       GRAM_en,
  output logic [$clog2(N+1)-1:0]     GRAM_addr,
  output logic                       HRAM_en,
  output logic [$clog2(N+1)-1:0]     HRAM_addr,
  output logic                       GRAM_enx,
  output logic                       GRAM_wex,
  output logic [$clog2(N+1)-1:0]     GRAM_addrx,
  output logic [J-1:0]               E_G,
  output logic [J-1:0]               E_H,
  output logic [J-1:0]               s_H,
  output logic [((J > 1) ? $clog2(J) : 1)-1:0] wb_sel,
  output logic                       start_inv,
  output logic                       done
);
  localparam int RB = $clog2(N + 1);
  localparam int JB = (J > 1) ? $clog2(J) : 1;
  localparam int L  = (N + 1 + J - 1) / J;
  localparam int PB = (L > 1) ? $clog2(L) : 1;
  localparam int TB = $clog2(J + N + 1);
  localparam int NB = $clog2(N);
  localparam int LASTI = N - (L - 1) * J;   // last convolver used by the last group

  typedef enum logic [1:0] {IDLE, CONV, WAITWB, INV} state_t;
  state_t state;

  logic [PB-1:0] p;
  logic [TB-1:0] t;
  logic          ld_v;
  logic [JB-1:0] ld_idx;
  logic [PB-1:0] wgrp [J];     // results already written, per convolver
  logic [NB-1:0] shcnt [J];
  logic [RB:0]   wcnt;

  int            issue_dir;
  logic          issue;

  always_comb begin
    issue_dir = int'(p) * J + int'(t);
    issue     = (state == CONV) && (int'(t) < J) && (issue_dir <= N);
  end

  // Memory reads for the convolver loads.
  always_comb begin
    GRAM_en   = issue;
    GRAM_addr = RB'(issue_dir);
    HRAM_en  = issue;
    HRAM_addr = RB'(issue_dir);
  end

  // Convolver controls.
  always_comb begin
    for (int i = 0; i < J; i++) begin
      s_H[i] = ld_v && (ld_idx == JB'(i));
      E_G[i] = s_H[i];
      E_H[i] = s_H[i] || (shcnt[i] != '0);
    end
  end

  // Write-back select: the convolver that has just finished.
  always_comb begin
    wb_sel = '0;
    for (int i = 0; i < J; i++)
      if (v_conv[i]) wb_sel = JB'(i);
  end

  // Port X: write-back during convolution, inverse-DPRT reads afterwards.
  always_comb begin
    if (state == INV) begin
      GRAM_enx   = inv_iRAM_en;
      GRAM_wex   = 1'b0;
      GRAM_addrx = inv_iRAM_addr;
    end else begin
      GRAM_enx   = |v_conv;
      GRAM_wex   = |v_conv;
      GRAM_addrx = RB'(int'(wgrp[wb_sel]) * J + int'(wb_sel));
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      state     <= IDLE;
      p         <= '0;
      t         <= '0;
      ld_v      <= 1'b0;
      ld_idx    <= '0;
      wcnt      <= '0;
      start_inv <= 1'b0;
      done      <= 1'b0;
      for (int i = 0; i < J; i++) begin
        shcnt[i] <= '0;
        wgrp[i]  <= '0;
      end
    end else begin
      start_inv <= 1'b0;
      done      <= 1'b0;
      ld_v      <= issue;
      ld_idx    <= JB'(t);
      for (int i = 0; i < J; i++) begin
        if (s_H[i]) begin
          shcnt[i] <= NB'(N - 1);
        end else if (shcnt[i] != '0) begin
          shcnt[i] <= shcnt[i] - 1'b1;
        end
      end
      if ((|v_conv) && state != INV) wcnt <= wcnt + 1'b1;
      for (int i = 0; i < J; i++) if (v_conv[i]) wgrp[i] <= wgrp[i] + 1'b1;
      case (state)
        IDLE: if (done_G) begin
          state <= CONV;
          p     <= '0;
          t     <= '0;
          wcnt  <= '0;
          for (int i = 0; i < J; i++) wgrp[i] <= '0;
        end
        CONV: begin
          if (int'(p) == L - 1 && int'(t) == LASTI) begin
            // last load issued: only the write-backs remain
            t     <= '0;
            state <= WAITWB;
          end else if (int'(t) == J + N - 1) begin
            t <= '0;
            p <= p + 1'b1;
          end else begin
            t <= t + 1'b1;
          end
        end
        WAITWB: if (wcnt == (RB+1)'(N + 1)) begin
          state     <= INV;
          start_inv <= 1'b1;
        end
        INV: if (done_inv) begin
          state <= IDLE;
          done  <= 1'b1;
        end
        default: state <= IDLE;
      endcase
    end
  end

  // At most one convolver finishes per cycle, so one write port suffices.
  a_one_wb: assert property (@(posedge clk) disable iff (rst) $onehot0(v_conv));

endmodule
