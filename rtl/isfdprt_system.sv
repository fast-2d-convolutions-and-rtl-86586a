// isfdprt_system: scalable inverse DPRT with normalisation.
//
// Reconstructs the N x N block f from its N+1 DPRT directions F using
//     f(i,j) = ( sum_{m=0}^{N-1} F(m, <j - m*i>_N) - S + F(N,i) ) / N,
// where S, the sum of all pixels of f, equals the sum of the row-sum
// direction F(N,.). The DPRT is read from an external row memory, one row of
// N words per request (iRAM_en, iRAM_addr), with the data on iRAM_DRo one
// cycle later.
//
// How it works: on start the module first reads direction N, keeps it in
// registers and sums it with an adder tree to obtain S. It then runs
// dprt_engine with S = -1 over directions 0..N-1, H directions per strip,
// accumulating the back-projections into an N x N result memory of
// BCO = BC + ceil(log2(N+1)) bits. A final pass, one row per cycle, adds
// F(N,i) - S and divides by N. The division is exact (the sum is always a
// multiple of N), so it is done by multiplying with the inverse of N modulo
// 2^BCO and keeping the low BCO bits. done pulses when the result is ready.
// The result is read with oRAM_rd / oRAM_xaddr, one row per cycle, on oRAM_Fo
// one cycle later (BC bits per pixel, signed).
// Timing: 3 + ceil(log2 N) cycles for S, ceil(N/H)(H+N+1) + ceil(log2 H) + 2
// for the back-projection, N + 2 for normalisation.
//
// The equation, the strip parameter H and the port names follow the
// published system; the schedule and the modular-inverse division are this
// implementation's own choices.
module isfdprt_system #(
  parameter int N   = 41,
  parameter int H   = 32,
  parameter int BC  = 8 + 8 + 3 * $clog2(N),
  parameter int BCO = BC + $clog2(N + 1)
) (
  input  logic                        clk,
  input  logic                        rst,
  input  logic                        start,
  output logic                        iRAM_en,
  output logic [$clog2(N+1)-1:0]      iRAM_addr,
  input  logic signed [BC-1:0]        iRAM_DRo [N],
  input  logic                        oRAM_rd,
  input  logic [$clog2(N)-1:0]        oRAM_xaddr,
  output logic signed [BC-1:0]        oRAM_Fo [N],
  output logic                        done
);
  import fsc_pkg::*;

  localparam int AB  = $clog2(N);
  localparam int RB  = $clog2(N + 1);
  localparam int SW  = BC + $clog2(N);
  localparam int LVN = tree_levels(N);
  localparam logic [63:0] INV64 = inv_mod_pow2(N);
  localparam logic [BCO-1:0] INVN = INV64[BCO-1:0];

  typedef enum logic [2:0] {IDLE, RDN, CAPN, SUMS, BACK, NORM, FIN} state_t;
  state_t state;

  logic signed [BC-1:0]  fn [N];     // direction N
  logic signed [BCO-1:0] s_tot;
  logic                  s_v;
  logic signed [SW-1:0]  s_sum;
  logic                  cap_v;

  logic                  eng_start, eng_done;
  logic                  rd_en;
  logic [AB-1:0]         rd_addr;
  logic                  acc_we, acc_first;
  logic [AB-1:0]         acc_row;
  logic signed [BCO-1:0] acc_data [N];

  logic signed [BCO-1:0] ymem [N][N];
  logic [AB:0]           nrow;       // normalisation read row
  logic                  n_v;
  logic [AB-1:0]         n_row;
  logic signed [BCO-1:0] n_t [N];

  always_comb begin
    iRAM_en   = (state == RDN) || rd_en;
    iRAM_addr = (state == RDN) ? RB'(N) : RB'(rd_addr);
  end

  always_ff @(posedge clk) begin
    if (cap_v) fn <= iRAM_DRo;
  end

  adder_tree #(.NIN(N), .IW(BC), .OW(SW)) u_s (
    .clk, .rst, .v_in(cap_v), .din(iRAM_DRo), .v_out(s_v), .dout(s_sum)
  );

  dprt_engine #(.N(N), .H(H), .IW(BC), .AW(BCO), .S(-1)) u_eng (
    .clk, .rst, .start(eng_start),
    .rd_en, .rd_addr, .rd_data(iRAM_DRo),
    .acc_we, .acc_row, .acc_first, .acc_data, .done(eng_done)
  );

  always_ff @(posedge clk) begin
    if (rst) begin
      state     <= IDLE;
      cap_v     <= 1'b0;
      eng_start <= 1'b0;
      s_tot     <= '0;
      nrow      <= '0;
      n_v       <= 1'b0;
      done      <= 1'b0;
    end else begin
      cap_v     <= 1'b0;
      eng_start <= 1'b0;
      done      <= 1'b0;
      n_v       <= 1'b0;
      case (state)
        IDLE: if (start) state <= RDN;
        RDN:  begin cap_v <= 1'b1; state <= CAPN; end
        CAPN: state <= SUMS;
        SUMS: if (s_v || LVN == 0) begin
          s_tot     <= BCO'(s_sum);
          eng_start <= 1'b1;
          state     <= BACK;
        end
        BACK: if (eng_done) begin
          state <= NORM;
          nrow  <= '0;
        end
        NORM: begin
          n_v  <= 1'b1;
          nrow <= nrow + 1'b1;
          if (nrow == (AB+1)'(N - 1)) state <= FIN;
        end
        FIN: begin
          state <= IDLE;
          done  <= 1'b1;
        end
        default: state <= IDLE;
      endcase
    end
  end

  // Normalisation pipeline: stage 1 adds F(N,i) - S, stage 2 divides by N.
  always_ff @(posedge clk) begin
    if (state == NORM) begin
      for (int j = 0; j < N; j++)
        n_t[j] <= ymem[AB'(nrow)][j] - s_tot + BCO'(fn[AB'(nrow)]);
      n_row <= AB'(nrow);
    end
  end

  always_ff @(posedge clk) begin
    if (acc_we) begin
      for (int d = 0; d < N; d++)
        ymem[acc_row][d] <= acc_first ? acc_data[d] : ymem[acc_row][d] + acc_data[d];
    end
    if (n_v) begin
      for (int j = 0; j < N; j++) ymem[n_row][j] <= BCO'(n_t[j] * $signed(INVN));
    end
  end

  always_ff @(posedge clk) begin
    if (oRAM_rd) begin
      for (int j = 0; j < N; j++) oRAM_Fo[j] <= BC'(ymem[oRAM_xaddr][j]);
    end
  end

  initial begin
    assert (BCO <= 64) else $error("isfdprt_system: BCO above 64 bits is not supported");
    assert (N % 2 == 1) else $error("isfdprt_system: N must be an odd prime");
  end

endmodule
