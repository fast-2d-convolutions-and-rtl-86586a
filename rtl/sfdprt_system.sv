// sfdprt_system: scalable forward DPRT of one N x N image block, with the
// block's transform memory.
//
// The image block (already zero-padded to N x N, N prime) is written one row
// per cycle: start clears the row counter, then each cycle with iwr = 1
// stores DRi as the next row. With MODE = 1 the block is stored flipped
// vertically and horizontally (the rows in reverse order, each row reversed),
// the flip that cross-correlation needs (the published design flips the
// kernel; this block flips the image instead, see fastscaleconv_top). After the N-th row
// the transform starts by itself: dprt_engine sums H rows per strip along all
// N directions m = 0..N-1, and while each row is read its row sum, the extra
// direction m = N, is formed by an adder tree. When the transform is complete
// done pulses for one cycle.
//
// The result memory holds N+1 rows (directions) of N rays, BC bits each (the
// DPRT itself needs only B' = B + ceil(log2 N) bits; the wider words let the
// memory also hold the 1D convolution results that the system writes back).
// It has two synchronous ports with one-cycle read latency:
//   port A (xoRAM_en, xoRAM_addr) reads a row onto oRAM_Zo, B' bits per ray;
//   port X (xoRAM_enx, xoRAM_wex, xoRAM_addrx, xoRAM_DRix) writes a full row
//   or reads it onto oRAM_Co, BC bits per ray.
// Timing: N load cycles, then ceil(N/H)(H+N+1) + ceil(log2 H) + 2 cycles to done.
//
// The port list and the flip-on-load follow the published system diagram
// and text; the internal schedule is this implementation's own (the original
// scalable DPRT is published separately and is not reproduced here).
module sfdprt_system #(
  parameter int N  = 41,
  parameter int H  = 32,
  parameter int B  = 8,
  parameter int C  = 8,
  parameter int BC = B + C + 3 * $clog2(N)
) (
  input  logic                         clk,
  input  logic                         rst,
  input  logic                         MODE,        // 1: flip rows and columns on load
  input  logic                         start,
  input  logic                         iwr,
  input  logic        [B-1:0]          DRi [N],
  input  logic                         xoRAM_en,
  input  logic [$clog2(N+1)-1:0]       xoRAM_addr,
  output logic [B+$clog2(N)-1:0]       oRAM_Zo [N],
  input  logic                         xoRAM_enx,
  input  logic                         xoRAM_wex,
  input  logic [$clog2(N+1)-1:0]       xoRAM_addrx,
  input  logic signed [BC-1:0]         xoRAM_DRix [N],
  output logic signed [BC-1:0]         oRAM_Co [N],
  output logic                         done
);
  localparam int NB = $clog2(N);
  localparam int AB = $clog2(N);
  localparam int RB = $clog2(N + 1);
  localparam int BP = B + NB;
  localparam int IW = B + 1;             // image pixel as a non-negative signed value
  localparam int AW = IW + NB;

  logic [B-1:0]  imem [N][N];
  logic [RB-1:0] wcnt;
  logic          loading;
  logic          eng_start;

  // Row-wise image load, with optional flips.
  always_ff @(posedge clk) begin
    if (rst) begin
      wcnt      <= '0;
      loading   <= 1'b0;
      eng_start <= 1'b0;
    end else begin
      eng_start <= 1'b0;
      if (start) begin
        wcnt    <= '0;
        loading <= 1'b1;
      end else if (loading && iwr) begin
        wcnt <= wcnt + 1'b1;
        if (wcnt == RB'(N - 1)) begin
          loading   <= 1'b0;
          eng_start <= 1'b1;
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    if (loading && iwr && !start) begin
      for (int j = 0; j < N; j++) begin
        if (MODE) imem[N-1-int'(wcnt)][j] <= DRi[N-1-j];
        else      imem[int'(wcnt)][j]     <= DRi[j];
      end
    end
  end

  // Engine and its row reads.
  logic                 rd_en;
  logic [AB-1:0]        rd_addr;
  logic signed [IW-1:0] rd_q [N];
  logic                 rd_v;
  logic [AB-1:0]        rd_row;

  always_ff @(posedge clk) begin
    if (rd_en) begin
      for (int j = 0; j < N; j++) rd_q[j] <= $signed({1'b0, imem[rd_addr][j]});
    end
    rd_row <= rd_addr;
  end

  always_ff @(posedge clk) begin
    if (rst) rd_v <= 1'b0;
    else     rd_v <= rd_en;
  end

  logic                 acc_we, acc_first;
  logic [AB-1:0]        acc_row;
  logic signed [AW-1:0] acc_data [N];

  dprt_engine #(.N(N), .H(H), .IW(IW), .AW(AW), .S(1)) u_eng (
    .clk, .rst, .start(eng_start),
    .rd_en, .rd_addr, .rd_data(rd_q),
    .acc_we, .acc_row, .acc_first, .acc_data, .done
  );

  // Direction m = N: row sums, one per row read.
  localparam int LVN = fsc_pkg::tree_levels(N);
  logic                 rs_v;
  logic signed [AW-1:0] rs_sum;
  logic [AB-1:0]        rs_row [LVN+1];

  adder_tree #(.NIN(N), .IW(IW), .OW(AW)) u_rowsum (
    .clk, .rst, .v_in(rd_v), .din(rd_q), .v_out(rs_v), .dout(rs_sum)
  );

  assign rs_row[0] = rd_row;
  for (genvar l = 1; l <= LVN; l++) begin : g_rs_tag
    always_ff @(posedge clk) rs_row[l] <= rs_row[l-1];
  end

  // Transform memory, N+1 rows of N words.
  logic signed [BC-1:0] gmem [N+1][N];

  always_ff @(posedge clk) begin
    if (acc_we) begin
      for (int d = 0; d < N; d++)
        gmem[acc_row][d] <= acc_first ? BC'(acc_data[d]) : gmem[acc_row][d] + BC'(acc_data[d]);
    end
    if (rs_v) gmem[N][rs_row[LVN]] <= BC'(rs_sum);
    if (xoRAM_enx && xoRAM_wex) gmem[xoRAM_addrx] <= xoRAM_DRix;
  end

  always_ff @(posedge clk) begin
    if (xoRAM_en) begin
      for (int d = 0; d < N; d++) oRAM_Zo[d] <= BP'(gmem[xoRAM_addr][d]);
    end
    if (xoRAM_enx && !xoRAM_wex) oRAM_Co <= gmem[xoRAM_addrx];
  end

  // Port X must not write while the transform is being accumulated.
  a_no_x_write_busy: assert property (@(posedge clk) disable iff (rst)
                                      acc_we |-> !(xoRAM_enx && xoRAM_wex));

endmodule
