// fsc_driver: stimulus and checker for one fastscaleconv_top instance.
//
// It plays the host: it writes the DPRT of a Q x Q kernel (computed here,
// from the definition) into the kernel memory, streams P x P image blocks
// zero-padded to N x N (N = 2P-1), waits for done and reads the N x N result
// back. Each block is compared with a direct evaluation:
//   MODE = 0: linear convolution f(k,l) = sum g(a,b) h(k-a, l-b);
//   MODE = 1: cross-correlation c(u,v) = sum g(a,b) h(a+u, b+v) (indices
//             mod N), which the flipped load returns as y(<u-1>,<v-1>).
// Block 0 uses extreme values (all pixels 2^B-1, all kernel taps -2^(C-1));
// later blocks are random, and block NBLK-1 is run with MODE = 1. Blocks follow
// one another without reset. The cycle count from the first row write to
// done is checked against the sum of the per-stage counts:
//   forward  N + ceil(N/H)(H+N+1) + ceil(log2 H) + 2
//   convolve (L-1)(J+N) + r + N + n + 3, r = size of the last group
//   inverse  3 + n + ceil(N/H)(H+N+1) + ceil(log2 H) + 2 + N + 2
// plus 3 cycles of handover between the stages.
module fsc_driver #(
  parameter int N    = 7,
  parameter int H    = 2,
  parameter int J    = 3,
  parameter int B    = 8,
  parameter int C    = 8,
  parameter int NBLK = 3
) (
  input  logic                               clk,
  output logic                               rst,
  output logic                               MODE,
  output logic                               start,
  output logic                               iwr,
  output logic [B-1:0]                       G_DRi [N],
  output logic                               owrH,
  output logic signed [C+$clog2(N)-1:0]      H_DRi [N],
  output logic                               oRAM_rd,
  output logic [$clog2(N)-1:0]               oRAM_xaddr,
  input  logic signed [B+C+3*$clog2(N)-1:0]  oRAM_Fo [N],
  input  logic                               done,
  output int                                 checks,
  output int                                 failures,
  output bit                                 finished
);
  localparam int NB  = $clog2(N);
  localparam int RB  = $clog2(N + 1);
  localparam int CP  = C + NB;
  localparam int P   = (N + 1) / 2;
  localparam int NS  = (N + H - 1) / H;
  localparam int L   = (N + 1 + J - 1) / J;
  localparam int LR  = N + 1 - (L - 1) * J;
  localparam int HL  = (H <= 1) ? 0 : $clog2(H);
  localparam int EXP_FWD = N + NS * (H + N + 1) + HL + 2;
  localparam int EXP_CNV = (L - 1) * (J + N) + LR + N + NB + 3;
  localparam int EXP_INV = 3 + NB + NS * (H + N + 1) + HL + 2 + N + 2;
  localparam int EXP_TOT = EXP_FWD + EXP_CNV + EXP_INV + 3;

  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  longint g  [N][N];
  longint hk [N][N];
  longint hd [N+1][N];
  longint ref_y [N][N];

  task automatic fail(input string msg);
    failures++;
    $display("[N=%0d H=%0d J=%0d] %s", N, H, J, msg);
  endtask

  task automatic load_kernel(input int kind);
    for (int i = 0; i < N; i++)
      for (int j = 0; j < N; j++)
        hk[i][j] = (i >= P || j >= P) ? 0 :
                   (kind == 0) ? -(64'sd1 <<< (C - 1)) :
                   longint'($urandom_range((1 << C) - 1)) - (64'sd1 <<< (C - 1));
    for (int m = 0; m <= N; m++)
      for (int d = 0; d < N; d++) begin
        hd[m][d] = 0;
        for (int i = 0; i < N; i++) hd[m][d] += (m < N) ? hk[i][(d + m * i) % N] : hk[d][i];
      end
    @(negedge clk);
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    for (int m = 0; m <= N; m++) begin
      owrH = 1'b1;
      for (int d = 0; d < N; d++) H_DRi[d] = CP'(hd[m][d]);
      @(negedge clk);
    end
    owrH = 1'b0;
  endtask

  task automatic run_block(input int kind, input logic xcorr);
    longint t0;
    for (int i = 0; i < N; i++)
      for (int j = 0; j < N; j++)
        g[i][j] = (i >= P || j >= P) ? 0 : (kind == 0) ? (1 << B) - 1 : $urandom_range((1 << B) - 1);
    for (int k = 0; k < N; k++)
      for (int l = 0; l < N; l++) begin
        ref_y[k][l] = 0;
        for (int a = 0; a < N; a++)
          for (int b = 0; b < N; b++)
            if (!xcorr) begin
              if (k - a >= 0 && l - b >= 0) ref_y[k][l] += g[a][b] * hk[k-a][l-b];
            end else begin
              // y(k,l) = c(<k+1>, <l+1>)
              ref_y[k][l] += g[a][b] * hk[(a + k + 1) % N][(b + l + 1) % N];
            end
      end
    @(negedge clk);
    MODE = xcorr; start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    for (int i = 0; i < N; i++) begin
      iwr = 1'b1;
      for (int j = 0; j < N; j++) G_DRi[j] = B'(g[i][j]);
      @(posedge clk); #1;
      if (i == 0) t0 = cyc;
      @(negedge clk);
    end
    iwr = 1'b0;
    while (!done) begin @(posedge clk); #1; end
    checks++;
    if (cyc - t0 + 1 != EXP_TOT)
      fail($sformatf("block took %0d cycles, expected %0d", cyc - t0 + 1, EXP_TOT));
    for (int i = 0; i < N; i++) begin
      int bad = 0;
      @(negedge clk);
      oRAM_rd = 1'b1; oRAM_xaddr = NB'(i);
      @(negedge clk);
      oRAM_rd = 1'b0;
      for (int j = 0; j < N; j++) if (longint'(oRAM_Fo[j]) != ref_y[i][j]) bad++;
      checks++;
      if (bad != 0)
        fail($sformatf("block kind %0d xcorr %0d row %0d: %0d mismatches (y[0]=%0d expected %0d)",
                       kind, xcorr, i, bad, oRAM_Fo[0], ref_y[i][0]));
    end
  endtask

  initial begin
    checks = 0; failures = 0; finished = 1'b0;
    rst = 1'b1; MODE = 1'b0; start = 1'b0; iwr = 1'b0; owrH = 1'b0;
    oRAM_rd = 1'b0; oRAM_xaddr = '0;
    for (int j = 0; j < N; j++) begin G_DRi[j] = '0; H_DRi[j] = '0; end
    repeat (3) @(negedge clk);
    rst = 1'b0;
    load_kernel(0);
    run_block(0, 1'b0);
    load_kernel(1);
    for (int b = 1; b < NBLK; b++) run_block(1, b == NBLK - 1);
    finished = 1'b1;
  end
endmodule
