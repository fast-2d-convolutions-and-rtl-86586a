// tb_sfdprt_system: self-checking test of the scalable forward DPRT at the
// default size (N = 41, H = 32: two strips, the second one partial).
//
// Three blocks are transformed: a random image, an all-255 image (largest
// sums) and a random image loaded with MODE = 1 (rows and columns flipped).
// Every one of the N+1 directions is read back through port A (B'-bit
// values) and through port X (BC-bit values) and compared with the DPRT
// definition evaluated directly. The cycle count from the first row write to
// done is checked against N + ceil(N/H)(H+N+1) + ceil(log2 H) + 2. Finally a
// row written through port X must read back unchanged.
module tb_sfdprt_system;
  localparam int N  = 41;
  localparam int H  = 32;
  localparam int B  = 8;
  localparam int C  = 8;
  localparam int NB = $clog2(N);
  localparam int RB = $clog2(N + 1);
  localparam int BP = B + NB;
  localparam int BC = B + C + 3 * NB;
  localparam int NS = (N + H - 1) / H;
  localparam int EXP_CYC = N + NS * (H + N + 1) + $clog2(H) + 2;

  logic clk = 1'b0;
  logic rst = 1'b1;
  always #5 clk = ~clk;

  logic                 MODE = 1'b0, start = 1'b0, iwr = 1'b0;
  logic [B-1:0]         DRi [N];
  logic                 xoRAM_en = 1'b0;
  logic [RB-1:0]        xoRAM_addr = '0;
  logic [BP-1:0]        oRAM_Zo [N];
  logic                 xoRAM_enx = 1'b0, xoRAM_wex = 1'b0;
  logic [RB-1:0]        xoRAM_addrx = '0;
  logic signed [BC-1:0] xoRAM_DRix [N];
  logic signed [BC-1:0] oRAM_Co [N];
  logic                 done;

  sfdprt_system #(.N(N), .H(H), .B(B), .C(C), .BC(BC)) dut (.*);

  int checks = 0, failures = 0;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  int     img [N][N];
  longint ref_f [N+1][N];

  task automatic transform(input int kind, input logic flip);
    int     src [N][N];
    longint t0;
    for (int i = 0; i < N; i++)
      for (int j = 0; j < N; j++)
        src[i][j] = (kind == 1) ? 255 : int'($urandom_range(255));
    // what the block should look like after the (optional) flip
    for (int i = 0; i < N; i++)
      for (int j = 0; j < N; j++)
        img[i][j] = flip ? src[N-1-i][N-1-j] : src[i][j];
    for (int m = 0; m <= N; m++)
      for (int d = 0; d < N; d++) begin
        ref_f[m][d] = 0;
        for (int i = 0; i < N; i++)
          ref_f[m][d] += (m < N) ? img[i][(d + m * i) % N] : img[d][i];
      end
    @(negedge clk);
    MODE = flip; start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    for (int i = 0; i < N; i++) begin
      iwr = 1'b1;
      for (int j = 0; j < N; j++) DRi[j] = B'(src[i][j]);
      @(posedge clk); #1;
      if (i == 0) t0 = cyc;
      @(negedge clk);
    end
    iwr = 1'b0;
    while (!done) begin @(posedge clk); #1; end
    checks++;
    if (cyc - t0 + 1 != EXP_CYC) begin
      failures++;
      $display("transform took %0d cycles, expected %0d", cyc - t0 + 1, EXP_CYC);
    end
    // read back every direction through both ports
    for (int m = 0; m <= N; m++) begin
      int bad;
      @(negedge clk);
      xoRAM_en = 1'b1; xoRAM_addr = RB'(m);
      xoRAM_enx = 1'b1; xoRAM_wex = 1'b0; xoRAM_addrx = RB'(m);
      @(negedge clk);
      xoRAM_en = 1'b0; xoRAM_enx = 1'b0;
      bad = 0;
      for (int d = 0; d < N; d++) begin
        if (longint'(oRAM_Zo[d]) != ref_f[m][d]) bad++;
        if (longint'(oRAM_Co[d]) != ref_f[m][d]) bad++;
      end
      checks++;
      if (bad != 0) begin
        failures++;
        $display("kind %0d flip %0d direction %0d: %0d mismatches (Zo[0]=%0d Co[0]=%0d ref %0d)",
                 kind, flip, m, bad, oRAM_Zo[0], oRAM_Co[0], ref_f[m][0]);
      end
    end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst = 1'b0;
    transform(0, 1'b0);
    transform(1, 1'b0);
    transform(0, 1'b1);
    // port X write then read back
    @(negedge clk);
    for (int d = 0; d < N; d++) xoRAM_DRix[d] = BC'(longint'(d) * 1000 - 7777);
    xoRAM_enx = 1'b1; xoRAM_wex = 1'b1; xoRAM_addrx = RB'(5);
    @(negedge clk);
    xoRAM_wex = 1'b0;
    @(negedge clk);
    xoRAM_enx = 1'b0;
    begin
      automatic int bad = 0;
      for (int d = 0; d < N; d++) if (longint'(oRAM_Co[d]) != longint'(d) * 1000 - 7777) bad++;
      checks++;
      if (bad != 0) begin failures++; $display("port X write/read: %0d mismatches", bad); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
