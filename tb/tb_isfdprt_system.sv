// tb_isfdprt_system: self-checking test of the scalable inverse DPRT at the
// default size (N = 41, H = 32, BC = 34 bits).
//
// A behavioural row memory answers the module's reads with the DPRT of a
// known block f, one cycle after each request. Three blocks are used: signed
// random values of the size a convolution result can reach, the extreme
// values +-(2^(B+C+2n-1) - 1) in a checkerboard, and a single impulse. After
// done every output row is read back and must equal f exactly (the
// normalisation by N is exact). The number of cycles from start to done is
// checked against 3 + ceil(log2 N) + ceil(N/H)(H+N+1) + ceil(log2 H) + 2 + N + 2.
module tb_isfdprt_system;
  localparam int N  = 41;
  localparam int H  = 32;
  localparam int NB = $clog2(N);
  localparam int RB = $clog2(N + 1);
  localparam int BC = 8 + 8 + 3 * NB;
  localparam int FW = 8 + 8 + 2 * NB;          // width of a convolution result
  localparam int NS = (N + H - 1) / H;
  localparam int EXP_CYC = 3 + NB + NS * (H + N + 1) + $clog2(H) + 2 + N + 2;

  logic clk = 1'b0;
  logic rst = 1'b1;
  always #5 clk = ~clk;

  logic                 start = 1'b0;
  logic                 iRAM_en;
  logic [RB-1:0]        iRAM_addr;
  logic signed [BC-1:0] iRAM_DRo [N];
  logic                 oRAM_rd = 1'b0;
  logic [NB-1:0]        oRAM_xaddr = '0;
  logic signed [BC-1:0] oRAM_Fo [N];
  logic                 done;

  isfdprt_system #(.N(N), .H(H), .BC(BC)) dut (.*);

  int checks = 0, failures = 0;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  longint f [N][N];
  longint F [N+1][N];

  // Row memory holding the DPRT of f, one-cycle read latency.
  always @(posedge clk) begin
    if (iRAM_en) for (int d = 0; d < N; d++) iRAM_DRo[d] <= BC'(F[iRAM_addr][d]);
  end

  task automatic run(input int kind);
    longint t0;
    longint lim = (64'sd1 <<< (FW - 1)) - 1;
    for (int i = 0; i < N; i++)
      for (int j = 0; j < N; j++)
        case (kind)
          0: f[i][j] = longint'($urandom_range(32'hFFFF)) * longint'($urandom_range(32'hFF))
                       - 64'sd8000000;
          1: f[i][j] = ((i + j) % 2 == 0) ? lim : -lim;
          default: f[i][j] = (i == 7 && j == 30) ? -12345 : 0;
        endcase
    for (int m = 0; m <= N; m++)
      for (int d = 0; d < N; d++) begin
        F[m][d] = 0;
        for (int i = 0; i < N; i++)
          F[m][d] += (m < N) ? f[i][(d + m * i) % N] : f[d][i];
      end
    @(negedge clk);
    start = 1'b1;
    @(posedge clk); #1; t0 = cyc;
    @(negedge clk);
    start = 1'b0;
    while (!done) begin @(posedge clk); #1; end
    checks++;
    if (cyc - t0 + 1 != EXP_CYC) begin
      failures++;
      $display("inverse took %0d cycles, expected %0d", cyc - t0 + 1, EXP_CYC);
    end
    for (int i = 0; i < N; i++) begin
      int bad;
      @(negedge clk);
      oRAM_rd = 1'b1; oRAM_xaddr = NB'(i);
      @(negedge clk);
      oRAM_rd = 1'b0;
      bad = 0;
      for (int j = 0; j < N; j++) if (longint'(oRAM_Fo[j]) != f[i][j]) bad++;
      checks++;
      if (bad != 0) begin
        failures++;
        $display("kind %0d row %0d: %0d mismatches (f[0]=%0d expected %0d)",
                 kind, i, bad, oRAM_Fo[0], f[i][0]);
      end
    end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst = 1'b0;
    run(0);
    run(1);
    run(2);
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
