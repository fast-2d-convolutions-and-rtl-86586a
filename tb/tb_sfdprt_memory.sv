// tb_sfdprt_memory: self-checking test of the kernel DPRT memory at the
// default size (N = 41, C' = 14 bits).
//
// After a start pulse, writes all N+1 rows in order with distinct signed
// patterns (including the most negative and most positive values), then a
// second start and a rewrite of row 0 only (the others must survive), then
// reads them back in a scrambled
// order and checks each row and the one-cycle read latency. A read with
// xoRAM_enx low must leave the output unchanged.
module tb_sfdprt_memory;
  localparam int N  = 41;
  localparam int RB = $clog2(N + 1);
  localparam int CP = 8 + $clog2(N);

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic                 start = 1'b0, owr = 1'b0, xoRAM_enx = 1'b0;
  logic [RB-1:0]        xoRAM_addrx = '0;
  logic signed [CP-1:0] DRi [N];
  logic signed [CP-1:0] oRAM_Zo [N];

  sfdprt_memory #(.N(N), .CP(CP)) dut (.*);

  int checks = 0, failures = 0;

  function automatic longint pat(input int r, input int d);
    longint v = longint'(r) * 97 + longint'(d) * 31 - 2000;
    if (r == 0) return -(64'sd1 <<< (CP - 1));
    if (r == N) return (64'sd1 <<< (CP - 1)) - 1;
    return ((v % (64'sd1 <<< CP)) + (64'sd1 <<< CP)) % (64'sd1 <<< CP) - (64'sd1 <<< (CP - 1));
  endfunction

  task automatic check_row(input int r);
    int bad = 0;
    for (int d = 0; d < N; d++) if (longint'(oRAM_Zo[d]) != pat(r, d)) bad++;
    checks++;
    if (bad != 0) begin failures++; $display("row %0d: %0d mismatches", r, bad); end
  endtask

  initial begin
    @(negedge clk);
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    for (int r = 0; r <= N; r++) begin
      owr = 1'b1;
      for (int d = 0; d < N; d++) DRi[d] = CP'(r == 0 ? 0 : pat(r, d));
      @(negedge clk);
    end
    owr = 1'b0;
    // rearm and rewrite row 0 with its real pattern
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    owr = 1'b1;
    for (int d = 0; d < N; d++) DRi[d] = CP'(pat(0, d));
    @(negedge clk);
    owr = 1'b0;
    for (int k = 0; k <= N; k++) begin
      automatic int r = (k * 17) % (N + 1);
      xoRAM_enx = 1'b1; xoRAM_addrx = RB'(r);
      @(negedge clk);
      xoRAM_enx = 1'b0;
      check_row(r);
      // disabled read: output holds
      xoRAM_addrx = RB'((r + 1) % (N + 1));
      @(negedge clk);
      check_row(r);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
