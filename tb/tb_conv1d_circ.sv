// tb_conv1d_circ: self-checking test of the 1D circular convolver at the
// default size N = 41 (B = C = 8).
//
// Drives several operations back to back (a new parallel load right after
// the N kernel positions of the previous one), each with random DPRT-sized
// operands, including all-extreme values. The result is compared with a
// direct evaluation of F(d) = sum_k G(k) H(<d-k>_N), and the latency from
// the load edge to v is checked against N + ceil(log2 N) + 2 cycles.
module tb_conv1d_circ;
  localparam int N  = 41;
  localparam int NB = $clog2(N);
  localparam int BP = 8 + NB;
  localparam int CP = 8 + NB;
  localparam int NY = BP + CP + NB;
  localparam int NOPS = 6;

  logic clk = 1'b0;
  logic rst = 1'b1;
  always #5 clk = ~clk;

  logic                 E_G = 1'b0, E_H = 1'b0, s_H = 1'b0;
  logic        [BP-1:0] Gi [N];
  logic signed [CP-1:0] Hi [N];
  logic signed [NY-1:0] Fo [N];
  logic                 v;

  conv1d_circ #(.N(N), .BP(BP), .CP(CP), .NY(NY)) dut (.*);

  int checks = 0, failures = 0;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  longint exp_f [NOPS][N];
  longint load_cyc [NOPS];
  int     done_ops = 0;

  task automatic make_op(input int op);
    longint g [N];
    longint h [N];
    for (int k = 0; k < N; k++) begin
      case (op)
        0: begin g[k] = (1 << BP) - 1; h[k] = -(1 << (CP - 1)); end      // extremes
        1: begin g[k] = (k == 3) ? 1 : 0; h[k] = k - 20; end             // impulse
        default: begin
          g[k] = $urandom_range((1 << BP) - 1);
          h[k] = longint'($urandom_range((1 << CP) - 1)) - (1 << (CP - 1));
        end
      endcase
      Gi[k] = BP'(g[k]);
      Hi[k] = CP'(h[k]);
    end
    for (int d = 0; d < N; d++) begin
      exp_f[op][d] = 0;
      for (int k = 0; k < N; k++) exp_f[op][d] += g[k] * h[(d - k + N) % N];
    end
  endtask

  // Monitor: compare each completed result with the oldest outstanding one.
  always @(posedge clk) begin
    #1;
    if (!rst && v) begin
      automatic int bad = 0;
      for (int d = 0; d < N; d++) if (longint'(Fo[d]) != exp_f[done_ops][d]) bad++;
      checks++;
      if (bad != 0) begin
        failures++;
        $display("op %0d: %0d wrong outputs, e.g. F(0)=%0d expected %0d",
                 done_ops, bad, Fo[0], exp_f[done_ops][0]);
      end
      checks++;
      if (cyc - load_cyc[done_ops] + 1 != N + NB + 2) begin
        failures++;
        $display("op %0d: latency %0d cycles, expected %0d", done_ops,
                 cyc - load_cyc[done_ops] + 1, N + NB + 2);
      end
      done_ops++;
    end
  end

  initial begin
    repeat (3) @(negedge clk);
    rst = 1'b0;
    @(negedge clk);
    for (int op = 0; op < NOPS; op++) begin
      make_op(op);
      E_G = 1'b1; E_H = 1'b1; s_H = 1'b1;
      @(posedge clk); #1; load_cyc[op] = cyc;
      @(negedge clk);
      E_G = 1'b0; s_H = 1'b0;
      repeat (N - 1) @(negedge clk);
      E_H = 1'b0;
      if (op == 2) repeat (5) @(negedge clk);   // one gap between operations
    end
    repeat (N + NB + 10) @(negedge clk);
    checks++;
    if (done_ops != NOPS) begin
      failures++;
      $display("only %0d of %0d operations completed", done_ops, NOPS);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
