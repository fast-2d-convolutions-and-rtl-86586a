// tb_fastscaleconv_fsm: self-checking test of the system controller at the
// default size (N = 41, J = 32, so L = 2 groups, the second with 10 of its 32
// convolvers in use).
//
// The convolvers are modelled by their timing only: a convolver loaded on one
// edge raises v_conv for one cycle N + ceil(log2 N) + 1 edges later. The test
// checks that every direction 0..N is read exactly once from both memories,
// with matching addresses; that each load is followed by exactly N-1 shifts;
// that each write-back goes to the direction its convolver was loaded with;
// that the last write-back happens at the cycle the published schedule gives
// (group length J+N, one load per cycle); that start_inv follows the last
// write-back (two cycles later); that port X then follows the inverse DPRT's read requests; and
// that done follows done_inv. Two complete runs are made.
module tb_fastscaleconv_fsm;
  localparam int N  = 41;
  localparam int J  = 32;
  localparam int NB = $clog2(N);
  localparam int RB = $clog2(N + 1);
  localparam int JB = $clog2(J);
  localparam int L  = (N + 1 + J - 1) / J;
  localparam int LASTI = N - (L - 1) * J;               // index of the last convolver used
  // Published count (L-1)(J+N) + (last group size) + N + n + 1, plus one cycle to
  // react to done_G, one of memory read latency and one to write the result.
  localparam int EXP_LAST_WB = (L - 1) * (J + N) + LASTI + 1 + N + NB + 1 + 3;

  logic clk = 1'b0;
  logic rst = 1'b1;
  always #5 clk = ~clk;

  logic          done_G = 1'b0, done_inv = 1'b0, inv_iRAM_en = 1'b0;
  logic [RB-1:0] inv_iRAM_addr = '0;
  logic [J-1:0]  v_conv = '0;
  logic          GRAM_en, HRAM_en, GRAM_enx, GRAM_wex, start_inv, done;
  logic [RB-1:0] GRAM_addr, HRAM_addr, GRAM_addrx;
  logic [J-1:0]  E_G, E_H, s_H;
  logic [JB-1:0] wb_sel;

  fastscaleconv_fsm #(.N(N), .J(J)) dut (.*);

  int checks = 0, failures = 0;
  longint cyc = 0;

  int     reads [N+1];
  int     wbs   [N+1];
  int     conv_dir [J];
  longint vtime [J];
  int     shifts [J];
  logic   last_rd_v;
  int     last_rd;
  longint t_start, t_last_wb, t_start_inv;
  bit     in_run;

  task automatic fail(input string msg);
    failures++;
    $display("%s", msg);
  endtask

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (!rst && in_run) begin
      // reads
      if (GRAM_en || HRAM_en) begin
        checks++;
        if (!(GRAM_en && HRAM_en && GRAM_addr == HRAM_addr)) fail("image and kernel reads differ");
        else reads[GRAM_addr]++;
      end
      // loads and shifts
      for (int i = 0; i < J; i++) begin
        if (E_H[i] && s_H[i]) begin
          checks++;
          if (!E_G[i] || !last_rd_v) fail($sformatf("convolver %0d loaded without a read", i));
          if (i > 0 && shifts[i] != 0 && shifts[i] != N - 1)
            fail($sformatf("convolver %0d got %0d shifts", i, shifts[i]));
          conv_dir[i] = last_rd;
          shifts[i]   = 0;
          vtime[i]    = cyc + N + NB + 2;
        end else if (E_H[i]) begin
          shifts[i]++;
        end
      end
      // write-backs
      if (GRAM_enx && GRAM_wex) begin
        checks++;
        if (!v_conv[wb_sel] || GRAM_addrx != RB'(conv_dir[wb_sel]))
          fail($sformatf("write-back to %0d from convolver %0d (loaded with %0d)",
                         GRAM_addrx, wb_sel, conv_dir[wb_sel]));
        else wbs[GRAM_addrx]++;
        t_last_wb = cyc + 1;        // edge number, as counted after the edge
      end
      if (start_inv) t_start_inv = cyc + 1;
      last_rd_v = GRAM_en;
      last_rd   = int'(GRAM_addr);
    end
    for (int i = 0; i < J; i++) v_conv[i] <= (cyc + 1 == vtime[i]);
  end

  task automatic run_once();
    for (int d = 0; d <= N; d++) begin reads[d] = 0; wbs[d] = 0; end
    for (int i = 0; i < J; i++) begin shifts[i] = 0; vtime[i] = -1; end
    in_run = 1'b1;
    @(negedge clk);
    done_G = 1'b1;
    @(posedge clk); #1; t_start = cyc;
    @(negedge clk);
    done_G = 1'b0;
    while (!start_inv) @(negedge clk);
    @(negedge clk);
    // counts
    for (int d = 0; d <= N; d++) begin
      checks++;
      if (reads[d] != 1 || wbs[d] != 1)
        fail($sformatf("direction %0d: %0d reads, %0d write-backs", d, reads[d], wbs[d]));
    end
    for (int i = 0; i <= LASTI; i++) begin
      checks++;
      if (shifts[i] != N - 1) fail($sformatf("convolver %0d: %0d shifts", i, shifts[i]));
    end
    checks++;
    if (t_last_wb - t_start + 1 != EXP_LAST_WB)
      fail($sformatf("last write-back after %0d cycles, expected %0d", t_last_wb - t_start + 1, EXP_LAST_WB));
    checks++;
    if (t_start_inv != t_last_wb + 2)
      fail($sformatf("start_inv %0d cycles after the last write-back", t_start_inv - t_last_wb));
    // inverse DPRT phase: port X follows its requests
    for (int k = 0; k < 10; k++) begin
      inv_iRAM_en = k[0]; inv_iRAM_addr = RB'((k * 7) % (N + 1));
      #1;
      checks++;
      if (GRAM_enx != inv_iRAM_en || GRAM_addrx != inv_iRAM_addr || GRAM_wex)
        fail("port X does not follow the inverse DPRT");
      @(negedge clk);
    end
    inv_iRAM_en = 1'b0;
    done_inv = 1'b1;
    @(posedge clk); #1;
    checks++;
    if (!done) fail("done does not follow done_inv");
    @(negedge clk);
    done_inv = 1'b0;
    in_run = 1'b0;
  endtask

  initial begin
    in_run = 1'b0;
    last_rd_v = 1'b0;
    repeat (3) @(negedge clk);
    rst = 1'b0;
    run_once();
    repeat (5) @(negedge clk);
    run_once();
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
