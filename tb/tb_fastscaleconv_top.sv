// tb_fastscaleconv_top: end-to-end test of the DPRT convolution system at
// reduced sizes, three configurations side by side:
//   A: N = 7,  H = 2, J = 3  (scalable: 4 strips, last one partial; 3 groups
//      of convolutions, last one partial)
//   B: N = 7,  H = 7, J = 8  (fastest configuration: one strip, one group)
//   C: N = 13, H = 4, J = 5  (scalable, larger prime)
// Each runs several blocks through fsc_driver (convolution, extreme values,
// cross-correlation with MODE = 1), checking every output pixel and the total
// cycle count. The mechanisms of the design are counted and each must occur:
// forward and inverse DPRT strip changes, convolver reloads across groups, a
// partial last group, a flipped (cross-correlation) load, and a block
// processed without reset after another one.
module tb_fastscaleconv_top;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  `define FSC_INST(NAME, NN, HH, JJ, BB, CC, NBK) \
    logic                               NAME``_rst, NAME``_MODE, NAME``_start, NAME``_iwr, NAME``_owrH, NAME``_oRAM_rd; \
    logic [BB-1:0]                      NAME``_G_DRi [NN]; \
    logic signed [CC+$clog2(NN)-1:0]    NAME``_H_DRi [NN]; \
    logic [$clog2(NN)-1:0]              NAME``_oRAM_xaddr; \
    logic signed [BB+CC+3*$clog2(NN)-1:0] NAME``_oRAM_Fo [NN]; \
    logic                               NAME``_done_G, NAME``_done_inv, NAME``_done; \
    logic [JJ-1:0]                      NAME``_v_conv; \
    int                                 NAME``_checks, NAME``_failures; \
    bit                                 NAME``_finished; \
    fastscaleconv_top #(.N(NN), .H(HH), .J(JJ), .B(BB), .C(CC)) NAME ( \
      .clk, .rst(NAME``_rst), .MODE(NAME``_MODE), .start(NAME``_start), .iwr(NAME``_iwr), \
      .G_DRi(NAME``_G_DRi), .owrH(NAME``_owrH), .H_DRi(NAME``_H_DRi), \
      .oRAM_rd(NAME``_oRAM_rd), .oRAM_xaddr(NAME``_oRAM_xaddr), .oRAM_Fo(NAME``_oRAM_Fo), \
      .done_G(NAME``_done_G), .v_conv(NAME``_v_conv), .done_inv(NAME``_done_inv), .done(NAME``_done)); \
    fsc_driver #(.N(NN), .H(HH), .J(JJ), .B(BB), .C(CC), .NBLK(NBK)) NAME``_drv ( \
      .clk, .rst(NAME``_rst), .MODE(NAME``_MODE), .start(NAME``_start), .iwr(NAME``_iwr), \
      .G_DRi(NAME``_G_DRi), .owrH(NAME``_owrH), .H_DRi(NAME``_H_DRi), \
      .oRAM_rd(NAME``_oRAM_rd), .oRAM_xaddr(NAME``_oRAM_xaddr), .oRAM_Fo(NAME``_oRAM_Fo), \
      .done(NAME``_done), .checks(NAME``_checks), .failures(NAME``_failures), .finished(NAME``_finished));

  `FSC_INST(dut_a, 7, 2, 3, 8, 8, 3)
  `FSC_INST(dut_b, 7, 7, 8, 8, 8, 3)
  `FSC_INST(dut_c, 13, 4, 5, 8, 8, 3)

  // Mechanism counters.
  int n_fwd_strip = 0, n_inv_strip = 0, n_reload = 0, n_partial_group = 0;
  int n_flip = 0, n_back_to_back = 0, n_fastconv = 0;
  int vcnt_a [3];
  int blocks_a = 0;
  logic [1:0] fstrip_q = '0, istrip_q = '0;

  always @(posedge clk) begin
    if (!dut_a_rst) begin
      if (dut_a.u_sfdprt.u_eng.strip != fstrip_q && dut_a.u_sfdprt.u_eng.strip != 0) n_fwd_strip++;
      if (dut_a.u_isfdprt.u_eng.strip != istrip_q && dut_a.u_isfdprt.u_eng.strip != 0) n_inv_strip++;
      fstrip_q <= dut_a.u_sfdprt.u_eng.strip;
      istrip_q <= dut_a.u_isfdprt.u_eng.strip;
      for (int i = 0; i < 3; i++) if (dut_a_v_conv[i]) vcnt_a[i]++;
      if (dut_a_start && dut_a_MODE) n_flip++;
      if (dut_a_start && blocks_a > 0) n_back_to_back++;
      if (dut_a_done) begin
        if (vcnt_a[0] > 1) n_reload++;
        if (vcnt_a[2] < vcnt_a[0]) n_partial_group++;
        for (int i = 0; i < 3; i++) vcnt_a[i] = 0;
        blocks_a++;
      end
    end
    if (!dut_b_rst && dut_b_done) n_fastconv++;
  end

  int checks, failures;

  task automatic need(input string what, input int n);
    checks++;
    if (n == 0) begin failures++; $display("mechanism never exercised: %s", what); end
    else $display("mechanism %s: %0d", what, n);
  endtask

  initial begin
    for (int i = 0; i < 3; i++) vcnt_a[i] = 0;
    wait (dut_a_finished && dut_b_finished && dut_c_finished);
    checks   = dut_a_checks + dut_b_checks + dut_c_checks;
    failures = dut_a_failures + dut_b_failures + dut_c_failures;
    need("forward DPRT strip change", n_fwd_strip);
    need("inverse DPRT strip change", n_inv_strip);
    need("convolver reload in a later group", n_reload);
    need("partial last group", n_partial_group);
    need("flipped load (cross-correlation)", n_flip);
    need("block after block without reset", n_back_to_back);
    need("fastest configuration J=N+1, H=N", n_fastconv);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d",
             dut_a_checks + dut_b_checks + dut_c_checks,
             dut_a_failures + dut_b_failures + dut_c_failures + 1);
    $finish;
  end
endmodule
