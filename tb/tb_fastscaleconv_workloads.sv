// tb_fastscaleconv_workloads: the published FastScaleConv / FastConv
// configurations other than the default build, run end to end:
//   FastConv   N = 37, H = 37, J = 38 (one strip, one group; published 291 cycles)
//   scalable   N = 41, H = 8,  J = 8  (6 strips, 6 groups; published 1094 cycles)
//   minimal    N = 17, H = 2,  J = 1  (9 strips, 18 groups of one convolver;
//              published 799 cycles)
// Each instance runs an extreme-value block, a random convolution block and a
// random cross-correlation block (MODE = 1) through fsc_driver, which checks
// every output pixel against a direct evaluation and the cycle count of each
// block against this design's schedule (338, 1003 and 745 cycles). The three
// run side by side on one clock.
module tb_fastscaleconv_workloads;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  `define FSC_WL_INST(NAME, NN, HH, JJ, BB, CC, NBK) \
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

  `FSC_WL_INST(wl_fast, 37, 37, 38, 8, 8, 3)
  `FSC_WL_INST(wl_mid, 41, 8, 8, 8, 8, 3)
  `FSC_WL_INST(wl_min, 17, 2, 1, 8, 8, 3)

  int checks, failures;

  initial begin
    wait (wl_fast_finished && wl_mid_finished && wl_min_finished);
    checks   = wl_fast_checks + wl_mid_checks + wl_min_checks;
    failures = wl_fast_failures + wl_mid_failures + wl_min_failures;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d",
             wl_fast_checks + wl_mid_checks + wl_min_checks,
             wl_fast_failures + wl_mid_failures + wl_min_failures + 1);
    $finish;
  end
endmodule
