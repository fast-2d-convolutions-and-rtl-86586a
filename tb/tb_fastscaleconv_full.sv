// tb_fastscaleconv_full: the convolution system at its default (paper) size,
// N = 41, H = 32, J = 32, B = C = 8: a 21 x 21 image block convolved with a
// 21 x 21 kernel. The top is instantiated without parameter overrides;
// fsc_driver writes the kernel DPRT, runs one extreme-value block, one
// random convolution block and one random cross-correlation block (MODE = 1),
// checks all 41 x 41 outputs of each against a direct evaluation and checks
// the cycle count of each block (see fsc_driver for the formula; at this size
// it is 539 cycles from the first image row to done).
module tb_fastscaleconv_full;
  localparam int N = 41, H = 32, J = 32, B = 8, C = 8;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic                               rst, MODE, start, iwr, owrH, oRAM_rd;
  logic [B-1:0]                       G_DRi [N];
  logic signed [C+$clog2(N)-1:0]      H_DRi [N];
  logic [$clog2(N)-1:0]               oRAM_xaddr;
  logic signed [B+C+3*$clog2(N)-1:0]  oRAM_Fo [N];
  logic                               done_G, done_inv, done;
  logic [J-1:0]                       v_conv;
  int                                 checks, failures;
  bit                                 finished;

  fastscaleconv_top dut (
    .clk, .rst, .MODE, .start, .iwr, .G_DRi, .owrH, .H_DRi,
    .oRAM_rd, .oRAM_xaddr, .oRAM_Fo, .done_G, .v_conv, .done_inv, .done);

  fsc_driver #(.N(N), .H(H), .J(J), .B(B), .C(C), .NBLK(3)) drv (
    .clk, .rst, .MODE, .start, .iwr, .G_DRi, .owrH, .H_DRi,
    .oRAM_rd, .oRAM_xaddr, .oRAM_Fo, .done, .checks, .failures, .finished);

  initial begin
    wait (finished);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
