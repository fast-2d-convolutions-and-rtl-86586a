// adder_tree: pipelined binary adder tree of signed operands.
//
// NIN operands of IW bits are summed pairwise, one registered level per
// ceil(log2 NIN) clock cycles; an odd operand at a level is carried to the
// next level unchanged. The sum is OW = IW + ceil(log2 NIN) bits wide, so it
// never overflows. A valid bit travels with the data: v_out is v_in delayed
// by the same number of levels. With NIN = 1 the tree is a plain wire.
// The tree has no enable: it streams one new operand set per clock cycle.
// The registered levels follow the pipelined adder tree used by the
// convolvers and DPRT blocks of the design; the carry rule for odd counts is
// this implementation's choice.
module adder_tree #(
  parameter int NIN = 8,
  parameter int IW  = 8,
  parameter int OW  = IW + ((NIN <= 1) ? 0 : $clog2(NIN))
) (
  input  logic                 clk,
  input  logic                 rst,
  input  logic                 v_in,
  input  logic signed [IW-1:0] din [NIN],
  output logic                 v_out,
  output logic signed [OW-1:0] dout
);
  import fsc_pkg::*;

  localparam int LV = tree_levels(NIN);

  logic signed [OW-1:0] lv [LV+1][NIN];
  logic                 vv [LV+1];

  always_comb begin
    for (int k = 0; k < NIN; k++) lv[0][k] = OW'(din[k]);
    vv[0] = v_in;
  end

  for (genvar l = 1; l <= LV; l++) begin : g_lvl
    localparam int CPREV = tree_count(NIN, l - 1);
    localparam int CCUR  = tree_count(NIN, l);
    always_ff @(posedge clk) begin
      for (int k = 0; k < NIN; k++) begin
        if (k < CCUR) begin
          if (2 * k + 1 < CPREV) lv[l][k] <= lv[l-1][(2*k) % NIN] + lv[l-1][(2*k+1) % NIN];
          else                   lv[l][k] <= lv[l-1][(2*k) % NIN];
        end else begin
          lv[l][k] <= '0;
        end
      end
    end
    always_ff @(posedge clk) begin
      if (rst) vv[l] <= 1'b0;
      else     vv[l] <= vv[l-1];
    end
  end

  assign dout  = lv[LV][0];
  assign v_out = vv[LV];

endmodule
