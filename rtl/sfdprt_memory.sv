// sfdprt_memory: kernel DPRT memory.
//
// Holds the precomputed DPRT of the zero-padded N x N kernel: N+1 directions
// of N rays, C' = C + ceil(log2 N) bits each, signed. For cross-correlation
// the kernel is flipped (rows and columns) before its DPRT is taken, so the
// same memory serves both operations. Since a fixed kernel's DPRT is known
// ahead of time, it is written once from outside, in direction order: start
// rearms the write row counter, and each cycle with owr = 1 stores DRi as the
// next direction (0, 1, ..., N). A second, read-only port returns
// direction xoRAM_addrx on oRAM_Zo one cycle after xoRAM_enx, a full row per
// cycle, which lets the controller feed one 1D convolver per cycle.
//
// The contents, row organisation and the start / owr / DRi / xoRAM_addrx /
// xoRAM_enx / oRAM_Zo ports follow the published system diagram; the
// sequential write order and the one-cycle read latency are this
// implementation's choices. Writing more than N+1 rows after one start is a
// protocol error (checked by an assertion).
module sfdprt_memory #(
  parameter int N  = 41,
  parameter int CP = 8 + $clog2(N)
) (
  input  logic                    clk,
  input  logic                    start,
  input  logic                    owr,
  input  logic signed [CP-1:0]    DRi [N],
  input  logic                    xoRAM_enx,
  input  logic [$clog2(N+1)-1:0]  xoRAM_addrx,
  output logic signed [CP-1:0]    oRAM_Zo [N]
);
  localparam int RB = $clog2(N + 1);

  logic signed [CP-1:0] mem [N+1][N];
  logic [RB-1:0]        wptr;

  always_ff @(posedge clk) begin
    if (start)    wptr <= '0;
    else if (owr) wptr <= wptr + 1'b1;
  end

  always_ff @(posedge clk) begin
    if (owr && !start) mem[wptr] <= DRi;
  end

  a_no_overflow: assert property (@(posedge clk) (owr && !start) |-> (wptr <= RB'(N)));

  always_ff @(posedge clk) begin
    if (xoRAM_enx) oRAM_Zo <= mem[xoRAM_addrx];
  end

endmodule
