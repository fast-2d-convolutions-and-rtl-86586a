// fastscaleconv_top: 2D linear convolution / cross-correlation of image
// blocks through the Discrete Periodic Radon Transform (FastScaleConv; with
// J = N+1 and H = N it is the fastest member, FastConv).
//
// Idea: for a prime N, the DPRT turns a 2D circular convolution of two N x N
// arrays into N+1 independent 1D circular convolutions, one per projection
// direction. A P x P image block and a Q x Q kernel, zero-padded to N x N
// with N >= P+Q-1 prime, therefore convolve linearly as follows:
//   1. sfdprt_system takes the DPRT G of the image block (H rows at a time);
//   2. J conv1d_circ units convolve G(m,.) with the kernel DPRT H(m,.),
//      held precomputed in sfdprt_memory, J directions per group, for
//      L = ceil((N+1)/J) groups; results overwrite G in place;
//   3. isfdprt_system takes the inverse DPRT (H directions at a time) and
//      normalises by N, leaving the N x N result in its output memory.
// fastscaleconv_fsm sequences steps 2 and 3. With MODE = 1 the image block is
// loaded flipped in both directions (see sfdprt_system), which turns the
// operation into a cross-correlation (index-reversed; see the design notes).
//
// Interface and timing:
//   - kernel DPRT: before use, pulse start and then write its N+1 rows, in
//     direction order, one per cycle with owrH = 1 on H_DRi (C' = C +
//     ceil(log2 N) bits per value); start is shared with the image path, as
//     in the published diagram, and is harmless to the image path while no
//     image rows follow;
//   - image block: pulse start, then give N rows of N B-bit pixels on G_DRi,
//     one per cycle with iwr = 1 (iwr and start come from outside, all other
//     control from the FSM);
//   - done pulses when the result is ready; read row i of the result with
//     oRAM_rd / oRAM_xaddr, on oRAM_Fo one cycle later, BC = B + C + 3n bits
//     per pixel, signed (n = ceil(log2 N));
//   - done_G, v_conv and done_inv are brought out as status.
// Parameter defaults (N = 41, H = 32, J = 32, B = 8, C = 8) are one of the
// published implementations; the block partitioning and the bus connections
// follow the published system diagram.
module fastscaleconv_top #(
  parameter int N = 41,
  parameter int H = 32,
  parameter int J = 32,
  parameter int B = 8,
  parameter int C = 8
) (
  input  logic                             clk,
  input  logic                             rst,
  input  logic                             MODE,
  input  logic                             start,
  input  logic                             iwr,
  input  logic [B-1:0]                     G_DRi [N],
  input  logic                             owrH,
  input  logic signed [C+$clog2(N)-1:0]    H_DRi [N],
  input  logic                             oRAM_rd,
  input  logic [$clog2(N)-1:0]             oRAM_xaddr,
  output logic signed [B+C+3*$clog2(N)-1:0] oRAM_Fo [N],
  output logic                             done_G,
  output logic [J-1:0]                     v_conv,
  output logic                             done_inv,
  output logic                             done
);
  localparam int NB = $clog2(N);
  localparam int RB = $clog2(N + 1);
  localparam int BP = B + NB;
  localparam int CP = C + NB;
  localparam int BC = B + C + 3 * NB;
  localparam int JB = (J > 1) ? $clog2(J) : 1;

  logic                 GRAM_en, HRAM_en, GRAM_enx, GRAM_wex, start_inv;
  logic [RB-1:0]        GRAM_addr, HRAM_addr, GRAM_addrx;
  logic [J-1:0]         E_G, E_H, s_H;
  logic [JB-1:0]        wb_sel;
  logic [BP-1:0]        GRAM_Zo [N];
  logic signed [BC-1:0] GRAM_Co [N];
  logic signed [BC-1:0] GRAM_DRix [N];
  logic signed [CP-1:0] HRAM_Zo [N];
  logic signed [BC-1:0] conv_Fo [J][N];
  logic                 inv_iRAM_en;
  logic [RB-1:0]        inv_iRAM_addr;

  sfdprt_system #(.N(N), .H(H), .B(B), .C(C), .BC(BC)) u_sfdprt (
    .clk, .rst, .MODE, .start, .iwr, .DRi(G_DRi),
    .xoRAM_en(GRAM_en), .xoRAM_addr(GRAM_addr), .oRAM_Zo(GRAM_Zo),
    .xoRAM_enx(GRAM_enx), .xoRAM_wex(GRAM_wex), .xoRAM_addrx(GRAM_addrx),
    .xoRAM_DRix(GRAM_DRix), .oRAM_Co(GRAM_Co), .done(done_G)
  );

  sfdprt_memory #(.N(N), .CP(CP)) u_hram (
    .clk, .start, .owr(owrH), .DRi(H_DRi),
    .xoRAM_enx(HRAM_en), .xoRAM_addrx(HRAM_addr), .oRAM_Zo(HRAM_Zo)
  );

  for (genvar i = 0; i < J; i++) begin : g_conv
    conv1d_circ #(.N(N), .BP(BP), .CP(CP), .NY(BC)) u_conv (
      .clk, .rst, .E_G(E_G[i]), .E_H(E_H[i]), .s_H(s_H[i]),
      .Gi(GRAM_Zo), .Hi(HRAM_Zo), .Fo(conv_Fo[i]), .v(v_conv[i])
    );
  end

  assign GRAM_DRix = conv_Fo[wb_sel];

  isfdprt_system #(.N(N), .H(H), .BC(BC)) u_isfdprt (
    .clk, .rst, .start(start_inv),
    .iRAM_en(inv_iRAM_en), .iRAM_addr(inv_iRAM_addr), .iRAM_DRo(GRAM_Co),
    .oRAM_rd, .oRAM_xaddr, .oRAM_Fo, .done(done_inv)
  );

  fastscaleconv_fsm #(.N(N), .J(J)) u_fsm (
    .clk, .rst, .done_G, .v_conv, .done_inv, .inv_iRAM_en, .inv_iRAM_addr,
    .GRAM_en, .GRAM_addr, .HRAM_en, .HRAM_addr, .GRAM_enx, .GRAM_wex, .GRAM_addrx,
    .E_G, .E_H, .s_H, .wb_sel, .start_inv, .done
  );

endmodule
