// conv1d_circ: fast 1D circular convolver for one DPRT direction.
//
// Computes F(d) = sum_k G(k) H(<d-k>_N), d = 0..N-1, by rewriting it as the
// dot product of G with the flipped kernel circularly right-shifted by d+1
// positions. On the load cycle (E_G = E_H = s_H = 1) G is loaded in parallel
// and H is loaded flipped, purely by wiring (register k takes H(N-1-k)).
// Every later E_H with s_H = 0 rotates the kernel register by one position
// (register k takes register k+1, register N-1 takes register 0; drawn with
// register N-1 on the left, as in the published figure, this is the right
// shift whose feedback runs from the P(0) end back to the input), so at step
// d register k holds H(<d-k>_N). Each cycle in
// which the kernel register holds a new value, N parallel multipliers form the
// products (one registered stage), a pipelined adder tree sums them in
// ceil(log2 N) stages, and the sum is shifted into the output register from
// index 0 upwards. Outputs are produced in the order F(N-1), F(N-2), ..., F(0),
// so after N results F(d) sits at Fo[d].
//
// Timing: the load edge plus N-1 shift edges (E_H high on N consecutive
// cycles) give N products; the last result enters Fo N + ceil(log2 N) + 1
// edges after the load edge, where v pulses for one cycle; the whole
// operation spans N + ceil(log2 N) + 2 clock cycles. Fo holds its value until
// the next result is shifted in, so a new load may follow as soon as the N
// kernel positions have been issued.
//
// Widths follow the design: G has BP = B + ceil(log2 N) bits (unsigned DPRT of
// the image), H has CP = C + ceil(log2 N) bits (signed DPRT of the kernel),
// the result NY = BP + CP + ceil(log2 N) bits, signed. The datapath
// (flipped load, right rotation, multipliers, adder tree, left-shift output
// register, valid chain E_H -> E_ADT -> v_ADT -> v) follows the published
// architecture; signedness and the counter that forms v are this
// implementation's choices.
module conv1d_circ #(
  parameter int N  = 41,
  parameter int BP = 8 + $clog2(N),
  parameter int CP = 8 + $clog2(N),
  parameter int NY = BP + CP + $clog2(N)
) (
  input  logic                 clk,
  input  logic                 rst,
  input  logic                 E_G,        // load G register
  input  logic                 E_H,        // enable kernel register
  input  logic                 s_H,        // 1: parallel flipped load, 0: circular right shift
  input  logic        [BP-1:0] Gi [N],     // G_m(0..N-1)
  input  logic signed [CP-1:0] Hi [N],     // H_m(0..N-1)
  output logic signed [NY-1:0] Fo [N],     // F_m(0..N-1)
  output logic                 v           // one-cycle pulse: Fo complete
);
  import fsc_pkg::*;

  localparam int PW = BP + CP;             // product width (unsigned x signed)
  localparam int CW = $clog2(N + 1);

  logic        [BP-1:0] g_r [N];
  logic signed [CP-1:0] h_r [N];
  logic signed [PW-1:0] p_r [N];
  logic                 h_valid, p_valid, v_adt;
  logic signed [NY-1:0] adt;
  logic        [CW-1:0] cnt;

  // G register: parallel load.
  always_ff @(posedge clk) begin
    if (E_G) g_r <= Gi;
  end

  // Kernel register: flipped parallel load or circular right shift.
  always_ff @(posedge clk) begin
    if (E_H) begin
      for (int k = 0; k < N; k++) begin
        if (s_H) h_r[k] <= Hi[N-1-k];
        else     h_r[k] <= h_r[(k + 1) % N];
      end
    end
  end

  // Parallel multipliers, one registered stage (E_ADT valid chain).
  always_ff @(posedge clk) begin
    for (int k = 0; k < N; k++) p_r[k] <= PW'($signed({1'b0, g_r[k]}) * h_r[k]);
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      h_valid <= 1'b0;
      p_valid <= 1'b0;
    end else begin
      h_valid <= E_H;
      p_valid <= h_valid;
    end
  end

  adder_tree #(.NIN(N), .IW(PW), .OW(NY)) u_adt (
    .clk, .rst, .v_in(p_valid), .din(p_r), .v_out(v_adt), .dout(adt)
  );

  // Output register: results are left-shifted in, one per valid tree output.
  always_ff @(posedge clk) begin
    if (v_adt) begin
      Fo[0] <= adt;
      for (int k = 1; k < N; k++) Fo[k] <= Fo[k-1];
    end
  end

  // Completion: count N tree outputs.
  always_ff @(posedge clk) begin
    if (rst) begin
      cnt <= '0;
      v   <= 1'b0;
    end else begin
      v <= 1'b0;
      if (v_adt) begin
        if (cnt == CW'(N - 1)) begin
          cnt <= '0;
          v   <= 1'b1;
        end else begin
          cnt <= cnt + 1'b1;
        end
      end
    end
  end

  // A flipped load must be a load of both registers.
  a_load_pair: assert property (@(posedge clk) disable iff (rst) (E_H && s_H) |-> E_G);

endmodule
