// dprt_engine: strip-wise projection engine shared by the scalable forward
// and inverse DPRT blocks.
//
// For an N x N input X (N prime) held in a row memory outside this module it
// produces, for every direction m = 0..N-1 and ray d = 0..N-1,
//     Y(m,d) = sum_{r=0}^{N-1} X(r, <d + S*m*r>_N),   S = +1 or -1.
// With S = +1 this is the forward DPRT (directions 0..N-1); with S = -1 and
// X = F it is the back-projection sum of the inverse DPRT.
//
// How it works: rows are processed H at a time (a strip starting at row r0).
// The strip is read one row per cycle into H row registers. Then, for N
// cycles, the N column sums of the H registers go into N pipelined adder
// trees (H inputs each) while row register k rotates by S*k positions, so at
// step m register k holds X(r0+k, <j + S*m*k>). The column sum Q_m(j) then
// belongs to ray d = <j - S*m*r0>; the tree output is rotated by
// off_m = <S*m*r0>_N before it leaves the engine. The engine does not own the
// result memory: it issues one accumulate request per direction per strip
// (acc_we, acc_row = m, acc_first = first strip, acc_data = the N partial
// sums), and the owner adds acc_data to row m, or stores it on the first strip.
//
// Interface: start (pulse) begins a transform; rd_en/rd_addr request input
// row rd_addr, whose data must arrive on rd_data one cycle later (synchronous
// memory). done pulses one cycle after the last accumulate request.
// Timing: ceil(N/H) * (H + N + 1) + ceil(log2 H) + 1 cycles from start to done.
//
// Processing H rows in parallel with N directions per strip follows the
// scalable DPRT the design builds on; the fixed per-row rotation with a
// single output rotator and the exact schedule are this implementation's own.
module dprt_engine #(
  parameter int N  = 41,
  parameter int H  = 32,
  parameter int IW = 9,
  parameter int AW = IW + $clog2(N),
  parameter int S  = 1
) (
  input  logic                    clk,
  input  logic                    rst,
  input  logic                    start,
  output logic                    rd_en,
  output logic [$clog2(N)-1:0]    rd_addr,
  input  logic signed [IW-1:0]    rd_data [N],
  output logic                    acc_we,
  output logic [$clog2(N)-1:0]    acc_row,
  output logic                    acc_first,
  output logic signed [AW-1:0]    acc_data [N],
  output logic                    done
);
  import fsc_pkg::*;

  localparam int AB   = $clog2(N);
  localparam int HB   = (H <= 1) ? 1 : $clog2(H);
  localparam int NS   = (N + H - 1) / H;        // number of strips
  localparam int TW   = IW + ((H <= 1) ? 0 : $clog2(H));
  localparam int LVH  = tree_levels(H);
  localparam int SB   = (NS <= 1) ? 1 : $clog2(NS);

  typedef enum logic [1:0] {IDLE, LOAD, RUN, DRAIN} state_t;
  state_t state;

  logic [SB-1:0]  strip;
  logic [AB-1:0]  r0;          // first row of the strip
  logic [AB-1:0]  step_r0;     // <S*r0>_N, offset increment per direction
  logic [HB:0]    ld_cnt;      // rows issued in this strip
  logic           cap_v;       // read data arrives this cycle
  logic [HB-1:0]  cap_k;       // register it belongs to
  logic           cap_zero;    // row beyond N-1: load zeros
  logic [AB-1:0]  m;           // current direction
  logic [AB-1:0]  off;         // <S*m*r0>_N
  logic [LVH+2:0] drain_cnt;

  logic signed [IW-1:0] rowr [H][N];

  // Column-sum trees, with direction, offset and first-strip tag carried
  // alongside the valid bit.
  logic                   t_vin;
  logic signed [IW-1:0]   t_in  [N][H];
  logic signed [TW-1:0]   t_out [N];
  logic                   t_vout [N];
  logic [AB-1:0]          tag_m   [LVH+1];
  logic [AB-1:0]          tag_off [LVH+1];
  logic                   tag_f   [LVH+1];

  always_comb begin
    for (int j = 0; j < N; j++)
      for (int k = 0; k < H; k++) t_in[j][k] = rowr[k][j];
  end

  for (genvar j = 0; j < N; j++) begin : g_col
    adder_tree #(.NIN(H), .IW(IW), .OW(TW)) u_t (
      .clk, .rst, .v_in(t_vin), .din(t_in[j]), .v_out(t_vout[j]), .dout(t_out[j])
    );
  end

  assign tag_m[0]   = m;
  assign tag_off[0] = off;
  assign tag_f[0]   = (strip == '0);
  for (genvar l = 1; l <= LVH; l++) begin : g_tag
    always_ff @(posedge clk) begin
      tag_m[l]   <= tag_m[l-1];
      tag_off[l] <= tag_off[l-1];
      tag_f[l]   <= tag_f[l-1];
    end
  end

  // Output rotation by off and accumulate request.
  always_comb begin
    int idx;
    acc_we    = t_vout[0];
    acc_row   = tag_m[LVH];
    acc_first = tag_f[LVH];
    for (int d = 0; d < N; d++) begin
      idx = d + int'(tag_off[LVH]);
      if (idx >= N) idx = idx - N;
      acc_data[d] = AW'(t_out[idx]);
    end
  end

  assign t_vin = (state == RUN);

  // Row registers: capture from memory, or rotate by S*k while running.
  always_ff @(posedge clk) begin
    if (cap_v) begin
      for (int j = 0; j < N; j++) rowr[cap_k][j] <= cap_zero ? '0 : rd_data[j];
    end else if (state == RUN) begin
      for (int k = 0; k < H; k++)
        for (int j = 0; j < N; j++) rowr[k][j] <= rowr[k][pmod(j + S * k, N)];
    end
  end

  // Read side.
  always_comb begin
    rd_en   = (state == LOAD) && (ld_cnt < (HB+1)'(H)) && ((int'(r0) + int'(ld_cnt)) < N);
    rd_addr = AB'(int'(r0) + int'(ld_cnt));
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      state     <= IDLE;
      strip     <= '0;
      r0        <= '0;
      step_r0   <= '0;
      ld_cnt    <= '0;
      cap_v     <= 1'b0;
      cap_k     <= '0;
      cap_zero  <= 1'b0;
      m         <= '0;
      off       <= '0;
      drain_cnt <= '0;
      done      <= 1'b0;
    end else begin
      done  <= 1'b0;
      cap_v <= 1'b0;
      case (state)
        IDLE: if (start) begin
          state   <= LOAD;
          strip   <= '0;
          r0      <= '0;
          step_r0 <= '0;
          ld_cnt  <= '0;
        end
        LOAD: begin
          if (ld_cnt < (HB+1)'(H)) begin
            cap_v    <= 1'b1;
            cap_k    <= HB'(ld_cnt);
            cap_zero <= (int'(r0) + int'(ld_cnt)) >= N;
            ld_cnt   <= ld_cnt + 1'b1;
          end else begin
            // last row captured this cycle; run next
            state <= RUN;
            m     <= '0;
            off   <= '0;
          end
        end
        RUN: begin
          m   <= m + 1'b1;
          off <= AB'(pmod(int'(off) + int'(step_r0), N));
          if (m == AB'(N - 1)) begin
            if (int'(strip) == NS - 1) begin
              state     <= DRAIN;
              drain_cnt <= '0;
            end else begin
              state   <= LOAD;
              strip   <= strip + 1'b1;
              r0      <= AB'(int'(r0) + H);
              step_r0 <= AB'(pmod(S * (int'(r0) + H), N));
              ld_cnt  <= '0;
            end
          end
        end
        DRAIN: begin
          drain_cnt <= drain_cnt + 1'b1;
          if (int'(drain_cnt) == LVH) begin
            state <= IDLE;
            done  <= 1'b1;
          end
        end
        default: state <= IDLE;
      endcase
    end
  end

endmodule
