// conv_shift_add: one convolution layer computed with shifts and adds only.
//
// Each weight is a sign and NSHIFT shift counts, w = s * sum_k 2^p_k, so
//   o = sum s * sum_k (x << p_k)
// is built from NSHIFT shift layers (one per term), NSHIFT-1 element-wise add
// layers and a signed sum layer, exactly the arrangement the paper proposes in
// place of multipliers. No multiplier is used on the data.
//
// Schedule (this design's choice): for every output position (y, x) and every
// input channel ci, the K x K window of ci is fetched from the source buffer
// (one synchronous read per cycle, zero padding of K/2 around the border,
// K*K+1 cycles), then for every output channel co one cycle pushes the window
// through shift -> add -> sum and adds the result into acc[co]. After the last
// input channel the COUT results are requantised (sat16(acc >>> FRAC)) and
// streamed out, one per cycle, with dst address (co*H + y)*W + x.
// Cycles per frame: H*W*(CIN*(K*K+1+COUT) + COUT) + 2.
//
// Handshake: the layer starts when src_ready and dst_free are both high
// (start pulses; the top uses it to claim the destination buffer), streams
// out_* (out_last on the final value) and raises done for one cycle when the
// frame is finished, which the top uses to release the source buffer.
// Weight codes are written through wt_wr_* at address co*CIN + ci; tap
// t = ky*K + kx of the word holds {p_{NSHIFT-1}, ..., p_0, sign} in
// TW = 1 + NSHIFT*P_W bits at bit t*TW. Stride 1, no bias.
module conv_shift_add
  import dvs_pkg::*;
#(
  parameter int unsigned CIN    = CH,
  parameter int unsigned COUT   = CH,
  parameter int unsigned H      = IN_H / 2,
  parameter int unsigned W      = IN_W / 2,
  parameter int unsigned K      = KSZ,
  parameter int unsigned NSHIFT = 2,
  parameter int unsigned SAW    = $clog2(CIN * H * W),
  parameter int unsigned DAW    = $clog2(COUT * H * W),
  parameter int unsigned TW     = 1 + NSHIFT * P_W,
  parameter int unsigned WW     = K * K * TW,
  parameter int unsigned WAW    = $clog2(CIN * COUT)
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           src_ready,
  input  logic           dst_free,
  output logic           rd_en,
  output logic [SAW-1:0] rd_addr,
  input  act_t           rd_data,
  input  logic           wt_wr_en,
  input  logic [WAW-1:0] wt_wr_addr,
  input  logic [WW-1:0]  wt_wr_data,
  output logic           out_valid,
  output logic [DAW-1:0] out_addr,
  output act_t           out_data,
  output logic           out_last,
  output logic           start,
  output logic           done,
  output logic           busy
);
  localparam int unsigned KK  = K * K;
  localparam int          PAD = K / 2;

  typedef enum logic [2:0] {S_IDLE, S_FETCH, S_COMP, S_EMIT, S_DONE} state_t;
  state_t state;

  // start: combinational pulse in the cycle the layer leaves idle
  assign start = (state == S_IDLE) && src_ready && dst_free;
  // done: high for the one cycle in S_DONE, so a source released with it is
  // already empty when the layer is back in S_IDLE
  assign done = (state == S_DONE);

  logic [WW-1:0] wmem [CIN * COUT];
  always_ff @(posedge clk) if (wt_wr_en) wmem[wt_wr_addr] <= wt_wr_data;

  logic [$clog2(H+1)-1:0]    y;
  logic [$clog2(W+1)-1:0]    x;
  logic [$clog2(CIN+1)-1:0]  ci;
  logic [$clog2(COUT+1)-1:0] co;
  logic [$clog2(KK+1)-1:0]   t;
  // last values of the counters, at the counters' widths
  localparam logic [$clog2(H+1)-1:0]    Y_LAST  = ($clog2(H+1))'(H - 1);
  localparam logic [$clog2(W+1)-1:0]    X_LAST  = ($clog2(W+1))'(W - 1);
  localparam logic [$clog2(CIN+1)-1:0]  CI_LAST = ($clog2(CIN+1))'(CIN - 1);
  localparam logic [$clog2(COUT+1)-1:0] CO_LAST = ($clog2(COUT+1))'(COUT - 1);
  localparam logic [$clog2(KK+1)-1:0]   T_END   = ($clog2(KK+1))'(KK);
  logic                      pad_q;
  act_t                      win [KK];
  acc_t                      acc [COUT];

  // ---- window address generation for tap t --------------------------------
  int iy, ix;
  logic in_bounds;
  always_comb begin
    iy = int'(y) + int'(t) / K - PAD;
    ix = int'(x) + int'(t) % K - PAD;
    in_bounds = (iy >= 0) && (iy < H) && (ix >= 0) && (ix < W);
    rd_en   = (state == S_FETCH) && (t < T_END) && in_bounds;
    rd_addr = SAW'((int'(ci) * H + iy) * W + ix);
  end

  // ---- shift / add / sum datapath -------------------------------------------
  logic [WW-1:0] wword;
  shift_t        pk   [NSHIFT][KK];
  logic          sgn  [KK];
  acc_t          term;

  assign wword = wmem[int'(co) * CIN + int'(ci)];
  always_comb begin
    for (int i = 0; i < KK; i++) begin
      sgn[i] = wword[i*TW];
      for (int k = 0; k < NSHIFT; k++) pk[k][i] = wword[i*TW + 1 + k*P_W +: P_W];
    end
  end

  // shift layer k, then add layer k-1 folds it into the running sum
  for (genvar k = 0; k < NSHIFT; k++) begin : g_shift
    acc_t sh   [KK];
    acc_t part [KK];
    shift_layer #(.LANES(KK)) u_shift (.x(win), .p(pk[k]), .y(sh));
    if (k == 0) begin : g_first
      assign part = sh;
    end else begin : g_add
      add_layer #(.LANES(KK)) u_add (.a(g_shift[k-1].part), .b(sh), .y(part));
    end
  end
  sum_layer #(.LANES(KK)) u_sum (.v(g_shift[NSHIFT-1].part), .s(sgn), .sum(term));

  // ---- control ----------------------------------------------------------------
  logic last_pos;
  assign last_pos = (y == Y_LAST) && (x == X_LAST);
  assign busy = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      y <= '0; x <= '0; ci <= '0; co <= '0; t <= '0; pad_q <= 1'b0;
      out_valid <= 1'b0; out_addr <= '0; out_data <= '0; out_last <= 1'b0;
      for (int i = 0; i < KK; i++) win[i] <= '0;
      for (int i = 0; i < COUT; i++) acc[i] <= '0;
    end else begin
      out_valid <= 1'b0;
      out_last  <= 1'b0;
      unique case (state)
        S_IDLE: if (src_ready && dst_free) begin
          state <= S_FETCH;
          y <= '0; x <= '0; ci <= '0; t <= '0;
        end
        S_FETCH: begin
          pad_q <= !in_bounds;
          if (t != 0) win[t-1] <= pad_q ? act_t'(0) : rd_data;
          if (t == T_END) begin
            state <= S_COMP;
            co <= '0;
          end else t <= t + 1'b1;
        end
        S_COMP: begin
          acc[co] <= (ci == 0 ? acc_t'(0) : acc[co]) + term;
          if (co == CO_LAST) begin
            co <= '0;
            t  <= '0;
            if (ci == CI_LAST) state <= S_EMIT;
            else begin
              ci <= ci + 1'b1;
              state <= S_FETCH;
            end
          end else co <= co + 1'b1;
        end
        S_EMIT: begin
          out_valid <= 1'b1;
          out_addr  <= DAW'((int'(co) * H + int'(y)) * W + int'(x));
          out_data  <= requant(acc[co]);
          out_last  <= last_pos && (co == CO_LAST);
          if (co == CO_LAST) begin
            co <= '0;
            ci <= '0;
            t  <= '0;
            if (last_pos) state <= S_DONE;
            else begin
              state <= S_FETCH;
              if (x == X_LAST) begin x <= '0; y <= y + 1'b1; end
              else x <= x + 1'b1;
            end
          end else co <= co + 1'b1;
        end
        S_DONE: state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
