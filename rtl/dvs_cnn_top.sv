// dvs_cnn_top: fully on-chip, frame-pipelined shift-add CNN front end for
// distributed fiber vibration event recognition.
//
// Data path (first residual block of the network, then the classifier):
//   ADC samples -> sample_averager (4:1) -> input_buffer (H x W, two banks)
//   -> conv_1 (1 -> C channels, NS1 shift layers) -> relu -> MaxPool buffer
//   -> maxpool (2 x 2) -> Conv buffer
//   -> conv_2 (C -> C, NS2 shift layers) -> relu -> conv_3 buffer
//   -> conv_3 (C -> C, NS3 shift layers) -> residual add (+ Conv buffer)
//   -> fc_head (NCLS scores, arg-max) -> result
// Every buffer holds a whole frame; a stage starts when its source buffer is
// full and its destination is free, and claims the destination as it starts,
// so the stages work on consecutive frames at the same time. The Conv buffer stays full until conv_3 is done because
// the residual add reads it again. Weight codes of the four layers are written
// at start-up through wt_* (wt_sel: 0 conv_1, 1 conv_2, 2 conv_3, 3 fc; word
// layout in conv_shift_add / fc_head; conv address co*CIN + ci, fc address =
// feature address).
//
// Timing at the default sizes: one frame costs about 0.39 M cycles in conv_1,
// 0.2 M in maxpool and 3.0 M each in conv_2 and conv_3; the result appears
// about 6.6 M cycles after the last sample of a frame. Because the Conv buffer
// is held until conv_3 has finished, conv_2 and conv_3 of one frame run back
// to back, so a new result follows every ~6.35 M cycles in steady state
// (about 25 ms at 250 MHz, against 256 ms of sensing per frame).
//
// The layer sequence, the one-shift-layer conv_3, the frame size, the 14-bit
// input and whole-frame buffering follow the paper. The channel count (64) is
// derived from the paper's conv_3 parameter count; the conv_3 buffer, the
// pooling window, the weight-load port and the classifier placed right after
// the first residual block (the layers between are not specified) are this
// design's choices.
module dvs_cnn_top
  import dvs_pkg::*;
#(
  parameter int unsigned H     = IN_H,
  parameter int unsigned W     = IN_W,
  parameter int unsigned C     = CH,
  parameter int unsigned NS1   = 2,
  parameter int unsigned NS2   = 2,
  parameter int unsigned NS3   = 1,
  parameter int unsigned NSF   = 2,
  parameter int unsigned NCLS  = CLASSES,
  parameter int unsigned WT_AW = 20,
  parameter int unsigned WT_DW = KSZ * KSZ * (1 + 2 * P_W),
  parameter int unsigned CLS_W = $clog2(NCLS)
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               adc_valid,
  input  logic               adc_first,
  input  logic [ADC_W-1:0]   adc_data,
  input  logic               wt_wr_en,
  input  logic [1:0]         wt_sel,
  input  logic [WT_AW-1:0]   wt_addr,
  input  logic [WT_DW-1:0]   wt_data,
  output logic               result_valid,
  output logic [CLS_W-1:0]   result_class,
  output logic signed [31:0] result_scores [NCLS],
  output logic [15:0]        frames_dropped
);
  localparam int unsigned H2  = H / 2;
  localparam int unsigned W2  = W / 2;
  localparam int unsigned A0  = $clog2(H * W);
  localparam int unsigned A1  = $clog2(C * H * W);
  localparam int unsigned A2  = $clog2(C * H2 * W2);
  localparam int unsigned WW1 = KSZ * KSZ * (1 + NS1 * P_W);
  localparam int unsigned WW2 = KSZ * KSZ * (1 + NS2 * P_W);
  localparam int unsigned WW3 = KSZ * KSZ * (1 + NS3 * P_W);
  localparam int unsigned WWF = NCLS * (1 + NSF * P_W);

  // ---- sensing input -------------------------------------------------------
  logic avg_valid;
  act_t avg_data;
  sample_averager u_avg (
    .clk, .rst_n, .in_valid(adc_valid), .in_first(adc_first), .in_data(adc_data),
    .out_valid(avg_valid), .out_data(avg_data)
  );

  logic ib_full, ib_rel, ib_rd_en;
  logic [A0-1:0] ib_rd_addr;
  act_t ib_rd_data;
  input_buffer #(.H(H), .W(W)) u_inbuf (
    .clk, .rst_n, .in_valid(avg_valid), .in_data(avg_data),
    .full(ib_full), .rel(ib_rel), .rd_en(ib_rd_en), .rd_addr(ib_rd_addr),
    .rd_data(ib_rd_data), .frames_dropped
  );

  // ---- conv_1 + relu -> MaxPool buffer -------------------------------------
  logic mp_full, mp_free, mp_rel, c1_start;
  logic c1_v, c1_l, r1_v, r1_l;
  logic [A1-1:0] c1_a, r1_a;
  act_t c1_d, r1_d;
  logic c1_busy;
  conv_shift_add #(.CIN(1), .COUT(C), .H(H), .W(W), .K(KSZ), .NSHIFT(NS1)) u_conv1 (
    .clk, .rst_n, .src_ready(ib_full), .dst_free(mp_free),
    .rd_en(ib_rd_en), .rd_addr(ib_rd_addr), .rd_data(ib_rd_data),
    .wt_wr_en(wt_wr_en && wt_sel == 2'd0), .wt_wr_addr(wt_addr[$clog2(C)-1:0]),
    .wt_wr_data(wt_data[WW1-1:0]),
    .out_valid(c1_v), .out_addr(c1_a), .out_data(c1_d), .out_last(c1_l),
    .start(c1_start), .done(ib_rel), .busy(c1_busy)
  );
  relu #(.ADDR_W(A1)) u_relu1 (
    .clk, .rst_n, .in_valid(c1_v), .in_addr(c1_a), .in_data(c1_d), .in_last(c1_l),
    .out_valid(r1_v), .out_addr(r1_a), .out_data(r1_d), .out_last(r1_l)
  );

  logic          mp_rd_en   [2];
  logic [A1-1:0] mp_rd_addr [2];
  act_t          mp_rd_data [2];
  fmap_buffer #(.DEPTH(C * H * W)) u_mpbuf (
    .clk, .rst_n, .wr_en(r1_v), .wr_addr(r1_a), .wr_data(r1_d), .wr_last(r1_l),
    .claim(c1_start), .rel(mp_rel), .full(mp_full), .free(mp_free),
    .rd_en(mp_rd_en), .rd_addr(mp_rd_addr), .rd_data(mp_rd_data)
  );

  // ---- maxpool -> Conv buffer ----------------------------------------------
  logic cb_full, cb_free, cb_rel, p_start;
  logic p_v, p_l;
  logic [A2-1:0] p_a;
  act_t p_d;
  maxpool #(.C(C), .H(H), .W(W)) u_pool (
    .clk, .rst_n, .src_ready(mp_full), .dst_free(cb_free),
    .rd_en(mp_rd_en[0]), .rd_addr(mp_rd_addr[0]), .rd_data(mp_rd_data[0]),
    .out_valid(p_v), .out_addr(p_a), .out_data(p_d), .out_last(p_l),
    .start(p_start), .done(mp_rel)
  );
  assign mp_rd_en[1]   = 1'b0;
  assign mp_rd_addr[1] = '0;

  logic          cb_rd_en   [2];
  logic [A2-1:0] cb_rd_addr [2];
  act_t          cb_rd_data [2];
  fmap_buffer #(.DEPTH(C * H2 * W2)) u_convbuf (
    .clk, .rst_n, .wr_en(p_v), .wr_addr(p_a), .wr_data(p_d), .wr_last(p_l),
    .claim(p_start), .rel(cb_rel), .full(cb_full), .free(cb_free),
    .rd_en(cb_rd_en), .rd_addr(cb_rd_addr), .rd_data(cb_rd_data)
  );

  // ---- conv_2 + relu -> conv_3 buffer ----------------------------------------
  logic c2_done, c2_used;   // conv_2 has consumed the frame in the Conv buffer
  logic c3b_full, c3b_free, c3b_rel, c2_start;
  logic c2_v, c2_l, r2_v, r2_l;
  logic [A2-1:0] c2_a, r2_a;
  act_t c2_d, r2_d;
  logic c2_busy;
  conv_shift_add #(.CIN(C), .COUT(C), .H(H2), .W(W2), .K(KSZ), .NSHIFT(NS2)) u_conv2 (
    .clk, .rst_n, .src_ready(cb_full && !c2_used), .dst_free(c3b_free),
    .rd_en(cb_rd_en[0]), .rd_addr(cb_rd_addr[0]), .rd_data(cb_rd_data[0]),
    .wt_wr_en(wt_wr_en && wt_sel == 2'd1), .wt_wr_addr(wt_addr[$clog2(C*C)-1:0]),
    .wt_wr_data(wt_data[WW2-1:0]),
    .out_valid(c2_v), .out_addr(c2_a), .out_data(c2_d), .out_last(c2_l),
    .start(c2_start), .done(c2_done), .busy(c2_busy)
  );
  relu #(.ADDR_W(A2)) u_relu2 (
    .clk, .rst_n, .in_valid(c2_v), .in_addr(c2_a), .in_data(c2_d), .in_last(c2_l),
    .out_valid(r2_v), .out_addr(r2_a), .out_data(r2_d), .out_last(r2_l)
  );

  logic          c3b_rd_en   [2];
  logic [A2-1:0] c3b_rd_addr [2];
  act_t          c3b_rd_data [2];
  fmap_buffer #(.DEPTH(C * H2 * W2)) u_c3buf (
    .clk, .rst_n, .wr_en(r2_v), .wr_addr(r2_a), .wr_data(r2_d), .wr_last(r2_l),
    .claim(c2_start), .rel(c3b_rel), .full(c3b_full), .free(c3b_free),
    .rd_en(c3b_rd_en), .rd_addr(c3b_rd_addr), .rd_data(c3b_rd_data)
  );
  assign c3b_rd_en[1]   = 1'b0;
  assign c3b_rd_addr[1] = '0;

  // ---- conv_3 -> residual add -> fc --------------------------------------------
  logic c3_v, c3_l, c3_done, c3_busy, c3_start;
  logic [A2-1:0] c3_a;
  act_t c3_d;
  conv_shift_add #(.CIN(C), .COUT(C), .H(H2), .W(W2), .K(KSZ), .NSHIFT(NS3)) u_conv3 (
    .clk, .rst_n, .src_ready(c3b_full), .dst_free(1'b1),
    .rd_en(c3b_rd_en[0]), .rd_addr(c3b_rd_addr[0]), .rd_data(c3b_rd_data[0]),
    .wt_wr_en(wt_wr_en && wt_sel == 2'd2), .wt_wr_addr(wt_addr[$clog2(C*C)-1:0]),
    .wt_wr_data(wt_data[WW3-1:0]),
    .out_valid(c3_v), .out_addr(c3_a), .out_data(c3_d), .out_last(c3_l),
    .start(c3_start), .done(c3_done), .busy(c3_busy)
  );
  assign c3b_rel = c3_done;
  assign cb_rel  = c3_done;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)       c2_used <= 1'b0;
    else if (c2_done) c2_used <= 1'b1;
    else if (cb_rel)  c2_used <= 1'b0;
  end

  logic ra_v, ra_l;
  logic [A2-1:0] ra_a;
  act_t ra_d;
  residual_add #(.AW(A2)) u_resadd (
    .clk, .rst_n, .in_valid(c3_v), .in_addr(c3_a), .in_data(c3_d), .in_last(c3_l),
    .rd_en(cb_rd_en[1]), .rd_addr(cb_rd_addr[1]), .rd_data(cb_rd_data[1]),
    .out_valid(ra_v), .out_addr(ra_a), .out_data(ra_d), .out_last(ra_l)
  );

  fc_head #(.IN_N(C * H2 * W2), .NCLS(NCLS), .NSHIFT(NSF)) u_fc (
    .clk, .rst_n, .in_valid(ra_v), .in_addr(ra_a), .in_data(ra_d), .in_last(ra_l),
    .wt_wr_en(wt_wr_en && wt_sel == 2'd3), .wt_wr_addr(wt_addr[A2-1:0]),
    .wt_wr_data(wt_data[WWF-1:0]),
    .result_valid, .result_class, .result_scores
  );
endmodule
