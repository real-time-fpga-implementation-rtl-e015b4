// fc_head: fully-connected classifier in shift-add form, plus arg-max.
//
// The feature map arrives as a stream of (addr, data) beats, one value per
// beat, in any order; addr (0..IN_N-1) selects the weight word. The word holds,
// for each class j, a sign and NSHIFT shift counts at bit j*TW (layout as in
// conv_shift_add). Every beat adds s_j * sum_k (x << p_kj) into score j, so no
// feature buffer is needed. On the beat flagged last the scores are
// requantised (acc >>> FRAC, 32-bit saturation), the class with the largest
// score (lowest index on ties) is selected, and result_valid pulses two clocks
// after that beat. The scores are then cleared for the next frame. The paper
// names one fully-connected layer and three event classes; the streaming form
// and the arg-max are this design's choices.
module fc_head
  import dvs_pkg::*;
#(
  parameter int unsigned IN_N    = CH * (IN_H / 2) * (IN_W / 2),
  parameter int unsigned NCLS    = CLASSES,
  parameter int unsigned NSHIFT  = 2,
  parameter int unsigned AW      = $clog2(IN_N),
  parameter int unsigned TW      = 1 + NSHIFT * P_W,
  parameter int unsigned WW      = NCLS * TW,
  parameter int unsigned CLS_W   = $clog2(NCLS)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  input  logic [AW-1:0]           in_addr,
  input  act_t                    in_data,
  input  logic                    in_last,
  input  logic                    wt_wr_en,
  input  logic [AW-1:0]           wt_wr_addr,
  input  logic [WW-1:0]           wt_wr_data,
  output logic                    result_valid,
  output logic [CLS_W-1:0]        result_class,
  output logic signed [31:0]      result_scores [NCLS]
);
  logic [WW-1:0] wmem [IN_N];
  always_ff @(posedge clk) if (wt_wr_en) wmem[wt_wr_addr] <= wt_wr_data;

  // per class: one shift layer per term across the NCLS lanes, add, signed sum
  logic [WW-1:0] wword;
  act_t   xv  [NCLS];
  shift_t pk  [NSHIFT][NCLS];
  logic   sgn [NCLS];
  acc_t   acc [NCLS];

  assign wword = wmem[in_addr];
  always_comb begin
    for (int j = 0; j < NCLS; j++) begin
      xv[j]  = in_data;
      sgn[j] = wword[j*TW];
      for (int k = 0; k < NSHIFT; k++) pk[k][j] = wword[j*TW + 1 + k*P_W +: P_W];
    end
  end
  // shift layer k, then add layer k-1 folds it into the running sum
  for (genvar k = 0; k < NSHIFT; k++) begin : g_shift
    acc_t sh   [NCLS];
    acc_t part [NCLS];
    shift_layer #(.LANES(NCLS)) u_shift (.x(xv), .p(pk[k]), .y(sh));
    if (k == 0) begin : g_first
      assign part = sh;
    end else begin : g_add
      add_layer #(.LANES(NCLS)) u_add (.a(g_shift[k-1].part), .b(sh), .y(part));
    end
  end

  function automatic logic signed [31:0] sat32(input acc_t a);
    acc_t q;
    q = a >>> FRAC;
    if (q > acc_t'(32'sh7fffffff))  return 32'sh7fffffff;
    if (q < -acc_t'(64'sh80000000)) return 32'sh80000000;
    return q[31:0];
  endfunction

  logic fin;   // scores final, arg-max next
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      fin <= 1'b0; result_valid <= 1'b0; result_class <= '0;
      for (int j = 0; j < NCLS; j++) begin acc[j] <= '0; result_scores[j] <= '0; end
    end else begin
      result_valid <= 1'b0;
      fin <= 1'b0;
      if (in_valid) begin
        for (int j = 0; j < NCLS; j++) acc[j] <= acc[j] + (sgn[j] ? -g_shift[NSHIFT-1].part[j] : g_shift[NSHIFT-1].part[j]);
        fin <= in_last;
      end
      if (fin) begin
        logic [CLS_W-1:0] best;
        logic signed [31:0] sc [NCLS];
        for (int j = 0; j < NCLS; j++) sc[j] = sat32(acc[j]);
        best = '0;
        for (int j = 1; j < NCLS; j++) if (sc[j] > sc[best]) best = CLS_W'(j);
        for (int j = 0; j < NCLS; j++) begin result_scores[j] <= sc[j]; acc[j] <= '0; end
        result_class <= best;
        result_valid <= 1'b1;
      end
    end
  end
endmodule
