// dvs_variant_bench: test harness for one configuration of the accelerator,
// used by tb_dvs_cnn_variants to run several network variants side by side.
//
// It instantiates dvs_cnn_top with the given frame size, channel count and
// number of shift terms per layer (NS1, NS2, NS3 for the three convolutions,
// NSF for the classifier), loads hashed weight codes, sends one frame of
// random 14-bit sensing data, and compares the class scores and the class
// with an integer model of the same network (multiply/floor-divide weights,
// so the shift-add path is checked independently). The weight port is made as
// wide as the widest layer needs. Interface: clk and rst_n in; `finished`
// rises once the result was checked, with the number of checks and failures.
// The expected cycle count of the three convolutions and the pooling is also
// checked against the schedule formula of each layer.
module dvs_variant_bench
  import dvs_pkg::*;
  import dvs_ref_pkg::*;
#(
  parameter int unsigned H   = 6,
  parameter int unsigned W   = 5,
  parameter int unsigned C   = 3,
  parameter int unsigned NS1 = 2,
  parameter int unsigned NS2 = 2,
  parameter int unsigned NS3 = 1,
  parameter int unsigned NSF = 2,
  parameter int unsigned SEED = 1
) (
  input  logic clk,
  input  logic rst_n,
  output logic finished,
  output int   checks,
  output int   failures
);
  localparam int H2 = H / 2, W2 = W / 2, NC = CLASSES, KK = KSZ * KSZ, SPT = W * NAVG;
  localparam int NSMAX = (NS1 > NS2 ? NS1 : NS2) > NS3 ? (NS1 > NS2 ? NS1 : NS2) : NS3;
  localparam int WT_DW = KK * (1 + NSMAX * P_W) > NC * (1 + NSF * P_W) ?
                         KK * (1 + NSMAX * P_W) : NC * (1 + NSF * P_W);
  localparam int NS [4] = '{NS1, NS2, NS3, NSF};
  localparam int PLO [4] = '{-9, -12, -11, -15};
  localparam int PSPAN [4] = '{6, 7, 7, 7};

  logic adc_valid = 0, adc_first = 0;
  logic [ADC_W-1:0] adc_data = '0;
  logic wt_wr_en = 0;
  logic [1:0] wt_sel = '0;
  logic [19:0] wt_addr = '0;
  logic [WT_DW-1:0] wt_data = '0;
  logic result_valid;
  logic [1:0] result_class;
  logic signed [31:0] result_scores [NC];
  logic [15:0] frames_dropped;

  dvs_cnn_top #(.H(H), .W(W), .C(C), .NS1(NS1), .NS2(NS2), .NS3(NS3), .NSF(NSF),
                .WT_DW(WT_DW)) dut (
    .clk, .rst_n, .adc_valid, .adc_first, .adc_data, .wt_wr_en, .wt_sel, .wt_addr,
    .wt_data, .result_valid, .result_class, .result_scores, .frames_dropped
  );

  task automatic check(input bit c, input string what);
    checks++;
    if (!c) begin failures++; $display("FAIL [NS %0d %0d %0d %0d] %s", NS1, NS2, NS3, NSF, what); end
  endtask

  function automatic int wp(int l, int idx, int k);
    return code_p(SEED * 8 + l + 1, idx, k, PLO[l], PSPAN[l]);
  endfunction
  function automatic bit ws(int l, int idx); return code_s(SEED * 8 + l + 1, idx); endfunction

  // ---- reference model ----------------------------------------------------------
  int fin [H * W];
  int f1  [C * H * W];
  int fp  [C * H2 * W2];
  int f3  [C * H2 * W2];
  int exp_scores [NC];
  int exp_class;

  task automatic ref_conv(input int l, input int cin, input int hh, input int ww,
                          ref int src [], ref int dst []);
    for (int co = 0; co < C; co++)
      for (int y = 0; y < hh; y++)
        for (int x = 0; x < ww; x++) begin
          longint acc = 0;
          for (int ci = 0; ci < cin; ci++)
            for (int t = 0; t < KK; t++) begin
              int iy = y + t / KSZ - 1, ix = x + t % KSZ - 1, v = 0, idx;
              longint s = 0;
              if (iy >= 0 && iy < hh && ix >= 0 && ix < ww) v = src[(ci * hh + iy) * ww + ix];
              idx = (co * cin + ci) * KK + t;
              for (int k = 0; k < NS[l]; k++) s += ref_term(v, wp(l, idx, k));
              acc += ws(l, idx) ? -s : s;
            end
          dst[(co * hh + y) * ww + x] = ref_requant(acc);
        end
  endtask

  task automatic ref_frame();
    int s0 [] = new[H * W];
    int t1 [] = new[C * H * W];
    int t2 [] = new[C * H2 * W2];
    int t3 [] = new[C * H2 * W2];
    foreach (fin[i]) s0[i] = fin[i];
    ref_conv(0, 1, H, W, s0, t1);
    foreach (t1[i]) f1[i] = t1[i] < 0 ? 0 : t1[i];
    for (int c = 0; c < C; c++)
      for (int oy = 0; oy < H2; oy++)
        for (int ox = 0; ox < W2; ox++) begin
          int m = f1[(c * H + 2 * oy) * W + 2 * ox];
          for (int d = 1; d < 4; d++)
            if (f1[(c * H + 2 * oy + d / 2) * W + 2 * ox + d % 2] > m)
              m = f1[(c * H + 2 * oy + d / 2) * W + 2 * ox + d % 2];
          fp[(c * H2 + oy) * W2 + ox] = m;
        end
    foreach (fp[i]) t2[i] = fp[i];
    ref_conv(1, C, H2, W2, t2, t3);
    foreach (t3[i]) t2[i] = t3[i] < 0 ? 0 : t3[i];
    ref_conv(2, C, H2, W2, t2, t3);
    foreach (t3[i]) f3[i] = ref_sat16(t3[i] + fp[i]);
    for (int j = 0; j < NC; j++) begin
      longint acc = 0;
      for (int i = 0; i < C * H2 * W2; i++) begin
        longint s = 0;
        for (int k = 0; k < NSF; k++) s += ref_term(f3[i], wp(3, i * NC + j, k));
        acc += ws(3, i * NC + j) ? -s : s;
      end
      exp_scores[j] = int'(floor_div(acc, 65536));
    end
    exp_class = 0;
    for (int j = 1; j < NC; j++) if (exp_scores[j] > exp_scores[exp_class]) exp_class = j;
  endtask

  // ---- stimulus --------------------------------------------------------------------
  task automatic load_weights();
    int cin [3] = '{1, C, C};
    for (int l = 0; l < 3; l++)
      for (int a = 0; a < cin[l] * C; a++) begin
        logic [WT_DW-1:0] d = '0;
        int tw = 1 + NS[l] * P_W;
        for (int t = 0; t < KK; t++) begin
          d[t * tw] = ws(l, a * KK + t);
          for (int k = 0; k < NS[l]; k++) d[t * tw + 1 + k * P_W +: P_W] = P_W'(wp(l, a * KK + t, k));
        end
        wt_wr_en = 1; wt_sel = 2'(l); wt_addr = 20'(a); wt_data = d;
        @(negedge clk);
      end
    for (int i = 0; i < C * H2 * W2; i++) begin
      logic [WT_DW-1:0] d = '0;
      int tw = 1 + NSF * P_W;
      for (int j = 0; j < NC; j++) begin
        d[j * tw] = ws(3, i * NC + j);
        for (int k = 0; k < NSF; k++) d[j * tw + 1 + k * P_W +: P_W] = P_W'(wp(3, i * NC + j, k));
      end
      wt_wr_en = 1; wt_sel = 2'd3; wt_addr = 20'(i); wt_data = d;
      @(negedge clk);
    end
    wt_wr_en = 0;
  endtask

  task automatic send_frame();
    for (int y = 0; y < H; y++)
      for (int s = 0; s < SPT; s++) begin
        adc_valid = 1; adc_first = (s == 0);
        adc_data = ADC_W'($urandom);
        if (s % NAVG == 0) fin[y * W + s / NAVG] = 0;
        fin[y * W + s / NAVG] += int'(adc_data);
        if (s % NAVG == NAVG - 1) fin[y * W + s / NAVG] /= NAVG;
        @(negedge clk);
      end
    adc_valid = 0; adc_first = 0;
  endtask

  // cycles from conv_1 start to the result, against the per-layer schedule
  longint t0 = 0, tres = 0, ncyc = 0;
  always @(posedge clk) begin
    ncyc++;
    if (dut.u_conv1.start) t0 = ncyc;
  end

  initial begin
    longint c1, c2, mp, want;
    finished = 0; checks = 0; failures = 0;
    @(posedge rst_n);
    @(negedge clk);
    load_weights();
    send_frame();
    ref_frame();
    while (!result_valid) @(negedge clk);
    tres = ncyc;
    for (int j = 0; j < NC; j++)
      check(result_scores[j] == exp_scores[j], $sformatf("score %0d: %0d, expected %0d", j, result_scores[j], exp_scores[j]));
    check(int'(result_class) == exp_class, "class");
    // conv_1, pooling, conv_2, conv_3 one after another; +1 idle cycle between
    // stages for the handshake, relu/residual/fc registers at the end
    c1 = longint'(H) * W * (1 * (KK + 1 + C) + C) + 1;
    mp = 5 * longint'(C) * H2 * W2 + 1;
    c2 = longint'(H2) * W2 * (C * (KK + 1 + C) + C) + 1;
    want = c1 + mp + 2 * c2;
    check(tres - t0 >= want && tres - t0 <= want + 16,
          $sformatf("latency %0d cycles, schedule %0d", tres - t0, want));
    $display("variant NS %0d %0d %0d %0d: class %0d scores %0d %0d %0d, %0d cycles",
             NS1, NS2, NS3, NSF, result_class, result_scores[0], result_scores[1], result_scores[2], tres - t0);
    finished = 1;
  end
endmodule
