// tb_dvs_cnn_top: end-to-end test of the accelerator at its default sizes
// (256 x 11 frames, 64 channels, 3 classes).
//
// Loads hashed weight codes into all four layers, then streams three frames of
// random 14-bit sensing data back to back (44 samples per trace, trace start
// flagged). The first two frames fill both input banks; the third arrives
// while both are held and must be dropped. The two accepted frames are run
// through a reference model of the whole network written here with plain
// integer arithmetic (4:1 average, 3x3 'same' convolutions with
// multiply/floor-divide weights, ReLU, 2x2 max pooling, saturating residual
// add, fully-connected layer, arg-max), and both results are compared score
// by score. It also counts how often the mechanisms occur: dropped frames,
// cycles in which two layers work on different frames at once, "no term"
// weight codes, zero-padded window taps and saturated layer outputs.
module tb_dvs_cnn_top;
  import dvs_pkg::*;
  import dvs_ref_pkg::*;
  localparam int H = IN_H, W = IN_W, C = CH, H2 = H / 2, W2 = W / 2, NC = CLASSES;
  localparam int KK = KSZ * KSZ, SPT = W * NAVG;        // samples per trace
  localparam int NS [4] = '{2, 2, 1, 2};
  localparam int PLO [4] = '{-9, -12, -11, -15};
  localparam int PSPAN [4] = '{6, 7, 7, 7};
  localparam int WT_DW = KSZ * KSZ * (1 + 2 * P_W);

  logic clk = 0, rst_n = 0;
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
  int checks = 0, failures = 0;
  longint cycles = 0;

  dvs_cnn_top dut (.*);
  always #2 clk = ~clk;
  always @(posedge clk) cycles++;

  initial begin
    repeat (30_000_000) @(posedge clk);
    failures++;
    $display("watchdog: no completion");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit c, input string what);
    checks++;
    if (!c) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  // ---- weight codes ----------------------------------------------------------
  function automatic int wp(int l, int idx, int k); return code_p(l + 1, idx, k, PLO[l], PSPAN[l]); endfunction
  function automatic bit ws(int l, int idx); return code_s(l + 1, idx); endfunction
  int n_none = 0, n_pad = 0, n_sat = 0;

  // ---- reference model ---------------------------------------------------------
  // sizes as variables, so the reference loops stay loops when compiled
  int rC = C, rH = H, rW = W, rK = KSZ, rKK = KK, rNC = NC;
  int rNS [4] = NS;
  int fin  [H * W];
  int f1   [C * H * W];
  int fp   [C * H2 * W2];
  int f2   [C * H2 * W2];
  int f3   [C * H2 * W2];
  int exp_scores [2][NC];
  int exp_class [2];

  function automatic int sat_count(longint acc);
    int r = ref_requant(acc);
    if (longint'(r) != floor_div(acc, 65536)) n_sat++;
    return r;
  endfunction

  // 3x3 'same' convolution of layer l: src (cin x hh x ww) -> dst (cout x hh x ww)
  task automatic ref_conv(input int l, input int cin, input int cout, input int hh, input int ww,
                          ref int src [], ref int dst []);
    for (int co = 0; co < cout; co++)
      for (int y = 0; y < hh; y++)
        for (int x = 0; x < ww; x++) begin
          longint acc = 0;
          for (int ci = 0; ci < cin; ci++)
            for (int t = 0; t < rKK; t++) begin
              int iy = y + t / rK - 1, ix = x + t % rK - 1, v = 0, idx;
              longint s = 0;
              if (iy >= 0 && iy < hh && ix >= 0 && ix < ww) v = src[(ci * hh + iy) * ww + ix];
              else n_pad++;
              idx = (co * cin + ci) * rKK + t;
              for (int k = 0; k < rNS[l]; k++) s += ref_term(v, wp(l, idx, k));
              acc += ws(l, idx) ? -s : s;
            end
          dst[(co * hh + y) * ww + x] = sat_count(acc);
        end
  endtask

  task automatic ref_pool(input int cc, input int hh, input int ww);
    for (int c = 0; c < cc; c++)
      for (int oy = 0; oy < hh / 2; oy++)
        for (int ox = 0; ox < ww / 2; ox++) begin
          int m = f1[(c * hh + 2 * oy) * ww + 2 * ox];
          for (int d = 1; d < 4; d++)
            if (f1[(c * hh + 2 * oy + d / 2) * ww + 2 * ox + d % 2] > m) m = f1[(c * hh + 2 * oy + d / 2) * ww + 2 * ox + d % 2];
          fp[(c * (hh / 2) + oy) * (ww / 2) + ox] = m;
        end
  endtask

  task automatic ref_frame(input int slot);
    int tmp1 [] = new[C * H * W];
    int tmp2 [] = new[C * H2 * W2];
    int src0 [] = new[H * W];
    longint acc [NC];
    int best;
    foreach (fin[i]) src0[i] = fin[i];
    ref_conv(0, 1, rC, rH, rW, src0, tmp1);
    foreach (tmp1[i]) f1[i] = tmp1[i] < 0 ? 0 : tmp1[i];
    ref_pool(rC, rH, rW);
    foreach (fp[i]) tmp2[i] = fp[i];
    begin
      int t2 [] = new[C * H2 * W2];
      ref_conv(1, rC, rC, rH / 2, rW / 2, tmp2, t2);
      foreach (t2[i]) f2[i] = t2[i] < 0 ? 0 : t2[i];
      foreach (f2[i]) tmp2[i] = f2[i];
      ref_conv(2, rC, rC, rH / 2, rW / 2, tmp2, t2);
      foreach (t2[i]) f3[i] = ref_sat16(t2[i] + fp[i]);
    end
    for (int j = 0; j < rNC; j++) begin
      acc[j] = 0;
      for (int i = 0; i < rC * (rH / 2) * (rW / 2); i++) begin
        longint s = 0;
        for (int k = 0; k < rNS[3]; k++) s += ref_term(f3[i], wp(3, i * rNC + j, k));
        acc[j] += ws(3, i * rNC + j) ? -s : s;
      end
      exp_scores[slot][j] = int'(floor_div(acc[j], 65536));
    end
    best = 0;
    for (int j = 1; j < NC; j++) if (exp_scores[slot][j] > exp_scores[slot][best]) best = j;
    exp_class[slot] = best;
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
          for (int k = 0; k < NS[l]; k++) begin
            d[t * tw + 1 + k * P_W +: P_W] = P_W'(wp(l, a * KK + t, k));
            if (wp(l, a * KK + t, k) == -32) n_none++;
          end
        end
        wt_wr_en = 1; wt_sel = 2'(l); wt_addr = 20'(a); wt_data = d;
        @(negedge clk);
      end
    for (int i = 0; i < C * H2 * W2; i++) begin
      logic [WT_DW-1:0] d = '0;
      int tw = 1 + NS[3] * P_W;
      for (int j = 0; j < NC; j++) begin
        d[j * tw] = ws(3, i * NC + j);
        for (int k = 0; k < NS[3]; k++) d[j * tw + 1 + k * P_W +: P_W] = P_W'(wp(3, i * NC + j, k));
      end
      wt_wr_en = 1; wt_sel = 2'd3; wt_addr = 20'(i); wt_data = d;
      @(negedge clk);
    end
    wt_wr_en = 0;
  endtask

  // one frame of sensing data; the averaged matrix is kept in fin
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

  // ---- mechanism counters -------------------------------------------------------
  longint overlap = 0;
  int n_start [4] = '{0, 0, 0, 0};
  always @(posedge clk) begin
    if (dut.u_conv1.busy && (dut.u_conv2.busy || dut.u_conv3.busy)) overlap++;
    if (dut.u_conv1.start) n_start[0]++;
    if (dut.u_pool.start)  n_start[1]++;
    if (dut.u_conv2.start) n_start[2]++;
    if (dut.u_conv3.start) n_start[3]++;
  end

  int nres = 0;
  initial begin
    repeat (4) @(negedge clk);
    rst_n = 1;
    load_weights();
    check(n_none > 0, "weights include no-term codes");
    send_frame(); ref_frame(0);
    send_frame(); ref_frame(1);
    send_frame();                               // both banks held: dropped
    check(frames_dropped == 16'd1, $sformatf("one frame dropped (%0d)", frames_dropped));
    while (nres < 2) begin
      @(negedge clk);
      if (result_valid) begin
        $display("result %0d at cycle %0d: class %0d scores %0d %0d %0d (expected class %0d scores %0d %0d %0d)",
                 nres, cycles, result_class, result_scores[0], result_scores[1], result_scores[2],
                 exp_class[nres], exp_scores[nres][0], exp_scores[nres][1], exp_scores[nres][2]);
        for (int j = 0; j < NC; j++) check(result_scores[j] == exp_scores[nres][j], $sformatf("frame %0d score %0d", nres, j));
        check(int'(result_class) == exp_class[nres], $sformatf("frame %0d class", nres));
        nres++;
      end
    end
    repeat (100) @(negedge clk);
    check(!result_valid, "no extra result");
    $display("mechanisms: dropped=%0d overlap_cycles=%0d no_term_codes=%0d padded_taps=%0d saturated_outputs=%0d",
             frames_dropped, overlap, n_none, n_pad, n_sat);
    check(frames_dropped > 0, "input overflow happened");
    check(overlap > 0, "layers overlapped on different frames");
    check(n_pad > 0, "zero padding used");
    for (int i = 0; i < 4; i++) check(n_start[i] == 2, $sformatf("stage %0d ran %0d times", i, n_start[i]));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
