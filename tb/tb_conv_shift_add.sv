// tb_conv_shift_add: 3 -> 4 channel 3x3 layer on 5 x 6 maps, two shift
// layers. Loads hashed weight codes (with "no term" codes among them), plays
// the source buffer (one-clock read), runs two frames and compares every
// output with a reference convolution built from multiply/floor-divide, and
// checks the address order, out_last, done and the cycle count
// H*W*(CIN*(K*K+1+COUT)+COUT) + 1 from start to done.
module tb_conv_shift_add;
  import dvs_pkg::*;
  import dvs_ref_pkg::*;
  localparam int CIN = 3, COUT = 4, H = 5, W = 6, K = 3, NS = 2;
  localparam int KK = K * K, TW = 1 + NS * P_W, WW = KK * TW;
  localparam int SAW = $clog2(CIN * H * W), DAW = $clog2(COUT * H * W), WAW = $clog2(CIN * COUT);
  localparam int SEED = 11;

  logic clk = 0, rst_n = 0;
  logic src_ready = 0, dst_free = 0, rd_en, wt_wr_en = 0;
  logic [SAW-1:0] rd_addr;
  act_t rd_data;
  logic [WAW-1:0] wt_wr_addr = '0;
  logic [WW-1:0] wt_wr_data = '0;
  logic out_valid, out_last, start, done, busy;
  logic [DAW-1:0] out_addr;
  act_t out_data;
  int checks = 0, failures = 0;

  conv_shift_add #(.CIN(CIN), .COUT(COUT), .H(H), .W(W), .K(K), .NSHIFT(NS)) dut (.*);
  always #5 clk = ~clk;

  act_t src [CIN * H * W];
  always_ff @(posedge clk) if (rd_en) rd_data <= src[rd_addr];

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int wp(int co, int ci, int t, int k); return code_p(SEED, (co * CIN + ci) * KK + t, k, -6, 10); endfunction
  function automatic bit ws(int co, int ci, int t); return code_s(SEED, (co * CIN + ci) * KK + t); endfunction

  function automatic int ref_out(int co, int y, int x);
    longint acc = 0;
    for (int ci = 0; ci < CIN; ci++)
      for (int t = 0; t < KK; t++) begin
        int iy = y + t / K - 1, ix = x + t % K - 1, v = 0;
        longint s = 0;
        if (iy >= 0 && iy < H && ix >= 0 && ix < W) v = int'(src[(ci * H + iy) * W + ix]);
        for (int k = 0; k < NS; k++) s += ref_term(v, wp(co, ci, t, k));
        acc += ws(co, ci, t) ? -s : s;
      end
    return ref_requant(acc);
  endfunction

  task automatic check(input bit c, input string what);
    checks++;
    if (!c) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  int cycles, nout, exp_addr;
  always @(posedge clk) cycles++;

  initial begin
    int t0, nones = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // load weight codes
    for (int co = 0; co < COUT; co++)
      for (int ci = 0; ci < CIN; ci++) begin
        automatic logic [WW-1:0] wd = '0;
        for (int t = 0; t < KK; t++) begin
          wd[t*TW] = ws(co, ci, t);
          for (int k = 0; k < NS; k++) begin
            wd[t*TW + 1 + k*P_W +: P_W] = P_W'(wp(co, ci, t, k));
            if (wp(co, ci, t, k) == -32) nones++;
          end
        end
        wt_wr_en = 1; wt_wr_addr = WAW'(co * CIN + ci); wt_wr_data = wd;
        @(negedge clk);
      end
    wt_wr_en = 0;
    check(nones > 0, "weights include no-term codes");
    for (int f = 0; f < 2; f++) begin
      for (int i = 0; i < CIN * H * W; i++) src[i] = act_t'(int'($urandom % 4001) - 2000);
      @(negedge clk);
      check(!busy, "idle before start");
      src_ready = 1; dst_free = 1;
      t0 = cycles;
      nout = 0;
      // outputs come position by position, channels inner
      while (!done) begin
        @(negedge clk);
        if (out_valid) begin
          automatic int co = nout % COUT, pos = nout / COUT;
          automatic int y = pos / W, x = pos % W;
          check(int'(out_addr) == (co * H + y) * W + x, "address order");
          check(int'(out_data) == ref_out(co, y, x), $sformatf("value co=%0d y=%0d x=%0d got %0d exp %0d", co, y, x, out_data, ref_out(co, y, x)));
          check(out_last == (nout == COUT * H * W - 1), "out_last");
          nout++;
        end
      end
      src_ready = 0;
      check(nout == COUT * H * W, "output count");
      check(cycles - t0 == H * W * (CIN * (KK + 1 + COUT) + COUT) + 1,
            $sformatf("cycle count %0d", cycles - t0));
    end
    // with the destination busy the layer must not start
    src_ready = 1; dst_free = 0;
    repeat (5) @(negedge clk);
    check(!busy && !out_valid, "waits for dst_free");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
