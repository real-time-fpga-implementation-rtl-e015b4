// tb_fc_head: 3-class layer over 50 inputs with two shift layers. Loads
// hashed weight codes, streams three frames in shuffled order with gaps and
// checks scores, arg-max class and that result_valid follows the last beat by
// two clocks; the scores must clear between frames.
module tb_fc_head;
  import dvs_pkg::*;
  import dvs_ref_pkg::*;
  localparam int N = 50, NC = 3, NS = 2, TW = 1 + NS * P_W, WW = NC * TW, AW = $clog2(N);
  localparam int SEED = 77;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_last = 0, wt_wr_en = 0, result_valid;
  logic [AW-1:0] in_addr = '0, wt_wr_addr = '0;
  act_t in_data = '0;
  logic [WW-1:0] wt_wr_data = '0;
  logic [1:0] result_class;
  logic signed [31:0] result_scores [NC];
  int checks = 0, failures = 0, cycles = 0;

  fc_head #(.IN_N(N), .NCLS(NC), .NSHIFT(NS)) dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) cycles++;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int wp(int i, int j, int k); return code_p(SEED, i * NC + j, k, -4, 8); endfunction
  function automatic bit ws(int i, int j); return code_s(SEED, i * NC + j); endfunction

  task automatic check(input bit c, input string what);
    checks++;
    if (!c) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  initial begin
    act_t x [N];
    int order [N];
    longint acc [NC];
    int sc [NC], best, tl;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < N; i++) begin
      automatic logic [WW-1:0] wd = '0;
      for (int j = 0; j < NC; j++) begin
        wd[j*TW] = ws(i, j);
        for (int k = 0; k < NS; k++) wd[j*TW + 1 + k*P_W +: P_W] = P_W'(wp(i, j, k));
      end
      wt_wr_en = 1; wt_wr_addr = AW'(i); wt_wr_data = wd;
      @(negedge clk);
    end
    wt_wr_en = 0;
    for (int f = 0; f < 3; f++) begin
      for (int i = 0; i < N; i++) begin x[i] = act_t'(int'($urandom % 20001) - 10000); order[i] = i; end
      order.shuffle();
      for (int j = 0; j < NC; j++) begin
        acc[j] = 0;
        for (int i = 0; i < N; i++) begin
          automatic longint t = 0;
          for (int k = 0; k < NS; k++) t += ref_term(int'(x[i]), wp(i, j, k));
          acc[j] += ws(i, j) ? -t : t;
        end
        sc[j] = int'(floor_div(acc[j], 65536));
      end
      best = 0;
      for (int j = 1; j < NC; j++) if (sc[j] > sc[best]) best = j;
      for (int n = 0; n < N; n++) begin
        while ($urandom % 4 == 0) begin in_valid = 0; @(negedge clk); end
        in_valid = 1; in_addr = AW'(order[n]); in_data = x[order[n]]; in_last = (n == N - 1);
        tl = cycles;
        @(negedge clk);
        check(!result_valid, "no early result");
      end
      in_valid = 0; in_last = 0;
      while (!result_valid) @(negedge clk);
      check(cycles - tl == 2, $sformatf("result latency %0d", cycles - tl));
      for (int j = 0; j < NC; j++) check(result_scores[j] == sc[j], $sformatf("score %0d got %0d exp %0d", j, result_scores[j], sc[j]));
      check(int'(result_class) == best, "class");
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
