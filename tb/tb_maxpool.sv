// tb_maxpool: 2 x 2 pooling of 3 channels of 7 x 5 maps (odd sizes, so the
// last row and column are dropped). Plays the source buffer, compares every
// output and its address with the maximum computed here, and checks the
// output count, out_last, done and the 5-cycles-per-output schedule.
module tb_maxpool;
  import dvs_pkg::*;
  localparam int C = 3, H = 7, W = 5, OH = H / 2, OW = W / 2;
  localparam int SAW = $clog2(C * H * W), DAW = $clog2(C * OH * OW);
  logic clk = 0, rst_n = 0;
  logic src_ready = 0, dst_free = 0, rd_en, out_valid, out_last, start, done;
  logic [SAW-1:0] rd_addr;
  logic [DAW-1:0] out_addr;
  act_t rd_data, out_data;
  int checks = 0, failures = 0, cycles = 0;
  act_t src [C * H * W];

  maxpool #(.C(C), .H(H), .W(W)) dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) cycles++;
  always_ff @(posedge clk) if (rd_en) rd_data <= src[rd_addr];

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit c, input string what);
    checks++;
    if (!c) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  initial begin
    int n, t0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int f = 0; f < 2; f++) begin
      for (int i = 0; i < C * H * W; i++) src[i] = act_t'($urandom);
      @(negedge clk);
      src_ready = 1; dst_free = 1; n = 0; t0 = cycles;
      while (!done) begin
        @(negedge clk);
        if (out_valid) begin
          automatic int c = n / (OH * OW), oy = (n / OW) % OH, ox = n % OW;
          automatic int m = -100000;
          for (int dy = 0; dy < 2; dy++)
            for (int dx = 0; dx < 2; dx++)
              if (int'(src[(c * H + 2 * oy + dy) * W + 2 * ox + dx]) > m)
                m = int'(src[(c * H + 2 * oy + dy) * W + 2 * ox + dx]);
          check(int'(out_addr) == (c * OH + oy) * OW + ox, "address");
          check(int'(out_data) == m, $sformatf("max c%0d oy%0d ox%0d got %0d exp %0d", c, oy, ox, out_data, m));
          check(out_last == (n == C * OH * OW - 1), "last");
          n++;
        end
      end
      src_ready = 0;
      check(n == C * OH * OW, "count");
      check(cycles - t0 == 5 * C * OH * OW + 1, $sformatf("cycles %0d", cycles - t0));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
