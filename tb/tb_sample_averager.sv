// tb_sample_averager: sends traces of 44 random 14-bit samples with gaps and
// a trace-start flag, one trace cut short to test realignment, and checks
// every output against floor(sum of 4 / 4) and its one-clock latency.
module tb_sample_averager;
  import dvs_pkg::*;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_first = 0, out_valid;
  logic [ADC_W-1:0] in_data = '0;
  act_t out_data;
  int checks = 0, failures = 0;
  int exp_q [$];
  int cyc_q [$];
  int cycle = 0;

  sample_averager dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) cycle++;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // outputs: value and the clock they appear in (one after the 4th sample)
  always @(negedge clk) if (rst_n && out_valid) begin
    checks++;
    if (exp_q.size() == 0) failures++;
    else begin
      int e, c;
      e = exp_q.pop_front(); c = cyc_q.pop_front();
      if (int'(out_data) != e || cycle != c + 1) begin
        failures++;
        if (failures < 5) $display("avg mismatch got %0d exp %0d cycle %0d/%0d", out_data, e, cycle, c + 1);
      end
    end
  end

  initial begin
    int sum, n, len;
    repeat (3) @(posedge clk);
    @(negedge clk);
    rst_n = 1;
    for (int tr = 0; tr < 20; tr++) begin
      len = (tr == 5) ? 42 : 44;   // a short trace: leftovers must be discarded
      sum = 0; n = 0;
      for (int i = 0; i < len; i++) begin
        while ($urandom % 5 == 0) begin in_valid = 0; @(negedge clk); end
        in_valid = 1; in_first = (i == 0);
        in_data = ADC_W'($urandom);
        sum += int'(in_data); n++;
        if (n == 4) begin
          exp_q.push_back(sum / 4); cyc_q.push_back(cycle);
          sum = 0; n = 0;
        end
        @(negedge clk);
      end
    end
    in_valid = 0;
    repeat (3) @(negedge clk);
    checks++;
    if (exp_q.size() != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
