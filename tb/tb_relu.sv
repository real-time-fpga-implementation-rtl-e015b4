// tb_relu: drives a random stream and checks max(0,x), address, last flag and
// the one-clock latency.
module tb_relu;
  import dvs_pkg::*;
  localparam int AW = 12;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_last = 0, out_valid, out_last;
  logic [AW-1:0] in_addr = '0, out_addr;
  act_t in_data = '0, out_data;
  int checks = 0, failures = 0;

  relu #(.ADDR_W(AW)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic v_q, l_q; logic [AW-1:0] a_q; int d_q;
    repeat (3) @(posedge clk);
    rst_n = 1;
    v_q = 0;
    for (int it = 0; it < 500; it++) begin
      @(negedge clk);
      // previous beat must be visible now, one clock after it was driven
      if (v_q) begin
        checks++;
        if (!(out_valid && out_addr == a_q && out_last == l_q &&
              int'(out_data) == (d_q < 0 ? 0 : d_q))) failures++;
      end else begin
        checks++;
        if (out_valid) failures++;
      end
      in_valid = $urandom % 4 != 0;
      in_addr  = AW'($urandom);
      in_data  = act_t'($urandom);
      in_last  = $urandom % 8 == 0;
      v_q = in_valid; a_q = in_addr; l_q = in_last; d_q = int'(in_data);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
