// tb_residual_add: random beats with random gaps; the testbench holds the
// residual buffer (one-clock read) and checks that each sum leaves one clock
// later, saturated to 16 bits, with its address and last flag.
module tb_residual_add;
  import dvs_pkg::*;
  import dvs_ref_pkg::*;
  localparam int AW = 8;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_last = 0, rd_en, out_valid, out_last;
  logic [AW-1:0] in_addr = '0, rd_addr, out_addr;
  act_t in_data = '0, rd_data, out_data;
  int checks = 0, failures = 0, sats = 0;
  act_t mem [2 ** AW];

  residual_add #(.AW(AW)) dut (.*);
  always #5 clk = ~clk;
  always_ff @(posedge clk) if (rd_en) rd_data <= mem[rd_addr];

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit v_q = 0, l_q; logic [AW-1:0] a_q; int e_q;
    for (int i = 0; i < 2 ** AW; i++) mem[i] = act_t'($urandom);
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int it = 0; it < 600; it++) begin
      checks++;
      if (v_q) begin
        if (!(out_valid && out_addr == a_q && out_last == l_q && int'(out_data) == e_q)) failures++;
      end else if (out_valid) failures++;
      in_valid = $urandom % 3 != 0;
      in_addr  = AW'($urandom);
      in_data  = act_t'($urandom);
      in_last  = $urandom % 7 == 0;
      v_q = in_valid; a_q = in_addr; l_q = in_last;
      e_q = ref_sat16(int'(in_data) + int'(mem[in_addr]));
      if (in_valid && e_q != int'(in_data) + int'(mem[in_addr])) sats++;
      @(negedge clk);
    end
    checks++;
    if (sats == 0) failures++;   // saturation must have been exercised
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
