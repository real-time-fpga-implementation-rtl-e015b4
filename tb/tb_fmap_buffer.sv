// tb_fmap_buffer: claims the buffer, writes whole frames, checks free/full
// during filling and after wr_last,
// reads the frame back through both ports with one-clock latency, then
// releases it and writes a second frame.
module tb_fmap_buffer;
  import dvs_pkg::*;
  localparam int D = 60, AW = $clog2(D);
  logic clk = 0, rst_n = 0;
  logic wr_en = 0, wr_last = 0, claim = 0, rel = 0, full, free;
  logic [AW-1:0] wr_addr = '0;
  act_t wr_data = '0;
  logic rd_en [2];
  logic [AW-1:0] rd_addr [2];
  act_t rd_data [2];
  int checks = 0, failures = 0;
  act_t model [D];

  fmap_buffer #(.DEPTH(D)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit c); checks++; if (!c) failures++; endtask

  initial begin
    rd_en[0] = 0; rd_en[1] = 0; rd_addr[0] = '0; rd_addr[1] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int f = 0; f < 2; f++) begin
      @(negedge clk); check(!full && free);
      claim = 1; @(negedge clk); claim = 0;
      check(!full && !free);                    // claimed: owned by a producer
      for (int i = D - 1; i >= 0; i--) begin   // any write order
        wr_en = 1; wr_addr = AW'(i); wr_data = act_t'($urandom); wr_last = (i == 0);
        model[i] = wr_data;
        @(negedge clk);
        if (i != 0) check(!full && !free);
      end
      wr_en = 0; wr_last = 0;
      check(full && !free);
      for (int i = 0; i < D; i++) begin
        rd_en[0] = 1; rd_addr[0] = AW'(i);
        rd_en[1] = 1; rd_addr[1] = AW'(D - 1 - i);
        @(negedge clk);
        check(rd_data[0] == model[i]);
        check(rd_data[1] == model[D - 1 - i]);
      end
      rd_en[0] = 0; rd_en[1] = 0;
      check(full);
      rel = 1; @(negedge clk); rel = 0;
      check(!full && free);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
