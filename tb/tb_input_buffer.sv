// tb_input_buffer: small 4 x 3 frames. Fills both banks, checks that the third
// frame is dropped and counted while both are held, reads frames back in
// arrival order with one-clock read latency, and checks that a released bank
// takes a new frame.
module tb_input_buffer;
  import dvs_pkg::*;
  localparam int H = 4, W = 3, N = H * W, AW = $clog2(N);
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, full, rel = 0, rd_en = 0;
  act_t in_data = '0, rd_data;
  logic [AW-1:0] rd_addr = '0;
  logic [15:0] frames_dropped;
  int checks = 0, failures = 0;
  act_t frames [8][N];

  input_buffer #(.H(H), .W(W)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit c, input string what);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic send_frame(input int f);
    for (int i = 0; i < N; i++) begin
      frames[f][i] = act_t'($urandom % 16384);
      in_valid = 1; in_data = frames[f][i];
      @(negedge clk);
    end
    in_valid = 0;
    @(negedge clk);
  endtask

  task automatic read_frame(input int f);
    for (int i = 0; i < N; i++) begin
      rd_en = 1; rd_addr = AW'(i);
      @(negedge clk);
      check(rd_data == frames[f][i], $sformatf("frame %0d word %0d", f, i));
    end
    rd_en = 0;
    rel = 1; @(negedge clk); rel = 0;
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    check(!full, "empty after reset");
    send_frame(0);
    check(full, "full after frame 0");
    send_frame(1);
    send_frame(2);                       // both banks busy: dropped
    check(frames_dropped == 16'd1, "one frame dropped");
    read_frame(0);
    check(full, "frame 1 still held");
    send_frame(3);                       // goes to the freed bank
    check(frames_dropped == 16'd1, "no further drop");
    read_frame(1);
    check(full, "frame 3 held");
    read_frame(3);
    check(!full, "empty at end");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
