// tb_add_layer: checks the element-wise sum of two random operand vectors.
module tb_add_layer;
  import dvs_pkg::*;
  localparam int L = 9;
  acc_t a [L], b [L], y [L];
  int checks = 0, failures = 0;

  add_layer #(.LANES(L)) dut (.a, .b, .y);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int it = 0; it < 300; it++) begin
      for (int i = 0; i < L; i++) begin
        a[i] = acc_t'({$urandom, $urandom}) >>> ($urandom % 40);
        b[i] = acc_t'({$urandom, $urandom}) >>> ($urandom % 40);
      end
      #1;
      for (int i = 0; i < L; i++) begin
        checks++;
        if (y[i] != a[i] + b[i]) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
