// tb_shift_layer: checks x * 2^p for random activations over the whole shift
// range (-31..31) and the "no term" code against multiply/floor-divide.
module tb_shift_layer;
  import dvs_pkg::*;
  import dvs_ref_pkg::*;
  localparam int L = 9;
  act_t x [L];
  shift_t p [L];
  acc_t y [L];
  int checks = 0, failures = 0;

  shift_layer #(.LANES(L)) dut (.x, .p, .y);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int it = 0; it < 400; it++) begin
      for (int i = 0; i < L; i++) begin
        x[i] = act_t'($urandom);
        p[i] = shift_t'(($urandom % 64) - 32);
      end
      if (it == 0) begin x[0] = 16'sh0001; p[0] = 0; x[1] = -16'sd3; p[1] = -1; x[2] = 16'sd5; p[2] = 2; end
      #1;
      for (int i = 0; i < L; i++) begin
        checks++;
        if (longint'(y[i]) != ref_term(int'(x[i]), int'(p[i]))) begin
          failures++;
          if (failures < 10) $display("mismatch x=%0d p=%0d y=%0d exp=%0d", x[i], p[i], y[i], ref_term(int'(x[i]), int'(p[i])));
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
