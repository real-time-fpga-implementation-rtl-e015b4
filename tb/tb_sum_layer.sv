// tb_sum_layer: checks the signed window sum against a sum of +-1 products.
module tb_sum_layer;
  import dvs_pkg::*;
  localparam int L = 9;
  acc_t v [L];
  logic s [L];
  acc_t sum;
  int checks = 0, failures = 0;

  sum_layer #(.LANES(L)) dut (.v, .s, .sum);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint e;
    for (int it = 0; it < 500; it++) begin
      e = 0;
      for (int i = 0; i < L; i++) begin
        v[i] = acc_t'(longint'($signed($urandom)) * ($urandom % 1000));
        s[i] = $urandom % 2;
        e += (s[i] ? -1 : 1) * longint'(v[i]);
      end
      #1;
      checks++;
      if (longint'(sum) != e) begin
        failures++;
        if (failures < 5) $display("mismatch sum=%0d exp=%0d", sum, e);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
