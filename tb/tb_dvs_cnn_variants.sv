// tb_dvs_cnn_variants: runs the network variants that differ only in how many
// shift terms each layer keeps per weight, at a small frame size (6 x 5
// points, 3 channels), all side by side on one clock.
//
// Variants: one term in every layer and eight terms in every layer (the two
// ends of the uniform sweep), a single term only in conv_1, and a single term
// only in the classifier (two of the single-layer substitutions). The final
// configuration (one term in conv_3 only) is covered by the full-size test.
// Each variant is checked score by score against an integer reference model
// and for its frame latency; the sums of checks and failures are reported.
// The variants are taken from the published sweep over the number of shift
// layers (1 to 8 per layer, and one layer at a time cut to a single shift
// layer); the small frame size and the choice of four are this test's own.
module tb_dvs_cnn_variants;
  localparam int NV = 4;
  logic clk = 0, rst_n = 0;
  logic finished [NV];
  int   vchecks [NV], vfail [NV];

  always #2 clk = ~clk;

  dvs_variant_bench #(.NS1(1), .NS2(1), .NS3(1), .NSF(1), .SEED(1)) u_all1 (
    .clk, .rst_n, .finished(finished[0]), .checks(vchecks[0]), .failures(vfail[0]));
  dvs_variant_bench #(.NS1(8), .NS2(8), .NS3(8), .NSF(8), .SEED(2)) u_all8 (
    .clk, .rst_n, .finished(finished[1]), .checks(vchecks[1]), .failures(vfail[1]));
  dvs_variant_bench #(.NS1(1), .NS2(2), .NS3(2), .NSF(2), .SEED(3)) u_l1 (
    .clk, .rst_n, .finished(finished[2]), .checks(vchecks[2]), .failures(vfail[2]));
  dvs_variant_bench #(.NS1(2), .NS2(2), .NS3(2), .NSF(1), .SEED(4)) u_fc1 (
    .clk, .rst_n, .finished(finished[3]), .checks(vchecks[3]), .failures(vfail[3]));

  int checks = 0, failures = 0;

  initial begin
    repeat (200_000) @(posedge clk);
    $display("watchdog: variants did not finish");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (4) @(negedge clk);
    rst_n = 1;
    wait (finished[0] && finished[1] && finished[2] && finished[3]);
    for (int v = 0; v < NV; v++) begin
      checks += vchecks[v];
      failures += vfail[v];
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
