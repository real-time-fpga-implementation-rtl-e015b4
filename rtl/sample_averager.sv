// sample_averager: averages every NAVG consecutive sensing samples.
//
// The 14-bit ADC samples of one trace arrive one per valid cycle; in_first
// marks the first sample after a probe pulse and restarts the group. Every
// NAVG samples the sum is divided by NAVG (truncating shift, NAVG a power of
// two) and emitted as a 16-bit signed point one clock after the last sample.
// With 80 MSa/s and NAVG = 4 one point covers 5 m of fiber, as in the paper.
// Treating the ADC codes as unsigned is this design's choice.
module sample_averager
  import dvs_pkg::*;
#(
  parameter int unsigned NAVG_P = NAVG
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  logic             in_first,
  input  logic [ADC_W-1:0] in_data,
  output logic             out_valid,
  output act_t             out_data
);
  localparam int unsigned SH = $clog2(NAVG_P);
  localparam int unsigned SW = ADC_W + SH;

  logic [SW-1:0] acc;
  logic [$clog2(NAVG_P+1)-1:0] cnt;

  logic [SW-1:0] acc_n;
  logic [$clog2(NAVG_P+1)-1:0] cnt_n;
  always_comb begin
    acc_n = (in_first ? '0 : acc) + SW'(in_data);
    cnt_n = (in_first ? '0 : cnt) + 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc <= '0; cnt <= '0; out_valid <= 1'b0; out_data <= '0;
    end else begin
      out_valid <= 1'b0;
      if (in_valid) begin
        if (cnt_n == NAVG_P) begin
          out_valid <= 1'b1;
          out_data  <= act_t'(acc_n >> SH);
          acc <= '0; cnt <= '0;
        end else begin
          acc <= acc_n; cnt <= cnt_n;
        end
      end
    end
  end

  initial assert (NAVG_P == (1 << SH)) else $error("NAVG_P must be a power of two");
endmodule
