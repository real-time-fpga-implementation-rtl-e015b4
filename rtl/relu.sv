// relu: rectified linear unit on a feature-map stream.
//
// One beat is {valid, addr, data, last}; the beat leaves one clock later with
// data replaced by max(0, data). The register stage is this design's choice.
module relu
  import dvs_pkg::*;
#(
  parameter int unsigned ADDR_W = 20
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  input  logic [ADDR_W-1:0] in_addr,
  input  act_t              in_data,
  input  logic              in_last,
  output logic              out_valid,
  output logic [ADDR_W-1:0] out_addr,
  output act_t              out_data,
  output logic              out_last
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_addr  <= '0;
      out_data  <= '0;
      out_last  <= 1'b0;
    end else begin
      out_valid <= in_valid;
      out_addr  <= in_addr;
      out_data  <= in_data[DATA_W-1] ? act_t'(0) : in_data;
      out_last  <= in_valid & in_last;
    end
  end
endmodule
