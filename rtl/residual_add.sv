// residual_add: adds the block input back onto the last convolution's output.
//
// Each incoming beat (addr, data) of the conv_3 stream triggers a read of the
// same address of the buffer that holds the residual block's input; one clock
// later the saturating 16-bit sum leaves with the same address and last flag.
// This is the paper's skip connection from the MaxPool output to the Add
// layer; the saturation and the absence of an activation after the add are
// this design's reading of the figures.
module residual_add
  import dvs_pkg::*;
#(
  parameter int unsigned AW = $clog2(CH * (IN_H / 2) * (IN_W / 2))
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  input  logic [AW-1:0] in_addr,
  input  act_t          in_data,
  input  logic          in_last,
  output logic          rd_en,
  output logic [AW-1:0] rd_addr,
  input  act_t          rd_data,
  output logic          out_valid,
  output logic [AW-1:0] out_addr,
  output act_t          out_data,
  output logic          out_last
);
  logic          v_q, l_q;
  logic [AW-1:0] a_q;
  act_t          d_q;

  assign rd_en   = in_valid;
  assign rd_addr = in_addr;
  assign out_valid = v_q;
  assign out_addr  = a_q;
  assign out_last  = l_q;
  assign out_data  = sat_add(d_q, rd_data);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v_q <= 1'b0; l_q <= 1'b0; a_q <= '0; d_q <= '0;
    end else begin
      v_q <= in_valid;
      l_q <= in_valid & in_last;
      a_q <= in_addr;
      d_q <= in_data;
    end
  end
endmodule
