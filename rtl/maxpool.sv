// maxpool: 2 x 2, stride 2 max pooling of a whole buffered feature map.
//
// For every channel c and output position (oy, ox) the four inputs
// (2oy..2oy+1, 2ox..2ox+1) are read one per cycle from the source buffer
// (synchronous read), the maximum is kept, and the result is streamed out at
// address (c*OH + oy)*OW + ox with OH = H/2, OW = W/2 (odd rows or columns at
// the end are dropped). Output order is channel-major. Five cycles per output;
// handshake as in conv_shift_add (start pulse on src_ready && dst_free, done
// pulse at the end, out_last on the final value). The paper names the MaxPool layer and
// its buffer; the 2 x 2 window, stride 2 and the schedule are this design's
// choices.
module maxpool
  import dvs_pkg::*;
#(
  parameter int unsigned C   = CH,
  parameter int unsigned H   = IN_H,
  parameter int unsigned W   = IN_W,
  parameter int unsigned OH  = H / 2,
  parameter int unsigned OW  = W / 2,
  parameter int unsigned SAW = $clog2(C * H * W),
  parameter int unsigned DAW = $clog2(C * OH * OW)
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           src_ready,
  input  logic           dst_free,
  output logic           rd_en,
  output logic [SAW-1:0] rd_addr,
  input  act_t           rd_data,
  output logic           out_valid,
  output logic [DAW-1:0] out_addr,
  output act_t           out_data,
  output logic           out_last,
  output logic           start,
  output logic           done
);
  typedef enum logic [1:0] {S_IDLE, S_RUN, S_DONE} state_t;
  state_t state;

  // start: combinational pulse in the cycle the layer leaves idle
  assign start = (state == S_IDLE) && src_ready && dst_free;
  // done: high for the one cycle in S_DONE, so a source released with it is
  // already empty when the layer is back in S_IDLE
  assign done = (state == S_DONE);

  logic [$clog2(C+1)-1:0]  c;
  logic [$clog2(OH+1)-1:0] oy;
  logic [$clog2(OW+1)-1:0] ox;
  logic [2:0]              k;      // 0..3 issue reads, 1..4 receive data
  act_t                    best;

  logic last_out;
  assign last_out = (int'(c) == C - 1) && (int'(oy) == OH - 1) && (int'(ox) == OW - 1);

  always_comb begin
    rd_en   = (state == S_RUN) && (k < 3'd4);
    rd_addr = SAW'((int'(c) * H + 2 * int'(oy) + int'(k[1])) * W + 2 * int'(ox) + int'(k[0]));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; c <= '0; oy <= '0; ox <= '0; k <= '0; best <= '0;
      out_valid <= 1'b0; out_addr <= '0; out_data <= '0; out_last <= 1'b0;
    end else begin
      out_valid <= 1'b0;
      out_last  <= 1'b0;
      unique case (state)
        S_IDLE: if (src_ready && dst_free) begin
          state <= S_RUN; c <= '0; oy <= '0; ox <= '0; k <= '0;
        end
        S_RUN: begin
          if (k == 3'd1 || rd_data > best) best <= rd_data;
          if (k == 3'd4) begin
            out_valid <= 1'b1;
            out_addr  <= DAW'((int'(c) * OH + int'(oy)) * OW + int'(ox));
            out_data  <= (rd_data > best) ? rd_data : best;
            out_last  <= last_out;
            k <= '0;
            if (last_out) state <= S_DONE;
            else if (int'(ox) == OW - 1) begin
              ox <= '0;
              if (int'(oy) == OH - 1) begin oy <= '0; c <= c + 1'b1; end
              else oy <= oy + 1'b1;
            end else ox <= ox + 1'b1;
          end else k <= k + 1'b1;
        end
        S_DONE: state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
