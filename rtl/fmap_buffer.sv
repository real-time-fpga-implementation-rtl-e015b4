// fmap_buffer: whole-frame feature-map buffer between two layers.
//
// The producing layer writes every value of one frame (one feature map of
// DEPTH words, addressed (c*H + y)*W + x) and marks the frame complete with
// wr_last; `full` then rises. The consuming layer reads it in any order it
// needs through two synchronous read ports (data one clock after rd_en) and
// pulses `rel` when done, which empties the buffer for the next frame. This is
// the "cache all outcomes of the preceding layer, then inject them" buffering
// the paper describes; the handshake, the single bank and the second read
// port (used by the residual path) are this design's choices.
// Handshake: a producer may start only while `free` is high and pulses
// `claim` when it starts; the buffer is then owned until wr_last marks the
// frame complete (full), and free again after `rel`. Claiming at the start
// keeps a second producer run out even while the last values of a frame are
// still in the pipeline between producer and buffer.
module fmap_buffer
  import dvs_pkg::*;
#(
  parameter int unsigned DEPTH  = CH * IN_H * IN_W,
  parameter int unsigned ADDR_W = $clog2(DEPTH)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              wr_en,
  input  logic [ADDR_W-1:0] wr_addr,
  input  act_t              wr_data,
  input  logic              wr_last,
  input  logic              claim,
  input  logic              rel,
  output logic              full,
  output logic              free,
  input  logic              rd_en   [2],
  input  logic [ADDR_W-1:0] rd_addr [2],
  output act_t              rd_data [2]
);
  act_t mem [DEPTH];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
    for (int i = 0; i < 2; i++)
      if (rd_en[i]) rd_data[i] <= mem[rd_addr[i]];
  end

  logic filling;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      full    <= 1'b0;
      filling <= 1'b0;
    end else if (wr_en && wr_last) begin
      full    <= 1'b1;
      filling <= 1'b0;
    end else begin
      if (claim) filling <= 1'b1;
      if (rel)   full    <= 1'b0;
    end
  end
  assign free = !full && !filling;

  // A frame must not be overwritten while it is held.
  a_no_write_when_full: assert property (@(posedge clk) disable iff (!rst_n) !(wr_en && full));
  a_claim_when_free:    assert property (@(posedge clk) disable iff (!rst_n) claim |-> free);
endmodule
