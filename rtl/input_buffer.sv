// input_buffer: collects averaged points into H x W network input frames.
//
// Points arrive trace by trace (W points per trace, H traces per frame) and
// are written to one of two banks at address y*W + x. When a bank holds a whole
// frame it becomes full and is offered to the first convolution in arrival
// order; the writer moves on to the other bank, so sensing data is taken in
// without pause while the previous frame is processed. If at the start of a
// frame no bank is free, the whole frame is dropped and counted in
// frames_dropped. Frame size (256 x 11) follows the paper; the two banks and
// the drop policy are this design's choices. Reads are synchronous (one
// clock) from the oldest full bank; `rel` frees it.
module input_buffer
  import dvs_pkg::*;
#(
  parameter int unsigned H = IN_H,
  parameter int unsigned W = IN_W,
  parameter int unsigned ADDR_W = $clog2(H * W)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  input  act_t              in_data,
  output logic              full,
  input  logic              rel,
  input  logic              rd_en,
  input  logic [ADDR_W-1:0] rd_addr,
  output act_t              rd_data,
  output logic [15:0]       frames_dropped
);
  localparam int unsigned N = H * W;

  act_t mem [2][N];
  logic [1:0] bank_full;
  logic       wbank, rbank;
  logic [ADDR_W-1:0] waddr;
  logic       dropping;

  logic frame_start;
  assign frame_start = in_valid && (waddr == '0);
  // bank the current frame goes to; at frame start pick a free bank
  logic       sel_bank;
  logic       sel_ok;
  always_comb begin
    sel_bank = wbank;
    sel_ok   = !dropping;
    if (frame_start) begin
      if (!bank_full[wbank])      begin sel_bank = wbank;  sel_ok = 1'b1; end
      else if (!bank_full[~wbank]) begin sel_bank = ~wbank; sel_ok = 1'b1; end
      else                        sel_ok = 1'b0;
    end
  end

  always_ff @(posedge clk) begin
    if (in_valid && sel_ok) mem[sel_bank][waddr] <= in_data;
    if (rd_en) rd_data <= mem[rbank][rd_addr];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      bank_full <= '0; wbank <= 1'b0; rbank <= 1'b0; waddr <= '0;
      dropping <= 1'b0; frames_dropped <= '0;
    end else begin
      if (rel) begin
        bank_full[rbank] <= 1'b0;
        rbank <= ~rbank;
      end
      if (in_valid) begin
        if (frame_start) begin
          wbank    <= sel_bank;
          dropping <= !sel_ok;
          if (!sel_ok) frames_dropped <= frames_dropped + 1'b1;
        end
        if (waddr == ADDR_W'(N - 1)) begin
          waddr <= '0;
          if (sel_ok) begin
            bank_full[sel_bank] <= 1'b1;
            wbank <= ~sel_bank;
          end
        end else begin
          waddr <= waddr + 1'b1;
        end
      end
    end
  end

  assign full = bank_full[rbank];
endmodule
