// derandomiser: per-channel FIFO of the blocks chosen for readout, smoothing
// the bursty arrival of triggered blocks against the steady channel-by-channel
// draining into the data buffer.
//
// Words arrive from the channel readout (cro), marker first for each block.
// Besides storing them, the derandomiser counts how many complete blocks it
// holds (`nblocks`): `blk_in` from the cro adds one when a block has been
// written in full, `blk_out` from the data buffer's concatenator removes one
// when a block has been read. The concatenator only starts a channel's block
// when `has_block` is high, so it never waits in the middle of a block.
// `almost_full` (fewer than HWM free words) is part of the plane's back
// pressure.
//
// From the paper: per-channel derandomiser of 2048 samples whose overflow
// halts triggers (plane dead time). Own choices: the block counter and the
// high-water mark of two maximum-size blocks.
module derandomiser
  import solid_pkg::*;
#(
  parameter int unsigned DEPTH = 2048,
  parameter int unsigned HWM   = 2 * BLOCK_LEN,
  localparam int unsigned LW   = $clog2(DEPTH + 1)
) (
  input  logic          clk,
  input  logic          rst,
  input  logic          wr_en,
  input  word_t         wr_word,
  input  logic          blk_in,
  input  logic          rd_en,
  input  logic          blk_out,
  output word_t         head,
  output logic          empty,
  output logic [LW-1:0] level,
  output logic          has_block,
  output logic          almost_full
);
  logic [LW-1:0] nblocks;
  logic          full, drop;

  sync_fifo #(.W(32), .DEPTH(DEPTH)) u_fifo (
    .clk, .rst,
    .wr_en, .wr_data(wr_word),
    .rd_en, .rd_data(head),
    .empty, .full, .level, .wr_drop(drop)
  );

  assign has_block   = (nblocks != '0);
  assign almost_full = (level > LW'(DEPTH - HWM));

  always_ff @(posedge clk) begin
    if (rst) nblocks <= '0;
    else     nblocks <= nblocks + LW'(blk_in) - LW'(blk_out && has_block);
  end

  a_no_drop: assert property (@(posedge clk) disable iff (rst) !drop);
  a_no_underflow: assert property (@(posedge clk) disable iff (rst) blk_out |-> has_block);
endmodule
