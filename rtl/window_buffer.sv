// window_buffer: the zero-suppressed history of one channel, in which each
// block waits until the plane knows whether any trigger wants it read out.
//
// Words from zero suppression (block markers and sample words) enter a FIFO of
// DEPTH words; the channel readout (cro) removes them from the head. The time
// the buffer covers depends on how strongly the data are compressed.
// Overflow is handled per block: when a block's marker arrives, the block is
// admitted only if a whole block (BLK_WORDS words) still fits above a reserve
// of RESERVE places kept for markers. Otherwise only its marker is stored,
// with the `ovf` bit set, and the block's sample words are dropped (`ovf_evt`
// pulses for each). A reader thus sees every block boundary, and each block is
// either complete or flagged as emptied. RESERVE must exceed the number of
// blocks the buffer can hold at once.
//
// From the paper: a ZS window buffer of 1536 samples after zero suppression,
// read towards the derandomiser; the buffer is limited in practice to avoid
// overflow. Own choices: block-level admission and the overflow flag.
module window_buffer
  import solid_pkg::*;
#(
  parameter int unsigned DEPTH   = 1536,
  parameter int unsigned RESERVE = 128,
  parameter int unsigned BLK_WORDS = BLOCK_LEN,  // most words one block can hold
  localparam int unsigned LW     = $clog2(DEPTH + 1)
) (
  input  logic          clk,
  input  logic          rst,
  input  logic          in_valid,
  input  word_t         in_word,
  input  logic          rd_en,
  output word_t         head,
  output logic          empty,
  output logic [LW-1:0] level,
  output logic          ovf_evt
);
  logic  is_mark, accept, admit, drop_blk, full, drop;
  word_t wdata;
  mark_t m;

  assign is_mark = (in_word[31:30] == K_MARK);
  assign admit   = (level <= LW'(DEPTH - RESERVE - BLK_WORDS));
  assign accept  = in_valid && (is_mark ? !full : !drop_blk);
  assign ovf_evt = in_valid && !accept;

  always_comb begin
    m     = mark_t'(in_word);
    m.ovf = !admit;
    m.v0  = m.v0 && admit;
    wdata = is_mark ? word_t'(m) : in_word;
  end

  sync_fifo #(.W(32), .DEPTH(DEPTH)) u_fifo (
    .clk, .rst,
    .wr_en(accept), .wr_data(wdata),
    .rd_en, .rd_data(head),
    .empty, .full, .level, .wr_drop(drop)
  );

  // samples of a block that was not admitted are dropped
  always_ff @(posedge clk) begin
    if (rst)                      drop_blk <= 1'b1;
    else if (in_valid && is_mark) drop_blk <= !admit;
  end

  initial assert (DEPTH > RESERVE + BLK_WORDS) else $error("window_buffer: DEPTH too small");

  // The fifo never sees a write it must refuse.
  a_no_drop: assert property (@(posedge clk) disable iff (rst) !drop);
endmodule
