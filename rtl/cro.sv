// cro: channel readout. Takes each block of one channel out of the window
// buffer once it is old enough and either discards it or copies it to the
// channel's derandomiser, as the readout sequencer decided.
//
// A block leaves the window buffer when its marker is at the head and the
// block is at least `win_blocks` blocks older than the current block. By then
// every trigger whose readout window could cover the block has been seen, so
// the readout sequencer's keep bit for it (`keep`, one bit per block number
// modulo 256) is final. A kept block is copied word by word, marker first, one
// word per clock, until the next marker reaches the head; a discarded block is
// popped at the same rate. If the derandomiser cannot take a whole block
// (BLK_MAX words) the channel is excluded from this block: only its marker is
// written, with the `dead` bit set, and `dead_evt` pulses (channel dead time).
// If the derandomiser is completely full the copy waits. `blk_done` pulses
// after each block written to the derandomiser, complete or dead. Sample words
// found at the head with no marker before them (from before the first marker
// after reset) are dropped.
//
// From the paper: blocks are discarded or transferred to a per-channel
// derandomiser depending on the readout sequencer; channels can be excluded
// when a buffer overflows. Own choices: age test against `win_blocks`, the
// whole-block room test, one word per clock.
module cro
  import solid_pkg::*;
#(
  parameter int unsigned DR_DEPTH = 2048,
  parameter int unsigned BLK_MAX  = BLOCK_LEN,
  localparam int unsigned DLW     = $clog2(DR_DEPTH + 1)
) (
  input  logic              clk,
  input  logic              rst,
  input  logic [RING_W-1:0] blk_now,
  input  logic [6:0]        win_blocks,
  input  logic [RING-1:0]   keep,
  // window buffer head
  input  word_t             wb_head,
  input  logic              wb_empty,
  output logic              wb_pop,
  // derandomiser write side
  input  logic [DLW-1:0]    dr_level,
  output logic              dr_wr,
  output word_t             dr_word,
  output logic              blk_done,
  output logic              dead_evt
);
  typedef enum logic [1:0] {S_IDLE, S_COPY, S_SKIP} state_e;
  state_e state;

  mark_t             hm;
  logic              head_mark, old_enough, room_blk, room_one;
  logic [RING_W-1:0] age;

  assign hm         = mark_t'(wb_head);
  assign head_mark  = !wb_empty && (wb_head[31:30] == K_MARK);
  assign age        = blk_now - hm.blk[RING_W-1:0];
  assign old_enough = (age >= RING_W'(win_blocks));
  assign room_blk   = (dr_level <= DLW'(DR_DEPTH - BLK_MAX));
  assign room_one   = (dr_level < DLW'(DR_DEPTH));

  // marker of a kept block that does not fit: channel dead for this block
  mark_t dm;
  always_comb begin
    dm      = hm;
    dm.dead = 1'b1;
    dm.v0   = 1'b0;
  end

  always_comb begin
    wb_pop   = 1'b0;
    dr_wr    = 1'b0;
    dr_word  = wb_head;
    blk_done = 1'b0;
    dead_evt = 1'b0;
    unique case (state)
      S_IDLE: begin
        if (!wb_empty && !head_mark) begin
          wb_pop = 1'b1;                           // orphan sample
        end else if (head_mark && old_enough) begin
          if (!keep[hm.blk[RING_W-1:0]]) begin
            wb_pop = 1'b1;
          end else if (room_blk) begin
            wb_pop = 1'b1;
            dr_wr  = 1'b1;
          end else if (room_one) begin
            dr_word  = word_t'(dm);
            wb_pop   = 1'b1;
            dr_wr    = 1'b1;
            dead_evt = 1'b1;
            blk_done = 1'b1;
          end
        end
      end
      S_COPY: begin
        if (!wb_empty && !head_mark) begin
          wb_pop = 1'b1;
          dr_wr  = 1'b1;
        end else if (head_mark) begin
          blk_done = 1'b1;
        end
      end
      S_SKIP: begin
        if (!wb_empty && !head_mark) wb_pop = 1'b1;
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      state <= S_IDLE;
    end else begin
      unique case (state)
        S_IDLE: if (head_mark && old_enough)
                  state <= (keep[hm.blk[RING_W-1:0]] && room_blk) ? S_COPY :
                           (keep[hm.blk[RING_W-1:0]] && !room_one) ? S_IDLE : S_SKIP;
        S_COPY: if (head_mark) state <= S_IDLE;
        S_SKIP: if (head_mark) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
