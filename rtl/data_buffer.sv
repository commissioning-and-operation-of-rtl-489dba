// data_buffer: gathers, for each block read out, the data of all channels of
// the plane into one stream and stores it until the DAQ reads it.
//
// The concatenator visits the derandomisers in channel order. For each
// channel it waits until that derandomiser holds a complete block, turns the
// block marker into a channel header word (channel number, block number,
// dead and overflow flags), writes the block's first sample as a sample word
// when it passed zero suppression, then copies the channel's sample words up
// to the next marker, one word per clock. After the last channel it starts
// again at channel 0 with the next block. Every channel takes part in every
// read-out block, so the streams of all derandomisers stay in step. Writing
// waits while the FIFO is full. The FIFO (DEPTH 32-bit words) is read one word
// per `rd_en`; `almost_full` (fewer than HWM free) is part of the plane's back
// pressure.
//
// Output stream per read-out block: for channel 0 .. NCH-1, one K_CHAN header
// followed by that channel's K_SAMPLE words.
//
// From the paper: for each block, the data of all channels are concatenated
// and stored in a data buffer read over IPbus; an overflow halts triggers.
// Own choices: the word formats, channel order, FIFO size and high-water mark
// (the paper gives neither).
module data_buffer
  import solid_pkg::*;
#(
  parameter int unsigned NCH   = 64,
  parameter int unsigned DEPTH = 16384,
  parameter int unsigned HWM   = 4096,
  localparam int unsigned CHW  = (NCH > 1) ? $clog2(NCH) : 1,
  localparam int unsigned LW   = $clog2(DEPTH + 1)
) (
  input  logic            clk,
  input  logic            rst,
  // derandomiser heads
  input  word_t           dr_head [NCH],
  input  logic [NCH-1:0]  dr_empty,
  input  logic [NCH-1:0]  dr_has_block,
  output logic [NCH-1:0]  dr_pop,
  output logic [NCH-1:0]  dr_blk_pop,
  // readout port
  input  logic            rd_en,
  output word_t           rd_data,
  output logic            rd_valid,
  output logic [LW-1:0]   level,
  output logic            almost_full,
  output logic            blk_done       // one read-out block of all channels written
);
  typedef enum logic [1:0] {S_WAIT, S_S0, S_COPY} state_e;
  state_e state;

  logic [CHW-1:0] ch;
  word_t          hw;
  mark_t          hm, mk;
  logic           f_full, f_empty, f_wr, f_drop, last_ch;
  word_t          f_wdata;
  chan_hdr_t      chdr;
  samp_t          s0;

  assign hw      = dr_head[ch];
  assign hm      = mark_t'(hw);
  assign last_ch = (ch == CHW'(NCH - 1));

  always_comb begin
    chdr      = '0;
    chdr.kind = K_CHAN;
    chdr.dead = hm.dead;
    chdr.ovf  = hm.ovf;
    chdr.chan = 12'(ch);
    chdr.blk  = 16'(hm.blk);
    s0        = '0;
    s0.kind   = K_SAMPLE;
    s0.idx    = '0;
    s0.val    = mk.val0;
  end

  always_comb begin
    dr_pop     = '0;
    dr_blk_pop = '0;
    f_wr       = 1'b0;
    f_wdata    = hw;
    blk_done   = 1'b0;
    unique case (state)
      S_WAIT: if (dr_has_block[ch] && !f_full) begin
        f_wr       = 1'b1;
        f_wdata    = word_t'(chdr);
        dr_pop[ch] = 1'b1;
      end
      S_S0: if (!f_full) begin
        f_wr    = 1'b1;
        f_wdata = word_t'(s0);
      end
      S_COPY: begin
        if (dr_empty[ch] || hw[31:30] == K_MARK) begin
          dr_blk_pop[ch] = 1'b1;
          blk_done       = last_ch;
        end else if (!f_full) begin
          f_wr       = 1'b1;
          dr_pop[ch] = 1'b1;
        end
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      state <= S_WAIT;
      ch    <= '0;
      mk    <= '0;
    end else begin
      unique case (state)
        S_WAIT: if (dr_has_block[ch] && !f_full) begin
          mk    <= hm;
          state <= (hm.v0 && !hm.dead) ? S_S0 : S_COPY;
        end
        S_S0:   if (!f_full) state <= S_COPY;
        S_COPY: if (dr_empty[ch] || hw[31:30] == K_MARK) begin
          state <= S_WAIT;
          ch    <= last_ch ? '0 : ch + 1'b1;
        end
        default: state <= S_WAIT;
      endcase
    end
  end

  sync_fifo #(.W(32), .DEPTH(DEPTH)) u_fifo (
    .clk, .rst,
    .wr_en(f_wr), .wr_data(f_wdata),
    .rd_en, .rd_data,
    .empty(f_empty), .full(f_full), .level, .wr_drop(f_drop)
  );

  assign rd_valid    = !f_empty;
  assign almost_full = (level > LW'(DEPTH - HWM));

  a_no_drop: assert property (@(posedge clk) disable iff (rst) !f_drop);
endmodule
