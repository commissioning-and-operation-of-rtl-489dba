// zero_suppress: removes the samples of one channel that lie near the
// pedestal and encodes what is kept for the window buffer.
//
// Most samples carry no SiPM signal; only those strictly above the current
// threshold are passed on. Because the kept samples are no longer contiguous,
// each is written as a sample word holding its index inside the 256-sample
// block, and every block opens with a block marker holding the block number
// (whatever the threshold, so that empty blocks are still delimited). The
// marker also carries the block's first sample and a flag telling whether
// that sample passed, so a block never needs more words than it has samples,
// even with suppression switched off.
//
// The threshold is chosen per sample by the trigger sequencer: `thr` (the
// default or the lowered value) or no suppression at all (`zs_off`). Timing:
// one word per clock at most, one clock after the sample. `en` gates the whole
// stage until the latency buffer is filled.
//
// From the paper: zero suppression with a default threshold that the trigger
// sequencer may lower or disable around triggers; gaps are encoded in the
// stream. Own choices: the word formats (solid_pkg) and the "strictly above"
// comparison.
module zero_suppress
  import solid_pkg::*;
(
  input  logic                clk,
  input  logic                rst,
  input  logic                en,
  input  psample_t            s,
  input  logic [IDX_W-1:0]    idx,
  input  logic [11:0]         blk,
  input  logic                zs_off,
  input  logic [SAMPLE_W-1:0] thr,
  output logic                out_valid,
  output word_t               out_word
);
  logic  pass;
  mark_t m;
  samp_t w;

  assign pass = zs_off || (s > $signed({1'b0, thr}));

  always_comb begin
    m      = '0;
    m.kind = K_MARK;
    m.v0   = pass;
    m.val0 = s;
    m.blk  = blk;
    w      = '0;
    w.kind = K_SAMPLE;
    w.idx  = idx;
    w.val  = s;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      out_valid <= 1'b0;
      out_word  <= '0;
    end else begin
      out_valid <= en && ((idx == '0) || pass);
      out_word  <= (idx == '0) ? word_t'(m) : word_t'(w);
    end
  end
endmodule
