// adc_deser: receives one ADC channel's serial data stream and rebuilds the
// 14-bit samples, with a programmable word alignment ("slip").
//
// The ADC sends each sample as W bits, most significant bit first, on a bit
// clock W times faster than the sample clock (the FPGA-side PLL provides
// both, phase locked; bit-clock cycle 0 of every frame coincides with the
// rising edge of the sample clock). A free-running bit counter marks the
// frame. The last W received bits are captured as a word when the counter
// equals `slip`, so raising `slip` by one moves the word boundary by one bit:
// this is the integer-bit alignment the paper tunes per channel. The finer
// "tap" alignment is an analogue delay element of the FPGA I/O and is not part
// of this logic.
//
// The captured word is moved to `word` half a frame later (counter = W/2), so
// `word` is stable around every sample-clock edge and can be sampled by the
// sample-clock domain directly. For the alignment scan the ADC can be told to
// send a fixed test pattern: every captured word is compared with
// `test_pattern`, and `n_words`/`n_match` count captures and agreements, whose
// ratio is the "rate of agreement" of the scan. `clear_stats` zeroes both.
// Latency: one to two frames, depending on `slip`.
//
// From the paper: bit slip per channel, comparison with a test pattern. Own
// choices: MSB-first order, capture and hand-over phases, 16-bit counters.
module adc_deser #(
  parameter int unsigned W = 14
) (
  input  logic                 clk_bit,
  input  logic                 rst,          // synchronous to clk_bit
  input  logic                 sdata,
  input  logic [3:0]           slip,         // 0 .. W-1
  input  logic [W-1:0]         test_pattern,
  input  logic                 clear_stats,
  output logic [W-1:0]         word,
  output logic [15:0]          n_words,
  output logic [15:0]          n_match
);
  logic [3:0]   cnt;
  logic [W-1:0] sr, cap;
  logic [W-1:0] frame;

  assign frame = {sr[W-2:0], sdata};   // the W most recent bits, oldest first

  always_ff @(posedge clk_bit) begin
    if (rst) begin
      cnt     <= '0;
      sr      <= '0;
      cap     <= '0;
      word    <= '0;
      n_words <= '0;
      n_match <= '0;
    end else begin
      cnt <= (cnt == 4'(W - 1)) ? '0 : cnt + 1'b1;
      sr  <= frame;
      if (cnt == slip) begin
        cap <= frame;
        if (!clear_stats) begin
          n_words <= n_words + 1'b1;
          if (frame == test_pattern) n_match <= n_match + 1'b1;
        end
      end
      if (cnt == 4'(W / 2)) word <= cap;
      if (clear_stats) begin
        n_words <= '0;
        n_match <= '0;
      end
    end
  end
endmodule
