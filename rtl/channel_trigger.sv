// channel_trigger: per-channel trigger primitives, computed on every sample.
//
// Neutron (ZnS) signals are trains of small, sporadic pulses spread over
// several microseconds, while gamma and dark-count signals are single pulses.
// The neutron primitive therefore counts waveform peaks in a rolling window:
// a sample is a peak when it is a local maximum (greater than the sample
// before it, not smaller than the sample after it) and exceeds the peak
// threshold T. A WINDOW-bit shift register remembers where the peaks were, so
// the count is updated each sample by adding the newest peak and removing the
// one that falls out of the window. `neu` is high while the count exceeds
// N_peaks. The high-energy primitive `he` is high for each sample above the
// amplitude threshold.
//
// Input: one pedestal-subtracted sample per clock. Timing: `he` follows the
// sample by one clock; a peak is recognised one sample after it (when the
// following sample is seen) and `npk`/`neu` update one clock later.
//
// From the paper: peak = local maximum above T, counted in a rolling window
// of W = 256 samples, trigger on count > N_peaks; amplitude threshold trigger.
// Own choices: the exact local-maximum rule (strict rise, non-strict fall),
// the registered outputs, and `en` to mask a channel.
module channel_trigger
  import solid_pkg::*;
#(
  parameter int unsigned WINDOW = 256,
  localparam int unsigned CW    = $clog2(WINDOW + 1)
) (
  input  logic                clk,
  input  logic                rst,
  input  logic                en,        // channel not masked
  input  psample_t            s,
  input  logic [SAMPLE_W-1:0] peak_thr,
  input  logic [8:0]          npeaks,
  input  logic [SAMPLE_W-1:0] he_thr,
  output logic                peak,      // peak found (for monitoring)
  output logic [CW-1:0]       npk,       // peaks in the window
  output logic                neu,
  output logic                he
);
  psample_t          s1, s2;
  logic [WINDOW-1:0] hist;
  logic              is_peak;

  assign is_peak = (s1 > s2) && (s1 >= s) && (s1 > $signed({1'b0, peak_thr}));
  assign neu     = en && (npk > CW'(npeaks));

  always_ff @(posedge clk) begin
    if (rst) begin
      s1   <= '0;
      s2   <= '0;
      hist <= '0;
      npk  <= '0;
      peak <= 1'b0;
      he   <= 1'b0;
    end else begin
      s1   <= s;
      s2   <= s1;
      peak <= is_peak;
      hist <= {hist[WINDOW-2:0], is_peak};
      npk  <= npk + CW'(is_peak) - CW'(hist[WINDOW-1]);
      he   <= en && (s > $signed({1'b0, he_thr}));
    end
  end
endmodule
