// tb_channel_trigger: compares the channel trigger primitives, sample by
// sample, with a reference computed here from the full sample history.
//
// The stimulus is a pedestal-subtracted waveform of small noise, isolated
// single-photon-like pulses (dark counts), bursts of many pulses spread over
// a few microseconds (neutron-like) and rare large pulses (high energy). The
// reference marks a peak where a sample is above T, above its predecessor and
// not below its successor, counts peaks over the last WINDOW evaluations and
// compares count > N_peaks and sample > high-energy threshold with the
// block's outputs after every clock. Both outcomes of each primitive must
// occur.
module tb_channel_trigger;
  import solid_pkg::*;
  localparam int WINDOW = 256;
  localparam int NS = 20000;

  logic clk = 0, rst = 1, en = 1;
  psample_t s = '0;
  logic peak, neu, he;
  logic [$clog2(WINDOW+1)-1:0] npk;
  int checks = 0, failures = 0;
  logic [SAMPLE_W-1:0] peak_thr = 14'd16, he_thr = 14'd1600;
  logic [8:0] npeaks = 9'd17;

  channel_trigger #(.WINDOW(WINDOW)) dut (.clk, .rst, .en, .s, .peak_thr, .npeaks,
                                          .he_thr, .peak, .npk, .neu, .he);
  always #5 clk = ~clk;

  initial begin
    repeat (NS + 2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int x [NS];
  bit p [NS];
  int shape [8] = '{10, 25, 32, 24, 16, 8, 4, 2};

  initial begin
    int n_neu = 0, n_he = 0, n_quiet = 0, ref_cnt;
    // build the waveform
    for (int t = 0; t < NS; t++) x[t] = int'($urandom_range(6)) - 3;
    for (int t = 0; t < NS - 20; t++) begin
      int r;
      r = int'($urandom_range(999));
      if (r < 4) for (int k = 0; k < 8; k++) x[t+k] += shape[k];             // dark count
      if (t % 5000 == 3000)                                                 // neutron burst
        for (int q = 0; q < 40; q++) begin
          int u;
          u = t + int'($urandom_range(1500));
          if (u < NS - 10) for (int k = 0; k < 8; k++) x[u+k] += shape[k] * (1 + int'($urandom_range(2)));
        end
      if (r == 7 && $urandom_range(9) == 0) for (int k = 0; k < 8; k++) x[t+k] += shape[k] * 80; // muon
    end
    for (int t = 0; t < NS; t++) if (x[t] > 8000) x[t] = 8000;

    repeat (3) @(negedge clk);
    rst = 0;
    for (int t = 0; t < NS; t++) begin
      s = psample_t'(x[t]);
      // evaluation at this edge, with s1 = x[t-1], s2 = x[t-2]
      p[t] = (t >= 2) ? (x[t-1] > x[t-2] && x[t-1] >= x[t] && x[t-1] > int'(peak_thr))
                      : (t == 1 ? (x[0] > 0 && x[0] >= x[1] && x[0] > int'(peak_thr)) : 1'b0);
      @(negedge clk);
      ref_cnt = 0;
      for (int u = t; u > t - WINDOW && u >= 0; u--) ref_cnt += int'(p[u]);
      checks++;
      if (int'(npk) != ref_cnt || neu != (ref_cnt > int'(npeaks)) || he != (x[t] > int'(he_thr)) || peak != p[t]) begin
        failures++;
        if (failures < 10) $display("t=%0d npk=%0d ref=%0d neu=%b he=%b x=%0d", t, npk, ref_cnt, neu, he, x[t]);
      end
      if (neu) n_neu++; else n_quiet++;
      if (he) n_he++;
    end
    checks += 3;
    if (n_neu == 0)   begin failures++; $display("neutron condition never met"); end
    if (n_quiet == 0) begin failures++; $display("neutron condition always met"); end
    if (n_he == 0)    begin failures++; $display("high-energy condition never met"); end
    // a masked channel never fires
    en = 0;
    @(negedge clk);
    checks++;
    if (neu || he) begin
      @(negedge clk);
      if (neu || he) begin failures++; $display("masked channel fires"); end
    end
    $display("neutron samples %0d, high-energy samples %0d", n_neu, n_he);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
