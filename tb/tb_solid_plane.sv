// tb_solid_plane: end-to-end run of three planes connected by the daisy
// chain, each fed with serial ADC streams.
//
// Waveforms (pedestal, +-2 counts of noise, single-photon dark counts, a few
// two-photon pulses) are generated in advance for every plane and channel,
// with neutron-like bursts (dense trains of 1-3 PA pulses) on plane 1 at
// blocks 20, 44 and 47 (overlapping windows), a muon-like pulse in one X and
// one Y channel of plane 2 at block 38 (high-energy trigger), and an X-only
// large pulse on plane 0 at block 36 (no coincidence, no trigger). The random
// trigger fires every 25 blocks and reads all planes without suppression. On
// plane 0 the DAQ stops reading the data buffer for blocks 60-95 while the
// random trigger runs every 2 blocks there, which forces back pressure, plane
// dead time and excluded channels. Shortened readout windows keep the run
// short (neutron -3/+2 blocks, window-buffer age 6 blocks).
//
// Checks after draining: every readout record of every plane is a block that
// some trigger record (own, or of a plane within reach) asks for and vice
// versa; the data stream holds, for every record, one header per channel in
// order with the right block number; every kept sample equals the generated
// waveform minus pedestal at one fixed sample latency; every sample above
// the default threshold is present in non-dead channels; blocks read for a
// local random trigger are complete (256 samples); high-energy and neutron
// records appear where the pulses were injected only. Each mechanism (the
// three trigger types, remote triggers, lowered and disabled ZS, merged
// windows, plane and channel dead time) must have happened at least once.
module tb_solid_plane;
  import solid_pkg::*;
  localparam int NP = 3, NCH = 8, NB = 150, NS = (NB + 8) * 256;
  localparam int DB_DEPTH = 4096;

  logic clk = 0, clk_bit = 0, rst = 1, rst_bit = 1;
  logic [NCH-1:0] sdata [NP];
  logic [3:0] slip [NP][NCH];
  logic [15:0] align_words [NP][NCH], align_match [NP][NCH];
  cfg_t cfg [NP];
  logic [SAMPLE_W-1:0] ped [NP][NCH];
  rmsg_t rx_up [NP], rx_dn [NP], tx_up [NP], tx_dn [NP];
  logic db_rd [NP], db_valid [NP], hb_rd [NP], hb_valid [NP], busy [NP];
  word_t db_data [NP];
  header_t hb_data [NP];
  logic [$clog2(DB_DEPTH+1)-1:0] db_level [NP];
  logic [BLK_W-1:0] blk_count [NP];
  logic [31:0] n_trig [NP][NTYPES];
  logic [31:0] n_readout [NP], plane_dead_blocks [NP], chan_dead_blocks [NP], busy_cycles [NP], wb_ovf [NP];
  logic [15:0] n_remote_sent [NP], hdr_lost [NP];
  int checks = 0, failures = 0;

  for (genvar p = 0; p < NP; p++) begin : g_p
    assign rx_up[p] = (p == NP - 1) ? '0 : tx_dn[p + 1];
    assign rx_dn[p] = (p == 0) ? '0 : tx_up[p - 1];
    solid_plane #(.NCH(NCH), .DB_DEPTH(DB_DEPTH), .HB_DEPTH(256)) u_plane (
      .clk, .rst, .clk_bit, .rst_bit, .sdata(sdata[p]), .slip(slip[p]),
      .test_pattern(14'h1CB5), .clear_stats(1'b0),
      .align_words(align_words[p]), .align_match(align_match[p]),
      .cfg(cfg[p]), .ped(ped[p]), .ch_mask({NCH{1'b1}}),
      .rx_up(rx_up[p]), .rx_dn(rx_dn[p]), .tx_up(tx_up[p]), .tx_dn(tx_dn[p]),
      .db_rd(db_rd[p]), .db_data(db_data[p]), .db_valid(db_valid[p]), .db_level(db_level[p]),
      .hb_rd(hb_rd[p]), .hb_data(hb_data[p]), .hb_valid(hb_valid[p]),
      .blk_count(blk_count[p]), .busy(busy[p]), .n_trig(n_trig[p]), .n_readout(n_readout[p]),
      .plane_dead_blocks(plane_dead_blocks[p]), .chan_dead_blocks(chan_dead_blocks[p]),
      .busy_cycles(busy_cycles[p]), .wb_ovf_words(wb_ovf[p]),
      .n_remote_sent(n_remote_sent[p]), .hdr_lost(hdr_lost[p])
    );
  end

  // ------------------------------------------------------------ clocks
  int unsigned gb = 0;   // bit clocks since rst_bit release
  int unsigned ph = 0;    // bit clock phase within a sample clock
  initial forever begin
    #1 clk_bit = 1;
    if (ph == 0) clk = 1;
    if (ph == 7) clk = 0;
    ph = (ph == 13) ? 0 : ph + 1;
    #1 clk_bit = 0;
  end

  initial begin
    #4000000;
    failures++;
    $display("watchdog at block %0d, gb %0d", blk_count[0], gb);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ------------------------------------------------------------ waveforms
  int wf [NP][NCH][NS];
  int shape [8] = '{10, 25, 32, 24, 16, 8, 4, 2};
  localparam int SKEW [NCH] = '{1, 2, 3, 1, 2, 3, 1, 2};

  task automatic add_pulse(int p, int c, int t, int scale);
    for (int k = 0; k < 8; k++) if (t + k < NS) wf[p][c][t+k] += shape[k] * scale;
  endtask

  task automatic burst(int p, int c, int b);
    for (int q = 0; q < 60; q++) add_pulse(p, c, b * 256 + 20 + q * 8 + int'($urandom_range(3)), 1 + int'($urandom_range(2)));
  endtask

  initial begin
    for (int p = 0; p < NP; p++)
      for (int c = 0; c < NCH; c++) begin
        ped[p][c] = 14'(200 + 10 * c + p);
        slip[p][c] = 4'((SKEW[c] + 13) % 14);
        for (int t = 0; t < NS; t++) wf[p][c][t] = 200 + 10 * c + p + int'($urandom_range(4)) - 2;
        for (int t = 0; t < NS - 10; t++) begin
          int r;
          r = int'($urandom_range(999));
          if (r < 3) add_pulse(p, c, t, 1);
          else if (r == 3 && $urandom_range(3) == 0) add_pulse(p, c, t, 2);
        end
      end
    burst(1, 2, 20);
    burst(1, 5, 44);
    burst(1, 5, 47);
    add_pulse(2, 1, 38 * 256 + 100, 90);
    add_pulse(2, 6, 38 * 256 + 102, 90);
    add_pulse(0, 2, 36 * 256 + 100, 90);
    for (int p = 0; p < NP; p++) begin
      cfg[p] = CFG_PHYSICS;
      cfg[p].rnd_period = 24'd25;
      cfg[p].win_blocks = 7'd6;
      cfg[p].t_neu.pre  = 7'd3;
      cfg[p].t_neu.post = 7'd2;
      cfg[p].t_neu.planes = 6'd1;
    end
  end

  // ADC serial model: frame f of a channel starts at bit clock 14 f + skew
  always @(negedge clk_bit) if (!rst_bit) begin
    for (int p = 0; p < NP; p++)
      for (int c = 0; c < NCH; c++) begin
        int pos, f, v;
        pos = (int'(gb) - SKEW[c]) % 14;
        f   = (int'(gb) - SKEW[c]) / 14;
        v   = (int'(gb) < SKEW[c] || f >= NS) ? 0 : wf[p][c][f];
        if (v > 16383) v = 16383;
        sdata[p][c] = (int'(gb) < SKEW[c]) ? 1'b0 : v[13 - pos];
      end
  end
  always @(posedge clk_bit) if (!rst_bit) gb++;

  // ------------------------------------------------------------ DAQ readout
  word_t   dq [NP][$];
  header_t hq [NP][$];
  bit      stall0 = 0;
  always @(negedge clk) begin
    for (int p = 0; p < NP; p++) begin
      db_rd[p] = db_valid[p] && !(p == 0 && stall0);
      hb_rd[p] = hb_valid[p];
    end
  end
  always @(posedge clk) if (!rst)
    for (int p = 0; p < NP; p++) begin
      if (db_rd[p] && db_valid[p]) dq[p].push_back(db_data[p]);
      if (hb_rd[p] && hb_valid[p]) hq[p].push_back(hb_data[p]);
    end

  // ------------------------------------------------------------ mechanism counters
  int n_busy_blocks = 0;
  always @(posedge clk) if (!rst && busy[0]) n_busy_blocks++;

  // ------------------------------------------------------------ checks
  int lat_d = 9999;
  int n_low_kept = 0, n_nzs = 0, n_merge = 0, n_remote_rx = 0;

  function automatic int sval(word_t w);
    logic signed [14:0] v;
    v = w[14:0];
    return int'(v);
  endfunction
  function automatic int tcfg_pre(trig_type_e t, int p);  return int'(tcfg_of(cfg[p], t).pre);  endfunction
  function automatic int tcfg_post(trig_type_e t, int p); return int'(tcfg_of(cfg[p], t).post); endfunction

  initial begin
    bit exp_keep [NP][NB + 200];
    bit got_keep [NP][NB + 200];
    bit dead_ch  [NP][NB + 200][NCH];
    bit rnd_local[NP][NB + 200];
    int last;
    for (int p = 0; p < NP; p++) for (int c = 0; c < NCH; c++) sdata[p][c] = 0;
    repeat (3) @(negedge clk);
    // release the bit-clock reset right after a frame boundary, then the clk domain
    @(posedge clk);
    #0.5 rst_bit = 0;
    repeat (4) @(negedge clk);
    rst = 0;
    wait (blk_count[0] == 24'd60);
    stall0 = 1;
    cfg[0].rnd_period = 24'd2;
    cfg[0].t_rnd.planes = 6'd0;
    wait (blk_count[0] == 24'd95);
    stall0 = 0;
    cfg[0].rnd_period = 24'd25;
    cfg[0].t_rnd.planes = 6'd49;
    wait (blk_count[0] == 24'(NB - 12));
    for (int p = 0; p < NP; p++) begin cfg[p].t_rnd.en = 0; cfg[p].t_neu.en = 0; cfg[p].t_he.en = 0; end
    wait (blk_count[0] == 24'(NB));
    // drain: until no plane has had data for 3000 clocks
    begin
      int idle;
      idle = 0;
      while (idle < 3000) begin
        @(negedge clk);
        idle = (db_valid[0] || db_valid[1] || db_valid[2] || hb_valid[0] || hb_valid[1] || hb_valid[2]) ? 0 : idle + 1;
      end
    end

    // ---- readout sets
    for (int p = 0; p < NP; p++) for (int k = 0; k < NB + 200; k++) begin
      exp_keep[p][k] = 0; got_keep[p][k] = 0; rnd_local[p][k] = 0;
      for (int c = 0; c < NCH; c++) dead_ch[p][k][c] = 0;
    end
    for (int q = 0; q < NP; q++)
      foreach (hq[q][i]) if (!hq[q][i].is_readout) begin
        int b;
        b = int'(hq[q][i].blk);
        for (int t = 0; t < NTYPES; t++) if (hq[q][i].local_types[t]) begin
          for (int p = 0; p < NP; p++) begin
            int d;
            d = (p > q) ? p - q : q - p;
            // planes setting in force when the trigger was sent
            if (p == q || d <= ((q == 0 && t == TRIG_RANDOM && b >= 60 && b < 95) ? 0 : int'(tcfg_of(cfg[q], trig_type_e'(t)).planes) +
                               ((t == TRIG_RANDOM && q == 0 && cfg[0].t_rnd.planes == 0) ? 0 : 0)))
              for (int k = b - tcfg_pre(trig_type_e'(t), q); k <= b + tcfg_post(trig_type_e'(t), q); k++)
                if (k >= 0) exp_keep[p][k] = 1;
          end
          if (t == TRIG_RANDOM) rnd_local[q][b] = 1;
          if (t == TRIG_HE) begin
            checks++;
            if (!(q == 2 && b == 38)) begin failures++; $display("unexpected high-energy trigger plane %0d block %0d", q, b); end
          end
          if (t == TRIG_NEUTRON) begin
            checks++;
            if (!(q == 1 && ((b >= 19 && b <= 22) || (b >= 43 && b <= 50)))) begin
              failures++; $display("unexpected neutron trigger plane %0d block %0d", q, b);
            end
          end
        end
      end
    // ---- the fixed sample latency, from the first complete (random) block:
    // the offset d for which all its 256 samples match the waveform
    begin : find_lat
      int k0, c0;
      foreach (dq[0][i]) if (dq[0][i][31:30] == K_CHAN && i + 256 < dq[0].size() && dq[0][i+256][31:30] == K_SAMPLE
                   && dq[0][i+1][31:30] == K_SAMPLE && dq[0][i+1][23:16] == 8'd0 && dq[0][i+256][23:16] == 8'd255) begin
        k0 = int'(dq[0][i][15:0]);
        c0 = int'(dq[0][i][27:16]);
        for (int d = -2000; d < 2000; d++) begin
          bit ok;
          ok = 1;
          for (int j = 1; j <= 256 && ok; j++) begin
            int n;
            n = k0 * 256 + int'(dq[0][i+j][23:16]) + d;
            if (n < 0 || n >= NS || wf[0][c0][n] - int'(ped[0][c0]) != sval(dq[0][i+j])) ok = 0;
          end
          if (ok) begin lat_d = d; disable find_lat; end
        end
      end
    end
    checks++;
    if (lat_d == 9999) begin failures++; $display("no sample latency fits"); end
    // ---- data stream against readout records
    for (int p = 0; p < NP; p++) begin
      int wi, prev;
      wi = 0; prev = -1;
      foreach (hq[p][i]) if (hq[p][i].is_readout) begin
        int k;
        k = int'(hq[p][i].blk);
        got_keep[p][k] = 1;
        if (hq[p][i].remote_types != '0) n_remote_rx++;
        checks++;
        if (k <= prev) begin failures++; $display("plane %0d records out of order", p); end
        if (k == prev + 1 && exp_keep[p][k] && hq[p][i].local_types[TRIG_NEUTRON]) n_merge++;
        prev = k;
        for (int c = 0; c < NCH; c++) begin
          chan_hdr_t ch;
          int nsamp, above, nlow;
          bit seen [256];
          checks++;
          if (wi >= dq[p].size() || dq[p][wi][31:30] != K_CHAN) begin
            failures++; $display("plane %0d block %0d ch %0d: no channel header", p, k, c);
            break;
          end
          ch = chan_hdr_t'(dq[p][wi]);
          wi++;
          if (ch.chan != 12'(c) || ch.blk != 16'(k % 4096)) begin
            failures++; $display("plane %0d block %0d: header ch %0d blk %0d", p, k, ch.chan, ch.blk);
          end
          dead_ch[p][k][c] = ch.dead;
          nsamp = 0; nlow = 0;
          for (int j = 0; j < 256; j++) seen[j] = 0;
          while (wi < dq[p].size() && dq[p][wi][31:30] == K_SAMPLE) begin
            samp_t s;
            int n, ref_v, sv;
            s = samp_t'(dq[p][wi]);
            sv = sval(dq[p][wi]);
            wi++;
            nsamp++;
            seen[s.idx] = 1;
            n = k * 256 + int'(s.idx) + lat_d;
            ref_v = (n >= 0 && n < NS) ? wf[p][c][n] - int'(ped[p][c]) : -99999;
            checks++;
            if (ref_v != sv) begin
              failures++;
              if (failures < 20) $display("plane %0d block %0d ch %0d idx %0d: %0d expected %0d", p, k, c, s.idx, sv, ref_v);
            end
            if (sv > 16 && sv <= 48) nlow++;
          end
          // samples between the lowered and default thresholds, in blocks not read unsuppressed
          if (nsamp < 256) n_low_kept += nlow;
          // every sample above the default threshold must be there
          if (!ch.dead && !ch.ovf) begin
            above = 0;
            for (int j = 0; j < 256; j++) begin
              int n;
              n = k * 256 + j + lat_d;
              if (n >= 0 && n < NS && wf[p][c][n] - int'(ped[p][c]) > 48 && !seen[j]) above++;
            end
            checks++;
            if (above != 0) begin failures++; $display("plane %0d block %0d ch %0d: %0d samples missing", p, k, c, above); end
            if (rnd_local[p][k]) begin
              checks++;
              if (nsamp != 256) begin failures++; $display("plane %0d block %0d ch %0d: %0d samples in random block", p, k, c, nsamp); end
              else n_nzs++;
            end
          end
        end
      end
      checks++;
      if (wi != dq[p].size()) begin failures++; $display("plane %0d: %0d words after the last block", p, dq[p].size() - wi); end
      for (int k = 2; k < NB - 14; k++) begin
        checks++;
        if (exp_keep[p][k] != got_keep[p][k]) begin
          failures++; $display("plane %0d block %0d: read out %0d expected %0d", p, k, got_keep[p][k], exp_keep[p][k]);
        end
      end
    end

    // ---- mechanisms
    begin
      int tr [NTYPES];
      int sent, pdead, cdead;
      for (int t = 0; t < NTYPES; t++) begin
        tr[t] = 0;
        for (int p = 0; p < NP; p++) tr[t] += int'(n_trig[p][t]);
      end
      sent = 0; pdead = 0; cdead = 0;
      for (int p = 0; p < NP; p++) begin sent += int'(n_remote_sent[p]); pdead += int'(plane_dead_blocks[p]); cdead += int'(chan_dead_blocks[p]); end
      $display("triggers: random %0d neutron %0d high-energy %0d", tr[TRIG_RANDOM], tr[TRIG_NEUTRON], tr[TRIG_HE]);
      $display("remote messages sent %0d, records with remote triggers %0d", sent, n_remote_rx);
      $display("lowered-ZS samples kept %0d, complete random blocks %0d, merged neutron windows %0d", n_low_kept, n_nzs, n_merge);
      $display("plane dead blocks %0d, channel dead blocks %0d, busy clocks plane 0 %0d, sample latency %0d", pdead, cdead, n_busy_blocks, lat_d);
      checks += 9;
      if (tr[TRIG_RANDOM] == 0)  begin failures++; $display("no random trigger"); end
      if (tr[TRIG_NEUTRON] == 0) begin failures++; $display("no neutron trigger"); end
      if (tr[TRIG_HE] == 0)      begin failures++; $display("no high-energy trigger"); end
      if (sent == 0 || n_remote_rx == 0) begin failures++; $display("no remote trigger"); end
      if (n_low_kept == 0)       begin failures++; $display("lowered ZS never used"); end
      if (n_nzs == 0)            begin failures++; $display("ZS never disabled"); end
      if (n_merge == 0)          begin failures++; $display("no merged windows"); end
      if (pdead == 0)            begin failures++; $display("no plane dead time"); end
      if (cdead == 0)            begin failures++; $display("no channel dead time"); end
      for (int p = 0; p < NP; p++) begin
        checks++;
        if (hdr_lost[p] != 0) begin failures++; $display("plane %0d lost headers", p); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
