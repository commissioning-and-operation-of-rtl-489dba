// tb_solid_plane_full: one plane at its full size (64 channels, all buffer
// sizes and the 512-sample latency buffer at their defaults, no parameter
// overrides) run with the physics-mode settings: ZS at 1.5 PA, lowered to
// 0.5 PA around neutron triggers, neutron condition N_peaks > 17 in 256
// samples, high-energy threshold 50 PA in an X and a Y channel, neutron
// readout of -79/+32 blocks (-500/+200 us), window-buffer age 82 blocks. Only
// the random-trigger period is shortened (120 blocks instead of ~1 s) so that
// a random trigger happens within the run.
//
// Stimulus: serial ADC streams of all 64 channels carrying pedestal, noise and
// single-photon dark counts; a muon-like pulse in channel 3 (X) and channel 40
// (Y) in block 90; a neutron-like burst in channel 5 in block 100.
//
// Checks: trigger records of each type at the expected blocks; the blocks read
// out are exactly the union of the trigger windows; the remote-trigger
// messages leaving the plane name the neutron block with 3 hops; the data
// stream holds 64 channel headers per read-out block with the right numbers;
// every sample equals waveform minus pedestal at one fixed latency; every
// sample above the default threshold is present; the random blocks are
// complete. The run covers about 230 blocks (1.5 ms of data).
module tb_solid_plane_full;
  import solid_pkg::*;
  localparam int NCH = 64, NB = 226, NS = (NB + 8) * 256;

  logic clk = 0, clk_bit = 0, rst = 1, rst_bit = 1;
  logic [NCH-1:0] sdata;
  logic [3:0] slip [NCH];
  logic [15:0] align_words [NCH], align_match [NCH];
  cfg_t cfg;
  logic [SAMPLE_W-1:0] ped [NCH];
  rmsg_t tx_up, tx_dn;
  logic db_rd, db_valid, hb_rd, hb_valid, busy;
  word_t db_data;
  header_t hb_data;
  logic [$clog2(16384+1)-1:0] db_level;
  logic [BLK_W-1:0] blk_count;
  logic [31:0] n_trig [NTYPES];
  logic [31:0] n_readout, plane_dead_blocks, chan_dead_blocks, busy_cycles, wb_ovf;
  logic [15:0] n_remote_sent, hdr_lost;
  int checks = 0, failures = 0;

  solid_plane u_plane (
    .clk, .rst, .clk_bit, .rst_bit, .sdata, .slip,
    .test_pattern(14'h1CB5), .clear_stats(1'b0),
    .align_words, .align_match,
    .cfg, .ped, .ch_mask({NCH{1'b1}}),
    .rx_up('0), .rx_dn('0), .tx_up, .tx_dn,
    .db_rd, .db_data, .db_valid, .db_level,
    .hb_rd, .hb_data, .hb_valid,
    .blk_count, .busy, .n_trig, .n_readout,
    .plane_dead_blocks, .chan_dead_blocks,
    .busy_cycles, .wb_ovf_words(wb_ovf),
    .n_remote_sent, .hdr_lost
  );

  // ------------------------------------------------------------ clocks: 14 bit clocks per sample
  int unsigned gb = 0;
  int unsigned ph = 0;
  initial forever begin
    #1 clk_bit = 1;
    if (ph == 0) clk = 1;
    if (ph == 7) clk = 0;
    ph = (ph == 13) ? 0 : ph + 1;
    #1 clk_bit = 0;
  end

  initial begin
    #12000000;
    failures++;
    $display("watchdog at block %0d", blk_count);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ------------------------------------------------------------ waveforms
  int wf [NCH][NS];
  int shape [8] = '{10, 25, 32, 24, 16, 8, 4, 2};

  function automatic int skew(int c); return 1 + c % 3; endfunction

  task automatic add_pulse(int c, int t, int scale);
    for (int k = 0; k < 8; k++) if (t + k < NS) wf[c][t+k] += shape[k] * scale;
  endtask

  initial begin
    for (int c = 0; c < NCH; c++) begin
      ped[c] = 14'(300 + 3 * c);
      slip[c] = 4'((skew(c) + 13) % 14);
      for (int t = 0; t < NS; t++) wf[c][t] = 300 + 3 * c + int'($urandom_range(4)) - 2;
      for (int t = 0; t < NS - 10; t++) if ($urandom_range(999) < 2) add_pulse(c, t, 1);
    end
    add_pulse(3, 90 * 256 + 100, 90);
    add_pulse(40, 90 * 256 + 101, 90);
    for (int q = 0; q < 60; q++) add_pulse(5, 100 * 256 + 20 + q * 8 + int'($urandom_range(3)), 1 + int'($urandom_range(2)));
    cfg = CFG_PHYSICS;
    cfg.rnd_period = 24'd120;
  end

  always @(negedge clk_bit) if (!rst_bit) begin
    for (int c = 0; c < NCH; c++) begin
      int pos, f, v;
      pos = (int'(gb) - skew(c)) % 14;
      f   = (int'(gb) - skew(c)) / 14;
      v   = (int'(gb) < skew(c) || f >= NS) ? 0 : wf[c][f];
      if (v > 16383) v = 16383;
      sdata[c] = (int'(gb) < skew(c)) ? 1'b0 : v[13 - pos];
    end
  end
  always @(posedge clk_bit) if (!rst_bit) gb++;

  // ------------------------------------------------------------ DAQ side
  word_t   dq [$];
  header_t hq [$];
  rmsg_t   mq [$];
  always @(negedge clk) begin
    db_rd = db_valid;
    hb_rd = hb_valid;
  end
  always @(posedge clk) if (!rst) begin
    if (db_rd && db_valid) dq.push_back(db_data);
    if (hb_rd && hb_valid) hq.push_back(hb_data);
    if (tx_up.valid) mq.push_back(tx_up);
    if (tx_dn.valid) mq.push_back(tx_dn);
  end

  function automatic int sval(word_t w);
    logic signed [14:0] v;
    v = w[14:0];
    return int'(v);
  endfunction

  initial begin
    bit exp_keep [NB + 200];
    bit got_keep [NB + 200];
    bit rnd_local[NB + 200];
    int lat_d, n_neu, n_he, n_rnd, n_nzs, n_rec;
    sdata = '0;
    repeat (3) @(negedge clk);
    @(posedge clk);
    #0.5 rst_bit = 0;
    repeat (4) @(negedge clk);
    rst = 0;
    wait (blk_count == 24'd200);
    cfg.t_rnd.en = 0;
    wait (blk_count == 24'(NB));
    begin
      int idle;
      idle = 0;
      while (idle < 3000) begin
        @(negedge clk);
        idle = (db_valid || hb_valid) ? 0 : idle + 1;
      end
    end

    for (int k = 0; k < NB + 200; k++) begin exp_keep[k] = 0; got_keep[k] = 0; rnd_local[k] = 0; end
    n_neu = 0; n_he = 0; n_rnd = 0; n_nzs = 0; n_rec = 0;
    foreach (hq[i]) if (!hq[i].is_readout) begin
      int b;
      b = int'(hq[i].blk);
      for (int t = 0; t < NTYPES; t++) if (hq[i].local_types[t]) begin
        tcfg_t tc;
        tc = tcfg_of(cfg, trig_type_e'(t));
        for (int k = b - int'(tc.pre); k <= b + int'(tc.post); k++) if (k >= 0) exp_keep[k] = 1;
        checks++;
        case (t)
          TRIG_RANDOM:  begin n_rnd++; rnd_local[b] = 1; if (b > 200) begin failures++; $display("random trigger at block %0d", b); end end
          TRIG_NEUTRON: begin n_neu++; if (b < 100 || b > 102) begin failures++; $display("neutron trigger at block %0d", b); end end
          default:      begin n_he++;  if (b != 90) begin failures++; $display("high-energy trigger at block %0d", b); end end
        endcase
      end
    end
    checks += 3;
    if (n_rnd == 0) begin failures++; $display("no random trigger"); end
    if (n_neu == 0) begin failures++; $display("no neutron trigger"); end
    if (n_he != 1)  begin failures++; $display("%0d high-energy triggers", n_he); end
    // remote messages: one per neutron trigger and side, 3 hops; random to 49 planes
    checks++;
    if (mq.size() == 0) begin failures++; $display("no remote-trigger messages"); end
    foreach (mq[i]) begin
      checks++;
      if (mq[i].ttype == TRIG_NEUTRON && !(mq[i].hops == 6'd3 && mq[i].blk >= 8'd100 && mq[i].blk <= 8'd102)) begin
        failures++; $display("neutron message hops %0d blk %0d", mq[i].hops, mq[i].blk);
      end
      if (mq[i].ttype == TRIG_RANDOM && mq[i].hops != 6'd49) begin failures++; $display("random message hops %0d", mq[i].hops); end
      if (mq[i].ttype == TRIG_HE) begin failures++; $display("high-energy trigger sent to other planes"); end
    end

    // latency: first complete block
    lat_d = 9999;
    begin : find_lat
      foreach (dq[i]) if (dq[i][31:30] == K_CHAN && i + 256 < dq.size() && dq[i+256][31:30] == K_SAMPLE
                   && dq[i+1][31:30] == K_SAMPLE && dq[i+1][23:16] == 8'd0 && dq[i+256][23:16] == 8'd255) begin
        int k0, c0;
        k0 = int'(dq[i][15:0]);
        c0 = int'(dq[i][27:16]);
        for (int d = -600; d < 600; d++) begin
          bit ok;
          ok = 1;
          for (int j = 1; j <= 256 && ok; j++) begin
            int n;
            n = k0 * 256 + int'(dq[i+j][23:16]) + d;
            if (n < 0 || n >= NS || wf[c0][n] - int'(ped[c0]) != sval(dq[i+j])) ok = 0;
          end
          if (ok) begin lat_d = d; disable find_lat; end
        end
        disable find_lat;
      end
    end
    checks++;
    if (lat_d == 9999) begin failures++; $display("no sample latency fits"); end

    begin
      int wi, prev;
      wi = 0; prev = -1;
      foreach (hq[i]) if (hq[i].is_readout) begin
        int k;
        k = int'(hq[i].blk);
        got_keep[k] = 1;
        n_rec++;
        checks++;
        if (k <= prev) begin failures++; $display("records out of order"); end
        prev = k;
        for (int c = 0; c < NCH; c++) begin
          chan_hdr_t ch;
          int nsamp, above;
          bit seen [256];
          checks++;
          if (wi >= dq.size() || dq[wi][31:30] != K_CHAN) begin
            failures++; $display("block %0d ch %0d: no channel header", k, c); break;
          end
          ch = chan_hdr_t'(dq[wi]);
          wi++;
          if (ch.chan != 12'(c) || ch.blk != 16'(k % 4096)) begin
            failures++; $display("block %0d: header ch %0d blk %0d", k, ch.chan, ch.blk);
          end
          nsamp = 0;
          for (int j = 0; j < 256; j++) seen[j] = 0;
          while (wi < dq.size() && dq[wi][31:30] == K_SAMPLE) begin
            int n, ref_v, sv, ix;
            ix = int'(dq[wi][23:16]);
            sv = sval(dq[wi]);
            wi++;
            nsamp++;
            seen[ix] = 1;
            n = k * 256 + ix + lat_d;
            ref_v = (n >= 0 && n < NS) ? wf[c][n] - int'(ped[c]) : -99999;
            checks++;
            if (ref_v != sv) begin
              failures++;
              if (failures < 20) $display("block %0d ch %0d idx %0d: %0d expected %0d", k, c, ix, sv, ref_v);
            end
          end
          if (!ch.dead && !ch.ovf) begin
            above = 0;
            for (int j = 0; j < 256; j++) begin
              int n;
              n = k * 256 + j + lat_d;
              if (n >= 0 && n < NS && wf[c][n] - int'(ped[c]) > 48 && !seen[j]) above++;
            end
            checks++;
            if (above != 0) begin failures++; $display("block %0d ch %0d: %0d samples missing", k, c, above); end
            if (rnd_local[k]) begin
              checks++;
              if (nsamp != 256) begin failures++; $display("block %0d ch %0d: %0d samples in random block", k, c, nsamp); end
              else n_nzs++;
            end
          end else begin
            failures++; $display("block %0d ch %0d: dead or overflow at nominal rates", k, c);
          end
        end
      end
      checks++;
      if (wi != dq.size()) begin failures++; $display("%0d words after the last block", dq.size() - wi); end
    end
    for (int k = 2; k < NB - 84; k++) begin
      checks++;
      if (exp_keep[k] != got_keep[k]) begin
        failures++; $display("block %0d: read out %0d expected %0d", k, got_keep[k], exp_keep[k]);
      end
    end
    checks += 3;
    if (n_nzs == 0) begin failures++; $display("no complete random block"); end
    if (plane_dead_blocks != 0 || chan_dead_blocks != 0 || hdr_lost != 0 || wb_ovf != 0) begin
      failures++; $display("dead time or loss at nominal rates");
    end
    if (!(exp_keep[21] || exp_keep[22]) || !exp_keep[132]) begin failures++; $display("neutron window does not span -79/+32 blocks"); end
    $display("records %0d, triggers random %0d neutron %0d high-energy %0d, remote messages %0d, data words %0d, latency %0d",
             n_rec, n_rnd, n_neu, n_he, mq.size(), dq.size(), lat_d);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
