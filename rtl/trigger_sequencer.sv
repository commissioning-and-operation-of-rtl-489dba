// trigger_sequencer: makes the plane's trigger decisions, once per 256-sample
// block, and steers the zero-suppression threshold around triggers.
//
// Channel trigger primitives arrive every sample. Over a block the sequencer
// ORs them: a neutron trigger needs any unmasked channel whose peak count
// exceeded N_peaks; a high-energy trigger needs an amplitude above threshold
// in at least one channel of each fibre direction in the same block (the X-Y
// coincidence that rejects dark counts; channels 0..NCH/2-1 are taken as one
// direction and the rest as the other). A random (zero-bias) trigger fires
// every `rnd_period` blocks. The decision for block b is taken on its last
// sample and presented as a one-clock pulse (`trg_valid`, `trg_blk` = b,
// `trg_mask` = fired types) on the first clock of block b+1; each enabled
// type may fire. It also goes to the remote-trigger unit, which forwards it
// to the neighbouring planes, and a trigger record is written to the header
// buffer. While `busy` (back pressure from the output buffers) is high,
// decisions are suppressed: the block is counted as plane dead time
// (`dead_blk` pulse) and no trigger fires.
//
// Zero suppression: the ZS stage works on block blk-2, the block leaving the
// 512-sample latency buffer. For every trigger, local or received from a
// neighbour, the threshold mode of its type is applied around it: a lowered
// threshold to blocks b-zs_pre .. b+zs_post, suppression off to exactly the
// blocks the type reads out (b-pre .. b+post, pre limited to zs_pre), since
// every unsuppressed block costs 256 words of window buffer. Overlapping
// regions are merged and the lowest threshold wins (suppression off beats
// lowered beats default). A local
// trigger for block b is known when the ZS stage is at the start of block
// b-1, so at most one block before the trigger can be given the changed
// threshold, and its first few samples keep the previous one.
//
// From the paper: block-level decisions from channel primitives, random
// trigger, neutron and X-Y-coincidence amplitude triggers, per-type remote
// triggers, per-type ZS threshold around the trigger with the lowest one
// winning, triggers halted on back pressure. Own choices: the split of
// channels into X and Y, the timing above, zs_pre limited to 1 block (the
// paper quotes +-2 blocks, which a 512-sample latency buffer cannot give
// before the trigger), and accepting remote triggers while busy.
// Trigger records leave the reserved, remote-type and dead-block fields of
// header_t at zero (those belong to readout records), so those output bits
// are constant.
module trigger_sequencer
  import solid_pkg::*;
#(
  parameter int unsigned NCH = 64
) (
  input  logic              clk,
  input  logic              rst,
  input  cfg_t              cfg,
  input  logic [BLK_W-1:0]  blk,        // block of the sample now entering the channel triggers
  input  logic [IDX_W-1:0]  idx,
  input  logic              run,        // pipeline filled, triggers allowed
  input  logic [NCH-1:0]    neu,
  input  logic [NCH-1:0]    he,
  input  logic              busy,
  input  rmsg_t             rx0,        // remote triggers delivered this clock
  input  rmsg_t             rx1,
  output logic              trg_valid,
  output logic [BLK_W-1:0]  trg_blk,
  output tmask_t            trg_mask,
  output logic              dead_blk,
  output logic              zs_off,
  output logic [SAMPLE_W-1:0] zs_thr,
  output logic              hdr_valid,
  output header_t           hdr,
  output logic [31:0]       n_trig [NTYPES]
);
  localparam int unsigned NX = NCH / 2;

  logic             acc_neu, acc_hex, acc_hey;
  logic             cur_neu, cur_hex, cur_hey;
  logic [23:0]      rnd_cnt;
  tmask_t           fire;
  logic             last;
  logic [BLK_W-1:0] zblk;

  assign last    = (idx == IDX_W'(BLOCK_LEN - 1));
  assign cur_neu = acc_neu | (|neu);
  assign cur_hex = acc_hex | (|he[NX-1:0]);
  assign cur_hey = acc_hey | (|he[NCH-1:NX]);
  assign zblk    = blk - BLK_W'(2);

  always_comb begin
    fire               = '0;
    fire[TRIG_RANDOM]  = cfg.t_rnd.en && (rnd_cnt >= cfg.rnd_period - 24'd1);
    fire[TRIG_NEUTRON] = cfg.t_neu.en && cur_neu;
    fire[TRIG_HE]      = cfg.t_he.en  && cur_hex && cur_hey;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      acc_neu   <= 1'b0;
      acc_hex   <= 1'b0;
      acc_hey   <= 1'b0;
      rnd_cnt   <= '0;
      trg_valid <= 1'b0;
      trg_blk   <= '0;
      trg_mask  <= '0;
      dead_blk  <= 1'b0;
      hdr_valid <= 1'b0;
      hdr       <= '0;
      for (int t = 0; t < NTYPES; t++) n_trig[t] <= '0;
    end else begin
      trg_valid <= 1'b0;
      dead_blk  <= 1'b0;
      hdr_valid <= 1'b0;
      if (last) begin
        acc_neu <= 1'b0;
        acc_hex <= 1'b0;
        acc_hey <= 1'b0;
        rnd_cnt <= fire[TRIG_RANDOM] ? '0 : rnd_cnt + 24'd1;
        if (run) begin
          if (busy) begin
            dead_blk <= 1'b1;
          end else if (fire != '0) begin
            trg_valid       <= 1'b1;
            trg_blk         <= blk;
            trg_mask        <= fire;
            hdr_valid       <= 1'b1;
            hdr             <= '0;
            hdr.is_readout  <= 1'b0;
            hdr.blk         <= blk;
            hdr.local_types <= fire;
            for (int t = 0; t < NTYPES; t++)
              if (fire[t]) n_trig[t] <= n_trig[t] + 1;
          end
        end
      end else begin
        acc_neu <= cur_neu;
        acc_hex <= cur_hex;
        acc_hey <= cur_hey;
      end
    end
  end

  // ---------------------------------------------------------------- ZS control
  logic             low_act, off_act;
  logic [BLK_W-1:0] low_from, low_to, off_from, off_to;

  function automatic logic before_eq(logic [BLK_W-1:0] a, logic [BLK_W-1:0] b);
    return $signed(b - a) >= 0;          // a <= b, modulo the block counter
  endfunction

  function automatic logic [BLK_W-1:0] full_blk(logic [RING_W-1:0] rb, logic [BLK_W-1:0] now);
    return now - BLK_W'(RING_W'(now[RING_W-1:0] - rb));
  endfunction

  // blocks before the trigger read without suppression: the type's own
  // pre-trigger window, at most zs_pre
  function automatic logic [6:0] off_pre(tcfg_t tc);
    return (tc.pre < 7'(cfg.zs_pre)) ? tc.pre : 7'(cfg.zs_pre);
  endfunction

  always_ff @(posedge clk) begin
    if (rst) begin
      low_act  <= 1'b0;
      off_act  <= 1'b0;
      low_from <= '0;
      low_to   <= '0;
      off_from <= '0;
      off_to   <= '0;
    end else begin : zs_upd
      logic             ev_v   [2];
      trig_type_e       ev_t   [2];
      logic [BLK_W-1:0] ev_b   [2];
      logic             la, oa;
      logic [BLK_W-1:0] lf, lt, of_, ot, nf, nt;
      ev_v[0] = rx0.valid; ev_t[0] = rx0.ttype; ev_b[0] = full_blk(rx0.blk, blk);
      ev_v[1] = rx1.valid; ev_t[1] = rx1.ttype; ev_b[1] = full_blk(rx1.blk, blk);
      la = low_act && before_eq(zblk, low_to);
      oa = off_act && before_eq(zblk, off_to);
      lf = low_from; lt = low_to; of_ = off_from; ot = off_to;
      for (int e = 0; e < 2; e++) begin
        nf = ev_b[e] - BLK_W'(cfg.zs_pre);
        nt = ev_b[e] + BLK_W'(cfg.zs_post);
        if (ev_v[e] && tcfg_of(cfg, ev_t[e]).zs == ZS_LOW) begin
          if (!la) begin lf = nf; lt = nt; end
          else begin
            if (before_eq(nf, lf)) lf = nf;
            if (before_eq(lt, nt)) lt = nt;
          end
          la = 1'b1;
        end
        nf = ev_b[e] - BLK_W'(off_pre(tcfg_of(cfg, ev_t[e])));
        nt = ev_b[e] + BLK_W'(tcfg_of(cfg, ev_t[e]).post);
        if (ev_v[e] && tcfg_of(cfg, ev_t[e]).zs == ZS_OFF) begin
          if (!oa) begin of_ = nf; ot = nt; end
          else begin
            if (before_eq(nf, of_)) of_ = nf;
            if (before_eq(ot, nt)) ot = nt;
          end
          oa = 1'b1;
        end
      end
      // local triggers: one event per fired type
      for (int t = 0; t < NTYPES; t++) begin
        nf = trg_blk - BLK_W'(cfg.zs_pre);
        nt = trg_blk + BLK_W'(cfg.zs_post);
        if (trg_valid && trg_mask[t] && tcfg_of(cfg, trig_type_e'(t)).zs == ZS_LOW) begin
          if (!la) begin lf = nf; lt = nt; end
          else begin
            if (before_eq(nf, lf)) lf = nf;
            if (before_eq(lt, nt)) lt = nt;
          end
          la = 1'b1;
        end
        nf = trg_blk - BLK_W'(off_pre(tcfg_of(cfg, trig_type_e'(t))));
        nt = trg_blk + BLK_W'(tcfg_of(cfg, trig_type_e'(t)).post);
        if (trg_valid && trg_mask[t] && tcfg_of(cfg, trig_type_e'(t)).zs == ZS_OFF) begin
          if (!oa) begin of_ = nf; ot = nt; end
          else begin
            if (before_eq(nf, of_)) of_ = nf;
            if (before_eq(ot, nt)) ot = nt;
          end
          oa = 1'b1;
        end
      end
      low_act <= la; low_from <= lf; low_to <= lt;
      off_act <= oa; off_from <= of_; off_to <= ot;
    end
  end

  logic in_low, in_off;
  assign in_low = low_act && before_eq(low_from, zblk) && before_eq(zblk, low_to);
  assign in_off = off_act && before_eq(off_from, zblk) && before_eq(zblk, off_to);
  assign zs_off = in_off;
  assign zs_thr = in_low ? cfg.zs_thr_low : cfg.zs_thr_default;
endmodule
