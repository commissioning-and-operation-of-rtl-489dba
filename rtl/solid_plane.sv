// solid_plane: readout firmware of one SoLid detector plane (64 SiPM channels).
//
// The plane digitises its channels continuously at 40 MS/s and must reduce
// that stream by about four orders of magnitude while keeping the full
// waveforms around interesting events. It does so with one trigger level and
// block-based event building: samples are grouped into 256-sample blocks
// (6.4 us), every channel keeps a zero-suppressed history of recent blocks,
// and a block is copied out only if some trigger, on this plane or on a
// neighbouring one, asked for a time window that covers it.
//
// Structure:
//   per channel (readout_channel): ADC deserialiser -> pedestal -> channel
//     trigger and latency buffer -> zero suppression -> window buffer -> cro
//     -> derandomiser
//   per plane: trigger_sequencer (block decisions, ZS control),
//     remote_trigger (daisy chain to neighbours), readout_sequencer (which
//     blocks to keep, readout records), header_buffer, data_buffer
//     (concatenation of all channels per block), deadtime_monitor.
// Back pressure: when the data buffer, the header buffer or any
// derandomiser is nearly full, the trigger sequencer halts triggers and the
// blocks are counted as plane dead time.
//
// Clocks: `clk` is the 40 MHz sample clock; `clk_bit` is the ADC bit clock,
// 14 times faster and phase locked to it (rising edges coincide every 14 bit
// clocks). Both come from the board PLL. `rst` resets the clk domain and
// acts as the run's soft reset: the block counter restarts at 0, so planes
// released from reset on the same clock count blocks in step. `rst_bit`
// resets the deserialisers.
//
// Interfaces: serial ADC data (`sdata`) with per-channel bit slip; pedestals
// and channel mask; the run configuration `cfg` (set over IPbus in the real
// system); two daisy-chain message ports per direction; FIFO read ports of
// the data and header buffers (which IPbus reads); monitoring counters.
//
// What follows the paper: the chain of Fig. "plane firmware", the buffer
// sizes (512 / 1536 / 2048 samples), 256-sample blocks, the three trigger
// types and their settings, remote triggers, back pressure and dead time.
// Own choices: all formats, the data and header buffer sizes, and the exact
// timing, documented in each module.
module solid_plane
  import solid_pkg::*;
#(
  parameter int unsigned NCH      = 64,
  parameter int unsigned WINDOW   = 256,
  parameter int unsigned LAT      = 512,
  parameter int unsigned WB_DEPTH = 1536,
  parameter int unsigned DR_DEPTH = 2048,
  parameter int unsigned DB_DEPTH = 16384,
  parameter int unsigned HB_DEPTH = 1024,
  parameter int unsigned DB_HWM   = DB_DEPTH / 4,
  localparam int unsigned DBLW    = $clog2(DB_DEPTH + 1)
) (
  input  logic                clk,
  input  logic                rst,
  input  logic                clk_bit,
  input  logic                rst_bit,
  // ADC side
  input  logic [NCH-1:0]      sdata,
  input  logic [3:0]          slip [NCH],
  input  logic [SAMPLE_W-1:0] test_pattern,
  input  logic                clear_stats,
  output logic [15:0]         align_words [NCH],
  output logic [15:0]         align_match [NCH],
  // configuration
  input  cfg_t                cfg,
  input  logic [SAMPLE_W-1:0] ped [NCH],
  input  logic [NCH-1:0]      ch_mask,      // 1 = channel takes part in triggers
  // daisy chain
  input  rmsg_t               rx_up,
  input  rmsg_t               rx_dn,
  output rmsg_t               tx_up,
  output rmsg_t               tx_dn,
  // data buffer read port
  input  logic                db_rd,
  output word_t               db_data,
  output logic                db_valid,
  output logic [DBLW-1:0]     db_level,
  // header buffer read port
  input  logic                hb_rd,
  output header_t             hb_data,
  output logic                hb_valid,
  // monitoring
  output logic [BLK_W-1:0]    blk_count,
  output logic                busy,
  output logic [31:0]         n_trig [NTYPES],
  output logic [31:0]         n_readout,
  output logic [31:0]         plane_dead_blocks,
  output logic [31:0]         chan_dead_blocks,
  output logic [31:0]         busy_cycles,
  output logic [31:0]         wb_ovf_words,
  output logic [15:0]         n_remote_sent,
  output logic [15:0]         hdr_lost
);
  // ------------------------------------------------------------ block timing
  logic [BLK_W-1:0] blk;
  logic [IDX_W-1:0] idx;
  logic             primed;

  always_ff @(posedge clk) begin
    if (rst) begin
      blk    <= '0;
      idx    <= '0;
      primed <= 1'b0;
    end else begin
      idx <= idx + 1'b1;
      if (idx == '1) begin
        blk <= blk + 1'b1;
        if (blk == BLK_W'(LAT / BLOCK_LEN - 1)) primed <= 1'b1;
      end
    end
  end
  assign blk_count = blk;

  // ------------------------------------------------------------- channels
  logic [SAMPLE_W-1:0] adc_word [NCH];
  logic [SAMPLE_W-1:0] adc_q    [NCH];
  logic [NCH-1:0]      neu, he, dr_empty, dr_has_block, dr_af, dr_rd, dr_blk_pop;
  logic [NCH-1:0]      dead_evt, ovf_evt;
  word_t               dr_head [NCH];
  logic                zs_off;
  logic [SAMPLE_W-1:0] zs_thr;
  logic [RING-1:0]     keep;

  for (genvar c = 0; c < NCH; c++) begin : g_ch
    adc_deser #(.W(SAMPLE_W)) u_deser (
      .clk_bit, .rst(rst_bit), .sdata(sdata[c]), .slip(slip[c]),
      .test_pattern, .clear_stats, .word(adc_word[c]),
      .n_words(align_words[c]), .n_match(align_match[c])
    );

    always_ff @(posedge clk) adc_q[c] <= adc_word[c];

    readout_channel #(
      .WINDOW(WINDOW), .LAT(LAT), .WB_DEPTH(WB_DEPTH), .DR_DEPTH(DR_DEPTH)
    ) u_ch (
      .clk, .rst, .cfg, .en(ch_mask[c]), .raw(adc_q[c]), .ped(ped[c]),
      .blk, .idx, .zs_en(primed), .zs_off, .zs_thr, .keep,
      .neu(neu[c]), .he(he[c]),
      .dr_rd(dr_rd[c]), .dr_blk_pop(dr_blk_pop[c]), .dr_head(dr_head[c]),
      .dr_empty(dr_empty[c]), .dr_has_block(dr_has_block[c]),
      .dr_almost_full(dr_af[c]), .dead_evt(dead_evt[c]), .ovf_evt(ovf_evt[c]),
      .wb_level()
    );
  end

  // --------------------------------------------------------- plane sequencing
  logic             trg_valid, dead_blk, ts_hdr_v, ro_hdr_v, dead_clr;
  logic [BLK_W-1:0] trg_blk;
  tmask_t           trg_mask;
  header_t          ts_hdr, ro_hdr;
  rmsg_t            del_up, del_dn;
  logic [15:0]      dead_since;
  logic             db_af, hb_af, db_blk_done;

  assign busy = db_af | hb_af | (|dr_af);

  trigger_sequencer #(.NCH(NCH)) u_tseq (
    .clk, .rst, .cfg, .blk, .idx, .run(primed), .neu, .he, .busy,
    .rx0(del_up), .rx1(del_dn),
    .trg_valid, .trg_blk, .trg_mask, .dead_blk, .zs_off, .zs_thr,
    .hdr_valid(ts_hdr_v), .hdr(ts_hdr), .n_trig
  );

  remote_trigger u_rtrig (
    .clk, .rst, .cfg, .req_valid(trg_valid), .req_mask(trg_mask),
    .req_blk(trg_blk[RING_W-1:0]), .rx_up, .rx_dn, .tx_up, .tx_dn,
    .del_up, .del_dn, .n_sent(n_remote_sent)
  );

  readout_sequencer u_rseq (
    .clk, .rst, .cfg, .blk, .idx, .trg_valid, .trg_blk, .trg_mask,
    .rx0(del_up), .rx1(del_dn), .dead_since, .keep,
    .hdr_valid(ro_hdr_v), .hdr(ro_hdr), .dead_clr, .n_readout
  );

  deadtime_monitor #(.NCH(NCH)) u_dead (
    .clk, .rst, .busy, .plane_dead(dead_blk), .chan_dead(dead_evt),
    .clr_since(dead_clr), .plane_dead_blocks, .chan_dead_blocks, .busy_cycles,
    .dead_since
  );

  header_buffer #(.DEPTH(HB_DEPTH)) u_hb (
    .clk, .rst, .trg_valid(ts_hdr_v), .trg_hdr(ts_hdr),
    .ro_valid(ro_hdr_v), .ro_hdr(ro_hdr),
    .rd_en(hb_rd), .rd_data(hb_data), .rd_valid(hb_valid), .level(),
    .almost_full(hb_af), .lost(hdr_lost)
  );

  data_buffer #(.NCH(NCH), .DEPTH(DB_DEPTH), .HWM(DB_HWM)) u_db (
    .clk, .rst, .dr_head, .dr_empty, .dr_has_block, .dr_pop(dr_rd),
    .dr_blk_pop, .rd_en(db_rd), .rd_data(db_data), .rd_valid(db_valid),
    .level(db_level), .almost_full(db_af), .blk_done(db_blk_done)
  );

  // window-buffer overflow words, all channels
  always_ff @(posedge clk) begin
    if (rst) wb_ovf_words <= '0;
    else     wb_ovf_words <= wb_ovf_words + 32'($countones(ovf_evt));
  end
endmodule
