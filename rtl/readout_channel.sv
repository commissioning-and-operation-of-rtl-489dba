// readout_channel: the complete per-channel data path of a plane, repeated
// for each of its 64 channels.
//
// A deserialised 14-bit ADC sample enters once per clock. It is corrected by
// the channel's pedestal (one register stage) and then goes two ways: to the
// channel trigger, which produces the neutron and high-energy primitives for
// the trigger sequencer, and to the 512-sample latency buffer. Samples
// leaving the latency buffer (two blocks later) are zero-suppressed with the
// threshold the trigger sequencer chooses and enter the window buffer, where
// each block waits `win_blocks` blocks. The channel readout (cro) then drops
// the block or moves it to the derandomiser, from which the plane's data
// buffer collects it. `blk`/`idx` give the block and sample index of the
// sample now leaving the pedestal stage; the zero-suppression stage works on
// block blk-2 with the same index.
//
// The chain follows the paper's per-channel firmware; the pedestal stage and
// the interfaces between the stages are this design's choices.
module readout_channel
  import solid_pkg::*;
#(
  parameter int unsigned WINDOW   = 256,
  parameter int unsigned LAT      = 512,
  parameter int unsigned WB_DEPTH = 1536,
  parameter int unsigned DR_DEPTH = 2048,
  localparam int unsigned DLW     = $clog2(DR_DEPTH + 1),
  localparam int unsigned WLW     = $clog2(WB_DEPTH + 1)
) (
  input  logic                clk,
  input  logic                rst,
  input  cfg_t                cfg,
  input  logic                en,          // channel not masked
  input  logic [SAMPLE_W-1:0] raw,
  input  logic [SAMPLE_W-1:0] ped,
  input  logic [BLK_W-1:0]    blk,
  input  logic [IDX_W-1:0]    idx,
  input  logic                zs_en,
  input  logic                zs_off,
  input  logic [SAMPLE_W-1:0] zs_thr,
  input  logic [RING-1:0]     keep,
  output logic                neu,
  output logic                he,
  // derandomiser read side
  input  logic                dr_rd,
  input  logic                dr_blk_pop,
  output word_t               dr_head,
  output logic                dr_empty,
  output logic                dr_has_block,
  output logic                dr_almost_full,
  output logic                dead_evt,
  output logic                ovf_evt,
  output logic [WLW-1:0]      wb_level
);
  psample_t       ps, lat_out;
  logic           lat_valid, peak, zs_v, wb_empty, wb_pop, dr_wr, blk_done;
  logic [$clog2(WINDOW+1)-1:0] npk;
  word_t          zs_w, wb_head, dr_w;
  logic [DLW-1:0] dr_level;

  always_ff @(posedge clk) begin
    if (rst) ps <= '0;
    else     ps <= $signed({1'b0, raw}) - $signed({1'b0, ped});
  end

  channel_trigger #(.WINDOW(WINDOW)) u_trig (
    .clk, .rst, .en, .s(ps),
    .peak_thr(cfg.peak_thr), .npeaks(cfg.npeaks), .he_thr(cfg.he_thr),
    .peak, .npk, .neu, .he
  );

  latency_buffer #(.DEPTH(LAT)) u_lat (
    .clk, .rst, .din(ps), .dout(lat_out), .valid(lat_valid)
  );

  logic [BLK_W-1:0] zblk;
  assign zblk = blk - BLK_W'(LAT / BLOCK_LEN);

  zero_suppress u_zs (
    .clk, .rst, .en(zs_en && lat_valid), .s(lat_out), .idx, .blk(zblk[11:0]),
    .zs_off, .thr(zs_thr), .out_valid(zs_v), .out_word(zs_w)
  );

  window_buffer #(.DEPTH(WB_DEPTH)) u_wb (
    .clk, .rst, .in_valid(zs_v), .in_word(zs_w),
    .rd_en(wb_pop), .head(wb_head), .empty(wb_empty), .level(wb_level), .ovf_evt
  );

  cro #(.DR_DEPTH(DR_DEPTH)) u_cro (
    .clk, .rst, .blk_now(blk[RING_W-1:0]), .win_blocks(cfg.win_blocks), .keep,
    .wb_head, .wb_empty, .wb_pop,
    .dr_level, .dr_wr, .dr_word(dr_w), .blk_done, .dead_evt
  );

  derandomiser #(.DEPTH(DR_DEPTH)) u_dr (
    .clk, .rst, .wr_en(dr_wr), .wr_word(dr_w), .blk_in(blk_done),
    .rd_en(dr_rd), .blk_out(dr_blk_pop), .head(dr_head), .empty(dr_empty),
    .level(dr_level), .has_block(dr_has_block), .almost_full(dr_almost_full)
  );
endmodule
