// readout_sequencer: decides which blocks of the plane are read out, for the
// plane's own triggers and for those received from neighbouring planes.
//
// A trigger of type t in block b asks for blocks b-pre_t .. b+post_t (the
// type's readout window, in blocks). The sequencer keeps one keep bit per
// block number modulo 256 (`keep`); each trigger sets the bits of its window,
// so overlapping windows merge into one longer readout. The bit of a block is
// cleared 128 blocks after the block, well after the channel readout (cro)
// has used it and before the block number comes round again; this limits pre
// and the window-buffer age to below 128 blocks. The per-block trigger types
// are remembered the same way.
//
// On the third clock of every block the sequencer looks at the block that
// leaves the window buffers in this block (blk - win_blocks); if it is kept it
// writes a readout record to the header buffer with the block number, the
// local and remote trigger types seen in that block, and the plane dead time
// (in blocks) since the previous readout record, then clears that count
// (`dead_clr`). Each channel's cro reads the same keep bit for the same block,
// so header records and data-buffer blocks come out in the same order.
//
// From the paper: a readout sequencer that, for local and remote triggers,
// sets how many blocks before the trigger (already in the window buffer) and
// after it (not yet in it) are read out, in units of blocks, extending the
// window when triggers overlap. Own choices: the 256-block ring, header
// record, and the clearing age.
// The reserved bits of the readout record are constant zero.
module readout_sequencer
  import solid_pkg::*;
(
  input  logic              clk,
  input  logic              rst,
  input  cfg_t              cfg,
  input  logic [BLK_W-1:0]  blk,
  input  logic [IDX_W-1:0]  idx,
  input  logic              trg_valid,
  input  logic [BLK_W-1:0]  trg_blk,
  input  tmask_t            trg_mask,
  input  rmsg_t             rx0,
  input  rmsg_t             rx1,
  input  logic [15:0]       dead_since,
  output logic [RING-1:0]   keep,
  output logic              hdr_valid,
  output header_t           hdr,
  output logic              dead_clr,
  output logic [31:0]       n_readout
);
  tmask_t ltypes [RING];
  tmask_t rtypes [RING];

  // Window of blocks [b - pre, b + post] as a mask over the ring.
  function automatic logic [RING-1:0] win_mask(logic [RING_W-1:0] b, tcfg_t c);
    logic [RING-1:0]   m;
    logic [RING_W-1:0] first;
    first = b - RING_W'(c.pre);
    for (int j = 0; j < RING; j++)
      m[j] = (RING_W'(RING_W'(j) - first) <= RING_W'(c.pre) + RING_W'(c.post));
    return m;
  endfunction

  logic [RING-1:0]   set_m;
  logic [RING_W-1:0] clr_i, out_i;

  always_comb begin
    set_m = '0;
    if (trg_valid)
      for (int t = 0; t < NTYPES; t++)
        if (trg_mask[t]) set_m |= win_mask(trg_blk[RING_W-1:0], tcfg_of(cfg, trig_type_e'(t)));
    if (rx0.valid) set_m |= win_mask(rx0.blk, tcfg_of(cfg, rx0.ttype));
    if (rx1.valid) set_m |= win_mask(rx1.blk, tcfg_of(cfg, rx1.ttype));
  end

  assign clr_i = blk[RING_W-1:0] - RING_W'(RING / 2);
  assign out_i = blk[RING_W-1:0] - RING_W'(cfg.win_blocks);

  always_ff @(posedge clk) begin
    if (rst) begin
      keep      <= '0;
      hdr_valid <= 1'b0;
      hdr       <= '0;
      dead_clr  <= 1'b0;
      n_readout <= '0;
      for (int j = 0; j < RING; j++) begin
        ltypes[j] <= '0;
        rtypes[j] <= '0;
      end
    end else begin
      hdr_valid <= 1'b0;
      dead_clr  <= 1'b0;
      begin : upd
        logic [RING-1:0] k;
        k = keep | set_m;
        if (idx == '0) k[clr_i] = 1'b0;
        keep <= k;
      end
      if (idx == '0) begin
        ltypes[clr_i] <= '0;
        rtypes[clr_i] <= '0;
      end
      if (trg_valid) ltypes[trg_blk[RING_W-1:0]] <= ltypes[trg_blk[RING_W-1:0]] | trg_mask;
      if (rx0.valid && rx1.valid && rx0.blk == rx1.blk)
        rtypes[rx0.blk] <= rtypes[rx0.blk] | tmask_t'(1 << rx0.ttype) | tmask_t'(1 << rx1.ttype);
      else begin
        if (rx0.valid) rtypes[rx0.blk] <= rtypes[rx0.blk] | tmask_t'(1 << rx0.ttype);
        if (rx1.valid) rtypes[rx1.blk] <= rtypes[rx1.blk] | tmask_t'(1 << rx1.ttype);
      end
      if (idx == IDX_W'(2) && keep[out_i]) begin
        hdr_valid        <= 1'b1;
        hdr              <= '0;
        hdr.is_readout   <= 1'b1;
        hdr.blk          <= blk - BLK_W'(cfg.win_blocks);
        hdr.local_types  <= ltypes[out_i];
        hdr.remote_types <= rtypes[out_i];
        hdr.dead_blocks  <= dead_since;
        dead_clr         <= 1'b1;
        n_readout        <= n_readout + 1;
      end
    end
  end

  a_pre_limit: assert property (@(posedge clk) disable iff (rst)
    (32'(cfg.win_blocks) < RING / 2) && (32'(cfg.t_neu.pre) < 32'(cfg.win_blocks)));
endmodule
