// solid_pkg: types and constants shared by the plane readout firmware.
//
// A plane digitises 64 SiPM channels at 40 MS/s with 14-bit ADCs. Samples are
// grouped into "blocks" of 256 consecutive samples (6.4 us); every trigger and
// readout decision is taken per block. This package fixes the word formats
// that flow between the per-channel buffers and into the output buffers, the
// trigger types, and the run-time configuration record.
//
// From the paper: 14-bit samples, 256-sample blocks, the three trigger types
// (random, neutron, high energy) and their default settings (ZS 1.5 PA by
// default, 0.5 PA around neutron triggers, ZS off for random triggers, neutron
// condition N_peaks > 17 in a 256-sample window with T = 0.5 PA, high-energy
// threshold 50 PA, readout windows -500/+200 us, 6.4 us, 12.8 us, +-3 planes).
// Own choices: all bit layouts below, 32 ADC counts per PA to turn PA into
// counts (the paper's equalised gain), the 24-bit block number.
package solid_pkg;

  localparam int unsigned SAMPLE_W  = 14;   // ADC resolution
  localparam int unsigned BLOCK_LEN = 256;  // samples per block
  localparam int unsigned IDX_W     = 8;    // sample index within a block
  localparam int unsigned BLK_W     = 24;   // global block number
  localparam int unsigned RING      = 256;  // block ring used for readout decisions
  localparam int unsigned RING_W    = 8;
  localparam int unsigned GAIN_ADC_PER_PA = 32;

  typedef logic signed [SAMPLE_W:0] psample_t;  // pedestal-subtracted sample, 15 bit signed

  // Trigger types. Bit positions in trigger masks follow this order.
  typedef enum logic [1:0] {
    TRIG_RANDOM  = 2'd0,
    TRIG_NEUTRON = 2'd1,
    TRIG_HE      = 2'd2
  } trig_type_e;
  localparam int unsigned NTYPES = 3;
  typedef logic [NTYPES-1:0] tmask_t;

  // Zero-suppression modes a trigger type can request around its trigger.
  typedef enum logic [1:0] {
    ZS_DEFAULT = 2'd0,   // keep the default threshold
    ZS_LOW     = 2'd1,   // lowered threshold
    ZS_OFF     = 2'd2    // no suppression
  } zs_mode_e;

  // Word kinds, bits [31:30] of every 32-bit buffer word.
  localparam logic [1:0] K_SAMPLE = 2'b00;  // {kind, 6'b0, idx[7:0], 1'b0, value[14:0]}
  localparam logic [1:0] K_CHAN   = 2'b10;  // data buffer channel header
  localparam logic [1:0] K_MARK   = 2'b11;  // block marker, first word of each block

  typedef logic [31:0] word_t;

  // Block marker: opens each block in the window buffer and the derandomiser
  // and carries the block's first sample, so that a non-suppressed block takes
  // exactly one word per sample.
  typedef struct packed {
    logic [1:0]  kind;     // K_MARK
    logic        dead;     // channel excluded from this block (derandomiser full)
    logic        ovf;      // block not admitted to the window buffer: its samples were dropped
    logic        v0;       // sample 0 of the block passed zero suppression
    psample_t    val0;     // 15 bits
    logic [11:0] blk;      // low bits of the block number
  } mark_t;

  typedef struct packed {
    logic [1:0]  kind;     // K_SAMPLE
    logic [5:0]  rsvd;
    logic [7:0]  idx;      // position in the block
    logic        rsvd1;
    psample_t    val;
  } samp_t;

  typedef struct packed {
    logic [1:0]  kind;     // K_CHAN
    logic        dead;
    logic        ovf;
    logic [11:0] chan;
    logic [15:0] blk;
  } chan_hdr_t;

  // Header buffer entry. A trigger record is written by the trigger sequencer
  // for every local trigger; a readout record by the readout sequencer for
  // every block that goes to the data buffer.
  typedef struct packed {
    logic              is_readout;   // 1: readout record, 0: trigger record
    logic [BLK_W-1:0]  blk;
    tmask_t            local_types;  // local trigger types fired in this block
    tmask_t            remote_types; // remote trigger types received for this block
    logic [15:0]       dead_blocks;  // plane dead-time blocks since the previous readout record
    logic [16:0]       rsvd;
  } header_t;  // 64 bits

  // Message on a daisy-chain link to a neighbouring plane.
  typedef struct packed {
    logic        valid;
    trig_type_e  ttype;
    logic [5:0]  hops;     // planes still to be reached beyond the receiver
    logic [RING_W-1:0] blk; // block of the trigger (planes share the block count)
  } rmsg_t;

  // Per-trigger-type settings.
  typedef struct packed {
    logic       en;
    logic [6:0] pre;     // blocks read out before the trigger block
    logic [6:0] post;    // blocks read out after the trigger block
    logic [5:0] planes;  // planes either side that receive a remote trigger
    zs_mode_e   zs;      // ZS mode applied around the trigger
  } tcfg_t;

  // Run-time configuration (set over IPbus in the real system).
  typedef struct packed {
    logic [SAMPLE_W-1:0] zs_thr_default;  // counts above pedestal
    logic [SAMPLE_W-1:0] zs_thr_low;
    logic [SAMPLE_W-1:0] peak_thr;        // T
    logic [8:0]          npeaks;          // trigger when count > npeaks
    logic [SAMPLE_W-1:0] he_thr;
    logic [23:0]         rnd_period;      // random trigger period in blocks
    logic [6:0]          win_blocks;      // age in blocks at which a block leaves the window buffer
    logic [1:0]          zs_pre;          // blocks before a trigger with changed ZS (0..1)
    logic [1:0]          zs_post;         // blocks after a trigger with changed ZS
    tcfg_t               t_rnd;
    tcfg_t               t_neu;
    tcfg_t               t_he;
  } cfg_t;

  // Physics-mode run settings, with 1 PA taken as 32 ADC counts.
  localparam cfg_t CFG_PHYSICS = '{
    zs_thr_default: 14'd48,      // 1.5 PA
    zs_thr_low:     14'd16,      // 0.5 PA
    peak_thr:       14'd16,      // 0.5 PA
    npeaks:         9'd17,       // N_peaks > 17
    he_thr:         14'd1600,    // 50 PA
    rnd_period:     24'd130208,  // ~1.2 Hz at 156250 blocks/s
    win_blocks:     7'd82,
    zs_pre:         2'd1,
    zs_post:        2'd2,
    t_rnd: '{en: 1'b1, pre: 7'd0,  post: 7'd1,  planes: 6'd49, zs: ZS_OFF},
    t_neu: '{en: 1'b1, pre: 7'd79, post: 7'd32, planes: 6'd3,  zs: ZS_LOW},
    t_he:  '{en: 1'b1, pre: 7'd0,  post: 7'd0,  planes: 6'd0,  zs: ZS_DEFAULT}
  };

  function automatic tcfg_t tcfg_of(cfg_t c, trig_type_e t);
    case (t)
      TRIG_RANDOM:  return c.t_rnd;
      TRIG_NEUTRON: return c.t_neu;
      default:      return c.t_he;
    endcase
  endfunction

endpackage
