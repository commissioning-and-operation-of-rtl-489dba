// tb_trigger_sequencer: drives the block timing and the channel primitives of
// an 8-channel plane for 60 blocks. In chosen blocks a channel shows the
// neutron primitive, or the high-energy primitive on X only, or on X and Y.
// The random trigger period is 5 blocks; back pressure is raised for some
// blocks; a few remote neutron and random triggers are delivered. Checks:
// every block's decision (types fired, or a dead block while busy) against
// the expected one, the trigger records, and the zero-suppression threshold
// in the middle of every block against the regions of all triggers (lowered
// over b-1 .. b+2 for neutron, off over b .. b+1 for random, off winning over
// lowered).
module tb_trigger_sequencer;
  import solid_pkg::*;
  localparam int NCH = 8, NB = 60;
  logic clk = 0, rst = 1, run = 0, busy = 0;
  cfg_t cfg;
  logic [BLK_W-1:0] blk = '0;
  logic [IDX_W-1:0] idx = '0;
  logic [NCH-1:0] neu = '0, he = '0;
  rmsg_t rx0 = '0, rx1 = '0;
  logic trg_valid, dead_blk, zs_off, hdr_valid;
  logic [BLK_W-1:0] trg_blk;
  tmask_t trg_mask;
  logic [SAMPLE_W-1:0] zs_thr;
  header_t hdr;
  logic [31:0] n_trig [NTYPES];
  int checks = 0, failures = 0;

  trigger_sequencer #(.NCH(NCH)) dut (.clk, .rst, .cfg, .blk, .idx, .run, .neu, .he, .busy,
    .rx0, .rx1, .trg_valid, .trg_blk, .trg_mask, .dead_blk, .zs_off, .zs_thr,
    .hdr_valid, .hdr, .n_trig);
  always #5 clk = ~clk;

  initial begin
    repeat ((NB + 4) * 256) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  tmask_t exp_mask [NB];
  bit     exp_dead [NB];
  int     kind [NB];      // 0 none, 1 neutron, 2 HE X only, 3 HE X and Y
  bit     busy_b [NB];
  int     rem_neu [NB];   // remote neutron delivered during this block for block b-1
  int     n_dead = 0, n_fired = 0, n_low = 0, n_off = 0;

  initial begin
    int rc = 0;
    cfg = CFG_PHYSICS;
    cfg.rnd_period = 24'd5;
    for (int b = 0; b < NB; b++) begin
      kind[b]   = (b % 7 == 3) ? 1 : (b % 11 == 5) ? 2 : (b % 13 == 8) ? 3 : 0;
      busy_b[b] = (b >= 40 && b < 44);
      rem_neu[b] = (b == 30 || b == 50);
    end
    for (int b = 0; b < NB; b++) begin
      tmask_t m;
      m = '0;
      if (b >= 2) begin
        // random counter counts every block from reset
        if (rc == 4) m[TRIG_RANDOM] = 1;
        m[TRIG_NEUTRON] = (kind[b] == 1);
        m[TRIG_HE]      = (kind[b] == 3);
      end else if (rc == 4) m[TRIG_RANDOM] = 1;
      rc = (rc == 4) ? 0 : rc + 1;
      exp_dead[b] = (b >= 2) && busy_b[b];
      exp_mask[b] = (b >= 2 && !busy_b[b]) ? m : '0;
    end
  end

  function automatic bit in_region(int z, int b); return (z >= b - 1) && (z <= b + 2); endfunction
  // random trigger: suppression off over its readout window, blocks b .. b+1
  function automatic bit in_rnd(int z, int b); return (z >= b) && (z <= b + 1); endfunction

  initial begin
    repeat (2) @(negedge clk);
    rst = 0;
    for (int b = 0; b < NB; b++) begin
      for (int i = 0; i < 256; i++) begin
        blk = BLK_W'(b); idx = IDX_W'(i);
        run = (b >= 2);
        busy = busy_b[b];
        neu = '0; he = '0;
        if (i == 100 && kind[b] == 1) neu[3] = 1;
        if (i == 50 && kind[b] >= 2) he[1] = 1;               // X side
        if (i == 200 && kind[b] == 3) he[6] = 1;              // Y side
        rx0 = '0;
        if (i == 20 && rem_neu[b]) begin rx0.valid = 1; rx0.ttype = TRIG_NEUTRON; rx0.hops = 1; rx0.blk = 8'(b - 1); end
        #1;
        // decision for block b-1 at the first clock of block b
        if (i == 0 && b >= 1) begin
          checks++;
          if (trg_valid != (exp_mask[b-1] != '0) || (trg_valid && (trg_mask != exp_mask[b-1] || trg_blk != BLK_W'(b - 1)))
              || dead_blk != exp_dead[b-1] || hdr_valid != trg_valid || (hdr_valid && hdr.local_types != exp_mask[b-1])) begin
            failures++;
            $display("block %0d: valid=%b mask=%b (exp %b) dead=%b", b-1, trg_valid, trg_mask, exp_mask[b-1], dead_blk);
          end
          if (dead_blk) n_dead++;
          if (trg_valid) n_fired++;
        end
        // ZS check mid-block: the ZS stage works on block b-2
        if (i == 128 && b >= 4) begin
          bit lo, off;
          int z;
          z = b - 2; lo = 0; off = 0;
          for (int k = 0; k <= b; k++) begin
            if (in_region(z, k) && exp_mask[k][TRIG_NEUTRON]) lo = 1;
            if (in_rnd(z, k) && exp_mask[k][TRIG_RANDOM])     off = 1;
            if (in_region(z, k - 1) && rem_neu[k]) lo = 1;
          end
          checks++;
          if (zs_off != off || (!off && zs_thr != (lo ? cfg.zs_thr_low : cfg.zs_thr_default))) begin
            failures++;
            $display("block %0d ZS: off=%b thr=%0d expected off=%b low=%b", z, zs_off, zs_thr, off, lo);
          end
          if (off) n_off++; else if (lo) n_low++;
        end
        @(negedge clk);
      end
    end
    checks++;
    if (n_dead != 4 || n_low == 0 || n_off == 0 || n_trig[TRIG_HE] == 0 || n_trig[TRIG_NEUTRON] == 0) begin
      failures++; $display("coverage: dead %0d low %0d off %0d", n_dead, n_low, n_off);
    end
    $display("fired %0d, dead %0d, ZS low %0d, ZS off %0d", n_fired, n_dead, n_low, n_off);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
