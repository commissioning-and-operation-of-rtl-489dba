// tb_readout_sequencer: runs the block timing for 700 blocks with physics
// readout windows (neutron -79/+32 blocks, high energy 0/0, random 0/+1)
// and win_blocks = 82. Local triggers: neutron at block 100, high energy at
// 300, random at 302, two neutrons at 500 and 520 whose windows overlap; a
// remote neutron for block 399 and a remote random for block 650 arrive from
// the neighbours. For every block leaving the window buffers the bench
// checks the keep bit and the readout record (block, local and remote types,
// dead-time count) against the union of the expected windows.
module tb_readout_sequencer;
  import solid_pkg::*;
  localparam int NB = 700, WIN = 82;
  logic clk = 0, rst = 1;
  cfg_t cfg;
  logic [BLK_W-1:0] blk = '0, trg_blk = '0;
  logic [IDX_W-1:0] idx = '0;
  logic trg_valid = 0;
  tmask_t trg_mask = '0;
  rmsg_t rx0 = '0, rx1 = '0;
  logic [15:0] dead_since = '0;
  logic [RING-1:0] keep;
  logic hdr_valid, dead_clr;
  header_t hdr;
  logic [31:0] n_readout;
  int checks = 0, failures = 0;

  readout_sequencer dut (.clk, .rst, .cfg, .blk, .idx, .trg_valid, .trg_blk, .trg_mask,
    .rx0, .rx1, .dead_since, .keep, .hdr_valid, .hdr, .dead_clr, .n_readout);
  always #5 clk = ~clk;

  initial begin
    repeat ((NB + 4) * 256) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  bit     exp_keep [NB];
  tmask_t lt [NB], rt [NB];
  int     n_kept = 0;

  task automatic mark(int b, int pre, int post);
    for (int k = b - pre; k <= b + post; k++) if (k >= 0 && k < NB) exp_keep[k] = 1;
  endtask

  initial begin
    cfg = CFG_PHYSICS;
    cfg.win_blocks = 7'(WIN);
    for (int k = 0; k < NB; k++) begin exp_keep[k] = 0; lt[k] = '0; rt[k] = '0; end
    mark(100, 79, 32); lt[100] = 3'b010;
    mark(300, 0, 0);   lt[300] = 3'b100;
    mark(302, 0, 1);   lt[302] = 3'b001;
    mark(500, 79, 32); lt[500] = 3'b010;
    mark(520, 79, 32); lt[520] = 3'b010;
    mark(399, 79, 32); rt[399] = 3'b010;
    mark(650, 0, 1);   rt[650] = 3'b001;
    repeat (2) @(negedge clk);
    rst = 0;
    for (int b = 0; b < NB; b++) begin
      for (int i = 0; i < 256; i++) begin
        blk = BLK_W'(b); idx = IDX_W'(i);
        // local trigger for block b-1 on the first clock of block b
        trg_valid = (i == 0) && (b >= 1) && (lt[b-1] != '0);
        trg_blk = BLK_W'(b - 1);
        trg_mask = (b >= 1) ? lt[b-1] : '0;
        rx0 = '0; rx1 = '0;
        if (i == 30 && b >= 1 && rt[b-1] != '0) begin
          rx0.valid = 1; rx0.blk = 8'(b - 1);
          rx0.ttype = rt[b-1][0] ? TRIG_RANDOM : TRIG_NEUTRON;
        end
        dead_since = 16'(b * 3);
        #1;
        if (i == 3 && b >= WIN) begin
          int k;
          k = b - WIN;
          checks++;
          if (hdr_valid != exp_keep[k] || dead_clr != exp_keep[k] ||
              (hdr_valid && (hdr.blk != BLK_W'(k) || !hdr.is_readout || hdr.local_types != lt[k] ||
                             hdr.remote_types != rt[k] || hdr.dead_blocks != 16'(b * 3)))) begin
            failures++;
            if (failures < 10) $display("block %0d: hdr_valid=%b expected %b types %b/%b", k, hdr_valid, exp_keep[k], hdr.local_types, hdr.remote_types);
          end
          if (hdr_valid) n_kept++;
        end
        if (i == 100 && b >= WIN) begin
          checks++;
          if (keep[8'(b - WIN)] != exp_keep[b - WIN]) begin failures++; $display("keep bit of %0d", b - WIN); end
        end
        @(negedge clk);
      end
    end
    checks++;
    if (int'(n_readout) != n_kept || n_kept == 0) begin failures++; $display("n_readout %0d kept %0d", n_readout, n_kept); end
    $display("blocks read out %0d", n_kept);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
