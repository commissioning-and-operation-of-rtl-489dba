// tb_derandomiser: writes blocks of random length (marker plus samples) while
// reading them back block by block at random times. Checks the data order,
// the complete-block count (has_block only when a whole block is stored),
// the fill level and the almost-full flag against a model.
module tb_derandomiser;
  import solid_pkg::*;
  localparam int DEPTH = 256, HWM = 64;
  logic clk = 0, rst = 1, wr_en = 0, blk_in = 0, rd_en = 0, blk_out = 0;
  word_t wr_word = '0, head;
  logic empty, has_block, almost_full;
  logic [$clog2(DEPTH+1)-1:0] level;
  int checks = 0, failures = 0;
  word_t q [$];
  int nblk = 0, n_af = 0, max_blk = 0;

  derandomiser #(.DEPTH(DEPTH), .HWM(HWM)) dut (.clk, .rst, .wr_en, .wr_word, .blk_in,
    .rd_en, .blk_out, .head, .empty, .level, .has_block, .almost_full);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int wleft = 0, wlen = 0;
  int rstate = 0;   // 0 idle, 1 reading a block

  initial begin
    repeat (2) @(negedge clk);
    rst = 0;
    for (int t = 0; t < 15000; t++) begin
      bit w, r, bo;
      word_t wd;
      // writer: a block is a marker followed by 0..39 sample words
      w = 0; blk_in = 0; wd = '0;
      if (wleft == 0 && t < 12000 && q.size() < DEPTH - 41 && $urandom_range(3) == 0) begin
        wlen = int'($urandom_range(40)) + 1;
        wleft = wlen;
      end
      if (wleft > 0) begin
        w  = 1;
        wd = {((wleft == wlen) ? K_MARK : K_SAMPLE), 30'($urandom)};
        wleft--;
        blk_in = (wleft == 0);
      end
      wr_en = w;
      wr_word = wd;
      // reader: starts a block only when one is complete, reads to the next marker
      r = 0; bo = 0;
      if (rstate == 0 && nblk > 0 && (t < 3000 || t > 5000) && $urandom_range(2) == 0) begin
        rstate = 1;
        r = 1;                                // the marker
      end else if (rstate == 1) begin
        if (q.size() > 0 && q[0][31:30] != K_MARK) r = 1;
        else begin bo = 1; rstate = 0; end
      end
      #1;
      checks++;
      if (has_block != (nblk > 0) || int'(level) != q.size() || almost_full != (q.size() > DEPTH - HWM)) begin
        failures++;
        if (failures < 10) $display("t=%0d has_block=%b nblk=%0d level=%0d q=%0d", t, has_block, nblk, level, q.size());
      end
      if (almost_full) n_af++;
      if (r) begin
        checks++;
        if (head != q[0]) begin failures++; $display("t=%0d head %h expected %h", t, head, q[0]); end
      end
      rd_en = r;
      blk_out = bo;
      @(negedge clk);
      if (w) q.push_back(wd);
      if (r) void'(q.pop_front());
      nblk = nblk + int'(blk_in) - int'(bo);
      if (nblk > max_blk) max_blk = nblk;
    end
    checks++;
    if (n_af == 0 || max_blk < 3) begin failures++; $display("fill not exercised"); end
    $display("max blocks stored %0d, almost-full clocks %0d", max_blk, n_af);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
