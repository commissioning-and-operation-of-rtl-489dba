// tb_cro: the channel readout against a window buffer and derandomiser
// modelled here. Ten blocks with random sample words wait in the window
// buffer; the current block number advances every 40 clocks. Blocks 11, 12,
// 15 and 18 are marked for readout. Checks: no block leaves before it is
// win_blocks old; the kept blocks arrive complete and in order and the
// others are dropped; block 15 meets a derandomiser without room for a block
// and is reduced to a marker with the dead flag; block 18 meets a full
// derandomiser and waits until room appears; blk_done and dead_evt count.
module tb_cro;
  import solid_pkg::*;
  localparam int DR_DEPTH = 512, WIN = 3;
  logic clk = 0, rst = 1;
  logic [RING_W-1:0] blk_now = 8'd10;
  logic [RING-1:0] keep = '0;
  word_t wb_head, dr_word;
  logic wb_empty, wb_pop, dr_wr, blk_done, dead_evt;
  logic [$clog2(DR_DEPTH+1)-1:0] dr_level;
  int checks = 0, failures = 0;

  word_t wq [$];
  word_t exp_q [$];
  int n_done = 0, n_dead = 0, t = 0, stall18 = 0;

  assign wb_head  = (wq.size() > 0) ? wq[0] : '0;
  assign wb_empty = (wq.size() == 0);

  cro #(.DR_DEPTH(DR_DEPTH)) dut (.clk, .rst, .blk_now, .win_blocks(7'(WIN)), .keep,
    .wb_head, .wb_empty, .wb_pop, .dr_level, .dr_wr, .dr_word, .blk_done, .dead_evt);
  always #5 clk = ~clk;

  // derandomiser occupancy seen by the cro
  always_comb begin
    dr_level = '0;
    if (wq.size() > 0 && wq[0][31:30] == K_MARK && wq[0][7:0] == 8'd15) dr_level = 10'(DR_DEPTH - 100);
    if (wq.size() > 0 && wq[0][31:30] == K_MARK && wq[0][7:0] == 8'd18 && stall18 < 20) dr_level = 10'(DR_DEPTH);
  end

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (!rst) begin
    if (dr_wr) begin
      mark_t m;
      m = mark_t'(dr_word);
      checks++;
      if (exp_q.size() == 0 || dr_word != exp_q[0]) begin
        failures++;
        $display("t=%0d wrote %h expected %h", t, dr_word, exp_q.size() ? exp_q[0] : '0);
      end else void'(exp_q.pop_front());
      if (dr_word[31:30] == K_MARK) begin
        checks++;
        if (RING_W'(blk_now - m.blk[7:0]) < RING_W'(WIN)) begin failures++; $display("block %0d left too early", m.blk); end
      end
    end
    if (blk_done) n_done++;
    if (dead_evt) n_dead++;
    if (wq.size() > 0 && wq[0][31:30] == K_MARK && wq[0][7:0] == 8'd18 && RING_W'(blk_now - 8'd18) >= WIN) stall18++;
    if (wb_pop) void'(wq.pop_front());
    t++;
    if (t % 40 == 0) blk_now <= blk_now + 1'b1;
  end

  initial begin
    for (int b = 10; b < 21; b++) begin
      int ns;
      word_t mk;
      bit kept;
      ns = (b == 20) ? 0 : int'($urandom_range(30)) + 1;
      mk = {K_MARK, 1'b0, 1'b0, 1'b1, 15'(b * 3), 12'(b)};
      wq.push_back(mk);
      kept = (b == 11 || b == 12 || b == 15 || b == 18);
      if (b == 15) exp_q.push_back({K_MARK, 1'b1, 1'b0, 1'b0, 15'(b * 3), 12'(b)});
      else if (kept) exp_q.push_back(mk);
      for (int i = 1; i <= ns; i++) begin
        word_t w;
        w = {K_SAMPLE, 6'b0, 8'(i * 7), 1'b0, 15'($urandom)};
        wq.push_back(w);
        if (kept && b != 15) exp_q.push_back(w);
      end
    end
    keep[11] = 1; keep[12] = 1; keep[15] = 1; keep[18] = 1;
    repeat (2) @(negedge clk);
    rst = 0;
    wait (blk_now == 8'd25);
    repeat (5) @(negedge clk);
    checks += 4;
    if (exp_q.size() != 0) begin failures++; $display("%0d words not written", exp_q.size()); end
    if (n_done != 4) begin failures++; $display("blk_done %0d", n_done); end
    if (n_dead != 1) begin failures++; $display("dead_evt %0d", n_dead); end
    if (stall18 < 20) begin failures++; $display("full derandomiser stall not exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
