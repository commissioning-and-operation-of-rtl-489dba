// tb_data_buffer: the concatenator with NCH = 4 derandomisers modelled here.
// Each channel receives the same sequence of blocks (marker + samples, some
// with the first sample kept, some marked dead) at random moments; the
// output FIFO is read slowly at first so that it fills and the concatenator
// has to wait. The expected stream is built independently: per block, per
// channel in order, a channel header (channel, block, dead, overflow), the
// first sample if it was kept and the block's sample words.
module tb_data_buffer;
  import solid_pkg::*;
  localparam int NCH = 4, DEPTH = 64, NBLK = 12;
  logic clk = 0, rst = 1, rd_en = 0;
  word_t dr_head [NCH];
  logic [NCH-1:0] dr_empty, dr_has_block, dr_pop, dr_blk_pop;
  word_t rd_data;
  logic rd_valid, almost_full, blk_done;
  logic [$clog2(DEPTH+1)-1:0] level;
  int checks = 0, failures = 0;

  word_t dq [NCH][$];
  int    nb [NCH];
  word_t exp_q [$];
  int n_full = 0, n_done = 0;

  data_buffer #(.NCH(NCH), .DEPTH(DEPTH), .HWM(8)) dut (.clk, .rst, .dr_head, .dr_empty,
    .dr_has_block, .dr_pop, .dr_blk_pop, .rd_en, .rd_data, .rd_valid, .level, .almost_full, .blk_done);
  always #5 clk = ~clk;

  always_comb
    for (int c = 0; c < NCH; c++) begin
      dr_empty[c]     = (dq[c].size() == 0);
      dr_head[c]      = dr_empty[c] ? '0 : dq[c][0];
      dr_has_block[c] = (nb[c] > 0);
    end

  initial begin
    repeat (30000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // blocks per channel, built in advance and released one block at a time
  word_t src [NCH][NBLK][$];

  initial begin
    for (int b = 0; b < NBLK; b++)
      for (int c = 0; c < NCH; c++) begin
        bit dead, v0, ovf;
        int ns;
        dead = (b == 4 && c == 2);
        ovf  = (b == 7 && c == 1);
        v0   = dead ? 1'b1 : 1'($urandom_range(1));  // a dead marker may still carry v0
        ns   = dead ? 0 : int'($urandom_range(12));
        src[c][b].push_back({K_MARK, dead, ovf, v0, 15'(100 + b), 12'(b)});
        exp_q.push_back({K_CHAN, dead, ovf, 12'(c), 16'(b)});
        if (v0 && !dead) exp_q.push_back({K_SAMPLE, 6'b0, 8'd0, 1'b0, 15'(100 + b)});
        for (int i = 1; i <= ns; i++) begin
          word_t w;
          w = {K_SAMPLE, 6'b0, 8'(i), 1'b0, 15'($urandom)};
          src[c][b].push_back(w);
          exp_q.push_back(w);
        end
      end
    for (int c = 0; c < NCH; c++) nb[c] = 0;
    repeat (2) @(negedge clk);
    rst = 0;
  end

  int released [NCH] = '{default: 0};
  always @(posedge clk) if (!rst) begin
    // consumer pops
    for (int c = 0; c < NCH; c++) begin
      if (dr_pop[c]) void'(dq[c].pop_front());
      if (dr_blk_pop[c]) nb[c]--;
    end
    // producer: release the next block of a channel at random
    for (int c = 0; c < NCH; c++)
      if (released[c] < NBLK && $urandom_range(30) == 0) begin
        foreach (src[c][released[c]][i]) dq[c].push_back(src[c][released[c]][i]);
        nb[c]++;
        released[c]++;
      end
    if (blk_done) n_done++;
    if (level == 7'(DEPTH)) n_full++;
  end

  initial begin
    wait (!rst);
    for (int t = 0; t < 25000; t++) begin
      @(negedge clk);
      rd_en = rd_valid && ((t < 4000) ? ($urandom_range(15) == 0) : 1'b1);
      if (rd_en) begin
        checks++;
        if (exp_q.size() == 0 || rd_data != exp_q[0]) begin
          failures++;
          if (failures < 10) $display("t=%0d read %h expected %h", t, rd_data, exp_q.size() ? exp_q[0] : '0);
        end
        if (exp_q.size()) void'(exp_q.pop_front());
      end
      if (exp_q.size() == 0 && t > 5000) break;
    end
    @(negedge clk);
    rd_en = 0;
    checks += 3;
    if (exp_q.size() != 0) begin failures++; $display("%0d words missing", exp_q.size()); end
    if (n_full == 0) begin failures++; $display("buffer never full"); end
    if (n_done != NBLK) begin failures++; $display("blk_done %0d", n_done); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
