// tb_zero_suppress: feeds random samples over several blocks while changing
// the threshold and switching suppression off, and compares the word stream
// with the expected one: a marker (block number, first sample, pass flag) at
// every block start and a sample word (index, value) for every other sample
// strictly above the threshold in force.
module tb_zero_suppress;
  import solid_pkg::*;
  localparam int NBLK = 8;
  logic clk = 0, rst = 1, en = 0, zs_off = 0;
  psample_t s = '0;
  logic [IDX_W-1:0] idx = '0;
  logic [11:0] blk = '0;
  logic [SAMPLE_W-1:0] thr = 14'd48;
  logic out_valid;
  word_t out_word;
  int checks = 0, failures = 0;
  word_t exp_q [$];
  int n_mark = 0, n_samp = 0, n_off = 0;

  zero_suppress dut (.clk, .rst, .en, .s, .idx, .blk, .zs_off, .thr, .out_valid, .out_word);
  always #5 clk = ~clk;

  initial begin
    repeat (NBLK * 256 + 200) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // collect the output
  always @(posedge clk) if (!rst && out_valid) begin
    word_t e;
    checks++;
    if (exp_q.size() == 0) begin failures++; $display("unexpected word %h", out_word); end
    else begin
      e = exp_q.pop_front();
      if (e != out_word) begin
        failures++;
        if (failures < 10) $display("got %h expected %h", out_word, e);
      end
    end
  end

  initial begin
    int v;
    repeat (2) @(negedge clk);
    rst = 0;
    en = 1;
    for (int b = 0; b < NBLK; b++) begin
      thr    = (b % 3 == 1) ? 14'd16 : 14'd48;
      zs_off = (b == 5);
      for (int i = 0; i < 256; i++) begin
        v = (($urandom_range(9) == 0) ? int'($urandom_range(200)) : int'($urandom_range(20))) - 10;
        s = psample_t'(v);
        idx = IDX_W'(i);
        blk = 12'(b + 100);
        if (i == 0) begin
          exp_q.push_back({K_MARK, 1'b0, 1'b0, (zs_off || v > int'(thr)), psample_t'(v), 12'(b + 100)});
          n_mark++;
        end else if (zs_off || v > int'(thr)) begin
          exp_q.push_back({K_SAMPLE, 6'b0, 8'(i), 1'b0, psample_t'(v)});
          n_samp++;
          if (zs_off) n_off++;
        end
        @(negedge clk);
      end
    end
    en = 0;
    repeat (3) @(negedge clk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("%0d words missing", exp_q.size()); end
    checks++;
    if (n_mark != NBLK || n_samp == 0 || n_off != 255) begin failures++; $display("coverage"); end
    $display("markers %0d, samples kept %0d", n_mark, n_samp);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
