// tb_window_buffer: writes a stream of block markers and sample words faster
// than it is read, so that the buffer fills. Blocks are 32 words here. Checks
// that what is read is the written stream minus the dropped blocks, that a
// block is refused exactly when fewer than RESERVE + 32 places are free when
// its marker arrives, that the marker of a refused block still enters with
// its overflow flag set and v0 cleared, and that its samples are all dropped.
module tb_window_buffer;
  import solid_pkg::*;
  localparam int DEPTH = 128, RESERVE = 8, BW = 32;
  logic clk = 0, rst = 1, in_valid = 0, rd_en = 0;
  word_t in_word = '0, head;
  logic empty, ovf_evt;
  logic [$clog2(DEPTH+1)-1:0] level;
  int checks = 0, failures = 0;
  word_t exp_q [$];
  int model_level = 0, n_drop = 0, n_ovf_mark = 0;
  bit dropping = 1;

  window_buffer #(.DEPTH(DEPTH), .RESERVE(RESERVE), .BLK_WORDS(BW)) dut (.clk, .rst, .in_valid, .in_word,
    .rd_en, .head, .empty, .level, .ovf_evt);
  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst = 0;
    for (int t = 0; t < 3000; t++) begin
      bit mark, acc, rd;
      word_t w;
      mark = (t % 32 == 0);
      in_valid = (t < 2400) && (mark || $urandom_range(3) != 0);
      w = mark ? {K_MARK, 1'b0, 1'b0, 1'b1, 15'(t), 12'(t / 32)} : {K_SAMPLE, 6'b0, 8'(t), 1'b0, 15'($urandom)};
      in_word = w;
      // read slowly during the first part, fast later
      rd = (model_level > 0) && ((t < 1200) ? ($urandom_range(3) == 0) : 1'b1);
      rd_en = rd;
      if (rd) begin
        checks++;
        if (empty || head != exp_q[0]) begin
          failures++;
          if (failures < 10) $display("t=%0d head %h expected %h", t, head, exp_q[0]);
        end
      end
      if (mark) begin
        dropping = !(model_level <= DEPTH - RESERVE - BW);
        if (dropping) begin w[28] = 1'b1; w[27] = 1'b0; end
      end
      acc = in_valid && (mark ? (model_level < DEPTH) : !dropping);
      #1;
      checks++;
      if (ovf_evt != (in_valid && !acc)) begin failures++; $display("t=%0d ovf_evt wrong", t); end
      @(negedge clk);
      if (rd) begin void'(exp_q.pop_front()); model_level--; end
      if (acc) begin
        if (mark && w[28]) n_ovf_mark++;
        exp_q.push_back(w);
        model_level++;
      end else if (in_valid) begin
        n_drop++;
      end
      checks++;
      if (int'(level) != model_level) begin failures++; $display("t=%0d level %0d model %0d", t, level, model_level); end
    end
    checks++;
    if (n_drop == 0 || n_ovf_mark == 0) begin failures++; $display("no overflow exercised"); end
    $display("dropped %0d words, %0d markers flagged", n_drop, n_ovf_mark);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
