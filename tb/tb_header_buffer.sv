// tb_header_buffer: trigger and readout records are offered at random times,
// often in the same clock. Checks that every record comes out exactly once,
// readout record first when both arrive together, that nothing is lost while
// there is room, and that records meeting a full FIFO are dropped and
// counted once the reader stops.
module tb_header_buffer;
  import solid_pkg::*;
  localparam int DEPTH = 16;
  logic clk = 0, rst = 1, trg_valid = 0, ro_valid = 0, rd_en = 0;
  header_t trg_hdr = '0, ro_hdr = '0, rd_data;
  logic rd_valid, almost_full;
  logic [$clog2(DEPTH+1)-1:0] level;
  logic [15:0] lost;
  int checks = 0, failures = 0, n_both = 0;
  header_t exp_q [$];

  header_buffer #(.DEPTH(DEPTH), .HWM(4)) dut (.clk, .rst, .trg_valid, .trg_hdr, .ro_valid, .ro_hdr,
    .rd_en, .rd_data, .rd_valid, .level, .almost_full, .lost);
  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int seq = 0;
    repeat (2) @(negedge clk);
    rst = 0;
    for (int t = 0; t < 2000; t++) begin
      header_t a, b;
      bit ta, rb;
      // offer records every third clock at most, so holding registers drain
      ta = (t % 3 == 0) && $urandom_range(1);
      rb = (t % 3 == 0) && $urandom_range(1);
      a = '0; a.is_readout = 0; a.blk = 24'(seq++); a.local_types = 3'($urandom);
      b = '0; b.is_readout = 1; b.blk = 24'(seq++); b.dead_blocks = 16'($urandom);
      trg_valid = ta; trg_hdr = a;
      ro_valid  = rb; ro_hdr  = b;
      if (rb) exp_q.push_back(b);
      if (ta) exp_q.push_back(a);
      if (ta && rb) n_both++;
      rd_en = rd_valid && $urandom_range(1);
      if (rd_en) begin
        checks++;
        if (exp_q.size() == 0 || rd_data != exp_q[0]) begin
          failures++; $display("t=%0d read %h expected %h", t, rd_data, exp_q[0]);
        end
        void'(exp_q.pop_front());
      end
      @(negedge clk);
    end
    trg_valid = 0; ro_valid = 0;
    checks++;
    if (lost != 0) begin failures++; $display("lost %0d while reading", lost); end
    // stop reading, overfill: exactly the surplus must be counted as lost
    rd_en = 0;
    repeat (4) @(negedge clk);
    for (int i = 0; i < DEPTH + 5; i++) begin
      ro_valid = 1; ro_hdr = '0; ro_hdr.blk = 24'(i);
      @(negedge clk);
    end
    ro_valid = 0;
    repeat (3) @(negedge clk);
    checks += 3;
    if (int'(lost) != exp_q.size() + DEPTH + 5 - DEPTH) begin failures++; $display("lost %0d", lost); end
    if (!almost_full || level != 5'(DEPTH)) begin failures++; $display("not full"); end
    if (n_both == 0) begin failures++; $display("no simultaneous records"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
