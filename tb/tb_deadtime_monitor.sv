// tb_deadtime_monitor: random plane-dead pulses, channel-dead pulses on
// several channels at once, busy levels and record clears. The totals, the
// count since the last record (including a clear in the same clock as a dead
// block) and the busy-clock count are compared with a model.
module tb_deadtime_monitor;
  localparam int NCH = 16;
  logic clk = 0, rst = 1, busy = 0, plane_dead = 0, clr_since = 0;
  logic [NCH-1:0] chan_dead = '0;
  logic [31:0] plane_dead_blocks, chan_dead_blocks, busy_cycles;
  logic [15:0] dead_since;
  int checks = 0, failures = 0;

  deadtime_monitor #(.NCH(NCH)) dut (.clk, .rst, .busy, .plane_dead, .chan_dead, .clr_since,
    .plane_dead_blocks, .chan_dead_blocks, .busy_cycles, .dead_since);
  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int mp = 0, mc = 0, mb = 0, ms = 0, n_both = 0;
    repeat (2) @(negedge clk);
    rst = 0;
    for (int t = 0; t < 3000; t++) begin
      busy = $urandom_range(1);
      plane_dead = ($urandom_range(3) == 0);
      chan_dead = ($urandom_range(4) == 0) ? NCH'($urandom) : '0;
      clr_since = ($urandom_range(19) == 0);
      if (clr_since && plane_dead) n_both++;
      @(negedge clk);
      mp += int'(plane_dead);
      mc += $countones(chan_dead);
      mb += int'(busy);
      ms = clr_since ? int'(plane_dead) : ms + int'(plane_dead);
      checks++;
      if (plane_dead_blocks != 32'(mp) || chan_dead_blocks != 32'(mc) || busy_cycles != 32'(mb) || dead_since != 16'(ms)) begin
        failures++;
        if (failures < 10) $display("t=%0d %0d/%0d %0d/%0d %0d/%0d %0d/%0d", t, plane_dead_blocks, mp, chan_dead_blocks, mc, busy_cycles, mb, dead_since, ms);
      end
    end
    checks++;
    if (n_both == 0) begin failures++; $display("clear with dead block not exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
