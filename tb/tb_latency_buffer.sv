// tb_latency_buffer: a random sample stream must come out exactly DEPTH
// clocks later, and `valid` must rise exactly when the first sample written
// after reset appears at the output.
module tb_latency_buffer;
  import solid_pkg::*;
  localparam int DEPTH = 512;
  localparam int NS = 3000;
  logic clk = 0, rst = 1, valid;
  psample_t din = '0, dout;
  int checks = 0, failures = 0;
  psample_t hist [NS];

  latency_buffer #(.DEPTH(DEPTH)) dut (.clk, .rst, .din, .dout, .valid);
  always #5 clk = ~clk;

  initial begin
    repeat (NS + 100) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst = 0;
    for (int t = 0; t < NS; t++) begin
      hist[t] = psample_t'($urandom);
      din = hist[t];
      @(negedge clk);
      // after edge t the output holds the sample of edge t - DEPTH
      checks++;
      if (valid != (t >= DEPTH)) begin
        failures++; $display("t=%0d valid=%b", t, valid);
      end
      if (t >= DEPTH) begin
        checks++;
        if (dout != hist[t-DEPTH]) begin
          failures++;
          if (failures < 10) $display("t=%0d dout=%0d expected %0d", t, dout, hist[t-DEPTH]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
