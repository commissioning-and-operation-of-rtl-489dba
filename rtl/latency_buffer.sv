// latency_buffer: the non-zero-suppressed delay line at the head of each
// channel, holding the last DEPTH samples while the plane decides on a trigger.
//
// The buffer is a circular memory with a single pointer: each clock the word
// stored DEPTH clocks ago is read out and the new sample is written in its
// place, so `dout` equals `din` delayed by exactly DEPTH clocks. `valid` rises
// once the memory has been filled after reset; before that `dout` is not
// meaningful. With DEPTH = 512 the delay is two 256-sample blocks.
//
// From the paper: a FIFO latency buffer of 512 samples, not zero-suppressed.
// Own choice: single-pointer circular memory with a registered output.
module latency_buffer
  import solid_pkg::*;
#(
  parameter int unsigned DEPTH = 512,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic     clk,
  input  logic     rst,
  input  psample_t din,
  output psample_t dout,
  output logic     valid
);
  psample_t      mem [DEPTH];
  logic [AW-1:0] ptr;
  logic          filled;

  always_ff @(posedge clk) begin
    dout     <= mem[ptr];
    mem[ptr] <= din;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      ptr    <= '0;
      filled <= 1'b0;
      valid  <= 1'b0;
    end else begin
      ptr   <= (ptr == AW'(DEPTH - 1)) ? '0 : ptr + 1'b1;
      valid <= filled;
      if (ptr == AW'(DEPTH - 1)) filled <= 1'b1;
    end
  end
endmodule
