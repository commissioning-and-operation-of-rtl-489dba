// deadtime_monitor: accounts for the data the plane could not record.
//
// Plane dead time: blocks in which the trigger sequencer was halted by back
// pressure (`plane_dead` pulses once per such block). Channel dead time:
// channel blocks that were to be read out but were dropped because that
// channel's derandomiser was full (`chan_dead`, one bit per channel, pulses).
// Both are accumulated in 32-bit totals for run monitoring. The plane dead
// blocks are also counted since the last readout record (`dead_since`,
// saturating at 16 bits); the readout sequencer copies that count into its
// next record and clears it with `clr_since`, which is how dead periods are
// encoded in the data stream. `busy_cycles` counts clocks with back pressure.
//
// From the paper: plane and channel dead time, encoded in the data stream once
// triggers resume; dead-time fraction measured during stress tests. Own
// choices: counter widths and the per-record encoding.
module deadtime_monitor #(
  parameter int unsigned NCH = 64
) (
  input  logic           clk,
  input  logic           rst,
  input  logic           busy,
  input  logic           plane_dead,
  input  logic [NCH-1:0] chan_dead,
  input  logic           clr_since,
  output logic [31:0]    plane_dead_blocks,
  output logic [31:0]    chan_dead_blocks,
  output logic [31:0]    busy_cycles,
  output logic [15:0]    dead_since
);
  logic [$clog2(NCH+1)-1:0] nd;

  always_comb begin
    nd = '0;
    for (int c = 0; c < NCH; c++) nd += $bits(nd)'(chan_dead[c]);
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      plane_dead_blocks <= '0;
      chan_dead_blocks  <= '0;
      busy_cycles       <= '0;
      dead_since        <= '0;
    end else begin
      if (plane_dead) plane_dead_blocks <= plane_dead_blocks + 1;
      chan_dead_blocks <= chan_dead_blocks + 32'(nd);
      if (busy) busy_cycles <= busy_cycles + 1;
      if (clr_since)
        dead_since <= 16'(plane_dead);
      else if (plane_dead && dead_since != '1)
        dead_since <= dead_since + 1'b1;
    end
  end
endmodule
