// header_buffer: FIFO of 64-bit header records read out by the DAQ next to
// the data buffer.
//
// Two sources write into it through a merging multiplexer: the trigger
// sequencer (one trigger record per local trigger) and the readout sequencer
// (one readout record per block sent to the data buffer). Each source has a
// one-entry holding register, so both may present a record in the same clock;
// the readout record is written first and the trigger record one clock later.
// A source must not present a new record while its holding register is still
// full (both write at most once per 256-sample block, so this cannot happen).
// Records that find the FIFO full are dropped and counted in `lost`.
// `almost_full` (fewer than HWM free) is part of the plane's back pressure.
//
// From the paper: a header buffer fed through a multiplexer from the trigger
// and readout sequencers, read out over IPbus, which exerts back pressure.
// Own choices: record layout (solid_pkg::header_t), depth, holding registers.
module header_buffer
  import solid_pkg::*;
#(
  parameter int unsigned DEPTH = 1024,
  parameter int unsigned HWM   = 64,
  localparam int unsigned LW   = $clog2(DEPTH + 1)
) (
  input  logic          clk,
  input  logic          rst,
  input  logic          trg_valid,
  input  header_t       trg_hdr,
  input  logic          ro_valid,
  input  header_t       ro_hdr,
  input  logic          rd_en,
  output header_t       rd_data,
  output logic          rd_valid,
  output logic [LW-1:0] level,
  output logic          almost_full,
  output logic [15:0]   lost
);
  logic    hold_t_v, hold_r_v, f_wr, f_full, f_empty, f_drop, sel_r;
  header_t hold_t, hold_r, f_wdata;

  assign sel_r   = hold_r_v;
  assign f_wr    = hold_r_v || hold_t_v;
  assign f_wdata = sel_r ? hold_r : hold_t;

  always_ff @(posedge clk) begin
    if (rst) begin
      hold_t_v <= 1'b0;
      hold_r_v <= 1'b0;
      hold_t   <= '0;
      hold_r   <= '0;
      lost     <= '0;
    end else begin
      if (sel_r)         hold_r_v <= 1'b0;
      else if (hold_t_v) hold_t_v <= 1'b0;
      if (ro_valid)  begin hold_r <= ro_hdr;  hold_r_v <= 1'b1; end
      if (trg_valid) begin hold_t <= trg_hdr; hold_t_v <= 1'b1; end
      if (f_drop && lost != '1) lost <= lost + 1'b1;
    end
  end

  sync_fifo #(.W(64), .DEPTH(DEPTH)) u_fifo (
    .clk, .rst,
    .wr_en(f_wr), .wr_data(f_wdata),
    .rd_en, .rd_data,
    .empty(f_empty), .full(f_full), .level, .wr_drop(f_drop)
  );

  assign rd_valid    = !f_empty;
  assign almost_full = (level > LW'(DEPTH - HWM));

  // A trigger record still held back by a readout record may not be overwritten.
  a_trg_hold: assert property (@(posedge clk) disable iff (rst) trg_valid |-> !(hold_t_v && sel_r));
endmodule
