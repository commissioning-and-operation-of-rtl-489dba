// sync_fifo: single-clock first-word-fall-through FIFO, the storage element
// behind every buffer of the plane firmware.
//
// DEPTH may be any size (it need not be a power of two); the memory is one
// array written at the write pointer. The head word is read combinationally at
// the read pointer, so `rd_data` is valid whenever `empty` is low and `rd_en`
// removes it at the next clock edge. A write to a full FIFO is ignored and
// reported on `wr_drop`; a read of an empty FIFO is ignored. `level` is the
// number of stored words. Reset empties the FIFO (the memory is not cleared;
// no word is read before it has been written).
module sync_fifo #(
  parameter int unsigned W     = 32,
  parameter int unsigned DEPTH = 16,
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1,
  localparam int unsigned LW   = $clog2(DEPTH + 1)
) (
  input  logic          clk,
  input  logic          rst,
  input  logic          wr_en,
  input  logic [W-1:0]  wr_data,
  input  logic          rd_en,
  output logic [W-1:0]  rd_data,
  output logic          empty,
  output logic          full,
  output logic [LW-1:0] level,
  output logic          wr_drop
);
  logic [W-1:0]  mem [DEPTH];
  logic [AW-1:0] wp, rp;

  function automatic logic [AW-1:0] inc(logic [AW-1:0] p);
    return (p == AW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  wire do_wr = wr_en && !full;
  wire do_rd = rd_en && !empty;

  assign empty   = (level == '0);
  assign full    = (level == LW'(DEPTH));
  assign rd_data = mem[rp];
  assign wr_drop = wr_en && full;

  always_ff @(posedge clk) begin
    if (do_wr) mem[wp] <= wr_data;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      wp    <= '0;
      rp    <= '0;
      level <= '0;
    end else begin
      if (do_wr) wp <= inc(wp);
      if (do_rd) rp <= inc(rp);
      level <= level + LW'(do_wr) - LW'(do_rd);
    end
  end
endmodule
