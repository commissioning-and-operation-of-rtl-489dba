// remote_trigger: carries trigger messages along the daisy chain of planes so
// that a trigger can read out a chosen number of planes either side of the
// plane where it fired.
//
// Each plane has a link towards each neighbour ("up" and "down"). A message
// names the trigger type, the block of the trigger (low 8 bits; all planes
// count blocks in step from the common clock) and `hops`, the number of
// planes it must still reach including the receiver. A plane that receives a
// message hands it to its own sequencers (`del_up`/`del_dn`, one clock) and,
// if `hops` > 1, passes it on in the same direction with `hops` - 1, so a
// trigger sent with hops = P reaches exactly P planes on that side.
//
// Local triggers (`req_valid`, one bit per type in `req_mask`) are queued per
// type and direction and sent to both sides with hops = the type's `planes`
// setting (nothing is sent for 0). Forwarded messages have priority on a link;
// queued local messages go out one per clock, lowest type first. Every output
// is registered: one clock per hop.
//
// From the paper: remote triggers to a preset number of planes either side,
// up to the full detector, over links daisy-chained between planes. Own
// choices: message format and queueing. The 2.5 Gb/s serial links themselves
// are outside this logic; here a link is a parallel message port.
module remote_trigger
  import solid_pkg::*;
(
  input  logic              clk,
  input  logic              rst,
  input  cfg_t              cfg,
  input  logic              req_valid,
  input  tmask_t            req_mask,
  input  logic [RING_W-1:0] req_blk,
  input  rmsg_t             rx_up,      // from the neighbour above
  input  rmsg_t             rx_dn,      // from the neighbour below
  output rmsg_t             tx_up,
  output rmsg_t             tx_dn,
  output rmsg_t             del_up,
  output rmsg_t             del_dn,
  output logic [15:0]       n_sent
);
  tmask_t            pend_up, pend_dn;
  logic [RING_W-1:0] pblk [NTYPES];

  function automatic logic [5:0] planes_of(trig_type_e t);
    return tcfg_of(cfg, t).planes;
  endfunction

  // Pick the message for one outgoing link.
  function automatic rmsg_t pick(rmsg_t fwd_src, tmask_t pend, output tmask_t taken);
    rmsg_t m;
    m     = '0;
    taken = '0;
    if (fwd_src.valid && fwd_src.hops > 6'd1) begin
      m      = fwd_src;
      m.hops = fwd_src.hops - 6'd1;
    end else begin
      for (int t = NTYPES - 1; t >= 0; t--) begin
        if (pend[t]) begin
          m.valid = 1'b1;
          m.ttype = trig_type_e'(t);
          m.hops  = planes_of(trig_type_e'(t));
          m.blk   = pblk[t];
          taken   = '0;
          taken[t] = 1'b1;
        end
      end
    end
    return m;
  endfunction

  always_ff @(posedge clk) begin
    if (rst) begin
      pend_up <= '0;
      pend_dn <= '0;
      tx_up   <= '0;
      tx_dn   <= '0;
      del_up  <= '0;
      del_dn  <= '0;
      n_sent  <= '0;
      for (int t = 0; t < NTYPES; t++) pblk[t] <= '0;
    end else begin : upd
      tmask_t tk_up, tk_dn, nreq;
      rmsg_t  mu, md;
      // a message from below travels on upwards, and vice versa
      mu = pick(rx_dn, pend_up, tk_up);
      md = pick(rx_up, pend_dn, tk_dn);
      tx_up  <= mu;
      tx_dn  <= md;
      del_up <= rx_up;
      del_dn <= rx_dn;
      n_sent <= n_sent + 16'(mu.valid && tk_up != '0) + 16'(md.valid && tk_dn != '0);
      nreq = '0;
      if (req_valid)
        for (int t = 0; t < NTYPES; t++)
          nreq[t] = req_mask[t] && (planes_of(trig_type_e'(t)) != '0);
      for (int t = 0; t < NTYPES; t++)
        if (nreq[t]) pblk[t] <= req_blk;
      pend_up <= (pend_up & ~tk_up) | nreq;
      pend_dn <= (pend_dn & ~tk_dn) | nreq;
    end
  end
endmodule
