// tb_remote_trigger: seven planes' remote-trigger units connected as a daisy
// chain. Plane 3 raises a neutron trigger (sent to 3 planes either side) and,
// in the same clock, plane 4 raises neutron + random triggers (random sent to
// the whole detector) and plane 0 a high-energy trigger (0 planes: nothing
// sent). Then plane 6 raises a neutron trigger at the top end of the chain.
// Checks, per plane and type, the number of deliveries and their block
// numbers against the expected reach, and that every message arrives within
// a bounded number of clocks.
module tb_remote_trigger;
  import solid_pkg::*;
  localparam int NP = 7;
  logic clk = 0, rst = 1;
  cfg_t cfg;
  logic   req_valid [NP];
  tmask_t req_mask  [NP];
  logic [RING_W-1:0] req_blk [NP];
  rmsg_t rx_up [NP], rx_dn [NP], tx_up [NP], tx_dn [NP], del_up [NP], del_dn [NP];
  logic [15:0] n_sent [NP];
  int checks = 0, failures = 0;
  int got [NP][NTYPES];

  for (genvar p = 0; p < NP; p++) begin : g
    assign rx_up[p] = (p == NP - 1) ? '0 : tx_dn[p + 1];
    assign rx_dn[p] = (p == 0) ? '0 : tx_up[p - 1];
    remote_trigger u (.clk, .rst, .cfg, .req_valid(req_valid[p]), .req_mask(req_mask[p]),
      .req_blk(req_blk[p]), .rx_up(rx_up[p]), .rx_dn(rx_dn[p]), .tx_up(tx_up[p]), .tx_dn(tx_dn[p]),
      .del_up(del_up[p]), .del_dn(del_dn[p]), .n_sent(n_sent[p]));
  end
  always #5 clk = ~clk;

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (!rst)
    for (int p = 0; p < NP; p++) begin
      if (del_up[p].valid) begin
        got[p][del_up[p].ttype]++;
        checks++;
        if (del_up[p].blk != 8'd41) begin failures++; $display("plane %0d wrong block", p); end
      end
      if (del_dn[p].valid) begin
        got[p][del_dn[p].ttype]++;
        checks++;
        if (del_dn[p].blk != 8'd41) begin failures++; $display("plane %0d wrong block", p); end
      end
    end

  function automatic int reach(int src, int p, int planes);
    int d;
    d = (p > src) ? p - src : src - p;
    return (d >= 1 && d <= planes) ? 1 : 0;
  endfunction

  initial begin
    int exp_n;
    cfg = CFG_PHYSICS;            // neutron 3 planes, random 49, high energy 0
    for (int p = 0; p < NP; p++) begin
      req_valid[p] = 0; req_mask[p] = '0; req_blk[p] = '0;
      for (int t = 0; t < NTYPES; t++) got[p][t] = 0;
    end
    repeat (2) @(negedge clk);
    rst = 0;
    @(negedge clk);
    // every forwarded trigger carries block 41
    req_valid[3] = 1; req_mask[3] = 3'b010; req_blk[3] = 8'd41;
    req_valid[4] = 1; req_mask[4] = 3'b011; req_blk[4] = 8'd41;
    req_valid[0] = 1; req_mask[0] = 3'b100; req_blk[0] = 8'd42;
    @(negedge clk);
    req_valid[3] = 0; req_valid[4] = 0; req_valid[0] = 0;
    repeat (5) @(negedge clk);
    repeat (40) @(negedge clk);
    for (int p = 0; p < NP; p++) begin
      checks++;
      exp_n = reach(3, p, 3) + reach(4, p, 3);
      if (got[p][TRIG_NEUTRON] != exp_n) begin failures++; $display("plane %0d neutron %0d expected %0d", p, got[p][TRIG_NEUTRON], exp_n); end
      checks++;
      exp_n = reach(4, p, 49);
      if (got[p][TRIG_RANDOM] != exp_n) begin failures++; $display("plane %0d random %0d expected %0d", p, got[p][TRIG_RANDOM], exp_n); end
      checks++;
      if (got[p][TRIG_HE] != 0) begin failures++; $display("plane %0d high-energy delivered", p); end
    end
    // trigger at the chain end
    for (int p = 0; p < NP; p++) for (int t = 0; t < NTYPES; t++) got[p][t] = 0;
    req_valid[6] = 1; req_mask[6] = 3'b010; req_blk[6] = 8'd41;
    @(negedge clk);
    req_valid[6] = 0;
    repeat (20) @(negedge clk);
    for (int p = 0; p < NP; p++) begin
      checks++;
      if (got[p][TRIG_NEUTRON] != reach(6, p, 3)) begin failures++; $display("end trigger: plane %0d got %0d", p, got[p][TRIG_NEUTRON]); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
