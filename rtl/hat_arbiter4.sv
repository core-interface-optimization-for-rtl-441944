// hat_arbiter4: four-input arbiter of one HAT level (ArbiterH, ArbiterM,
// ArbiterL).
//
// Built as a tree of three two-input arbiters: two leaves take requests
// {1,0} and {3,2}, the root arbitrates between the OR of each pair. A
// request is granted when its leaf and the root both select it. Three
// two-input arbiters per level is what gives the HAT its area of
// 3*log4(N) two-input arbiters.
//
// Interface: req[3:0] (masked requests of the level's four clusters) in,
// gnt[3:0] one-hot or zero out, combinational from req and the arbiters'
// locks. A grant is held while its request stays high.
module hat_arbiter4
  import core_if_pkg::*;
(
  input  logic     clk,
  input  logic     rst_n,
  input  onehot4_t req,
  output onehot4_t gnt
);
  logic [1:0] g_lo, g_hi, g_root;

  hat_arb2 u_leaf_lo (.clk, .rst_n, .req(req[1:0]), .gnt(g_lo));
  hat_arb2 u_leaf_hi (.clk, .rst_n, .req(req[3:2]), .gnt(g_hi));
  hat_arb2 u_root    (.clk, .rst_n, .req({|req[3:2], |req[1:0]}), .gnt(g_root));

  assign gnt = {g_hi & {2{g_root[1]}}, g_lo & {2{g_root[0]}}};

  a_onehot: assert property (@(posedge clk) disable iff (!rst_n) $onehot0(gnt));
endmodule
