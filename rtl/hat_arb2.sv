// hat_arb2: two-input arbiter, the leaf element of every HAT arbiter tree.
//
// It behaves like a mutual-exclusion element: at most one grant is high, a
// grant once given is held for as long as its request stays high, and it
// is released as soon as that request falls. When both requests are high
// and neither side holds the grant, the side that lost the last contest
// wins (a real mutex resolves such a tie by metastability; alternating is
// this design's choice, so that the model is fair and repeatable).
//
// Interface: req[1:0] in, gnt[1:0] out, one-hot or zero. gnt follows req in
// the same cycle (combinational), the lock and the tie-break bit are
// registered.
module hat_arb2 (
  input  logic       clk,
  input  logic       rst_n,
  input  logic [1:0] req,
  output logic [1:0] gnt
);
  logic [1:0] own_q;   // side that holds the grant from last cycle
  logic       last_q;  // side that won the last contested decision

  always_comb begin
    gnt = 2'b00;
    if (own_q[0] && req[0])      gnt = 2'b01;
    else if (own_q[1] && req[1]) gnt = 2'b10;
    else if (req == 2'b11)       gnt = last_q ? 2'b01 : 2'b10;
    else if (req[0])             gnt = 2'b01;
    else if (req[1])             gnt = 2'b10;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      own_q  <= '0;
      last_q <= 1'b1;
    end else begin
      own_q <= gnt;
      if (gnt != 2'b00 && gnt != own_q) last_q <= gnt[1];
    end
  end

  // Mutual exclusion, and a grant only for a pending request.
  a_mutex: assert property (@(posedge clk) disable iff (!rst_n) !(gnt[0] && gnt[1]));
  a_onreq: assert property (@(posedge clk) disable iff (!rst_n) (gnt & ~req) == 2'b00);
endmodule
