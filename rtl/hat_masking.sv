// hat_masking: masking stage of one HAT level, four channels (Fig. "masking
// gate").
//
// Each channel decouples the slow four-phase handshake of a neuron cluster
// from the fast request/release cycle of the arbiter. Per channel:
//   * a latch passes the cluster request Neu_Req on to the arbiter as Req
//     while it is open; it is reset by the level's Grant;
//   * a C-element over Neu_Req and Req closes the latch once Req has been
//     taken, so a cluster that keeps Neu_Req high is offered to the arbiter
//     once only, and the latch re-opens after Neu_Req has fallen;
//   * a second C-element over Neu_Req and Grant makes Neu_Grant: it rises
//     when the level grants the cluster and falls only when the cluster has
//     withdrawn its request, so the grant to the cluster outlives the short
//     arbiter grant.
// V, the completion detector after the latches, is high while any masked
// request is waiting; the next higher level uses it to keep its grant.
//
// In this synchronous rendering every latch and C-element is a flip-flop
// updated on the rising clock edge. Interface: neu_req/neu_grant to the
// clusters, req (registered) to the arbiter, grant from the first
// pipeline stage, v out. Reset clears all state.
module hat_masking
  import core_if_pkg::*;
(
  input  logic     clk,
  input  logic     rst_n,
  input  onehot4_t neu_req,    // cluster requests (wired OR of the neurons)
  output onehot4_t neu_grant,  // cluster grants
  output onehot4_t req,        // masked requests to the arbiter
  input  onehot4_t grant,      // grants held by the first pipeline stage
  output logic     v           // some masked request is pending
);
  onehot4_t req_q, c_en_q, c_gnt_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      req_q   <= '0;
      c_en_q  <= '0;
      c_gnt_q <= '0;
    end else begin
      for (int i = 0; i < HAT_WAYS; i++) begin
        // latch: reset by Grant, transparent while the C-element output is low
        if (grant[i])       req_q[i] <= 1'b0;
        else if (!c_en_q[i]) req_q[i] <= neu_req[i];
        // C-element (Neu_Req, Req): inverted output enables the latch
        if (neu_req[i] == req_q[i]) c_en_q[i] <= neu_req[i];
        // C-element (Neu_Req, Grant) -> Neu_Grant
        if (neu_req[i] == grant[i]) c_gnt_q[i] <= neu_req[i];
      end
    end
  end

  assign req       = req_q;
  assign neu_grant = c_gnt_q;
  assign v         = |req_q;
endmodule
