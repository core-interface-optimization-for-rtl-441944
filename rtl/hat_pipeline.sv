// hat_pipeline: asynchronous-style encoding pipeline of the hierarchical
// arbiter tree (HAT), all levels.
//
// One row per level (index 0 = highest level, H), each a masking stage, a
// four-input arbiter and a first static HC stage with QDI encoder. The
// rows meet in the second static HC stage, which holds the full address,
// and in the ack generator, which paces the first stage:
//   masking -> arbiter -> stage 1 (REG, CD, encoder) -> stage 2 -> data_out
// A level keeps its grant while any lower level still has a masked request
// pending (its hold_lower input is the OR of the lower levels' V), so the
// highest digits stay fixed while a cluster is emptied and only the lowest
// digit is re-arbitrated per event.
//
// Interface: lvl_neu_req/lvl_neu_grant, four cluster request/grant pairs
// per level; data_out/req_out/ack_out, a four-phase bundled-data output
// channel of 2*LEVELS address bits. Sparse-event latency from a cluster
// request at every level to req_out is 3*LEVELS clock cycles when the
// lower levels' requests follow their grants combinationally (see
// hat_cluster_bus).
module hat_pipeline
  import core_if_pkg::*;
#(
  parameter int unsigned LEVELS = HAT_LEVELS
) (
  input  logic clk,
  input  logic rst_n,
  input  onehot4_t [LEVELS-1:0] lvl_neu_req,
  output onehot4_t [LEVELS-1:0] lvl_neu_grant,
  output logic [LEVELS*HAT_DIGIT-1:0] data_out,
  output logic req_out,
  input  logic ack_out
);
  onehot4_t  [LEVELS-1:0] mreq, agnt, grant;
  logic      [LEVELS-1:0] v, d_valid, hold_lower;
  dualrail_t [LEVELS*HAT_DIGIT-1:0] packet;
  logic ack;

  always_comb begin
    for (int l = 0; l < LEVELS; l++) begin
      hold_lower[l] = 1'b0;
      for (int k = l + 1; k < LEVELS; k++) hold_lower[l] |= v[k];
    end
  end

  for (genvar l = 0; l < LEVELS; l++) begin : g_level
    dualrail_t [HAT_DIGIT-1:0] enc;

    hat_masking u_mask (
      .clk, .rst_n,
      .neu_req(lvl_neu_req[l]), .neu_grant(lvl_neu_grant[l]),
      .req(mreq[l]), .grant(grant[l]), .v(v[l])
    );
    hat_arbiter4 u_arb (.clk, .rst_n, .req(mreq[l]), .gnt(agnt[l]));
    hat_stage1 u_st1 (
      .clk, .rst_n, .arb_gnt(agnt[l]), .ack, .hold_lower(hold_lower[l]),
      .grant(grant[l]), .data(enc), .d_valid(d_valid[l])
    );
    // level 0 supplies the most significant digit
    assign packet[(LEVELS-1-l)*HAT_DIGIT +: HAT_DIGIT] = enc;
  end

  hat_ack_gen #(.LEVELS(LEVELS)) u_ackgen (
    .clk, .rst_n, .cd2(req_out), .d_valid, .v, .ack
  );
  hat_stage2 #(.LEVELS(LEVELS)) u_st2 (
    .clk, .rst_n, .data_in(packet), .ack, .data_out, .req_out, .ack_out
  );
endmodule
