// hat_encoder: core output interface, the complete hierarchical arbiter
// tree for 4**LEVELS neurons.
//
// Combines the shared cluster lines (hat_cluster_bus) with the encoding
// pipeline (hat_pipeline). Every neuron runs a four-phase handshake on
// neu_req/neu_grant; each spike leaves on the output channel as one
// 2*LEVELS-bit address event (data_out, req_out, ack_out). The arbiter of a
// level does not move to another cluster until all active neurons of the
// current cluster have been encoded.
//
// The neurons must withdraw a request within two cycles of seeing their
// grant; a neuron that holds its request longer keeps its clusters' grants
// up and may overlap the next cluster's grant (the same timing assumption
// the asynchronous original makes about the neuron handshake circuits).
module hat_encoder
  import core_if_pkg::*;
#(
  parameter int unsigned LEVELS  = HAT_LEVELS,
  parameter int unsigned NEURONS = 4 ** LEVELS
) (
  input  logic clk,
  input  logic rst_n,
  input  logic [NEURONS-1:0] neu_req,
  output logic [NEURONS-1:0] neu_grant,
  output logic [LEVELS*HAT_DIGIT-1:0] data_out,
  output logic req_out,
  input  logic ack_out
);
  onehot4_t [LEVELS-1:0] lvl_req, lvl_gnt;

  hat_cluster_bus #(.LEVELS(LEVELS), .NEURONS(NEURONS)) u_bus (
    .neu_req, .neu_grant, .lvl_neu_req(lvl_req), .lvl_neu_grant(lvl_gnt)
  );
  hat_pipeline #(.LEVELS(LEVELS)) u_pipe (
    .clk, .rst_n, .lvl_neu_req(lvl_req), .lvl_neu_grant(lvl_gnt),
    .data_out, .req_out, .ack_out
  );
endmodule
