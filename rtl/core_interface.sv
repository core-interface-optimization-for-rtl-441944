// core_interface: core interface of one neuromorphic core.
//
// Output side: the hierarchical arbiter tree encoder (hat_encoder) turns
// the spikes of 4**HAT_LEVELS neurons into address events on a four-phase
// output channel (aer_out_*), toward a routing table or a network-on-chip.
// Input side: the CSCD CAM (cam_cscd) takes incoming source addresses on a
// four-phase input channel (aer_in_*) and matches them against the tags of
// the core's synapses; cam_hits is the vector of matching tags, each one an
// input spike for its synapse. The network between cores is not part of
// this design, so both channels are ports; tags are written through the
// cam_we/cam_waddr/cam_wdata port.
module core_interface
  import core_if_pkg::*;
#(
  parameter int unsigned LEVELS      = HAT_LEVELS,
  parameter int unsigned CAM_N       = CAM_ENTRIES,
  parameter int unsigned CAM_W       = CAM_WIDTH,
  localparam int unsigned NEURONS    = 4 ** LEVELS,
  localparam int unsigned AW         = $clog2(CAM_N),
  localparam int unsigned CNTW       = $clog2(CAM_N + 2)
) (
  input  logic clk,
  input  logic rst_n,
  // neuron array
  input  logic [NEURONS-1:0]          neu_req,
  output logic [NEURONS-1:0]          neu_grant,
  // output address events
  output logic [LEVELS*HAT_DIGIT-1:0] aer_out_addr,
  output logic                        aer_out_req,
  input  logic                        aer_out_ack,
  // input address events
  input  logic                        aer_in_req,
  output logic                        aer_in_ack,
  input  logic [CAM_W-1:0]            aer_in_addr,
  // synapse match vector
  output logic [CAM_N-1:0]            cam_hits,
  output logic                        cam_hits_valid,
  // tag write port
  input  logic                        cam_we,
  input  logic [AW-1:0]               cam_waddr,
  input  logic [CAM_W-1:0]            cam_wdata,
  output logic                        cam_busy,
  output logic [CNTW-1:0]             cam_src_count
);
  hat_encoder #(.LEVELS(LEVELS)) u_out (
    .clk, .rst_n, .neu_req, .neu_grant,
    .data_out(aer_out_addr), .req_out(aer_out_req), .ack_out(aer_out_ack)
  );
  cam_cscd #(.ENTRIES(CAM_N), .WIDTH(CAM_W)) u_in (
    .clk, .rst_n, .in_req(aer_in_req), .in_ack(aer_in_ack), .in_key(aer_in_addr),
    .hits(cam_hits), .hits_valid(cam_hits_valid),
    .we(cam_we), .waddr(cam_waddr), .wdata(cam_wdata),
    .busy(cam_busy), .src_count(cam_src_count)
  );
endmodule
