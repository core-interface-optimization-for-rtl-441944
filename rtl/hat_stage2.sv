// hat_stage2: second static HC pipeline stage of the HAT encoder.
//
// Merges the dual-rail digits of all levels into one address packet
// (2 bits per level, 6 bits for three levels) and holds it for the
// receiver. Its completion detector (every dual-rail bit has one rail
// high) is the output request req_out and also tells the ack generator
// that a packet has been captured. The register is cleared by ack_out from
// the receiver (four-phase: req_out rises, ack_out rises, req_out falls,
// ack_out falls) and captures the next packet only when it is empty,
// ack_out is low, the packet at its input is complete, and the ack
// generator's Ack is low. The last condition is this design's addition to
// the figure: in a clocked rendering it keeps a packet whose lowest level
// has not yet been cleared from being captured twice.
//
// data_out carries the true rails, most significant digit from the
// highest level. req_out and data_out are registered.
module hat_stage2
  import core_if_pkg::*;
#(
  parameter int unsigned LEVELS = HAT_LEVELS
) (
  input  logic clk,
  input  logic rst_n,
  input  dualrail_t [LEVELS*HAT_DIGIT-1:0] data_in,
  input  logic ack,
  output logic [LEVELS*HAT_DIGIT-1:0] data_out,
  output logic req_out,
  input  logic ack_out
);
  dualrail_t [LEVELS*HAT_DIGIT-1:0] q;
  logic in_complete;

  function automatic logic complete(input dualrail_t [LEVELS*HAT_DIGIT-1:0] d);
    logic c;
    c = 1'b1;
    for (int i = 0; i < LEVELS*HAT_DIGIT; i++) c &= d[i].t | d[i].f;
    return c;
  endfunction

  assign in_complete = complete(data_in);
  assign req_out     = complete(q);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                                       q <= '0;
    else if (ack_out)                                 q <= '0;
    else if (!req_out && !ack && in_complete)         q <= data_in;
  end

  always_comb
    for (int i = 0; i < LEVELS*HAT_DIGIT; i++) data_out[i] = q[i].t;

  // Four-phase rule on the output channel: data stable while req_out is high.
  a_stable: assert property (@(posedge clk) disable iff (!rst_n)
                             req_out && !ack_out |=> $stable(data_out) || !req_out);
endmodule
