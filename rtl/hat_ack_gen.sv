// hat_ack_gen: ack generator of the HAT encoding pipeline (Fig. "Ack
// generator").
//
// A latch whose input is the completion detector of the second pipeline
// stage (a full address packet has been captured) and whose output is
// Ack; a C-element over input and output closes the latch once Ack has
// followed, as in the masking gate. The latch is reset while no level
// still holds data that belongs to the packet just sent ("packet valid"):
//   packet_valid = D_L | (D_M & ~V_L) | (D_H & ~V_M & ~V_L)
// for three levels, and in general the OR over levels of D_level AND NOT
// any V of a lower level. So Ack rises when a packet is captured, the
// first-stage registers that belong to it clear, and Ack falls again,
// re-opening the first stage for the next event.
//
// Interface: cd2 in, d_valid[] and v[] per level (index 0 = highest level),
// ack out (registered). Synchronous rendering with flip-flops.
module hat_ack_gen
  import core_if_pkg::*;
#(
  parameter int unsigned LEVELS = HAT_LEVELS
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              cd2,
  input  logic [LEVELS-1:0] d_valid,
  input  logic [LEVELS-1:0] v,
  output logic              ack
);
  logic packet_valid;
  logic c_q;

  always_comb begin
    packet_valid = 1'b0;
    for (int l = 0; l < LEVELS; l++) begin
      logic lower_pending;
      lower_pending = 1'b0;
      for (int k = l + 1; k < LEVELS; k++) lower_pending |= v[k];
      packet_valid |= d_valid[l] & ~lower_pending;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ack <= 1'b0;
      c_q <= 1'b0;
    end else begin
      if (!packet_valid) ack <= 1'b0;
      else if (!c_q)     ack <= cd2;
      if (cd2 == ack) c_q <= cd2;
    end
  end
endmodule
