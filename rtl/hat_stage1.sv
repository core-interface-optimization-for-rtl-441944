// hat_stage1: first static HC pipeline stage of one HAT level, with its
// QDI encoder.
//
// The register captures the arbiter's one-hot grant while it is enabled:
// enable requires that the register is empty (its completion detector is
// low) and that the Ack of the ack generator is low. The captured one-hot
// word is held and fed back as the level's Grant, which resets the masked
// request in the masking stage, and it drives the QDI encoder, a one-hot to
// 2-bit dual-rail encoder. The register is cleared when Ack is high and no
// masked request is pending at any lower level (hold_lower low): the lowest
// level clears on every Ack, a higher level only once the clusters below it
// are exhausted, so its address bits are not re-encoded for every event.
//
// Completion detection on the register is the XOR of the four grant bits,
// as in the source design, so that an overlap of two grants is not taken
// for valid data; d_valid is the completion detector after the encoder
// (D_H / D_M / D_L).
//
// Synchronous rendering: the latch is a flip-flop, so a grant is captured
// one cycle after the arbiter gives it, and the clear takes effect one
// cycle after Ack.
module hat_stage1
  import core_if_pkg::*;
(
  input  logic      clk,
  input  logic      rst_n,
  input  onehot4_t  arb_gnt,    // one-hot from the level's arbiter
  input  logic      ack,        // from the ack generator
  input  logic      hold_lower, // a masked request is pending at a lower level
  output onehot4_t  grant,      // held one-hot, back to the masking stage
  output dualrail_t [HAT_DIGIT-1:0] data,  // encoded 2 address bits
  output logic      d_valid     // CD after the encoder
);
  onehot4_t q;
  logic     cd;

  assign cd = ^q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                  q <= '0;
    else if (ack && !hold_lower) q <= '0;
    else if (!ack && !cd)        q <= arb_gnt;
  end

  assign grant   = q;
  assign data    = encode_onehot4(q);
  assign d_valid = dr_complete2(data);

  a_onehot: assert property (@(posedge clk) disable iff (!rst_n) $onehot0(q));
endmodule
