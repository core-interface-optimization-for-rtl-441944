// cscd_hs: handshake circuit of the CSCD block.
//
// A flip-flop with its data input tied to 1, clocked by the falling edge
// of the current sensor's output and reset while the search request is
// low. So Ack rises once the array current has risen and fallen again
// during a search (the search is complete), and falls after the HS block
// has withdrawn the request: the acknowledge half of a four-phase
// handshake, with no delay line and no timing assumption about the
// search itself.
//
// Synchronous rendering: the falling edge of sense is detected against its
// value in the previous cycle; the reset by req is applied on the clock.
module cscd_hs (
  input  logic clk,
  input  logic rst_n,
  input  logic sense,
  input  logic req,
  output logic ack
);
  logic sense_d;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sense_d <= 1'b0;
      ack     <= 1'b0;
    end else begin
      sense_d <= sense;
      if (!req)                  ack <= 1'b0;
      else if (sense_d && !sense) ack <= 1'b1;
    end
  end

  a_ack_needs_req: assert property (@(posedge clk) disable iff (!rst_n) $rose(ack) |-> $past(req));
endmodule
