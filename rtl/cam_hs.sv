// cam_hs: HS (handshake) block of the CAM.
//
// Takes one search key at a time from a four-phase bundled-data input
// channel (in_req, in_ack, in_key) and runs one search:
//   DRIVE  : put the key on the search lines SL/SLB; the request is still
//            low, so the data is valid before the request (the bundled-data
//            timing assumption);
//   SEARCH : raise req and wait for the completion acknowledge;
//   RELEASE: capture the match vector, lower req (the match lines
//            precharge to ground) and wait for the acknowledge to fall;
//   DONE   : raise in_ack and wait for in_req to fall.
// hits holds the match vector of the last search and hits_valid pulses for
// one cycle when it is updated. The block does not know how long a search
// takes: that is the acknowledge's job.
module cam_hs
  import core_if_pkg::*;
#(
  parameter int unsigned ENTRIES = CAM_ENTRIES,
  parameter int unsigned WIDTH   = CAM_WIDTH
) (
  input  logic               clk,
  input  logic               rst_n,
  // input channel
  input  logic               in_req,
  output logic               in_ack,
  input  logic [WIDTH-1:0]   in_key,
  // to and from the CAM array and completion detector
  output logic [WIDTH-1:0]   sl,
  output logic               req,
  input  logic               ack,
  input  logic [ENTRIES-1:0] match,
  // search result
  output logic [ENTRIES-1:0] hits,
  output logic               hits_valid,
  output logic               busy
);
  typedef enum logic [2:0] {IDLE, DRIVE, SEARCH, RELEASE, DONE} state_t;
  state_t state_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q    <= IDLE;
      sl         <= '0;
      req        <= 1'b0;
      in_ack     <= 1'b0;
      hits       <= '0;
      hits_valid <= 1'b0;
    end else begin
      hits_valid <= 1'b0;
      unique case (state_q)
        IDLE:    if (in_req) begin sl <= in_key; state_q <= DRIVE; end
        DRIVE:   begin req <= 1'b1; state_q <= SEARCH; end
        SEARCH:  if (ack) begin
                   hits <= match; hits_valid <= 1'b1;
                   req <= 1'b0; state_q <= RELEASE;
                 end
        RELEASE: if (!ack) begin in_ack <= 1'b1; state_q <= DONE; end
        DONE:    if (!in_req) begin in_ack <= 1'b0; state_q <= IDLE; end
        default: state_q <= IDLE;
      endcase
    end
  end

  assign busy = state_q != IDLE;

  // Four-phase rules: request stays up until acknowledged, key stable meanwhile.
  a_req_hold: assert property (@(posedge clk) disable iff (!rst_n) req && !ack |=> req);
  a_sl_stable: assert property (@(posedge clk) disable iff (!rst_n) req |-> $stable(sl));
endmodule
