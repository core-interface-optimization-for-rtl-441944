// cam_cscd: core input interface, the asynchronous-style CAM with
// current-sensing completion detection (CSCD).
//
// The HS block drives the key onto the search lines and raises the search
// request. The request enters the CAM array and the dummy entry and
// releases the reset of the CSCD handshake flip-flop. While the search
// runs, current flows into the array and the current sensor's output is
// high. Feedback control and speculative sense switch the sources of
// matching lines and of lines that mismatch near the sense amplifier off
// early; the rest run until the dummy entry's Off. The dummy line is the
// last to stop, so the sensor output falls, and the CSCD flip-flop
// acknowledges, a fixed time after the request. (The source design also
// gains cycle time from the early stops; in this model they save charge
// only, because the dummy line's own current keeps the sensor on.) The HS block then takes the
// match vector and drops the request, which precharges the match lines and
// clears the acknowledge. No delay line and no worst-case search time are
// needed: the acknowledge comes from the array's own current.
//
// Interface: a four-phase key channel (in_req/in_ack/in_key), the match
// vector (hits, hits_valid), a write port for the tags, and src_count, the
// per-cycle number of conducting current sources (energy proxy).
module cam_cscd
  import core_if_pkg::*;
#(
  parameter int unsigned ENTRIES   = CAM_ENTRIES,
  parameter int unsigned WIDTH     = CAM_WIDTH,
  parameter bit          FEEDBACK  = 1'b1,
  parameter bit          SPEC      = 1'b1,
  localparam int unsigned AW   = $clog2(ENTRIES),
  localparam int unsigned CNTW = $clog2(ENTRIES + 2)
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               in_req,
  output logic               in_ack,
  input  logic [WIDTH-1:0]   in_key,
  output logic [ENTRIES-1:0] hits,
  output logic               hits_valid,
  input  logic               we,
  input  logic [AW-1:0]      waddr,
  input  logic [WIDTH-1:0]   wdata,
  output logic               busy,
  output logic [CNTW-1:0]    src_count
);
  logic [WIDTH-1:0]   sl;
  logic               req, ack, sense;
  logic [ENTRIES-1:0] match;

  cam_hs #(.ENTRIES(ENTRIES), .WIDTH(WIDTH)) u_hs (
    .clk, .rst_n, .in_req, .in_ack, .in_key, .sl, .req, .ack, .match,
    .hits, .hits_valid, .busy
  );
  cam_array #(.ENTRIES(ENTRIES), .WIDTH(WIDTH), .FEEDBACK(FEEDBACK), .SPEC(SPEC)) u_array (
    .clk, .rst_n, .we, .waddr, .wdata, .sl, .req, .match, .off(), .src_count
  );
  cscd_current_sense #(.CNTW(CNTW)) u_sense (
    .clk, .rst_n, .cur(src_count), .req, .sense
  );
  cscd_hs u_cscd_hs (.clk, .rst_n, .sense, .req, .ack);

  // Tags are written only between searches.
  a_no_write_in_search: assert property (@(posedge clk) disable iff (!rst_n) !(we && req));
endmodule
