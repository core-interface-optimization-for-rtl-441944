// cscd_current_sense: behavioural model of the current-sensing circuit of
// the CSCD (current-sensing completion detection) block.
//
// In silicon a sensor sits between VDD and the CAM array's supply node Vs
// and an amplifier turns the supply current into a logic level: high while
// current flows into the array (match lines charging or pull-down paths
// conducting), low once it has stopped. Brief current changes, such as the
// match-line precharge to ground or a CAM write, are too short for the
// amplifier and produce no output. This model reproduces that behaviour at
// clock-cycle level: sense follows "some current source conducts" one
// cycle late, and only while a search is requested.
//
// Interface: cur (number of conducting current sources), req (search
// request), sense out (registered).
module cscd_current_sense #(
  parameter int unsigned CNTW = 10
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic [CNTW-1:0] cur,
  input  logic            req,
  output logic            sense
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) sense <= 1'b0;
    else        sense <= req && (cur != '0);
  end
endmodule
