// cam_entry: one CAM entry (tag): WIDTH NOR-type CAM cells sharing a match
// line, and the entry's MLSA.
//
// Each cell stores one bit (the 6T SRAM part) and compares it with the
// search line pair SL/SLB (three comparison transistors): a cell whose bit
// differs from SL opens a pull-down path on the ML. Every cell also has a
// sense node sen_n, low when the cell mismatches, which is valid as soon
// as SL/SLB are, before the search request. The sense nodes of the last
// SPEC_BITS cells (bits [SPEC_BITS-1:0] here, taken as the cells nearest
// the MLSA) are ORed in the MLSA to switch its current source off
// speculatively.
//
// Writes: a synchronous write of wdata when we is high. Search: sl is the
// key (SLB is its complement), req starts and ends the search; match is
// the MLSA output.
module cam_entry
  import core_if_pkg::*;
#(
  parameter int unsigned WIDTH     = CAM_WIDTH,
  parameter int unsigned SPEC_BITS = CAM_SPEC_BITS,
  parameter bit          FEEDBACK  = 1'b1,
  parameter bit          SPEC      = 1'b1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             we,
  input  logic [WIDTH-1:0] wdata,
  input  logic [WIDTH-1:0] sl,
  input  logic             req,
  input  logic             off,
  output logic             match,
  output logic             src_on
);
  logic [WIDTH-1:0] bits_q;   // the cells' SRAM bits
  logic [WIDTH-1:0] sen_n;    // per-cell sense nodes, low on mismatch
  logic ml_pd, spec_mis;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)  bits_q <= '0;
    else if (we) bits_q <= wdata;
  end

  assign sen_n    = ~(bits_q ^ sl);
  assign ml_pd = ~&sen_n;
  assign spec_mis = ~&sen_n[SPEC_BITS-1:0];

  cam_mlsa #(.FEEDBACK(FEEDBACK), .SPEC(SPEC)) u_mlsa (
    .clk, .rst_n, .req, .off, .ml_pd, .spec_mis, .match, .src_on
  );
endmodule
