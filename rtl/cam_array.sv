// cam_array: CAM array of ENTRIES entries of WIDTH bits plus the dummy
// entry.
//
// All entries search the key on sl in parallel while req is high. The
// dummy entry always matches and charges more slowly than any real
// matching line (a larger pull-down in silicon, a larger charge count
// here); its output is Off, which ends charging in every MLSA. Entries are
// written one at a time through waddr/wdata/we.
//
// src_count is the number of current sources conducting this cycle,
// dummy included: the quantity the current sensor of the CSCD block
// watches, and a proxy for search energy.
module cam_array
  import core_if_pkg::*;
#(
  parameter int unsigned ENTRIES   = CAM_ENTRIES,
  parameter int unsigned WIDTH     = CAM_WIDTH,
  parameter int unsigned SPEC_BITS = CAM_SPEC_BITS,
  parameter bit          FEEDBACK  = 1'b1,
  parameter bit          SPEC      = 1'b1,
  localparam int unsigned AW = $clog2(ENTRIES),
  localparam int unsigned CNTW = $clog2(ENTRIES + 2)
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               we,
  input  logic [AW-1:0]      waddr,
  input  logic [WIDTH-1:0]   wdata,
  input  logic [WIDTH-1:0]   sl,
  input  logic               req,
  output logic [ENTRIES-1:0] match,
  output logic               off,
  output logic [CNTW-1:0]    src_count
);
  logic [ENTRIES-1:0] src_on;
  logic               dummy_src_on;

  for (genvar e = 0; e < ENTRIES; e++) begin : g_entry
    cam_entry #(.WIDTH(WIDTH), .SPEC_BITS(SPEC_BITS), .FEEDBACK(FEEDBACK), .SPEC(SPEC)) u_entry (
      .clk, .rst_n, .we(we && waddr == AW'(e)), .wdata, .sl, .req, .off,
      .match(match[e]), .src_on(src_on[e])
    );
  end

  // Dummy entry: never pulled down, slowest to charge; its output is Off.
  cam_mlsa #(.CHARGE_CYCLES(DUMMY_CHARGE_CYCLES), .FEEDBACK(1'b1), .SPEC(1'b0)) u_dummy (
    .clk, .rst_n, .req, .off, .ml_pd(1'b0), .spec_mis(1'b0),
    .match(off), .src_on(dummy_src_on)
  );

  always_comb begin
    src_count = CNTW'(dummy_src_on);
    for (int e = 0; e < ENTRIES; e++) src_count += CNTW'(src_on[e]);
  end
endmodule
