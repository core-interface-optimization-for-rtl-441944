// tb_cam_mlsa: the match-line sense amplifier model. Scenarios, each
// checked cycle by cycle against the expected current-source and output
// waveforms:
//   match line, feedback on : source on for CHARGE_CYCLES (2), then match
//                             rises and the source switches itself off;
//   mismatch line           : source on (pull-down current) until Off, no match;
//   speculative mismatch    : source never on;
//   Off before threshold    : charging stops, no match (a false negative the
//                             dummy line's slower charging must prevent);
//   request low             : match line precharged, output cleared.
module tb_cam_mlsa;
  logic clk = 0, rst_n = 0;
  logic req = 0, off = 0, ml_pd = 0, spec_mis = 0, match, src_on;
  always #5 clk = ~clk;
  `include "tb_common.svh"

  cam_mlsa #(.CHARGE_CYCLES(2), .FEEDBACK(1'b1), .SPEC(1'b1)) dut (.clk, .rst_n, .req, .off, .ml_pd, .spec_mis, .match, .src_on);

  task automatic step(); @(negedge clk); endtask
  task automatic release_req(); req = 0; off = 0; ml_pd = 0; spec_mis = 0; step(); endtask

  initial begin
    repeat (2) step();
    rst_n = 1; step();
    // matching line
    req = 1; #1 check(src_on && !match, "match: charging starts");
    step(); check(src_on && !match, "match: still below threshold");
    step(); check(match && !src_on, "match: output high, source closed by feedback");
    off = 1; step(); check(match && !src_on, "match: held until request falls");
    release_req(); check(!match && !src_on, "match: precharged");
    // mismatching line
    req = 1; ml_pd = 1;
    for (int i = 0; i < 4; i++) begin #1 check(src_on && !match, "mismatch: pull-down current until Off"); step(); end
    off = 1; #1 check(!src_on && !match, "mismatch: Off ends it");
    release_req();
    // speculative mismatch
    spec_mis = 1; ml_pd = 1; req = 1;
    for (int i = 0; i < 3; i++) begin #1 check(!src_on && !match, "speculative sense: source never on"); step(); end
    release_req();
    // Off before threshold
    req = 1; step(); off = 1; repeat (3) step();
    check(!match && !src_on, "Off before threshold: no match");
    release_req();
    finish_tb();
  end
endmodule
