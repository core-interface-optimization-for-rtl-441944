// tb_cam_cscd: test of the CSCD CAM at its full size, 512 entries of 11
// bits.
//
// Writes random tags (with deliberate duplicates and tags that differ from
// a key only in the first cells, away from the sense amplifier), then runs
// searches through the four-phase key channel. For every search it checks
//   * the match vector against a reference model of the stored tags;
//   * the cycle time, in_req to in_ack, which is fixed by the dummy line
//     and the CSCD handshake: 10 cycles whatever the data;
//   * the charge (sum over cycles of conducting current sources) against
//     the expected value: 3 cycles for the dummy line, 2 for a matching
//     line (feedback control stops it at the threshold), 3 for a line that
//     mismatches only outside its last 3 cells, 0 for a line that
//     mismatches in its last 3 cells (speculative sense).
module tb_cam_cscd;
  import core_if_pkg::*;
  localparam int unsigned E = CAM_ENTRIES;
  localparam int unsigned W = CAM_WIDTH;
  localparam int unsigned AW = $clog2(E);
  localparam int unsigned CNTW = $clog2(E + 2);

  logic clk = 0, rst_n = 0;
  logic in_req = 0, in_ack;
  logic [W-1:0] in_key = '0;
  logic [E-1:0] hits;
  logic hits_valid, we = 0, busy;
  logic [AW-1:0] waddr = '0;
  logic [W-1:0] wdata = '0;
  logic [CNTW-1:0] src_count;
  int checks = 0, failures = 0;
  logic [W-1:0] ref_tags [E];
  int unsigned charge;

  always #5 clk = ~clk;

  cam_cscd dut (.clk, .rst_n, .in_req, .in_ack, .in_key, .hits, .hits_valid,
                .we, .waddr, .wdata, .busy, .src_count);

  always @(posedge clk) charge += int'(src_count);

  function automatic void check(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endfunction

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic search(input logic [W-1:0] key);
    logic [E-1:0] exp_hits;
    int unsigned exp_charge, cyc, nmatch, nspec;
    exp_charge = 3;  // dummy line
    nmatch = 0; nspec = 0;
    for (int e = 0; e < E; e++) begin
      logic [W-1:0] d;
      d = ref_tags[e] ^ key;
      exp_hits[e] = (d == '0);
      if (d == '0) begin exp_charge += 2; nmatch++; end
      else if (d[CAM_SPEC_BITS-1:0] != '0) nspec++;
      else exp_charge += 3;
    end
    @(negedge clk);
    charge = 0;
    in_key = key; in_req = 1;
    cyc = 0;
    while (!in_ack && cyc < 200) begin @(negedge clk); cyc++; end
    check(cyc == 10, $sformatf("key %h: cycle time %0d, expected 10", key, cyc));
    check(hits == exp_hits, $sformatf("key %h: match vector differs (%0d expected matches)", key, nmatch));
    check(charge == exp_charge, $sformatf("key %h: charge %0d expected %0d", key, charge, exp_charge));
    in_req = 0;
    while (in_ack) @(negedge clk);
  endtask

  initial begin
    logic [W-1:0] k;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int e = 0; e < E; e++) begin
      @(negedge clk);
      if (e % 8 == 1)      ref_tags[e] = ref_tags[e - 1];            // duplicate tag
      else if (e % 8 == 2) ref_tags[e] = ref_tags[e - 2] ^ W'(1 << (W - 1));  // far-bit mismatch
      else                 ref_tags[e] = W'($urandom);
      we = 1; waddr = AW'(e); wdata = ref_tags[e];
    end
    @(negedge clk) we = 0;
    // searches: stored keys, near misses and random keys
    for (int i = 0; i < 60; i++) search(ref_tags[$urandom_range(E - 1)]);
    for (int i = 0; i < 30; i++) search(ref_tags[$urandom_range(E - 1)] ^ W'(1 << $urandom_range(W - 1)));
    for (int i = 0; i < 30; i++) search(W'($urandom));
    // rewrite an entry and find it under its new tag
    @(negedge clk) begin we = 1; waddr = AW'(7); wdata = ~ref_tags[7]; ref_tags[7] = ~ref_tags[7]; end
    @(negedge clk) we = 0;
    search(ref_tags[7]);
    check(hits[7], "rewritten entry matches its new tag");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
