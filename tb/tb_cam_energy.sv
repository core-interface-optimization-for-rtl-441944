// tb_cam_energy: feedback control and speculative sense against a plain
// CSCD CAM, at the full size of 512 entries of 11 bits.
//
// Two copies of cam_cscd get the same tags and the same keys: one with
// feedback control and speculative sense (FEEDBACK = SPEC = 1, the
// defaults), one without (both 0). The charge of a search is the sum over
// its cycles of src_count, the number of conducting current sources. The
// testbench runs the data cases that bound the design's behaviour:
//   * all entries match the key;
//   * all entries mismatch in one of their last three cells, so every line
//     is stopped by speculative sense and only the dummy line draws current
//     (the smallest current the CSCD sensor must still see);
//   * all entries mismatch only outside their last three cells, so no line
//     can be stopped early;
//   * all entries mismatch, with the mismatching bits placed at random;
//   * random tags and random keys.
// For each search it checks both match vectors against a reference model,
// both cycle times (10 cycles, in_req to in_ack), and both charges against
// the values the model predicts: 3 for the dummy line; 3 per entry without
// the mechanisms; with them 2 per matching entry, 0 per entry that
// mismatches in its last three cells and 3 for any other entry. It prints
// the saving of each case and checks that it is positive, except where no
// line can be stopped early (far mismatches), where the charges are equal.
module tb_cam_energy;
  import core_if_pkg::*;
  localparam int unsigned E = CAM_ENTRIES;
  localparam int unsigned W = CAM_WIDTH;
  localparam int unsigned S = CAM_SPEC_BITS;
  localparam int unsigned AW = $clog2(E);
  localparam int unsigned CNTW = $clog2(E + 2);

  logic clk = 0, rst_n = 0;
  logic in_req = 0;
  logic [W-1:0] in_key = '0;
  logic we = 0;
  logic [AW-1:0] waddr = '0;
  logic [W-1:0] wdata = '0;
  logic in_ack_p, in_ack_b, hv_p, hv_b, busy_p, busy_b;
  logic [E-1:0] hits_p, hits_b;
  logic [CNTW-1:0] cnt_p, cnt_b;
  int checks = 0, failures = 0;
  logic [W-1:0] ref_tags [E];
  int unsigned charge_p, charge_b;

  always #5 clk = ~clk;

  cam_cscd dut_p (.clk, .rst_n, .in_req, .in_ack(in_ack_p), .in_key, .hits(hits_p),
                  .hits_valid(hv_p), .we, .waddr, .wdata, .busy(busy_p), .src_count(cnt_p));
  cam_cscd #(.FEEDBACK(1'b0), .SPEC(1'b0)) dut_b (
    .clk, .rst_n, .in_req, .in_ack(in_ack_b), .in_key, .hits(hits_b),
    .hits_valid(hv_b), .we, .waddr, .wdata, .busy(busy_b), .src_count(cnt_b));

  always @(posedge clk) begin
    charge_p += int'(cnt_p);
    charge_b += int'(cnt_b);
  end

  function automatic void check(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endfunction

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic write_all();
    for (int e = 0; e < E; e++) begin
      @(negedge clk);
      we = 1; waddr = AW'(e); wdata = ref_tags[e];
    end
    @(negedge clk) we = 0;
  endtask

  // One search on both copies; returns the two charges.
  task automatic search(input logic [W-1:0] key, input string name,
                        output int unsigned got_p, output int unsigned got_b);
    logic [E-1:0] exp_hits;
    int unsigned exp_p, exp_b, cyc_p, cyc_b;
    exp_p = 3;
    exp_b = 3 + 3 * E;
    for (int e = 0; e < E; e++) begin
      logic [W-1:0] d;
      d = ref_tags[e] ^ key;
      exp_hits[e] = (d == '0);
      if (d == '0)                exp_p += 2;
      else if (d[S-1:0] == '0)    exp_p += 3;
    end
    @(negedge clk);
    charge_p = 0; charge_b = 0;
    in_key = key; in_req = 1;
    cyc_p = 0; cyc_b = 0;
    for (int c = 0; c < 200 && !(in_ack_p && in_ack_b); c++) begin
      if (!in_ack_p) cyc_p++;
      if (!in_ack_b) cyc_b++;
      @(negedge clk);
    end
    got_p = charge_p; got_b = charge_b;
    check(cyc_p == 10 && cyc_b == 10, $sformatf("%s: cycle times %0d and %0d, expected 10", name, cyc_p, cyc_b));
    check(hits_p == exp_hits, $sformatf("%s: match vector with FC/SS", name));
    check(hits_b == exp_hits, $sformatf("%s: match vector without FC/SS", name));
    check(got_p == exp_p, $sformatf("%s: charge with FC/SS %0d, expected %0d", name, got_p, exp_p));
    check(got_b == exp_b, $sformatf("%s: charge without FC/SS %0d, expected %0d", name, got_b, exp_b));
    in_req = 0;
    while (in_ack_p || in_ack_b) @(negedge clk);
  endtask

  task automatic run_case(input string name, input int searches, input bit rewrite_each);
    int unsigned sum_p, sum_b, gp, gb;
    sum_p = 0; sum_b = 0;
    for (int i = 0; i < searches; i++) begin
      logic [W-1:0] key;
      key = W'($urandom);
      if (rewrite_each || i == 0) begin
        for (int e = 0; e < E; e++) begin
          logic [W-1:0] flip;
          unique case (name)
            "all match":         flip = '0;
            "all near mismatch": flip = W'(($urandom | 1) & ((1 << S) - 1)) | W'($urandom & ~((1 << S) - 1));
            "all far mismatch":  flip = W'(($urandom | (1 << S)) & ~((1 << S) - 1));
            "all mismatch":      flip = W'($urandom_range((1 << W) - 1, 1));
            default:             flip = W'($urandom);
          endcase
          ref_tags[e] = key ^ flip;
        end
        write_all();
      end
      search(key, name, gp, gb);
      sum_p += gp; sum_b += gb;
    end
    if (name == "all far mismatch")
      check(sum_p == sum_b, $sformatf("%s: charges differ (%0d vs %0d)", name, sum_p, sum_b));
    else
      check(sum_p < sum_b, $sformatf("%s: no saving (%0d vs %0d)", name, sum_p, sum_b));
    $display("%-18s charge with FC/SS %0d, without %0d: %0d.%01d%% saved",
             name, sum_p, sum_b, 100 * (sum_b - sum_p) / sum_b, (1000 * (sum_b - sum_p) / sum_b) % 10);
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    run_case("all match", 4, 1'b1);
    run_case("all near mismatch", 4, 1'b1);
    run_case("all far mismatch", 4, 1'b1);
    run_case("all mismatch", 4, 1'b1);
    run_case("random", 40, 1'b0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
