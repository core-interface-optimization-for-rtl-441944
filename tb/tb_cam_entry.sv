// tb_cam_entry: one 11-bit entry. Writes random tags and searches with
// (a) the tag itself: match after 2 cycles, source on for 2 cycles;
// (b) the tag with one of its last 3 bits flipped: no match, source never
//     on (speculative sense);
// (c) the tag with one of its first 8 bits flipped: no match, source on
//     until Off, which the test raises after 3 cycles.
module tb_cam_entry;
  localparam int W = 11;
  logic clk = 0, rst_n = 0;
  logic we = 0, req = 0, off = 0, match, src_on;
  logic [W-1:0] wdata = '0, sl = '0;
  int unsigned on_cycles;
  always #5 clk = ~clk;
  `include "tb_common.svh"

  cam_entry #(.WIDTH(W)) dut (.clk, .rst_n, .we, .wdata, .sl, .req, .off, .match, .src_on);

  always @(posedge clk) on_cycles += src_on;

  task automatic search(input logic [W-1:0] key, input logic exp, input int unsigned exp_on, input string what);
    @(negedge clk) sl = key;
    @(negedge clk) begin req = 1; on_cycles = 0; end
    repeat (3) @(negedge clk);
    off = 1;
    repeat (2) @(negedge clk);
    check(match == exp, {what, ": match"});
    check(on_cycles == exp_on, $sformatf("%s: source on %0d cycles, expected %0d", what, on_cycles, exp_on));
    req = 0; off = 0;
    @(negedge clk);
  endtask

  initial begin
    logic [W-1:0] t;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 50; i++) begin
      t = W'($urandom);
      @(negedge clk) begin we = 1; wdata = t; end
      @(negedge clk) we = 0;
      search(t, 1'b1, 2, "own tag");
      search(t ^ W'(1 << $urandom_range(2)), 1'b0, 0, "mismatch near the MLSA");
      search(t ^ W'(1 << $urandom_range(W - 1, 3)), 1'b0, 3, "mismatch far from the MLSA");
    end
    finish_tb();
  end
endmodule
