// tb_cam_array: a 16 x 11 array (the smaller evaluated design point).
// Writes random tags with duplicates, searches with stored and random keys
// by driving sl and req directly, and checks Off rising 3 cycles after the
// request (the dummy line), the match vector against the stored tags, and
// that no current source conducts once Off is high.
module tb_cam_array;
  localparam int E = 16, W = 11;
  logic clk = 0, rst_n = 0;
  logic we = 0, req = 0, off;
  logic [3:0] waddr = '0;
  logic [W-1:0] wdata = '0, sl = '0;
  logic [E-1:0] match;
  logic [4:0] src_count;
  logic [W-1:0] tags [E];
  always #5 clk = ~clk;
  `include "tb_common.svh"

  cam_array #(.ENTRIES(E), .WIDTH(W)) dut (.clk, .rst_n, .we, .waddr, .wdata, .sl, .req, .match, .off, .src_count);

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int e = 0; e < E; e++) begin
      tags[e] = (e % 4 == 3) ? tags[e - 1] : W'($urandom);
      @(negedge clk) begin we = 1; waddr = 4'(e); wdata = tags[e]; end
    end
    @(negedge clk) we = 0;
    for (int i = 0; i < 200; i++) begin
      logic [W-1:0] key;
      logic [E-1:0] exp;
      int unsigned t_off;
      key = (i % 2 == 0) ? tags[$urandom_range(E - 1)] : W'($urandom);
      for (int e = 0; e < E; e++) exp[e] = (tags[e] == key);
      @(negedge clk) sl = key;
      @(negedge clk) req = 1;
      t_off = 0;
      while (!off && t_off < 20) begin @(negedge clk); t_off++; end
      check(t_off == 3, $sformatf("Off after %0d cycles", t_off));
      check(match == exp, $sformatf("key %h: match %h expected %h", key, match, exp));
      check(src_count == '0, "all sources off after Off");
      @(negedge clk) req = 0;
      @(negedge clk) check(match == '0 && !off, "precharged after request");
    end
    finish_tb();
  end
endmodule
