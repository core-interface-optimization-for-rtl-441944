// tb_hat_arb2: random requests into the two-input arbiter. Checks mutual
// exclusion, grants only to requesters, that a grant is held while its
// request stays high, that a pending request is always served when the
// other side is idle, and that simultaneous requests from idle alternate.
module tb_hat_arb2;
  logic clk = 0, rst_n = 0;
  logic [1:0] req = '0, gnt, prev_gnt, prev_req;
  int tie_wins [2] = '{0, 0};
  always #5 clk = ~clk;
  `include "tb_common.svh"

  hat_arb2 dut (.clk, .rst_n, .req, .gnt);

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    prev_gnt = '0; prev_req = '0;
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      // requests: held while granted for a random time, like a masked request
      for (int s = 0; s < 2; s++)
        if (req[s] && gnt[s]) req[s] = ($urandom_range(3) != 0);
        else if (!req[s])      req[s] = ($urandom_range(2) == 0);
      #1;
      check(gnt != 2'b11, "mutual exclusion");
      check((gnt & ~req) == 2'b00, "grant only to a requester");
      for (int s = 0; s < 2; s++)
        if (prev_gnt[s] && req[s]) check(gnt[s], "grant held while request stays");
      if (req != 2'b00) check(gnt != 2'b00, "a request is served");
      if (req == 2'b11 && prev_gnt == 2'b00 && prev_req == 2'b00) tie_wins[gnt[1]]++;
      prev_gnt = gnt; prev_req = req;
    end
    // directed ties from idle: winners alternate
    begin
      logic [1:0] w0, w1;
      @(negedge clk) req = 2'b00;
      @(negedge clk) req = 2'b11; #1 w0 = gnt;
      @(negedge clk) req = 2'b00;
      @(negedge clk) req = 2'b11; #1 w1 = gnt;
      check(w0 != w1 && w0 != 2'b00 && w1 != 2'b00, "ties from idle alternate");
    end
    finish_tb();
  end
endmodule
