// tb_hat_arbiter4: random requests into the four-input arbiter tree.
// Checks one-hot grants, grants only to requesters, grant holding while the
// request stays, service whenever something requests, and that when all
// four clusters keep requesting and each drops its request once granted,
// every cluster is granted once in four consecutive grants.
module tb_hat_arbiter4;
  import core_if_pkg::*;
  logic clk = 0, rst_n = 0;
  onehot4_t req = '0, gnt, prev_gnt;
  always #5 clk = ~clk;
  `include "tb_common.svh"

  hat_arbiter4 dut (.clk, .rst_n, .req, .gnt);

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    prev_gnt = '0;
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      for (int s = 0; s < 4; s++)
        if (req[s] && gnt[s]) req[s] = ($urandom_range(2) != 0);
        else if (!req[s])      req[s] = ($urandom_range(3) == 0);
      #1;
      check($onehot0(gnt), "one-hot grant");
      check((gnt & ~req) == '0, "grant only to a requester");
      for (int s = 0; s < 4; s++)
        if (prev_gnt[s] && req[s]) check(gnt[s], "grant held while request stays");
      if (req != '0) check(gnt != '0, "a request is served");
      prev_gnt = gnt;
    end
    // fairness under full load: each requester drops after its grant and re-requests
    begin
      onehot4_t served;
      @(negedge clk) req = '0;
      @(negedge clk);
      for (int round = 0; round < 5; round++) begin
        served = '0;
        req = '1;
        for (int k = 0; k < 4; k++) begin
          #1;
          check($onehot(gnt), "full load: one grant");
          served |= gnt;
          req &= ~gnt;
          @(negedge clk);
        end
        check(served == '1, $sformatf("full load round %0d: all four served (%b)", round, served));
      end
    end
    finish_tb();
  end
endmodule
