// tb_hat_cluster_bus: random neuron requests and level grants into the
// cluster lines of a 64-neuron core. The reference is computed here with
// division and modulo on the neuron index (digit l = (n / 4**(2-l)) % 4):
// level-l line j is high when some requesting neuron has digit l = j and is
// granted at every higher level; a neuron is granted when all three of its
// levels grant it.
module tb_hat_cluster_bus;
  import core_if_pkg::*;
  logic clk = 0;
  logic [63:0] neu_req, neu_grant;
  onehot4_t [2:0] lvl_req, lvl_gnt;
  always #5 clk = ~clk;
  `include "tb_common.svh"

  hat_cluster_bus #(.LEVELS(3)) dut (.neu_req, .neu_grant, .lvl_neu_req(lvl_req), .lvl_neu_grant(lvl_gnt));

  initial begin
    for (int i = 0; i < 2000; i++) begin
      onehot4_t [2:0] exp_req;
      logic [63:0] exp_gnt;
      neu_req = {$urandom, $urandom} & {$urandom, $urandom};
      for (int l = 0; l < 3; l++) lvl_gnt[l] = onehot4_t'($urandom);
      #1;
      exp_req = '0;
      for (int n = 0; n < 64; n++) begin
        int h, m, lo;
        h = (n / 16) % 4; m = (n / 4) % 4; lo = n % 4;
        exp_gnt[n] = lvl_gnt[0][h] && lvl_gnt[1][m] && lvl_gnt[2][lo];
        if (neu_req[n]) begin
          exp_req[0][h] = 1'b1;
          if (lvl_gnt[0][h]) exp_req[1][m] = 1'b1;
          if (lvl_gnt[0][h] && lvl_gnt[1][m]) exp_req[2][lo] = 1'b1;
        end
      end
      check(lvl_req == exp_req, $sformatf("level requests %h expected %h", lvl_req, exp_req));
      check(neu_grant == exp_gnt, "neuron grants");
      @(negedge clk);
    end
    finish_tb();
  end
endmodule
