// tb_hat_stage1: first static HC stage of one level. Checks capture of the
// arbiter grant while Ack is low, holding while the arbiter output changes,
// the dual-rail code of every one-hot input (computed here from the index),
// the completion detector, the clear on Ack when no lower level is pending,
// the hold on Ack while a lower level is pending, and no capture while Ack
// is high.
module tb_hat_stage1;
  import core_if_pkg::*;
  logic clk = 0, rst_n = 0;
  onehot4_t arb_gnt = '0, grant;
  logic ack = 0, hold_lower = 0, d_valid;
  dualrail_t [HAT_DIGIT-1:0] data;
  always #5 clk = ~clk;
  `include "tb_common.svh"

  hat_stage1 dut (.clk, .rst_n, .arb_gnt, .ack, .hold_lower, .grant, .data, .d_valid);

  task automatic step(); @(negedge clk); endtask

  initial begin
    repeat (2) step();
    rst_n = 1; step();
    check(grant == '0 && !d_valid && data == '0, "empty after reset");
    for (int i = 0; i < 4; i++) begin
      arb_gnt = onehot4_t'(1 << i); step();
      check(grant == arb_gnt, $sformatf("capture %0d", i));
      check(d_valid, "encoded data complete");
      check(data[0].t == i[0] && data[0].f == !i[0] && data[1].t == i[1] && data[1].f == !i[1],
            $sformatf("dual-rail code of %0d", i));
      arb_gnt = onehot4_t'(1 << ((i + 1) % 4)); step();
      check(grant == onehot4_t'(1 << i), "held while arbiter output changes");
      arb_gnt = '0;
      ack = 1; hold_lower = 1; repeat (2) step();
      check(grant == onehot4_t'(1 << i), "kept while a lower level is pending");
      hold_lower = 0; step();
      check(grant == '0 && !d_valid, "cleared on Ack");
      arb_gnt = onehot4_t'(1 << i); step();
      check(grant == '0, "no capture while Ack is high");
      ack = 0; arb_gnt = '0; step();
    end
    finish_tb();
  end
endmodule
