// tb_hat_masking: directed handshake sequences on the four channels of the
// masking stage, plus the V output.
//   1. Neu_Req rises: Req follows one cycle later, V rises.
//   2. Grant rises: Req falls, Neu_Grant rises.
//   3. Grant falls while Neu_Req stays high: Req stays low (the cluster is
//      offered once only), Neu_Grant stays high.
//   4. Neu_Req falls: Neu_Grant falls, the latch re-opens and a new
//      Neu_Req is passed on again.
module tb_hat_masking;
  import core_if_pkg::*;
  logic clk = 0, rst_n = 0;
  onehot4_t neu_req = '0, neu_grant, req, grant = '0;
  logic v;
  always #5 clk = ~clk;
  `include "tb_common.svh"

  hat_masking dut (.clk, .rst_n, .neu_req, .neu_grant, .req, .grant, .v);

  task automatic step(); @(negedge clk); endtask

  initial begin
    repeat (2) step();
    rst_n = 1;
    step();
    check(req == '0 && neu_grant == '0 && !v, "idle after reset");
    for (int ch = 0; ch < 4; ch++) begin
      neu_req[ch] = 1; step();
      check(req == onehot4_t'(1 << ch) && v, $sformatf("ch%0d: request passed", ch));
      grant[ch] = 1; step();
      check(req == '0 && !v, $sformatf("ch%0d: grant resets request", ch));
      check(neu_grant == onehot4_t'(1 << ch), $sformatf("ch%0d: cluster granted", ch));
      grant[ch] = 0; repeat (3) step();
      check(req == '0, $sformatf("ch%0d: request masked while Neu_Req held", ch));
      check(neu_grant[ch], $sformatf("ch%0d: Neu_Grant held until Neu_Req falls", ch));
      neu_req[ch] = 0; step();
      check(neu_grant == '0, $sformatf("ch%0d: Neu_Grant released", ch));
      step();
      neu_req[ch] = 1; step();
      check(req[ch], $sformatf("ch%0d: latch re-opened for the next spike", ch));
      grant[ch] = 1; step(); grant[ch] = 0; neu_req[ch] = 0; repeat (2) step();
      check(neu_grant == '0 && req == '0, $sformatf("ch%0d: back to idle", ch));
    end
    // all channels at once: all passed, V high until all granted
    neu_req = '1; step();
    check(req == '1 && v, "four requests passed together");
    for (int ch = 0; ch < 4; ch++) begin
      grant = onehot4_t'(1 << ch); step();
      check(v == (ch != 3), $sformatf("V with %0d requests left", 3 - ch));
    end
    grant = '0; neu_req = '0; repeat (2) step();
    check(neu_grant == '0, "all released");
    finish_tb();
  end
endmodule
