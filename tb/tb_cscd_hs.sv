// tb_cscd_hs: the CSCD handshake flip-flop. Checks that Ack rises at the
// first clock edge after the falling edge of sense during a request, for pulses of 1 to 6
// cycles; that it stays high until the request falls and then clears; that
// a falling edge while the request is low gives no Ack; and that a request
// without any sense pulse gives no Ack.
module tb_cscd_hs;
  logic clk = 0, rst_n = 0;
  logic sense = 0, req = 0, ack;
  always #5 clk = ~clk;
  `include "tb_common.svh"

  cscd_hs dut (.clk, .rst_n, .sense, .req, .ack);

  task automatic step(); @(negedge clk); endtask

  initial begin
    repeat (2) step();
    rst_n = 1; step();
    for (int w = 1; w <= 6; w++) begin
      req = 1; step();
      sense = 1; repeat (w) begin step(); check(!ack, "no ack while current flows"); end
      sense = 0; step();
      check(ack, $sformatf("ack after a %0d-cycle pulse", w));
      repeat (3) step();
      check(ack, "ack held while request high");
      req = 0; step();
      check(!ack, "ack cleared by request low");
      step();
    end
    sense = 1; repeat (2) step(); sense = 0; repeat (3) step();
    check(!ack, "no ack without a request");
    req = 1; repeat (10) step();
    check(!ack, "no ack without a current pulse");
    req = 0; step();
    finish_tb();
  end
endmodule
