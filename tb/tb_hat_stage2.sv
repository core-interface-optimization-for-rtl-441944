// tb_hat_stage2: second static HC stage, three levels. Checks that only a
// complete dual-rail packet is captured, that req_out and the 6 true-rail
// bits appear, that the packet is held while the input changes, that
// ack_out clears it, that nothing is captured while ack_out or the ack
// generator's Ack is high, and random packets round trip.
module tb_hat_stage2;
  import core_if_pkg::*;
  logic clk = 0, rst_n = 0;
  dualrail_t [5:0] data_in = '0;
  logic ack = 0, req_out, ack_out = 0;
  logic [5:0] data_out;
  always #5 clk = ~clk;
  `include "tb_common.svh"

  hat_stage2 #(.LEVELS(3)) dut (.clk, .rst_n, .data_in, .ack, .data_out, .req_out, .ack_out);

  task automatic step(); @(negedge clk); endtask
  function automatic dualrail_t [5:0] dr(input logic [5:0] b);
    for (int i = 0; i < 6; i++) begin dr[i].t = b[i]; dr[i].f = !b[i]; end
  endfunction

  initial begin
    logic [5:0] a;
    repeat (2) step();
    rst_n = 1; step();
    check(!req_out, "empty after reset");
    data_in = dr(6'h2a); data_in[0] = '0; step();
    check(!req_out, "incomplete packet not captured");
    for (int i = 0; i < 200; i++) begin
      a = 6'($urandom);
      data_in = dr(a); ack = ($urandom_range(3) == 0); step();
      if (ack) begin
        check(!req_out, "no capture while Ack is high");
        ack = 0; step();
      end
      check(req_out && data_out == a, $sformatf("packet %h captured (got %h)", a, data_out));
      data_in = dr(~a); step();
      check(req_out && data_out == a, "held while input changes");
      ack_out = 1; step();
      check(!req_out, "cleared by ack_out");
      step();
      check(!req_out, "no capture while ack_out is high");
      ack_out = 0; data_in = '0; step();
    end
    finish_tb();
  end
endmodule
