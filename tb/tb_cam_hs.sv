// tb_cam_hs: the HS block against a model of the CAM and its completion
// detector. The model acknowledges a random 1 to 8 cycles after req rises,
// presents a match vector derived from the key, and drops ack a random 1 to
// 3 cycles after req falls. Checks: the key is on SL at least one cycle
// before req (bundled data), req is held until ack, the captured hits and
// the one-cycle hits_valid strobe, in_ack only after ack has fallen, and the
// in_req/in_ack four-phase sequence.
module tb_cam_hs;
  localparam int E = 16, W = 11;
  logic clk = 0, rst_n = 0;
  logic in_req = 0, in_ack, req, ack = 0, hits_valid, busy;
  logic [W-1:0] in_key = '0, sl;
  logic [E-1:0] match, hits;
  always #5 clk = ~clk;
  `include "tb_common.svh"

  cam_hs #(.ENTRIES(E), .WIDTH(W)) dut (.clk, .rst_n, .in_req, .in_ack, .in_key, .sl, .req, .ack, .match,
                                        .hits, .hits_valid, .busy);

  // CAM model
  int unsigned delay;
  logic [W-1:0] sl_at_req;
  always @(posedge clk) begin
    if (req && !ack) begin
      if (delay == 0) ack <= 1; else delay <= delay - 1;
    end else if (!req && ack) begin
      if (delay == 0) ack <= 0; else delay <= delay - 1;
    end else delay <= $urandom_range(3);
  end
  assign match = E'({sl, sl} * 7);

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 100; i++) begin
      int unsigned strobes, cyc;
      logic [E-1:0] exp_hits;
      logic prev_req;
      logic [W-1:0] prev_sl;
      in_key = W'($urandom);
      exp_hits = E'({in_key, in_key} * 7);
      @(negedge clk) in_req = 1;
      strobes = 0; cyc = 0; prev_req = req; prev_sl = sl;
      while (!in_ack && cyc < 100) begin
        @(negedge clk); cyc++;
        strobes += hits_valid;
        if (req) check(sl == in_key, "key on SL while req high");
        if (req && !prev_req) check(prev_sl == in_key, "key on SL before req");
        prev_req = req; prev_sl = sl;
      end
      check(in_ack && !req && !ack, "in_ack after the CAM handshake has returned to zero");
      check(strobes == 1, $sformatf("one hits_valid strobe (%0d)", strobes));
      check(hits == exp_hits, "captured match vector");
      in_req = 0;
      @(negedge clk); @(negedge clk);
      check(!in_ack && !busy, "input handshake complete");
    end
    finish_tb();
  end
endmodule
