// tb_hat_encoder: end-to-end test of the hierarchical arbiter tree encoder
// for 64 neurons (three levels).
//
// Neuron model: a neuron raises its request, drops it the cycle after it
// sees its grant, and may fire again only after the grant has fallen. The
// receiver acknowledges every output event one cycle after its request.
// Checks:
//   * sparse events: one random neuron at a time; the address is that
//     neuron's index and the latency, request to output request, is
//     3 cycles per level (one each for the masking latch, the first-stage
//     register and the cluster grant), i.e. 9 cycles from the neuron's
//     request (10 from the testbench's fire strobe);
//   * full-frame burst: all neurons fire together; every address comes out
//     exactly once, the high-level digit changes only when a whole
//     16-neuron cluster has been sent (3 changes), and within each
//     high-level cluster the middle digit changes 3 times;
//   * the burst's cycle count is printed and bounded.
module tb_hat_encoder;
  import core_if_pkg::*;
  localparam int unsigned LEVELS = 3;
  localparam int unsigned N = 4 ** LEVELS;
  localparam int unsigned AB = 2 * LEVELS;

  logic clk = 0, rst_n = 0;
  logic [N-1:0] neu_req, neu_grant;
  logic [AB-1:0] data_out;
  logic req_out, ack_out;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  hat_encoder #(.LEVELS(LEVELS)) dut (.clk, .rst_n, .neu_req, .neu_grant, .data_out, .req_out, .ack_out);

  // neurons: fire[] requests a spike; req drops after grant
  logic [N-1:0] fire, busy_q;
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      neu_req <= '0; busy_q <= '0;
    end else begin
      for (int n = 0; n < N; n++) begin
        if (!busy_q[n] && fire[n]) begin neu_req[n] <= 1'b1; busy_q[n] <= 1'b1; end
        else if (neu_req[n] && neu_grant[n]) neu_req[n] <= 1'b0;
        else if (busy_q[n] && !neu_req[n] && !neu_grant[n]) busy_q[n] <= 1'b0;
      end
    end
  end

  // receiver: four-phase, one cycle per phase; logs addresses
  int unsigned nout = 0;
  logic [AB-1:0] outlog [0:4*N];
  always_ff @(posedge clk) begin
    if (!rst_n) ack_out <= 1'b0;
    else begin
      if (req_out && !ack_out) begin outlog[nout] <= data_out; nout <= nout + 1; end
      ack_out <= req_out;
    end
  end

  function automatic void check(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endfunction

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int unsigned lat, start, n0, hchg, mchg, t_burst;
    logic [N-1:0] seen;
    fire = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk);
    // ---- sparse events
    for (int trial = 0; trial < 40; trial++) begin
      int unsigned n;
      n = (trial < 4) ? trial * 21 : $urandom_range(N - 1);
      n0 = nout;
      @(negedge clk) fire[n] = 1'b1;
      @(negedge clk) fire[n] = 1'b0;
      lat = 1;
      while (!req_out && lat < 100) begin @(negedge clk); lat++; end
      // +1: the neuron model registers its request one cycle after fire
      check(lat == 3 * LEVELS + 1, $sformatf("sparse latency neuron %0d: %0d cycles", n, lat));
      check(data_out == AB'(n), $sformatf("sparse address %0d got %0d", n, data_out));
      repeat (20) @(negedge clk);
      check(nout == n0 + 1, "exactly one event per sparse spike");
      check(neu_req == '0 && neu_grant == '0, "handshake returned to idle");
    end
    // ---- full-frame burst
    n0 = nout;
    @(negedge clk) fire = '1;
    start = 0;
    @(negedge clk) fire = '0;
    t_burst = 1;
    while (nout < n0 + N && t_burst < 20000) begin @(negedge clk); t_burst++; end
    repeat (30) @(negedge clk);
    check(nout == n0 + N, $sformatf("burst: %0d events for %0d neurons", nout - n0, N));
    seen = '0;
    hchg = 0; mchg = 0;
    for (int i = 0; i < N; i++) begin
      logic [AB-1:0] a;
      a = outlog[n0 + i];
      if (seen[a]) check(1'b0, $sformatf("burst: address %0d twice", a));
      seen[a] = 1'b1;
      if (i > 0 && a[AB-1 -: 2] != outlog[n0 + i - 1][AB-1 -: 2]) hchg++;
      else if (i > 0 && a[AB-3 -: 2] != outlog[n0 + i - 1][AB-3 -: 2]) mchg++;
    end
    check(seen == '1, "burst: every neuron encoded");
    check(hchg == 3, $sformatf("burst: high digit changed %0d times, expected 3", hchg));
    check(mchg == 12, $sformatf("burst: middle digit changed %0d times inside clusters, expected 12", mchg));
    check(t_burst < 8 * N, $sformatf("burst took %0d cycles", t_burst));
    $display("burst of %0d events: %0d cycles (%0d.%02d cycles/event)", N, t_burst, t_burst / N, (100 * t_burst / N) % 100);
    check(neu_req == '0 && neu_grant == '0, "burst: handshakes idle at the end");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
