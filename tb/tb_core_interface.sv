// tb_core_interface: end-to-end test of one core interface at its default
// size (64 neurons, 512 x 11 CAM).
//
// The testbench plays the neurons and the network between cores. Neurons
// spike (sparse single spikes, then a full-frame burst); the address
// events that leave the HAT encoder go into a queue that stands for the
// network, tagged with source core 5'd3 as the upper bits of an 11-bit
// source address; a network driver feeds them, in order, into the CAM as
// input events, and compares the match vector with the synapses that
// subscribed to that source (the tags written at the start, most of them
// addresses of this core's neurons, some of other cores). The output
// channel is acknowledged with a random delay, so the encoder also stalls.
//
// Every mechanism is counted and must occur at least once: sparse events
// at the expected 9-cycle latency, a full-frame burst, a level holding its
// grant while a lower level is still pending, arbiter contention, output
// stalls, CAM lines stopped by feedback control, lines stopped by
// speculative sense, mismatching lines stopped by Off, and CSCD
// acknowledges.
module tb_core_interface;
  import core_if_pkg::*;
  localparam int unsigned N = 64, AB = 6, E = CAM_ENTRIES, W = CAM_WIDTH;
  localparam logic [4:0] CORE_ID = 5'd3;
  `define TB_WATCHDOG_CYCLES 400000

  logic clk = 0, rst_n = 0;
  logic [N-1:0] neu_req, neu_grant;
  logic [AB-1:0] aer_out_addr;
  logic aer_out_req, aer_out_ack;
  logic aer_in_req = 0, aer_in_ack;
  logic [W-1:0] aer_in_addr = '0;
  logic [E-1:0] cam_hits;
  logic cam_hits_valid, cam_we = 0, cam_busy;
  logic [$clog2(E)-1:0] cam_waddr = '0;
  logic [W-1:0] cam_wdata = '0;
  logic [$clog2(E+2)-1:0] cam_src_count;
  always #5 clk = ~clk;
  `include "tb_common.svh"

  core_interface dut (.*);

  // ---------------- neurons
  logic [N-1:0] fire = '0, nbusy;
  always_ff @(posedge clk) begin
    if (!rst_n) begin neu_req <= '0; nbusy <= '0; end
    else for (int n = 0; n < N; n++) begin
      if (!nbusy[n] && fire[n]) begin neu_req[n] <= 1'b1; nbusy[n] <= 1'b1; end
      else if (neu_req[n] && neu_grant[n]) neu_req[n] <= 1'b0;
      else if (nbusy[n] && !neu_req[n] && !neu_grant[n]) nbusy[n] <= 1'b0;
    end
  end

  // ---------------- network: output channel into a queue, random ack delay
  logic [W-1:0] netq [$];
  int unsigned ack_wait = 0, n_stall = 0, n_sent = 0;
  always @(posedge clk) begin
    if (!rst_n) aer_out_ack <= 1'b0;
    else if (aer_out_req && !aer_out_ack) begin
      if (ack_wait == 0) begin
        netq.push_back({CORE_ID, aer_out_addr});
        n_sent++;
        aer_out_ack <= 1'b1;
        ack_wait <= $urandom_range(3);
      end else begin
        ack_wait <= ack_wait - 1;
        n_stall++;
      end
    end else if (!aer_out_req) aer_out_ack <= 1'b0;
  end

  // ---------------- mechanism counters (internal probes)
  int unsigned n_hold = 0, n_contend = 0, n_fc = 0, n_ss = 0, n_off = 0, n_cscd = 0, n_search = 0;
  logic cscd_ack_d = 0;
  always @(posedge clk) if (rst_n) begin
    if (dut.u_out.u_pipe.ack && dut.u_out.u_pipe.hold_lower[0]) n_hold++;
    if ($countones(dut.u_out.u_pipe.mreq[2]) > 1) n_contend++;
    if (dut.u_in.ack && !cscd_ack_d) n_cscd++;
    cscd_ack_d = dut.u_in.ack;
  end

  // ---------------- tags and the network driver
  logic [W-1:0] tags [E];
  initial begin
    logic [W-1:0] key;
    int unsigned nmatch, nchecked;
    nchecked = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int e = 0; e < E; e++) begin
      tags[e] = ($urandom_range(3) != 0) ? {CORE_ID, 6'($urandom)} : W'($urandom);
      @(negedge clk) begin cam_we = 1; cam_waddr = e[$clog2(E)-1:0]; cam_wdata = tags[e]; end
    end
    @(negedge clk) cam_we = 0;
    forever begin
      logic [E-1:0] exp;
      @(negedge clk);
      if (netq.size() != 0) begin
        key = netq.pop_front();
        for (int e = 0; e < E; e++) begin
          logic [W-1:0] d;
          d = tags[e] ^ key;
          exp[e] = (d == '0);
          if (d == '0) n_fc++;
          else if (d[CAM_SPEC_BITS-1:0] != '0) n_ss++;
          else n_off++;
        end
        aer_in_addr = key; aer_in_req = 1;
        while (!aer_in_ack) @(negedge clk);
        check(cam_hits == exp, $sformatf("event %h: synapse hits differ", key));
        n_search++;
        aer_in_req = 0;
        while (aer_in_ack) @(negedge clk);
      end
    end
  end

  // ---------------- stimulus
  initial begin
    int unsigned lat, n_sparse, t_burst, n0;
    n_sparse = 0;
    wait (rst_n);
    repeat (E + 10) @(negedge clk);
    for (int i = 0; i < 20; i++) begin
      int unsigned n;
      n = $urandom_range(N - 1);
      n0 = n_sent;
      @(negedge clk) fire[n] = 1;
      @(negedge clk) fire[n] = 0;
      lat = 1;
      while (!aer_out_req && lat < 100) begin @(negedge clk); lat++; end
      check(lat == 10, $sformatf("sparse latency %0d (9 from neuron request expected)", lat));
      check(aer_out_addr == AB'(n), "sparse event address");
      if (lat == 10 && aer_out_addr == AB'(n)) n_sparse++;
      repeat (40) @(negedge clk);
    end
    // full-frame burst
    n0 = n_sent;
    @(negedge clk) fire = '1;
    @(negedge clk) fire = '0;
    t_burst = 1;
    while (n_sent < n0 + N && t_burst < 50000) begin @(negedge clk); t_burst++; end
    check(n_sent == n0 + N, "burst: one event per neuron");
    $display("burst of %0d spikes encoded in %0d cycles", N, t_burst);
    while (netq.size() != 0 || aer_in_req) @(negedge clk);
    repeat (20) @(negedge clk);
    check(n_search == n_sent, $sformatf("every event searched (%0d of %0d)", n_search, n_sent));
    $display("mechanisms: sparse=%0d burst_events=%0d level_hold=%0d contention=%0d out_stall=%0d",
             n_sparse, n_sent - n0, n_hold, n_contend, n_stall);
    $display("            searches=%0d cscd_acks=%0d feedback_stops=%0d spec_sense_stops=%0d off_stops=%0d",
             n_search, n_cscd, n_fc, n_ss, n_off);
    check(n_sparse > 0, "sparse events occurred");
    check(n_hold > 0, "a level held its grant for a lower level");
    check(n_contend > 0, "arbiter contention occurred");
    check(n_stall > 0, "output channel stalled");
    check(n_cscd == n_search, "one CSCD acknowledge per search");
    check(n_fc > 0, "feedback control stopped a matching line");
    check(n_ss > 0, "speculative sense stopped a line");
    check(n_off > 0, "Off stopped a mismatching line");
    finish_tb();
  end
endmodule
