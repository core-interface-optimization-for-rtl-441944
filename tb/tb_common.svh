// tb_common.svh: bookkeeping shared by the testbenches: check counters,
// the check() helper, the result line and a cycle watchdog. Include it
// inside a module that has a clock named clk; define TB_WATCHDOG_CYCLES
// before including to change the watchdog limit.
`ifndef TB_WATCHDOG_CYCLES
`define TB_WATCHDOG_CYCLES 100000
`endif
  int checks = 0, failures = 0;

  function automatic void check(input logic ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endfunction

  task automatic finish_tb();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask

  initial begin : watchdog
    repeat (`TB_WATCHDOG_CYCLES) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    finish_tb();
  end
