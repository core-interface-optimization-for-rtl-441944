// tb_cscd_current_sense: the current-sensor model. Random current and
// request values; the output must equal "request high and current nonzero"
// of the previous cycle.
module tb_cscd_current_sense;
  logic clk = 0, rst_n = 0;
  logic [9:0] cur = '0;
  logic req = 0, sense, exp_sense;
  always #5 clk = ~clk;
  `include "tb_common.svh"

  cscd_current_sense #(.CNTW(10)) dut (.clk, .rst_n, .cur, .req, .sense);

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    exp_sense = 0;
    for (int i = 0; i < 1000; i++) begin
      @(negedge clk);
      check(sense == exp_sense, "sense follows current one cycle late");
      cur = ($urandom_range(2) == 0) ? '0 : 10'($urandom);
      req = 1'($urandom_range(1));
      exp_sense = req && (cur != 0);
    end
    finish_tb();
  end
endmodule
