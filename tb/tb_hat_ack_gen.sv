// tb_hat_ack_gen: the ack generator for three levels. For every
// combination of the levels' D and V signals it starts from Ack low, raises
// the packet-captured input and checks that Ack rises exactly when
// packet_valid = D_L | (D_M & ~V_L) | (D_H & ~V_M & ~V_L) (written out here
// level by level). It then checks that Ack falls when packet_valid falls,
// and does not rise again until the packet-captured input has fallen and
// risen.
module tb_hat_ack_gen;
  logic clk = 0, rst_n = 0;
  logic cd2 = 0, ack;
  logic [2:0] d_valid = '0, v = '0;  // index 0 = H, 1 = M, 2 = L
  always #5 clk = ~clk;
  `include "tb_common.svh"

  hat_ack_gen #(.LEVELS(3)) dut (.clk, .rst_n, .cd2, .d_valid, .v, .ack);

  task automatic step(); @(negedge clk); endtask

  initial begin
    logic dh, dm, dl, vm, vl, pv;
    repeat (2) step();
    rst_n = 1; step();
    for (int c = 0; c < 64; c++) begin
      {dh, dm, dl} = c[2:0];
      {vm, vl} = c[4:3];
      d_valid = {dl, dm, dh};
      v = {vl, vm, c[5]};    // V of the highest level does not matter
      pv = dl | (dm & !vl) | (dh & !vm & !vl);
      cd2 = 1; step();
      check(ack == pv, $sformatf("D_H=%0d D_M=%0d D_L=%0d V_M=%0d V_L=%0d: ack=%0d", dh, dm, dl, vm, vl, ack));
      cd2 = 0; d_valid = '0; step(); step();
      check(!ack, "ack reset when no packet is valid");
    end
    // full cycle: capture, hold, clear, no re-trigger while cd2 stays
    d_valid = 3'b111; v = '0; cd2 = 1; step();
    check(ack, "ack on captured packet");
    step(); check(ack, "ack held while packet valid");
    d_valid = 3'b011; v = 3'b100; step();  // lowest level cleared, V_L pending
    check(!ack, "ack falls when the packet's data is gone");
    d_valid = 3'b111; v = '0; repeat (2) step();
    check(!ack, "no new ack until cd2 has fallen");
    cd2 = 0; step(); cd2 = 1; step();
    check(ack, "new ack for the next packet");
    finish_tb();
  end
endmodule
