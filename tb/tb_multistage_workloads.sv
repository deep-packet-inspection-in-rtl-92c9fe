// Testbench for multistage_unit at the other sizes the design is meant for.
//
//   * 16 x 32-bit / 8 / 4 FAs: the three-stage example configuration (100 Gbit/s on a
//     512-bit bus at 200 MHz with 32-bit NFAs, 16 A1, 8 A2 and 4 A3 copies).
//   * 128 x 8-bit / 64 / 32 FAs: 200 Gbit/s on a 1024-bit bus.
//   * 256 x 8-bit / 128 / 64 FAs: 400 Gbit/s on a 2048-bit bus.
// Each runs in its own multistage_harness (random traffic checked against the two
// REs, every mechanism counted, and the line rate checked cycle by cycle). The
// counts are summed.
module tb_multistage_workloads;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  bit done[3];
  int checks[3], failures[3];

  multistage_harness #(.NB(32), .K1(16),  .K2(8),   .K3(4))  u_cfg4 (.clk, .done(done[0]), .checks(checks[0]), .failures(failures[0]));
  multistage_harness #(.NB(8),  .K1(128), .K2(64),  .K3(32)) u_200g (.clk, .done(done[1]), .checks(checks[1]), .failures(failures[1]));
  multistage_harness #(.NB(8),  .K1(256), .K2(128), .K3(64)) u_400g (.clk, .done(done[2]), .checks(checks[2]), .failures(failures[2]));

  initial begin
    wait (done[0] && done[1] && done[2]);
    @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks[0] + checks[1] + checks[2],
             failures[0] + failures[1] + failures[2]);
    $finish;
  end

  initial begin
    repeat (1000000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks[0] + checks[1] + checks[2],
             failures[0] + failures[1] + failures[2] + 1);
    $finish;
  end
endmodule
