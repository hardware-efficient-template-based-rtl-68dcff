// tb_cnn_table1_configs: the two larger compute shapes of the published
// design on the full accelerator.
//
// Builds the accelerator twice, as published for the two larger boards:
//   20 x 30 compute unit (ZCU104 board), LAMBDA = 560, OMEGA = 90
//   20 x 55 compute unit (ZCU102 board), LAMBDA = 560, OMEGA = 110
// The compute shapes are the published ones; LAMBDA and OMEGA are this
// design's choice (multiples of MU and TAU near the default 576 and 96).
// Each build runs the tile sequence of cnn_cfg_harness (chained 3x3 conv,
// strided 5x5 conv, FC over two full lambda tiles into a full Omega tile)
// against its own behavioural DRAM, the two at the same time, and every
// stored output is compared with a reference.
module tb_cnn_table1_configs;

  logic clk = 1'b0, rst_n = 1'b0, go = 1'b0;
  always #5 clk = ~clk;

  logic done_a, done_b;
  int   checks_a, failures_a, checks_b, failures_b;

  cnn_cfg_harness #(.MU(20), .TAU(30), .LAMBDA(560), .OMEGA(90)) u_zcu104 (
    .clk, .rst_n, .go, .done(done_a), .checks(checks_a), .failures(failures_a));
  cnn_cfg_harness #(.MU(20), .TAU(55), .LAMBDA(560), .OMEGA(110)) u_zcu102 (
    .clk, .rst_n, .go, .done(done_b), .checks(checks_b), .failures(failures_b));

  initial begin
    repeat (3_000_000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks_a + checks_b, failures_a + failures_b + 1);
    $finish;
  end

  initial begin
    repeat (5) @(posedge clk);
    rst_n = 1'b1;
    @(posedge clk);
    go = 1'b1;
    while (!(done_a && done_b)) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks_a + checks_b, failures_a + failures_b);
    $finish;
  end

endmodule
