// tb_snn_topologies: the smaller network sizes of the resource comparison,
// 784-100-10, 784-200-10, 784-300-10 and 784-300-300-10, each built as a
// Hybrid Architecture (neural core for the first hidden layer, one NPU per
// later layer) at its real size and run end to end side by side.
//
// Each instance of snn_workload_run loads random weights, classifies one
// image with Jittered Periodic input and Max Terminate, and checks the
// decision, class and spike counts against the reference model. This test
// sums their checks and failures; a watchdog ends it if an instance hangs.
module tb_snn_topologies;
  logic clk = 0;
  always #5 clk = ~clk;

  int c [4], f [4];
  logic fin [4];

  snn_workload_run #(.N_LAYERS(3), .L0(784), .L1(100), .L2(10), .SEED(11)) u_100 (
    .clk, .checks(c[0]), .failures(f[0]), .finished(fin[0]));
  snn_workload_run #(.N_LAYERS(3), .L0(784), .L1(200), .L2(10), .SEED(12)) u_200 (
    .clk, .checks(c[1]), .failures(f[1]), .finished(fin[1]));
  snn_workload_run #(.N_LAYERS(3), .L0(784), .L1(300), .L2(10), .SEED(13)) u_300 (
    .clk, .checks(c[2]), .failures(f[2]), .finished(fin[2]));
  snn_workload_run #(.N_LAYERS(4), .L0(784), .L1(300), .L2(300), .L3(10), .SEED(14)) u_300_300 (
    .clk, .checks(c[3]), .failures(f[3]), .finished(fin[3]));

  int checks, failures;

  initial begin
    repeat (20000000) @(posedge clk);
    checks = c[0] + c[1] + c[2] + c[3] + 1;
    failures = f[0] + f[1] + f[2] + f[3] + 1;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    @(posedge clk);
    while (!(fin[0] && fin[1] && fin[2] && fin[3])) @(posedge clk);
    checks = c[0] + c[1] + c[2] + c[3];
    failures = f[0] + f[1] + f[2] + f[3];
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
