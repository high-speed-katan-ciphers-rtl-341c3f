// tb_katan_workloads -- runs the three configurations of the pipelined core
// (KATAN-32, -48 and -64) side by side: known answers, 3-edge latency,
// one block per clock, and streams with stalls, all checked against the
// reference model.
module tb_katan_workloads;
  logic clk = 1'b0;
  logic done32, done48, done64;
  int c32, c48, c64, f32, f48, f64;
  int checks, failures;

  always #5 clk = ~clk;

  katan_workload_run #(.BLOCK(32), .NBLOCKS(200)) run32 (.clk(clk), .done(done32), .checks(c32), .failures(f32));
  katan_workload_run #(.BLOCK(48), .NBLOCKS(200)) run48 (.clk(clk), .done(done48), .checks(c48), .failures(f48));
  katan_workload_run #(.BLOCK(64), .NBLOCKS(200)) run64 (.clk(clk), .done(done64), .checks(c64), .failures(f64));

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", c32 + c48 + c64, f32 + f48 + f64 + 1);
    $finish;
  end

  initial begin
    wait (done32 && done48 && done64);
    checks   = c32 + c48 + c64;
    failures = f32 + f48 + f64;
    $display("KATAN-32: %0d checks, KATAN-48: %0d checks, KATAN-64: %0d checks", c32, c48, c64);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
