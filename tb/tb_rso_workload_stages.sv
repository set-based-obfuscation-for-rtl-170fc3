// tb_rso_workload_stages -- the evaluated PUF lengths: builds of the device
// with 32 and 128 stages, next to the default of 64.
//
// Each build has 8 keys, like the 128-stage build measured for hardware
// overhead. Each uses the threshold found to balance false acceptance and
// false rejection at that length: 6 of 32, 13 of 64 and 27 of 128 bits.
// Applied to each half of the response, that is 3 of 16, 6 of 32 and 13 of
// 64 flips. Every build runs through rso_tb_device_run, which checks the
// key-generation and authentication cycle counts and the rejection rate.
// This testbench adds up their counts, and counts a failure for a build
// that did not finish.
module tb_rso_workload_stages;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic done32, done64, done128;
  int ch32, ch64, ch128, f32, f64, f128;

  rso_tb_device_run #(.N(32),  .M(8), .TOL(3),  .AUTHS(12)) run32
    (.clk(clk), .done(done32), .checks(ch32), .failures(f32));
  rso_tb_device_run #(.N(64),  .M(8), .TOL(6),  .AUTHS(12)) run64
    (.clk(clk), .done(done64), .checks(ch64), .failures(f64));
  rso_tb_device_run #(.N(128), .M(8), .TOL(13), .AUTHS(12)) run128
    (.clk(clk), .done(done128), .checks(ch128), .failures(f128));

  int checks = 0, failures = 0;

  initial begin
    fork
      wait (done32 && done64 && done128);
      repeat (200000) @(posedge clk);
    join_any
    checks = ch32 + ch64 + ch128 + 1;
    failures = f32 + f64 + f128;
    if (!(done32 && done64 && done128)) begin
      failures++;
      $display("FAIL a build did not finish");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
