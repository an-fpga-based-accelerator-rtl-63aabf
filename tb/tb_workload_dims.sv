// tb_workload_dims -- runs the single-random-walk workload (walk of 80
// nodes, window 8, 10 negative samples, 73 contexts) on cores built for 64
// and 96 embedding dimensions, the two larger configurations besides the
// default 32, and checks every output word against the reference model.
`timescale 1ns/1ps
module tb_workload_dims;
  logic fin64, fin96;
  int   c64, f64, c96, f96;
  int   checks, failures;

  n2v_dims_harness #(.DIM(64)) h64 (.finished(fin64), .checks(c64), .failures(f64));
  n2v_dims_harness #(.DIM(96)) h96 (.finished(fin96), .checks(c96), .failures(f96));

  initial begin
    #20ms;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", c64 + c96, f64 + f96 + 1);
    $finish;
  end

  initial begin
    #1;
    wait (fin64 === 1'b1 && fin96 === 1'b1);
    checks = c64 + c96;
    failures = f64 + f96;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
