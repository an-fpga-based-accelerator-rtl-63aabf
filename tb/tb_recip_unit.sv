// tb_recip_unit -- checks the reciprocal unit against 2^32/(2^16+s)
// (floor, saturated) for hand-picked and random s, and checks that done
// comes exactly 2*FX_FRAC+2 clocks after start.
`timescale 1ns/1ps
module tb_recip_unit;
  import n2v_ref_pkg::*;
  logic clk = 0, rst_n = 0, start = 0, busy, done;
  int   s;
  logic signed [31:0] q;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  recip_unit dut (.clk, .rst_n, .start, .s, .busy, .done, .q);

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic one(input int sv);
    int lat = 0;
    @(negedge clk); s = sv; start = 1;
    @(negedge clk); start = 0;
    lat = 0;
    while (!done) begin @(negedge clk); lat++; end
    checks++;
    if (q !== rrecip(sv)) begin
      failures++;
      $display("FAIL s=%h q=%h expected %h", sv, q, rrecip(sv));
    end
    checks++;
    if (lat != 2*FRAC + 2) begin
      failures++;
      $display("FAIL latency %0d expected %0d", lat, 2*FRAC+2);
    end
  endtask

  initial begin
    s = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    one(0);                 // 1/1 = 1.0
    one(ONE);               // 1/2
    one(3*ONE);             // 1/4
    one(-ONE/2);            // 1/0.5 = 2
    one(-ONE + 1);          // tiny denominator: saturates
    one(-2*ONE);            // negative denominator: saturates
    one(32'h7fff0000);      // large s
    for (int i = 0; i < 200; i++) one(int'($urandom % (64*ONE)) - ONE/2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
