// tb_fx_axpy -- checks z[k] = y[k] + floor(a*x[k] / 2^16) lane by lane for
// random operands, a = 1.0 (exact copy), a = -1.0 and a = 0.
`timescale 1ns/1ps
module tb_fx_axpy;
  import n2v_ref_pkg::*;
  localparam int L = 32;
  logic signed [31:0] y [L], x [L], z [L], a;
  int checks = 0, failures = 0;

  fx_axpy #(.LANES(L)) dut (.y, .a, .x, .z);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 300; t++) begin
      a = (t == 0) ? ONE : (t == 1) ? -ONE : (t == 2) ? 0 : $urandom;
      for (int k = 0; k < L; k++) begin y[k] = $urandom; x[k] = $urandom; end
      #1;
      for (int k = 0; k < L; k++) begin
        checks++;
        if (z[k] !== y[k] + rmul(a, x[k])) begin
          failures++;
          if (failures < 10) $display("FAIL t=%0d lane %0d z=%h expected %h", t, k, z[k], y[k] + rmul(a, x[k]));
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
