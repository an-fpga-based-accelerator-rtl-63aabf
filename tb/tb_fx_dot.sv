// tb_fx_dot -- checks the parallel dot product against a full-precision
// sum of products shifted once by 16 bits, for random and extreme operands.
`timescale 1ns/1ps
module tb_fx_dot;
  import n2v_ref_pkg::*;
  localparam int L = 32;
  logic signed [31:0] a [L], b [L], y;
  int checks = 0, failures = 0;

  fx_dot #(.LANES(L)) dut (.a, .b, .y);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 500; t++) begin
      logic signed [79:0] acc;
      acc = 0;
      for (int k = 0; k < L; k++) begin
        if (t < 3) begin
          a[k] = (t == 0) ? 32'sh7fffffff : ((t == 1) ? 32'sh80000000 : ONE);
          b[k] = (t == 2) ? k * ONE : 32'sh80000000;
        end else begin
          a[k] = $urandom; b[k] = (t % 2) ? $urandom : int'($urandom % (2*ONE)) - ONE;
        end
        acc += 80'(longint'(a[k]) * longint'(b[k]));
      end
      #1;
      checks++;
      if (y !== 32'(acc >>> FRAC)) begin
        failures++;
        $display("FAIL t=%0d y=%h expected %h", t, y, 32'(acc >>> FRAC));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
