// fx_dot -- parallel fixed-point dot product (the multiply-add array).
//
// Computes y = sum_k a[k]*b[k] for LANES lanes in one combinational pass:
// every lane multiplies at full width, a balanced sum adds the products at
// full precision, and the total is shifted right by FX_FRAC (floor) and
// truncated to one fixed-point word.  Rounding only once, after the sum, is
// this design's choice.  With LANES equal to the embedding dimension one
// row of P or beta is consumed per clock, which matches the parallelism of
// 32 the accelerator is built with for 32-dimensional embeddings.
// Interface: a, b (LANES words each) -> y.  Timing: purely combinational.
module fx_dot
  import n2v_pkg::*;
#(
  parameter int unsigned LANES = 32
) (
  input  fx_t a [LANES],
  input  fx_t b [LANES],
  output fx_t y
);

  localparam int unsigned ACC_W = 2*FX_W + $clog2(LANES) + 1;
  typedef logic signed [ACC_W-1:0] acc_t;

  acc_t sum;

  always_comb begin
    sum = '0;
    for (int unsigned k = 0; k < LANES; k++)
      sum += acc_t'(fx2_t'(a[k]) * fx2_t'(b[k]));
    y = fx_t'(sum >>> FX_FRAC);
  end

endmodule
