// fx_axpy -- parallel fixed-point vector multiply-accumulate.
//
// Computes z[k] = y[k] + a*x[k] for LANES lanes at once.  Each product is
// rounded on its own (floor, see n2v_pkg::fx_mul) before it is added, and
// the sum wraps at FX_W bits.  The training engine uses this one unit for
// every vector operation of the algorithm: scaling a beta row by mu,
// accumulating H*P, forming the rows of P*H^T*H*P, accumulating delta-P and
// delta-beta and, with a = 1.0, the final additions of the deltas.
// Interface: y, x (LANES words), a (scalar) -> z.  Timing: combinational.
module fx_axpy
  import n2v_pkg::*;
#(
  parameter int unsigned LANES = 32
) (
  input  fx_t y [LANES],
  input  fx_t a,
  input  fx_t x [LANES],
  output fx_t z [LANES]
);

  always_comb
    for (int unsigned k = 0; k < LANES; k++)
      z[k] = y[k] + fx_mul(a, x[k]);

endmodule
