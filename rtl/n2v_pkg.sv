// n2v_pkg -- types, constants and fixed-point helpers shared by the
// sequential node2vec training core.
//
// Every number in the datapath is a signed two's-complement fixed-point
// value of FX_W bits with FX_FRAC fraction bits (Q15.16 by default).  The
// word length and binary point are this design's choice: the accelerator
// is described only as using "fixed-point multiply-add operations".
// A product of two values is formed at full width and shifted right
// arithmetically by FX_FRAC (rounding toward minus infinity), then
// truncated to FX_W bits.  The same rule is used by every unit and by the
// reference models in the testbenches, so simulations match bit for bit.
package n2v_pkg;

  localparam int unsigned FX_W    = 32;  // word length of every datapath value
  localparam int unsigned FX_FRAC = 16;  // fraction bits

  typedef logic signed [FX_W-1:0]   fx_t;
  typedef logic signed [2*FX_W-1:0] fx2_t;

  localparam fx_t FX_ONE = fx_t'(1) <<< FX_FRAC;

  // Fixed-point product a*b, floor-rounded.
  function automatic fx_t fx_mul(fx_t a, fx_t b);
    fx2_t p;
    p = fx2_t'(a) * fx2_t'(b);
    return fx_t'(p >>> FX_FRAC);
  endfunction

  // Kinds of buffer the stream interface can address in the training engine.
  typedef enum logic [1:0] {
    BUF_RW   = 2'd0,   // random-walk node indices (local row numbers)
    BUF_NS   = 2'd1,   // negative-sample node indices (local row numbers)
    BUF_BETA = 2'd2,   // beta rows, one per node used by the walk
    BUF_P    = 2'd3    // rows of the N x N matrix P
  } buf_sel_e;

  // AXI4-Lite register map (byte addresses).
  localparam logic [5:0] REG_CTRL     = 6'h00; // W: bit0 start; R: bit0 busy, bit1 done
  localparam logic [5:0] REG_FLAGS    = 6'h04; // bit0 load P from stream, bit1 send P back
  localparam logic [5:0] REG_WALK_LEN = 6'h08; // nodes in the random walk
  localparam logic [5:0] REG_NUM_ROWS = 6'h0C; // beta rows sent with the walk
  localparam logic [5:0] REG_MU       = 6'h10; // scale factor mu, fixed point
  localparam logic [5:0] REG_CYCLES   = 6'h14; // R: training cycles of the last run

endpackage
