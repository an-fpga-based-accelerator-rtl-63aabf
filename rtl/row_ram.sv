// row_ram -- on-chip buffer holding DEPTH rows of LANES fixed-point words.
//
// Models the block-RAM buffers of the accelerator (beta and its accumulated
// difference, P, delta-P and the P*H^T*H*P rows).  A whole row is read or
// written per clock, which is what lets the multiply-add array consume one
// row per cycle.  One write port and one read port; the read is registered
// (data appears the clock after raddr) and returns the old contents when the
// same row is written in the same clock.  The contents are not reset.
// Interface: we/waddr/wdata, raddr -> rdata.  Timing: 1-cycle read latency.
module row_ram
  import n2v_pkg::*;
#(
  parameter int unsigned DEPTH = 32,
  parameter int unsigned LANES = 32,
  parameter int unsigned AW    = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  fx_t           wdata [LANES],
  input  logic [AW-1:0] raddr,
  output fx_t           rdata [LANES]
);

  fx_t mem [DEPTH][LANES];

  always_ff @(posedge clk) begin
    if (we && 32'(waddr) < DEPTH)
      mem[waddr] <= wdata;
    if (32'(raddr) < DEPTH)
      rdata <= mem[raddr];
  end

endmodule
