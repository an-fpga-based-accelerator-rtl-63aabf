// recip_unit -- reciprocal unit producing hpht_inv = 1 / (1 + H P H^T).
//
// The OS-ELM update needs one reciprocal per training context.  For a single
// sample the (I + H P H^T)^-1 of the OS-ELM formula is the scalar
// 1/(1 + s) with s = H P H^T; this unit takes s, adds 1.0 and divides
// 2^(2*FX_FRAC) by it with a restoring divider that produces one quotient
// bit per clock, which is this design's choice of divider.  The result is
// floor-rounded and saturates to the largest positive word when it does not
// fit or when 1 + s is not positive (1 + s > 0 always holds for a positive
// definite P).
// Interface: start (one-cycle pulse) with s; done pulses with q valid.
// Timing: done comes LATENCY = NUM_BITS + 1 clocks after start.
module recip_unit
  import n2v_pkg::*;
(
  input  logic clk,
  input  logic rst_n,
  input  logic start,
  input  fx_t  s,
  output logic busy,
  output logic done,
  output fx_t  q
);

  localparam int unsigned NUM_BITS = 2*FX_FRAC + 1;   // dividend 2^(2F) has 2F+1 bits
  localparam int unsigned CNT_W    = $clog2(NUM_BITS + 1);

  logic [FX_W:0]          den;      // 1 + s, positive
  logic [FX_W+1:0]        rem;
  logic [NUM_BITS-1:0]    quo;
  logic [CNT_W-1:0]       bit_cnt;
  logic                   bad;      // 1 + s <= 0
  logic                   finish;

  fx2_t                   den_s;
  logic [FX_W+1:0]        rem_sh;

  assign den_s  = fx2_t'(s) + fx2_t'(FX_ONE);
  // next dividend bit: only the most significant bit of 2^(2F) is one
  assign rem_sh = {rem[FX_W:0], (bit_cnt == CNT_W'(NUM_BITS))};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy    <= 1'b0;
      done    <= 1'b0;
      finish  <= 1'b0;
      rem     <= '0;
      quo     <= '0;
      den     <= '0;
      bit_cnt <= '0;
      bad     <= 1'b0;
      q       <= '0;
    end else begin
      done   <= 1'b0;
      finish <= 1'b0;
      if (start && !busy) begin
        busy    <= 1'b1;
        den     <= den_s[FX_W:0];
        bad     <= (den_s <= 0);
        rem     <= '0;
        quo     <= '0;
        bit_cnt <= CNT_W'(NUM_BITS);
      end else if (busy && bit_cnt != 0) begin
        if (rem_sh >= {1'b0, den}) begin
          rem <= rem_sh - {1'b0, den};
          quo <= {quo[NUM_BITS-2:0], 1'b1};
        end else begin
          rem <= rem_sh;
          quo <= {quo[NUM_BITS-2:0], 1'b0};
        end
        bit_cnt <= bit_cnt - 1'b1;
        if (bit_cnt == 1) finish <= 1'b1;
      end else if (finish) begin
        busy <= 1'b0;
        done <= 1'b1;
        if (bad || quo > NUM_BITS'({1'b0, {(FX_W-1){1'b1}}}))
          q <= {1'b0, {(FX_W-1){1'b1}}};
        else
          q <= fx_t'(quo);
      end
    end
  end

endmodule
