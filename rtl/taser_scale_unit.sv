// taser_scale_unit: column scale unit (CSU) of the TASER array.
//
// Receives the squared l2-norm ||v_j||^2 of column j of V from the bottom PE
// of the column and returns the proximal-step scale factor D_jj / ||v_j||_2,
// which the column broadcast unit then sends to every PE of the column.
// As in the paper, 1/sqrt(.) comes from a 2^11-entry, 14-bit table with 13
// fraction bits, built as constant logic, followed by one multiplier with the
// column's D_jj register; each of the two steps has an output register, so
// the operation takes two clock cycles (lut_en, then mul_en).
//
// Own choices (the paper does not give them): the table is addressed by the
// squared norm with 8 fraction bits (x = addr/256, saturated at 2047/256), so
// column norms must be scaled by preprocessing into roughly [0.5, 2.8]; entries
// are floor(2^13/sqrt(x)) clipped to 14 bits; the scale factor has 11 fraction
// bits; D_jj is held in Q5.8 like the L entries of rows 1..N-1.
//
// Interface: d_we/d_wdata load D_jj. norm_in must be valid in the cycle with
// lut_en; scale_out is valid from the cycle after mul_en until the next one.
module taser_scale_unit
  import taser_pkg::*;
(
  input  logic   clk,
  input  logic   rst_n,
  input  logic   d_we,
  input  word_t  d_wdata,
  input  logic   lut_en,
  input  logic   mul_en,
  input  uword_t norm_in,
  output word_t  scale_out
);

  typedef uword_t lut_t [LUT_DEPTH];

  function automatic lut_t gen_lut();
    for (int a = 0; a < LUT_DEPTH; a++) gen_lut[a] = invsqrt_entry(a);
  endfunction

  localparam lut_t INVSQRT_LUT = gen_lut();

  word_t  d_q;
  uword_t lut_q;
  word_t  scale_q;
  logic [LUT_ABITS-1:0] addr;

  // Saturating address: x >= 8 reads the last entry.
  always_comb begin
    if (norm_in >= uword_t'(LUT_DEPTH)) addr = '1;
    else                                addr = norm_in[LUT_ABITS-1:0];
  end

  logic signed [47:0] prod;
  always_comb prod = 48'(signed'({1'b0, lut_q})) * 48'(d_q);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      d_q     <= '0;
      lut_q   <= '0;
      scale_q <= '0;
    end else begin
      if (d_we)   d_q     <= d_wdata;
      if (lut_en) lut_q   <= INVSQRT_LUT[addr];
      if (mul_en) scale_q <= sat_w(prod >>> (FRAC_LUT + FRAC_L - FRAC_S));
    end
  end

  assign scale_out = scale_q;

endmodule
