// taser_pkg: types, fixed-point formats and table generator shared by the
// TASER systolic detector.
//
// TASER solves a relaxed ML detection problem by forward-backward splitting on
// a lower-triangular factor L of the relaxed matrix. The array stores one
// entry of L (and of V, its gradient-step update) per processing element.
// All datapath words are 14-bit two's-complement fixed point, as in the paper.
// The paper fixes the fraction bits of L and V (8, bottom row 7, L_NN 5) and of
// the inverse-square-root table (13); the other fraction widths here (That,
// squared norm, scale factor) and the truncating/saturating arithmetic are
// this design's own choices.
//
// Arithmetic rules used throughout (and in the testbench reference model):
//   * product alignment is an arithmetic right shift (round toward -inf);
//   * every result written to a register saturates to its word range.
package taser_pkg;

  localparam int unsigned W          = 14;  // datapath word width (paper)
  localparam int unsigned FRAC_L     = 8;   // L, V fraction bits, rows 1..N-1 (paper)
  localparam int unsigned FRAC_LB    = 7;   // L, V fraction bits, bottom row N (paper)
  localparam int unsigned FRAC_LNN   = 5;   // constant L_NN register (paper)
  localparam int unsigned FRAC_T     = 12;  // That = 2*tau*Ttilde entries (assumed)
  localparam int unsigned FRAC_NORM  = 8;   // squared column norm, unsigned (assumed)
  localparam int unsigned FRAC_LUT   = 13;  // inverse square root table output (paper)
  localparam int unsigned FRAC_S     = 11;  // scale factor D_jj/||v_j|| (assumed)
  localparam int unsigned LUT_ABITS  = 11;  // 2^11 table entries (paper)
  localparam int unsigned LUT_DEPTH  = 1 << LUT_ABITS;
  localparam int unsigned TMAX_W     = 6;   // width of the iteration-count input (assumed)

  typedef logic signed [W-1:0] word_t;
  typedef logic        [W-1:0] uword_t;   // squared norm and table output (non-negative)

  // Per-row control issued by the control unit for one clock cycle.
  //   ld_mac : operand registers capture (CBU word, RBU word or own L)
  //   ld_sq  : operand registers capture the adder result (V) for squaring
  //   mac    : V <- (first ? L : V) - aligned(product)
  //   first  : first MAC of the iteration (k = 1)
  //   sq     : squared-norm step of this row
  //   lnn    : the RBU word is the L_NN register (bottom row, k = N)
  typedef struct packed {
    logic ld_mac;
    logic ld_sq;
    logic mac;
    logic first;
    logic sq;
    logic lnn;
  } row_ctrl_t;

  // Controls common to the whole array.
  //   init     : load L <- D (diagonal) / 0 (off-diagonal), L_NN <- D_NN
  //   ld_scale : operand registers capture (CBU scale factor, V)
  //   scale    : L <- V * scale factor
  //   lut_en   : scale units register the table output
  //   mul_en   : scale units register table * D_jj
  typedef struct packed {
    logic init;
    logic ld_scale;
    logic scale;
    logic lut_en;
    logic mul_en;
  } glb_ctrl_t;

  // CBU source select.
  typedef enum logic [1:0] {
    CBU_T     = 2'd0,   // That_kj from the column memory
    CBU_D     = 2'd1,   // D_jj, used for initialisation
    CBU_SCALE = 2'd2    // D_jj/||v_j||_2 from the scale unit
  } cbu_sel_e;

  // Saturate a wide signed value to a W-bit signed word.
  function automatic word_t sat_w(input logic signed [47:0] x);
    if (x > 48'sd8191)       return word_t'(14'sh1fff);
    else if (x < -48'sd8192) return word_t'(14'sh2000);
    else                     return word_t'(x[W-1:0]);
  endfunction

  // Saturate a wide signed value to a W-bit unsigned word.
  function automatic uword_t sat_u(input logic signed [47:0] x);
    if (x > 48'sd16383)  return uword_t'(14'h3fff);
    else if (x < 48'sd0) return '0;
    else                 return uword_t'(x[W-1:0]);
  endfunction

  // Integer square root, floor(sqrt(x)), bit by bit.
  function automatic logic [31:0] isqrt64(input logic [63:0] x);
    logic [63:0] r, b, rem;
    rem = x;
    r   = '0;
    b   = 64'h4000_0000_0000_0000;
    while (b > rem) b = b >> 2;
    while (b != 0) begin
      if (rem >= r + b) begin
        rem = rem - (r + b);
        r   = (r >> 1) + b;
      end else begin
        r = r >> 1;
      end
      b = b >> 2;
    end
    return r[31:0];
  endfunction

  // Inverse square root table entry. The address a is the squared norm x with
  // FRAC_NORM fraction bits (x = a / 2^8, saturated at 2047/256). The entry is
  // floor(2^13 / sqrt(x)) = floor(sqrt(2^(2*13 + 8) / a)), clipped to 14 bits.
  function automatic uword_t invsqrt_entry(input int unsigned a);
    logic [63:0] q;
    logic [31:0] r;
    if (a == 0) return uword_t'(14'h3fff);
    q = (64'd1 << (2 * FRAC_LUT + FRAC_NORM)) / 64'(a);
    r = isqrt64(q);
    if (r > 32'd16383) return uword_t'(14'h3fff);
    return uword_t'(r[W-1:0]);
  endfunction

endpackage
