// taser_od_pe: off-diagonal processing element (i,j), i > j, of the TASER
// triangular systolic array.
//
// The PE owns L_{i,j} (iterate t-1) and V_{i,j} (iterate t) and has one
// multiplier and one adder, which it uses in four modes (paper Sec. IV-B):
//   init   : L <- 0 (line 2 of TASER: L(0) = D is zero off the diagonal);
//   mac    : V <- (first ? L : V) - L_{i,k} * That_{k,j}, k = 1..i, with
//            That from the column broadcast (CBU) and L_{i,k} from the row
//            broadcast (RBU), or from its own L register when k = j;
//   sq     : sum_out <- sum_in + V^2, accumulating ||v_j||^2 down column j;
//   scale  : L <- V * (D_jj/||v_j||_2), the scale factor coming over the CBU.
// As drawn in the paper, the two multiplier operands pass through operand
// registers (the output-side stage registers of the broadcast units), so an
// operand loaded with ld_* in cycle c is used in cycle c+1. For the squaring
// step the operand registers capture the adder result in the same edge that
// writes V (ld_sq together with the last mac); this forwarding is this
// design's choice and keeps the paper's one-cycle spacing between rows.
//
// Fixed point: L and V have FRAC fraction bits (8, or 7 in the bottom row,
// as in the paper). Products are aligned by arithmetic right shift and every
// register write saturates. In the bottom row the k = N operand is the L_NN
// register with 5 fraction bits, signalled by rc.lnn.
module taser_od_pe
  import taser_pkg::*;
#(
  parameter int unsigned FRAC = FRAC_L
) (
  input  logic      clk,
  input  logic      rst_n,
  input  row_ctrl_t rc,
  input  glb_ctrl_t gc,
  input  logic      own_sel,   // this cycle's MAC operand is L_{i,j} itself
  input  word_t     cbu_in,
  input  word_t     rbu_in,
  input  uword_t    sum_in,
  output word_t     l_out,
  output word_t     v_out,
  output uword_t    sum_out
);

  localparam int unsigned SH_MAC = FRAC_T;
  localparam int unsigned SH_LNN = FRAC_LNN + FRAC_T - FRAC;
  localparam int unsigned SH_SQ  = 2 * FRAC - FRAC_NORM;
  localparam int unsigned SH_SC  = FRAC_S;

  word_t  l_q, v_q, a_q, b_q;
  uword_t sum_q;

  logic signed [47:0] prod, mac_res;
  word_t v_next;

  always_comb begin
    prod    = 48'(a_q) * 48'(b_q);
    mac_res = 48'(rc.first ? l_q : v_q)
            - (rc.lnn ? (prod >>> SH_LNN) : (prod >>> SH_MAC));
    v_next  = sat_w(mac_res);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      l_q   <= '0;
      v_q   <= '0;
      a_q   <= '0;
      b_q   <= '0;
      sum_q <= '0;
    end else begin
      // operand registers
      if (rc.ld_sq) begin
        a_q <= v_next;
        b_q <= v_next;
      end else if (rc.ld_mac) begin
        a_q <= cbu_in;
        b_q <= own_sel ? l_q : rbu_in;
      end else if (gc.ld_scale) begin
        a_q <= cbu_in;
        b_q <= v_q;
      end
      // accumulator / V
      if (rc.mac) v_q <= v_next;
      // squared-norm partial sum
      if (rc.sq) sum_q <= sat_u(48'(signed'({1'b0, sum_in})) + (prod >>> SH_SQ));
      // L
      if (gc.init)       l_q <= '0;
      else if (gc.scale) l_q <= sat_w(prod >>> SH_SC);
    end
  end

  assign l_out   = l_q;
  assign v_out   = v_q;
  assign sum_out = sum_q;

endmodule
