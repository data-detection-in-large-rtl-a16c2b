// taser_d_pe: diagonal processing element (j,j) of the TASER triangular
// systolic array, j = 1..N-1.
//
// Same four modes as the off-diagonal PE (see taser_od_pe), with the
// differences drawn in the paper's D-PE figure:
//   init  : L_{j,j} <- D_jj, received over the column broadcast unit;
//   mac   : the adder is a subtractor, V <- (first ? L : V) - product;
//   sq    : it is the first PE of its column, so it has no sum input; V^2
//           goes to its own register and on to the PE below;
//   scale : L <- V * (D_jj/||v_j||_2).
// Operand registers, forwarding for the squaring step and the fixed-point
// rules are as in taser_od_pe. Rows 1..N-1 use 8 fraction bits (paper).
module taser_d_pe
  import taser_pkg::*;
#(
  parameter int unsigned FRAC = FRAC_L
) (
  input  logic      clk,
  input  logic      rst_n,
  input  row_ctrl_t rc,
  input  glb_ctrl_t gc,
  input  logic      own_sel,
  input  word_t     cbu_in,
  input  word_t     rbu_in,
  output word_t     l_out,
  output word_t     v_out,
  output uword_t    sq_out
);

  localparam int unsigned SH_MAC = FRAC_T;
  localparam int unsigned SH_SQ  = 2 * FRAC - FRAC_NORM;
  localparam int unsigned SH_SC  = FRAC_S;

  word_t  l_q, v_q, a_q, b_q;
  uword_t sq_q;

  logic signed [47:0] prod, mac_res;
  word_t v_next;

  always_comb begin
    prod    = 48'(a_q) * 48'(b_q);
    mac_res = 48'(rc.first ? l_q : v_q) - (prod >>> SH_MAC);
    v_next  = sat_w(mac_res);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      l_q  <= '0;
      v_q  <= '0;
      a_q  <= '0;
      b_q  <= '0;
      sq_q <= '0;
    end else begin
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
      if (rc.mac) v_q <= v_next;
      if (rc.sq)  sq_q <= sat_u(prod >>> SH_SQ);
      if (gc.init)       l_q <= cbu_in;
      else if (gc.scale) l_q <= sat_w(prod >>> SH_SC);
    end
  end

  assign l_out  = l_q;
  assign v_out  = v_q;
  assign sq_out = sq_q;

endmodule
