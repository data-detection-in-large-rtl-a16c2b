// taser_cbu: column broadcast unit (CBU) for column j of the TASER array.
//
// Following the paper's figure of the j-th CBU, it selects one of three words
// and drives it to all PEs of column j:
//   CBU_T     That_{k,j} from the column's That memory (matrix multiply),
//   CBU_D     the D_jj register (initialisation of the diagonal PE),
//   CBU_SCALE D_jj/||v_j||_2 from the column scale unit (proximal step).
// The column's That memory is instantiated inside. The paper uses a
// multiplexer on FPGA and a tri-state bus on ASIC; this design uses the
// multiplexer. The stage registers around the bus are the memory's read
// register (and the scale unit's output register) before it and the PE
// operand registers after it, so the mux itself is combinational.
module taser_cbu
  import taser_pkg::*;
#(
  parameter int unsigned N  = 17,
  parameter int unsigned AW = (N > 1) ? $clog2(N) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          t_we,
  input  logic [AW-1:0] t_waddr,
  input  word_t         t_wdata,
  input  logic          d_we,
  input  word_t         d_wdata,
  input  logic [AW-1:0] raddr,
  input  cbu_sel_e      sel,
  input  word_t         scale_in,
  output word_t         bcast
);

  word_t d_q;
  word_t t_rd;

  taser_that_mem #(.N(N), .AW(AW)) u_mem (
    .clk   (clk),
    .rst_n (rst_n),
    .we    (t_we),
    .waddr (t_waddr),
    .wdata (t_wdata),
    .raddr (raddr),
    .rdata (t_rd)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)    d_q <= '0;
    else if (d_we) d_q <= d_wdata;
  end

  always_comb begin
    unique case (sel)
      CBU_D:     bcast = d_q;
      CBU_SCALE: bcast = scale_in;
      default:   bcast = t_rd;
    endcase
  end

endmodule
