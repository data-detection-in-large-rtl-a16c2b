// taser_rbu: row broadcast unit (RBU) for row i of the TASER array.
//
// In the k-th multiply cycle of an iteration, row i needs L_{i,k} in every PE
// of the row. The RBU is an i-input multiplexer over the L registers of the
// row's PEs (for the bottom row the last input is the constant L_NN register),
// as in the paper's FPGA design; the ASIC's tri-state bus is not modelled.
// Its output goes through a stage register, the input-side stage register the
// paper adds to shorten the broadcast path: the word selected in cycle c is
// on bcast in cycle c+1. When zero is set (first cycle of a new detection,
// where L has just been initialised) or sel >= NIN (L_{i,k} = 0 for k > i),
// the register loads 0.
module taser_rbu
  import taser_pkg::*;
#(
  parameter int unsigned NIN = 2,
  parameter int unsigned SW  = 5
) (
  input  logic          clk,
  input  logic          rst_n,
  input  word_t         l_in [NIN],
  input  logic [SW-1:0] sel,
  input  logic          zero,
  output word_t         bcast
);

  word_t q, pick;

  // i-input multiplexer; an index beyond the row selects 0.
  always_comb begin
    pick = '0;
    for (int n = 0; n < int'(NIN); n++)
      if (sel == SW'(n)) pick = l_in[n];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)    q <= '0;
    else if (zero) q <= '0;
    else           q <= pick;
  end

  assign bcast = q;

endmodule
