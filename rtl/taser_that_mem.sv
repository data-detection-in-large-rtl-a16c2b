// taser_that_mem: storage for one column of the scaled Gram matrix
// That = 2*tau*Ttilde, one memory per column j = 1..N-1 of the array.
//
// Word k holds That_{k,j} (k = 1..N, stored at address k-1). The array reads
// one word per cycle while the array multiplies, in the order k = 1, 2, ... N.
// The paper builds these memories as latch arrays (ASIC) or distributed RAM
// (FPGA); here it is a plain register array with one synchronous write port
// and a registered read port. The read register is the input stage register
// in front of the column broadcast bus, so a word addressed in cycle c is on
// rdata in cycle c+1. Loading (by the preprocessing that lies outside the
// detector) must not overlap a detection.
module taser_that_mem
  import taser_pkg::*;
#(
  parameter int unsigned N  = 17,
  parameter int unsigned AW = (N > 1) ? $clog2(N) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  word_t         wdata,
  input  logic [AW-1:0] raddr,
  output word_t         rdata
);

  word_t mem [N];
  word_t rdata_q;

  always_ff @(posedge clk) begin
    if (we && (waddr < AW'(N))) mem[waddr] <= wdata;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                rdata_q <= '0;
    else if (raddr < AW'(N))   rdata_q <= mem[raddr];
    else                       rdata_q <= '0;
  end

  assign rdata = rdata_q;

endmodule
