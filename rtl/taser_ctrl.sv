// taser_ctrl: control unit of the TASER array.
//
// One TASER iteration (lines 4 and 5 of the algorithm) takes N+7 cycles,
// numbered c = 0 .. N+6 below; a detection runs t_max iterations back to
// back, so its latency is t_max*(N+7) cycles. N+5 cycles are the paper's
// schedule; the two extra cycles come from the stage registers the paper puts
// around the row and column broadcast units. Cycle by cycle (rows i = 1..N):
//   c = 0        RBUs select L_{i,1}; memories read That_{1,j}; on the first
//                iteration of a detection, L <- D (init), RBUs load 0
//   c = k        operand registers load (That_{k,j}, L_{i,k}), k = 1..i
//   c = k+1      MAC with index k (first = 1 at c = 2); row i ends at c = i+1
//   c = i+1      operand registers of row i also capture V for squaring
//   c = i+2      row i adds V_{i,j}^2 to the column's running norm
//   c = N+3      scale units look up 1/sqrt(||v_j||^2)   (norm ready from N+2)
//   c = N+4      scale units multiply by D_jj
//   c = N+5      CBUs send D_jj/||v_j||; operand registers load it with V
//   c = N+6      all PEs write L <- V * scale; last cycle of the iteration
// The paper fixes the order of these steps and the N+7 cycles per iteration
// (Tables 2 and 4 report a minimum latency of N+7 for one iteration); the exact
// cycle of each register transfer is this design's own.
//
// Handshake (own choice): start is accepted when ready is high (idle, or the
// last cycle of a detection, which lets detections run back to back).
// done is high for one cycle, the cycle after the last L write; the bottom
// row of L, and so the detected signs, can be read in that cycle and stay
// until the next detection's first cycle ends.
module taser_ctrl
  import taser_pkg::*;
#(
  parameter int unsigned N  = 17,
  parameter int unsigned CW = $clog2(N + 7),
  parameter int unsigned AW = (N > 1) ? $clog2(N) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [TMAX_W-1:0] tmax,
  output logic              ready,
  output logic              busy,
  output logic              done,
  output row_ctrl_t         rc [N],      // index i-1 for row i
  output glb_ctrl_t         gc,
  output logic [N-2:0]      own_col,     // bit j-1: MAC operand is the PE's own L
  output logic [AW-1:0]     k_idx,       // k-1 for RBU select and memory read
  output cbu_sel_e          cbu_sel
);

  localparam int unsigned LAST = N + 6;

  logic              run_q;
  logic [CW-1:0]     c_q;
  logic [TMAX_W-1:0] t_q, tmax_q;
  logic              done_q;
  logic              last;

  assign last  = run_q && (c_q == CW'(LAST)) && (t_q == tmax_q);
  assign ready = !run_q || last;
  assign busy  = run_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run_q  <= 1'b0;
      c_q    <= '0;
      t_q    <= '0;
      tmax_q <= '0;
      done_q <= 1'b0;
    end else begin
      done_q <= last;
      if (ready && start) begin
        run_q  <= 1'b1;
        c_q    <= '0;
        t_q    <= TMAX_W'(1);
        tmax_q <= (tmax == '0) ? TMAX_W'(1) : tmax;
      end else if (last) begin
        run_q <= 1'b0;
        c_q   <= '0;
      end else if (run_q) begin
        if (c_q == CW'(LAST)) begin
          c_q <= '0;
          t_q <= t_q + TMAX_W'(1);
        end else begin
          c_q <= c_q + CW'(1);
        end
      end
    end
  end

  assign done = done_q;

  always_comb begin
    int c;
    c = int'(c_q);
    gc          = '0;
    k_idx       = '0;
    cbu_sel     = CBU_T;
    own_col     = '0;
    for (int i = 1; i <= int'(N); i++) rc[i-1] = '0;
    if (run_q) begin
      gc.init     = (c == 0) && (t_q == TMAX_W'(1));
      gc.lut_en   = (c == int'(N) + 3);
      gc.mul_en   = (c == int'(N) + 4);
      gc.ld_scale = (c == int'(N) + 5);
      gc.scale    = (c == int'(N) + 6);
      if (c < int'(N)) k_idx = AW'(c);
      if (c == 0)                  cbu_sel = CBU_D;
      else if (c == int'(N) + 5)   cbu_sel = CBU_SCALE;
      for (int j = 1; j < int'(N); j++) own_col[j-1] = (c == j);
      for (int i = 1; i <= int'(N); i++) begin
        rc[i-1].ld_mac = (c >= 1) && (c <= i);
        rc[i-1].ld_sq  = (c == i + 1);
        rc[i-1].mac    = (c >= 2) && (c <= i + 1);
        rc[i-1].first  = (c == 2);
        rc[i-1].sq     = (c == i + 2);
        rc[i-1].lnn    = (i == int'(N)) && (c == int'(N) + 1);
      end
    end
  end

endmodule
