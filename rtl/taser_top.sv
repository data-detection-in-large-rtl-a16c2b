// taser_top: TASER triangular systolic array for semidefinite-relaxation
// data detection (BPSK/QPSK coherent MU-MIMO detection or SIMO joint channel
// estimation and data detection).
//
// The array runs the TASER iteration
//     V(t) = L(t-1) - tril(L(t-1) * That)           (That = 2*tau*Ttilde)
//     L(t) = column-wise  D_jj * v_j / ||v_j||_2    (proximal step)
// starting from L(0) = D, for t_max iterations, and outputs the signs of the
// bottom row of L, which are the detected real-valued symbols s_1..s_{N-1}.
//
// Structure (paper Fig. 1): N(N+1)/2 - 1 processing elements, one per entry
// of the lower-triangular L except L_NN, which stays constant and is a plain
// register. Diagonal PEs (taser_d_pe) sit at (j,j), j < N; off-diagonal PEs
// (taser_od_pe) below them. Row i has a row broadcast unit (taser_rbu,
// i = 2..N) and column j a column broadcast unit with its That memory
// (taser_cbu) and a column scale unit (taser_scale_unit), j = 1..N-1.
// Squared column norms travel down each column from PE to PE into the scale
// unit. The control unit (taser_ctrl) sequences N+7 cycles per iteration.
//
// Interface (own choice; the paper leaves preprocessing and loading outside
// the detector): before a detection, write row k of That (N-1 words, one per
// column) with t_we/t_waddr = k-1/t_wdata, and D_11..D_NN with d_we/d_waddr =
// j-1/d_wdata (D_jj in Q5.8 for j < N, D_NN in Q8.5). Pulse start with tmax
// while ready is high. done pulses t_max*(N+7) cycles after start was taken;
// s_hat[k-1] (1 = negative) and the soft values l_last[k-1] = L_{N,k} (Q6.7)
// are valid in that cycle and hold until the next detection's first cycle
// ends. Inputs must not be rewritten while busy. The PEs' V outputs are
// collected in v_mat for observation in simulation only; nothing reads them.
module taser_top
  import taser_pkg::*;
#(
  parameter int unsigned N  = 17,
  parameter int unsigned AW = $clog2(N)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [TMAX_W-1:0] tmax,
  output logic              ready,
  output logic              busy,
  output logic              done,
  input  logic              t_we,
  input  logic [AW-1:0]     t_waddr,
  input  word_t             t_wdata [N-1],
  input  logic              d_we,
  input  logic [AW-1:0]     d_waddr,
  input  word_t             d_wdata,
  output logic [N-2:0]      s_hat,
  output word_t             l_last [N-1]
);

  localparam int unsigned CW = $clog2(N + 7);

  row_ctrl_t         rc [N];
  glb_ctrl_t         gc;
  logic [N-2:0]      own_col;
  logic [AW-1:0]     k_idx;
  cbu_sel_e          cbu_sel;

  taser_ctrl #(.N(N), .CW(CW), .AW(AW)) u_ctrl (
    .clk     (clk),
    .rst_n   (rst_n),
    .start   (start),
    .tmax    (tmax),
    .ready   (ready),
    .busy    (busy),
    .done    (done),
    .rc      (rc),
    .gc      (gc),
    .own_col (own_col),
    .k_idx   (k_idx),
    .cbu_sel (cbu_sel)
  );

  // L values of all PEs (index [i-1][j-1]); [N-1][N-1] is the L_NN register.
  word_t  l_mat   [N][N];
  word_t  v_mat   [N][N];
  uword_t sum_mat [N][N];
  word_t  rbu_bc  [N];
  word_t  cbu_bc  [N-1];
  word_t  scale   [N-1];

  // Constant L_NN register (paper: no PE, Q8.5, value D_NN).
  word_t lnn_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                                    lnn_q <= '0;
    else if (d_we && (d_waddr == AW'(N - 1)))      lnn_q <= d_wdata;
  end
  assign l_mat[N-1][N-1] = lnn_q;
  assign v_mat[N-1][N-1] = lnn_q;
  assign sum_mat[N-1][N-1] = '0;

  // Unused upper-triangle entries.
  for (genvar i = 0; i < N; i++) begin : g_upper
    for (genvar j = i + 1; j < N; j++) begin : g_col
      assign l_mat[i][j]   = '0;
      assign v_mat[i][j]   = '0;
      assign sum_mat[i][j] = '0;
    end
  end

  // Row 1 has no RBU: its only PE always uses its own L.
  assign rbu_bc[0] = '0;

  // Row broadcast units, rows 2..N.
  for (genvar i = 1; i < N; i++) begin : g_rbu
    word_t rin [i + 1];
    for (genvar j = 0; j <= i; j++) begin : g_in
      assign rin[j] = l_mat[i][j];
    end
    taser_rbu #(.NIN(i + 1), .SW(AW)) u_rbu (
      .clk   (clk),
      .rst_n (rst_n),
      .l_in  (rin),
      .sel   (k_idx),
      .zero  (gc.init),
      .bcast (rbu_bc[i])
    );
  end

  // Column broadcast units (with That memories) and scale units, columns 1..N-1.
  for (genvar j = 0; j < N - 1; j++) begin : g_col
    taser_cbu #(.N(N), .AW(AW)) u_cbu (
      .clk      (clk),
      .rst_n    (rst_n),
      .t_we     (t_we),
      .t_waddr  (t_waddr),
      .t_wdata  (t_wdata[j]),
      .d_we     (d_we && (d_waddr == AW'(j))),
      .d_wdata  (d_wdata),
      .raddr    (k_idx),
      .sel      (cbu_sel),
      .scale_in (scale[j]),
      .bcast    (cbu_bc[j])
    );
    taser_scale_unit u_scale (
      .clk       (clk),
      .rst_n     (rst_n),
      .d_we      (d_we && (d_waddr == AW'(j))),
      .d_wdata   (d_wdata),
      .lut_en    (gc.lut_en),
      .mul_en    (gc.mul_en),
      .norm_in   (sum_mat[N-1][j]),
      .scale_out (scale[j])
    );
  end

  // Processing elements.
  for (genvar i = 0; i < N; i++) begin : g_row
    for (genvar j = 0; j <= i && j < N - 1; j++) begin : g_pe
      if (i == j) begin : g_d
        taser_d_pe #(.FRAC(FRAC_L)) u_pe (
          .clk     (clk),
          .rst_n   (rst_n),
          .rc      (rc[i]),
          .gc      (gc),
          .own_sel (own_col[j]),
          .cbu_in  (cbu_bc[j]),
          .rbu_in  (rbu_bc[i]),
          .l_out   (l_mat[i][j]),
          .v_out   (v_mat[i][j]),
          .sq_out  (sum_mat[i][j])
        );
      end else begin : g_od
        taser_od_pe #(.FRAC((i == N - 1) ? FRAC_LB : FRAC_L)) u_pe (
          .clk     (clk),
          .rst_n   (rst_n),
          .rc      (rc[i]),
          .gc      (gc),
          .own_sel (own_col[j]),
          .cbu_in  (cbu_bc[j]),
          .rbu_in  (rbu_bc[i]),
          .sum_in  (sum_mat[i-1][j]),
          .l_out   (l_mat[i][j]),
          .v_out   (v_mat[i][j]),
          .sum_out (sum_mat[i][j])
        );
      end
    end
  end

  // Detected symbols: signs of the bottom row of L (line 7 of TASER).
  for (genvar k = 0; k < N - 1; k++) begin : g_out
    assign s_hat[k]  = l_mat[N-1][k][W-1];
    assign l_last[k] = l_mat[N-1][k];
  end

endmodule
