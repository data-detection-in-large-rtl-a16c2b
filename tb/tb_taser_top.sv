// tb_taser_top: end-to-end test of the TASER array at its default size.
//
// Generates random BPSK (64x16) and QPSK (128x8) MIMO detection problems
// with Gaussian channels and noise, forms T = [H'H, -H'y; -y'H, y'y], applies
// the Jacobi preconditioner, estimates ||Ttilde||_2 by power iteration, and
// loads That = 2*tau*Ttilde and D (scaled into the array's number range)
// into the design. It then checks, per detection:
//   * the bottom row of L against a bit-accurate integer model of the
//     fixed-point TASER iteration written here as plain matrix loops;
//   * the detected signs against that model;
//   * the latency, t_max*(N+7) cycles from start to done;
// and over all detections that most detected symbols equal the transmitted
// ones. Detections run with several t_max values, some back to back (start
// during the last cycle of the previous detection) and some from idle; each
// of those mechanisms must occur at least once.
module tb_taser_top;
  import taser_pkg::*;

  localparam int N      = 17;          // must equal the design default
  localparam int AW     = $clog2(N);
  localparam int NPROB  = 12;
  localparam real ALPHA = 0.5;

  logic              clk = 1'b0;
  logic              rst_n = 1'b0;
  logic              start = 1'b0;
  logic [TMAX_W-1:0] tmax = '0;
  logic              ready, busy, done;
  logic              t_we = 1'b0;
  logic [AW-1:0]     t_waddr = '0;
  word_t             t_wdata [N-1];
  logic              d_we = 1'b0;
  logic [AW-1:0]     d_waddr = '0;
  word_t             d_wdata = '0;
  logic [N-2:0]      s_hat;
  word_t             l_last [N-1];

  int checks = 0, failures = 0;
  int n_backtoback = 0, n_fromidle = 0, n_multi = 0, n_single = 0, n_bpsk = 0, n_qpsk = 0;
  int sym_total = 0, sym_ok = 0;
  longint cyc = 0;

  taser_top dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- problem generation ----------------
  real    tm   [N][N];
  real    dv   [N];
  int     tq   [N][N];   // quantised That (Q.12)
  int     dq   [N];      // quantised D (Q.8, D_NN Q.5)
  int     s_tx [N];      // transmitted real symbols (+-1)

  function automatic real urand();
    return real'($urandom) / 4294967296.0;
  endfunction

  function automatic real randn();
    real acc = 0.0;
    for (int n = 0; n < 12; n++) acc += urand();
    return acc - 6.0;
  endfunction

  function automatic int sat(input longint x, input longint lo, input longint hi);
    if (x > hi) return int'(hi);
    if (x < lo) return int'(lo);
    return int'(x);
  endfunction

  function automatic int rnd(input real x);
    return int'($floor(x + 0.5));
  endfunction

  task automatic make_problem(input bit qpsk);
    int  B = qpsk ? 128 : 64;
    int  M = 2 * B;
    int  U = N - 1;                  // real-valued unknowns
    real hb [][];
    real yb [];
    real sig = 0.25;
    real v [N], w [N];
    real lam, g, dmax;
    hb = new[M];
    foreach (hb[r]) hb[r] = new[U];
    yb = new[M];
    for (int k = 0; k < U; k++) s_tx[k] = ($urandom_range(1) == 1) ? 1 : -1;
    if (!qpsk) begin
      for (int r = 0; r < M; r++)
        for (int k = 0; k < U; k++) hb[r][k] = randn() * 0.7071;
    end else begin
      // [Re H, -Im H; Im H, Re H] for B x U/2 complex H
      for (int r = 0; r < B; r++)
        for (int k = 0; k < U / 2; k++) begin
          real re = randn() * 0.7071, im = randn() * 0.7071;
          hb[r][k] = re;       hb[r][k + U/2] = -im;
          hb[r + B][k] = im;   hb[r + B][k + U/2] = re;
        end
    end
    for (int r = 0; r < M; r++) begin
      yb[r] = randn() * sig;
      for (int k = 0; k < U; k++) yb[r] += hb[r][k] * s_tx[k];
    end
    for (int a = 0; a < N; a++)
      for (int b = 0; b < N; b++) begin
        real acc = 0.0;
        for (int r = 0; r < M; r++) begin
          real xa = (a < U) ? hb[r][a] : -yb[r];
          real xb = (b < U) ? hb[r][b] : -yb[r];
          acc += xa * xb;
        end
        tm[a][b] = acc;
      end
    for (int a = 0; a < N; a++) dv[a] = $sqrt(tm[a][a]);
    for (int a = 0; a < N; a++)
      for (int b = 0; b < N; b++) tm[a][b] = tm[a][b] / (dv[a] * dv[b]);
    // spectral norm of Ttilde (PSD) by power iteration
    for (int a = 0; a < N; a++) v[a] = 1.0 + 0.01 * a;
    lam = 1.0;
    for (int it = 0; it < 60; it++) begin
      real nrm = 0.0;
      for (int a = 0; a < N; a++) begin
        w[a] = 0.0;
        for (int b = 0; b < N; b++) w[a] += tm[a][b] * v[b];
        nrm += w[a] * w[a];
      end
      nrm = $sqrt(nrm);
      lam = nrm;
      for (int a = 0; a < N; a++) v[a] = w[a] / nrm;
    end
    for (int a = 0; a < N; a++)
      for (int b = 0; b < N; b++)
        tq[a][b] = sat(longint'(rnd(2.0 * ALPHA / lam * tm[a][b] * 4096.0)), -8192, 8191);
    // scale D so that the largest D_jj (j < N) is 1.6
    dmax = 0.0;
    for (int a = 0; a < N - 1; a++) if (dv[a] > dmax) dmax = dv[a];
    g = 1.6 / dmax;
    for (int a = 0; a < N - 1; a++) dq[a] = sat(longint'(rnd(dv[a] * g * 256.0)), -8192, 8191);
    dq[N-1] = sat(longint'(rnd(dv[N-1] * g * 32.0)), -8192, 8191);
  endtask

  // ---------------- bit-accurate reference ----------------
  int lref [N][N];
  int vref [N][N];

  function automatic int inv_sqrt_ref(input int a);
    longint q, r;
    if (a == 0) return 16383;
    q = (longint'(1) << 34) / a;
    r = longint'($floor($sqrt(real'(q))));
    while (r * r > q) r--;
    while ((r + 1) * (r + 1) <= q) r++;
    return (r > 16383) ? 16383 : int'(r);
  endfunction

  task automatic ref_run(input int tmx);
    for (int i = 0; i < N; i++)
      for (int j = 0; j < N; j++) lref[i][j] = (i == j) ? dq[i] : 0;
    for (int t = 0; t < tmx; t++) begin
      for (int i = 0; i < N; i++)
        for (int j = 0; j <= i && j < N - 1; j++) begin
          longint acc = lref[i][j];
          for (int k = 0; k <= i; k++) begin
            longint p = longint'(lref[i][k]) * tq[k][j];
            int sh = (k == N - 1) ? 10 : 12;
            acc = sat(acc - (p >>> sh), -8192, 8191);
          end
          vref[i][j] = int'(acc);
        end
      for (int j = 0; j < N - 1; j++) begin
        longint sum = 0;
        int lut, sc;
        for (int i = j; i < N; i++) begin
          int fr = (i == N - 1) ? 7 : 8;
          longint sq = longint'(vref[i][j]) * vref[i][j];
          sum = sat(sum + (sq >>> (2 * fr - 8)), 0, 16383);
        end
        lut = inv_sqrt_ref((sum > 2047) ? 2047 : int'(sum));
        sc  = sat((longint'(lut) * dq[j]) >>> 10, -8192, 8191);
        for (int i = j; i < N; i++)
          lref[i][j] = sat((longint'(vref[i][j]) * sc) >>> 11, -8192, 8191);
      end
    end
  endtask

  // ---------------- driving ----------------
  task automatic load_problem();
    for (int k = 0; k < N; k++) begin
      @(negedge clk);
      t_we = 1'b1;
      t_waddr = AW'(k);
      for (int j = 0; j < N - 1; j++) t_wdata[j] = word_t'(tq[k][j]);
    end
    @(negedge clk);
    t_we = 1'b0;
    for (int j = 0; j < N; j++) begin
      @(negedge clk);
      d_we = 1'b1;
      d_waddr = AW'(j);
      d_wdata = word_t'(dq[j]);
    end
    @(negedge clk);
    d_we = 1'b0;
  endtask

  task automatic check_result(input int tmx, input longint t_start);
    longint lat = cyc - t_start;
    checks++;
    if (lat != longint'(tmx * (N + 7))) begin
      failures++;
      $display("latency %0d, expected %0d", lat, tmx * (N + 7));
    end
    for (int k = 0; k < N - 1; k++) begin
      checks++;
      if (int'(l_last[k]) != lref[N-1][k] || s_hat[k] != (lref[N-1][k] < 0)) begin
        failures++;
        $display("L[N,%0d]: got %0d expected %0d", k + 1, l_last[k], lref[N-1][k]);
      end
      sym_total++;
      if ((s_hat[k] ? -1 : 1) == s_tx[k]) sym_ok++;
    end
  endtask

  // Advance to just after the next rising edge.
  task automatic step();
    @(posedge clk);
    #1;
  endtask

  // Present start for one edge; returns the cycle count at acceptance.
  task automatic pulse_start(input int tmx, output longint t0);
    start = 1'b1;
    tmax  = TMAX_W'(tmx);
    step();
    start = 1'b0;
    t0 = cyc;
  endtask

  initial begin
    static int tsel [4] = '{1, 3, 5, 20};
    int  tmx;
    bit  qpsk;
    longint t0;
    for (int j = 0; j < N - 1; j++) t_wdata[j] = '0;
    repeat (3) step();
    rst_n = 1'b1;
    step();
    for (int p = 0; p < NPROB; p++) begin
      tmx  = tsel[p % 4];
      qpsk = (p % 2) == 1;
      make_problem(qpsk);
      ref_run(tmx);
      if (qpsk) n_qpsk++; else n_bpsk++;
      if (tmx > 1) n_multi++; else n_single++;
      load_problem();
      step();
      n_fromidle++;
      pulse_start(tmx, t0);
      while (!done) step();
      check_result(tmx, t0);
    end
    // back-to-back: the same problem started again during the last cycle of
    // the previous detection (inputs unchanged, so no reload is needed)
    for (int r = 0; r < 3; r++) begin
      longint t1;
      tmx = tsel[r];
      ref_run(tmx);
      pulse_start(tmx, t0);
      while (!(ready && busy)) step();
      pulse_start(tmx, t1);     // accepted in the last cycle; done is high now
      if (!done) begin
        failures++;
        $display("done missing at back-to-back start");
      end
      check_result(tmx, t0);
      n_backtoback++;
      step();
      while (!done) step();
      check_result(tmx, t1);
    end
    // mechanism coverage and detection quality
    checks++;
    if (n_backtoback == 0 || n_fromidle == 0 || n_multi == 0 || n_single == 0 ||
        n_bpsk == 0 || n_qpsk == 0) begin
      failures++;
      $display("a mechanism was never exercised");
    end
    checks++;
    if (sym_ok * 10 < sym_total * 9) begin
      failures++;
      $display("detected symbols: %0d of %0d correct", sym_ok, sym_total);
    end
    $display("detections from idle=%0d back-to-back=%0d multi-iteration=%0d single=%0d bpsk=%0d qpsk=%0d",
             n_fromidle, n_backtoback, n_multi, n_single, n_bpsk, n_qpsk);
    $display("symbols correct %0d / %0d", sym_ok, sym_total);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
