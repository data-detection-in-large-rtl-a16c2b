// tb_taser_ctrl: self-checking test of the TASER control unit.
//
// Runs detections with several t_max values (including 0, treated as 1),
// from idle and back to back, and compares every control output in every
// cycle with the schedule written out here as a table of cycle numbers
// (c = 0..N+6 per iteration). Also checks that done comes exactly
// t_max*(N+7) cycles after start and that start is ignored while busy.
module tb_taser_ctrl;
  import taser_pkg::*;

  localparam int N  = 9;
  localparam int CW = $clog2(N + 7);
  localparam int AW = $clog2(N);

  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  logic [TMAX_W-1:0] tmax = '0;
  logic ready, busy, done;
  row_ctrl_t rc [N];
  glb_ctrl_t gc;
  logic [N-2:0] own_col;
  logic [AW-1:0] k_idx;
  cbu_sel_e cbu_sel;
  int checks = 0, failures = 0;

  taser_ctrl #(.N(N)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic tick();
    @(posedge clk);
    #1;
  endtask

  // Compare all outputs with the schedule for cycle c of iteration t.
  task automatic check_cycle(input int c, input int t);
    int bad = 0;
    if (!busy) bad++;
    if (gc.init     != (c == 0 && t == 1)) bad++;
    if (gc.lut_en   != (c == N + 3)) bad++;
    if (gc.mul_en   != (c == N + 4)) bad++;
    if (gc.ld_scale != (c == N + 5)) bad++;
    if (gc.scale    != (c == N + 6)) bad++;
    if (c < N && int'(k_idx) != c) bad++;
    if (c == 0 && cbu_sel != CBU_D) bad++;
    if (c >= 1 && c <= N && cbu_sel != CBU_T) bad++;
    if (c == N + 5 && cbu_sel != CBU_SCALE) bad++;
    for (int j = 1; j < N; j++) if (own_col[j-1] != (c == j)) bad++;
    for (int i = 1; i <= N; i++) begin
      if (rc[i-1].ld_mac != (c >= 1 && c <= i)) bad++;
      if (rc[i-1].ld_sq  != (c == i + 1)) bad++;
      if (rc[i-1].mac    != (c >= 2 && c <= i + 1)) bad++;
      if (rc[i-1].mac && rc[i-1].first != (c == 2)) bad++;
      if (rc[i-1].sq     != (c == i + 2)) bad++;
      if (rc[i-1].lnn    != (i == N && c == N + 1)) bad++;
    end
    checks++;
    if (bad != 0) begin
      failures++;
      $display("cycle %0d of iteration %0d: %0d control mismatches", c, t, bad);
    end
  endtask

  // Run one detection whose start was accepted at the last edge.
  task automatic run_detection(input int tm, input bit queue_next, input int tm_next);
    int te = (tm == 0) ? 1 : tm;
    for (int t = 1; t <= te; t++)
      for (int c = 0; c < N + 7; c++) begin
        check_cycle(c, t);
        // start while busy must be ignored, except in the very last cycle
        @(negedge clk);
        if (t == te && c == N + 6) begin
          checks++;
          if (!ready) begin failures++; $display("ready missing in last cycle"); end
          start = queue_next;
          tmax  = TMAX_W'(tm_next);
        end else begin
          checks++;
          if (ready) begin failures++; $display("ready while busy"); end
          start = ($urandom_range(3) == 0);
          tmax  = TMAX_W'($urandom_range(9));
        end
        tick();
        start = 1'b0;
      end
    checks++;
    if (!done) begin failures++; $display("done missing"); end
    if (!queue_next) begin
      checks++;
      if (busy) begin failures++; $display("busy after detection"); end
    end
  endtask

  initial begin
    int tms [6] = '{1, 3, 0, 2, 5, 1};
    repeat (2) tick();
    rst_n = 1'b1;
    tick();
    checks++;
    if (busy || !ready || done) begin failures++; $display("bad idle state"); end
    @(negedge clk); start = 1'b1; tmax = TMAX_W'(tms[0]); tick(); start = 1'b0;
    for (int n = 0; n < 6; n++) begin
      bit q;
      q = (n % 2 == 0) && (n < 5);
      run_detection(tms[n], q, (n < 5) ? tms[n+1] : 0);
      if (!q && n < 5) begin
        tick();
        checks++;
        if (done) begin failures++; $display("done longer than one cycle"); end
        @(negedge clk); start = 1'b1; tmax = TMAX_W'(tms[n+1]); tick(); start = 1'b0;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
