// tb_taser_od_pe: self-checking test of one off-diagonal PE.
//
// Drives random operands through full iterations of the PE's modes:
// init, a chain of MACs (first one based on L, one with its own L as the
// row operand, one with the L_NN alignment), the squared-norm step with a
// random partial sum from above, and the scaling step. Expected values are
// computed here from the fixed-point rules (arithmetic right shift,
// saturation to 14 bits) with the cycle spacing of the control unit:
// operands loaded in one cycle are used in the next.
module tb_taser_od_pe;
  import taser_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  row_ctrl_t rc;
  glb_ctrl_t gc;
  logic own_sel;
  word_t cbu_in, rbu_in, l_out, v_out;
  uword_t sum_in, sum_out;
  int checks = 0, failures = 0;

  taser_od_pe #(.FRAC(8)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int sat(input longint x, input longint lo, input longint hi);
    if (x > hi) return int'(hi);
    if (x < lo) return int'(lo);
    return int'(x);
  endfunction

  function automatic int rw(input int mag);
    return $urandom_range(2 * mag) - mag;
  endfunction

  task automatic idle();
    rc = '0; gc = '0; own_sel = 1'b0;
  endtask

  task automatic tick();
    @(posedge clk);
    #1;
  endtask

  task automatic expect_eq(input string what, input int got, input int exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("%s: got %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin
    int eL, eV, s, nk;
    int lk [8];
    int tk [8];
    idle();
    cbu_in = '0; rbu_in = '0; sum_in = '0;
    repeat (2) tick();
    rst_n = 1'b1;
    eL = 0;
    for (int it = 0; it < 20; it++) begin
      // init on the first iteration only
      if (it == 0) begin
        @(negedge clk); idle(); gc.init = 1'b1; tick();
        expect_eq("init L", int'(l_out), 0);
        eL = 0;
      end
      // make L non-zero for later iterations through a scale step with V
      nk = 2 + (it % 6);
      for (int k = 0; k < nk; k++) begin
        lk[k] = rw(600);
        tk[k] = rw(4000);
      end
      // own-L operand at k = 1 on odd iterations
      // MAC chain: load k=0, then (mac k-1, load k) ..., last mac with ld_sq
      @(negedge clk); idle();
      rc.ld_mac = 1'b1; cbu_in = word_t'(tk[0]);
      own_sel = (it % 2 == 1);
      rbu_in = word_t'(lk[0]);
      if (own_sel) lk[0] = eL;
      tick();
      eV = eL;
      for (int k = 1; k <= nk; k++) begin
        longint p;
        int sh;
        @(negedge clk); idle();
        rc.mac = 1'b1;
        rc.first = (k == 1);
        // bottom-row L_NN alignment on the last MAC of every third iteration
        rc.lnn = (k == nk) && (it % 3 == 2);
        if (k < nk) begin
          rc.ld_mac = 1'b1; cbu_in = word_t'(tk[k]); rbu_in = word_t'(lk[k]);
        end else begin
          rc.ld_sq = 1'b1;
        end
        p = longint'(lk[k-1]) * tk[k-1];
        sh = rc.lnn ? (FRAC_LNN + FRAC_T - 8) : FRAC_T;
        eV = sat(longint'(eV) - (p >>> sh), -8192, 8191);
        tick();
        expect_eq("V after MAC", int'(v_out), eV);
      end
      // squared norm
      @(negedge clk); idle();
      rc.sq = 1'b1;
      sum_in = uword_t'($urandom_range(12000));
      tick();
      expect_eq("norm sum", int'(sum_out),
                sat(longint'(sum_in) + ((longint'(eV) * eV) >>> 8), 0, 16383));
      // scale
      s = $urandom_range(4095);
      @(negedge clk); idle();
      gc.ld_scale = 1'b1; cbu_in = word_t'(s);
      tick();
      @(negedge clk); idle();
      gc.scale = 1'b1;
      tick();
      eL = sat((longint'(eV) * s) >>> 11, -8192, 8191);
      expect_eq("L after scale", int'(l_out), eL);
      @(negedge clk); idle(); tick();
      expect_eq("L held", int'(l_out), eL);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
