// tb_taser_d_pe: self-checking test of one diagonal PE.
//
// Checks initialisation from the column broadcast (L <- D_jj), MAC chains
// whose last operand is the PE's own L (k = j), the squared V output and the
// scaling step, against values computed here from the fixed-point rules.
module tb_taser_d_pe;
  import taser_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  row_ctrl_t rc;
  glb_ctrl_t gc;
  logic own_sel;
  word_t cbu_in, rbu_in, l_out, v_out;
  uword_t sq_out;
  int checks = 0, failures = 0;

  taser_d_pe #(.FRAC(8)) dut (.*);

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
    int eL, eV, s, nk, d;
    int lk [8];
    int tk [8];
    idle();
    cbu_in = '0; rbu_in = '0;
    repeat (2) tick();
    rst_n = 1'b1;
    for (int it = 0; it < 20; it++) begin
      if (it % 4 == 0) begin
        d = $urandom_range(100, 600);
        @(negedge clk); idle(); gc.init = 1'b1; cbu_in = word_t'(d); tick();
        expect_eq("init L = D", int'(l_out), d);
        eL = d;
      end
      nk = 1 + (it % 6);
      for (int k = 0; k < nk; k++) begin
        lk[k] = rw(600);
        tk[k] = rw(4000);
      end
      lk[nk-1] = eL;                       // k = j uses the PE's own L
      @(negedge clk); idle();
      rc.ld_mac = 1'b1; cbu_in = word_t'(tk[0]);
      own_sel = (nk == 1); rbu_in = word_t'((nk == 1) ? rw(600) : lk[0]);
      tick();
      eV = eL;
      for (int k = 1; k <= nk; k++) begin
        @(negedge clk); idle();
        rc.mac = 1'b1; rc.first = (k == 1);
        if (k < nk) begin
          rc.ld_mac = 1'b1; cbu_in = word_t'(tk[k]);
          own_sel = (k == nk - 1);
          rbu_in = word_t'(own_sel ? rw(600) : lk[k]);
        end else begin
          rc.ld_sq = 1'b1;
        end
        eV = sat(longint'(eV) - ((longint'(lk[k-1]) * tk[k-1]) >>> FRAC_T), -8192, 8191);
        tick();
        expect_eq("V after MAC", int'(v_out), eV);
      end
      @(negedge clk); idle(); rc.sq = 1'b1; tick();
      expect_eq("V^2", int'(sq_out), sat((longint'(eV) * eV) >>> 8, 0, 16383));
      s = $urandom_range(4095);
      @(negedge clk); idle(); gc.ld_scale = 1'b1; cbu_in = word_t'(s); tick();
      @(negedge clk); idle(); gc.scale = 1'b1; tick();
      eL = sat((longint'(eV) * s) >>> 11, -8192, 8191);
      expect_eq("L after scale", int'(l_out), eL);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
