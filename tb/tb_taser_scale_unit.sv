// tb_taser_scale_unit: self-checking test of the column scale unit.
//
// For random and corner squared norms (0, small, 1.0, just below and above
// the table's saturation point 8.0) and random D_jj, checks the two-cycle
// result D_jj/||v||_2 against a value computed here with real arithmetic:
// floor(2^13/sqrt(x)) (clipped to 14 bits) times D_jj, shifted to 11 fraction
// bits. Also checks that the result holds while lut_en/mul_en are low.
module tb_taser_scale_unit;
  import taser_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  logic d_we = 1'b0, lut_en = 1'b0, mul_en = 1'b0;
  word_t d_wdata = '0, scale_out;
  uword_t norm_in = '0;
  int checks = 0, failures = 0;

  taser_scale_unit dut (.*);

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

  function automatic int expected(input int norm, input int d);
    int a;
    longint lut, q, r;
    a = (norm > 2047) ? 2047 : norm;
    if (a == 0) lut = 16383;
    else begin
      q = (longint'(1) << 34) / a;            // (2^13)^2 * 256 / a
      r = longint'($floor($sqrt(real'(q))));
      while (r * r > q) r--;
      while ((r + 1) * (r + 1) <= q) r++;
      lut = (r > 16383) ? 16383 : r;
    end
    q = (lut * d) >>> 10;
    if (q > 8191) q = 8191;
    return int'(q);
  endfunction

  initial begin
    int norms [8] = '{0, 1, 64, 256, 2047, 2048, 9000, 100};
    int n, d;
    repeat (2) tick();
    rst_n = 1'b1;
    for (int it = 0; it < 300; it++) begin
      n = (it < 8) ? norms[it] : $urandom_range(it % 3 == 0 ? 16383 : 2047);
      d = $urandom_range(50, 700);
      @(negedge clk); d_we = 1'b1; d_wdata = word_t'(d); tick();
      @(negedge clk); d_we = 1'b0; norm_in = uword_t'(n); lut_en = 1'b1; tick();
      @(negedge clk); lut_en = 1'b0; norm_in = uword_t'($urandom_range(16383)); mul_en = 1'b1; tick();
      @(negedge clk); mul_en = 1'b0;
      checks++;
      if (int'(scale_out) != expected(n, d)) begin
        failures++;
        $display("norm %0d D %0d: got %0d expected %0d", n, d, scale_out, expected(n, d));
      end
      tick();
      checks++;
      if (int'(scale_out) != expected(n, d)) begin
        failures++;
        $display("scale not held");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
