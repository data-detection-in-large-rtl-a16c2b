// tb_taser_cbu: self-checking test of the column broadcast unit.
//
// Loads a column of That and D_jj, then checks that the broadcast word is
// That_{k,j} one cycle after address k-1 is presented (sel = CBU_T), D_jj for
// CBU_D and the scale-unit input for CBU_SCALE.
module tb_taser_cbu;
  import taser_pkg::*;

  localparam int N = 17;
  localparam int AW = $clog2(N);

  logic clk = 1'b0, rst_n = 1'b0, t_we = 1'b0, d_we = 1'b0;
  logic [AW-1:0] t_waddr = '0, raddr = '0;
  word_t t_wdata = '0, d_wdata = '0, scale_in = '0, bcast;
  cbu_sel_e sel = CBU_T;
  int col [N];
  int d;
  int checks = 0, failures = 0;

  taser_cbu #(.N(N)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic tick();
    @(posedge clk);
    #1;
  endtask

  task automatic chk(input string what, input int exp);
    checks++;
    if (int'(bcast) != exp) begin
      failures++;
      $display("%s: got %0d expected %0d", what, bcast, exp);
    end
  endtask

  initial begin
    repeat (2) tick();
    rst_n = 1'b1;
    for (int rep = 0; rep < 5; rep++) begin
      for (int a = 0; a < N; a++) begin
        col[a] = int'($urandom_range(16383)) - 8192;
        @(negedge clk); t_we = 1'b1; t_waddr = AW'(a); t_wdata = word_t'(col[a]); tick();
      end
      d = $urandom_range(1, 4000);
      @(negedge clk); t_we = 1'b0; d_we = 1'b1; d_wdata = word_t'(d); tick();
      @(negedge clk); d_we = 1'b0;
      // streaming read k = 1..N
      sel = CBU_T;
      for (int a = 0; a <= N; a++) begin
        @(negedge clk);
        if (a > 0) chk("That", col[a-1]);
        raddr = AW'(a % N);
        tick();
      end
      @(negedge clk); sel = CBU_D; #1 chk("D_jj", d);
      scale_in = word_t'($urandom_range(8191));
      sel = CBU_SCALE; #1 chk("scale", int'(scale_in));
      sel = CBU_T;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
