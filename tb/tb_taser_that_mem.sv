// tb_taser_that_mem: self-checking test of the That column memory.
//
// Fills all N words with random values, reads them back in order and at
// random, checking the one-cycle registered read, and checks that writes
// beyond word N-1 and reads beyond it (which return 0) do not disturb it.
module tb_taser_that_mem;
  import taser_pkg::*;

  localparam int N = 17;
  localparam int AW = $clog2(N);

  logic clk = 1'b0, rst_n = 1'b0, we = 1'b0;
  logic [AW-1:0] waddr = '0, raddr = '0;
  word_t wdata = '0, rdata;
  int model [N];
  int checks = 0, failures = 0;

  taser_that_mem #(.N(N)) dut (.*);

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

  task automatic read_check(input int a);
    @(negedge clk); raddr = AW'(a); tick();
    checks++;
    if (int'(rdata) != ((a < N) ? model[a] : 0)) begin
      failures++;
      $display("read %0d: got %0d expected %0d", a, rdata, (a < N) ? model[a] : 0);
    end
  endtask

  initial begin
    repeat (2) tick();
    rst_n = 1'b1;
    for (int rep = 0; rep < 4; rep++) begin
      for (int a = 0; a < N; a++) begin
        model[a] = int'($urandom_range(16383)) - 8192;
        @(negedge clk); we = 1'b1; waddr = AW'(a); wdata = word_t'(model[a]); tick();
      end
      @(negedge clk); we = 1'b1; waddr = '1; wdata = '1; tick();   // out of range
      @(negedge clk); we = 1'b0;
      for (int a = 0; a < N; a++) read_check(a);
      for (int n = 0; n < 30; n++) read_check($urandom_range((1 << AW) - 1));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
