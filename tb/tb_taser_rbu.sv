// tb_taser_rbu: self-checking test of a row broadcast unit with 5 inputs.
//
// Checks that the registered broadcast equals input sel from the previous
// cycle, 0 for sel beyond the row, and 0 after a cycle with zero set.
module tb_taser_rbu;
  import taser_pkg::*;

  localparam int NIN = 5;
  localparam int SW = 5;

  logic clk = 1'b0, rst_n = 1'b0, zero = 1'b0;
  word_t l_in [NIN];
  logic [SW-1:0] sel = '0;
  word_t bcast;
  int exp_v;
  int checks = 0, failures = 0;

  taser_rbu #(.NIN(NIN), .SW(SW)) dut (.*);

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

  initial begin
    foreach (l_in[n]) l_in[n] = '0;
    repeat (2) tick();
    rst_n = 1'b1;
    for (int it = 0; it < 400; it++) begin
      @(negedge clk);
      foreach (l_in[n]) l_in[n] = word_t'($urandom_range(16383));
      sel  = SW'($urandom_range(7));
      zero = ($urandom_range(5) == 0);
      exp_v = (zero || sel >= NIN) ? 0 : int'(l_in[sel]);
      tick();
      foreach (l_in[n]) l_in[n] = word_t'($urandom_range(16383));  // must not matter
      checks++;
      if (int'(bcast) != exp_v) begin
        failures++;
        $display("sel %0d zero %0d: got %0d expected %0d", sel, zero, bcast, exp_v);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
