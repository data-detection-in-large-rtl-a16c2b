// tb_taser_workloads: the TASER array at the other published sizes.
//
// The default build (N = 17) covers 8-user QPSK and 16-user BPSK. The other
// coherent MU-MIMO configurations need arrays of other sizes; this testbench
// builds one array per size and runs random problems of that shape on it
// (one taser_wl_runner each), all on one clock:
//   N =  9 : 128 receive antennas,  8 users, BPSK
//   N = 33 :  64 receive antennas, 16 users, QPSK
//   N = 33 :  32 receive antennas, 32 users, BPSK
//   N = 65 :  32 receive antennas, 32 users, QPSK
// Every detection is checked bit for bit against the fixed-point model and for
// its latency of t_max*(N+7) cycles; each workload must also detect most
// symbols correctly. The square 32x32 systems have the hardest channels, so
// they run at lower noise and with a lower threshold.
module tb_taser_workloads;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  localparam int NW = 4;
  int   chk [NW];
  int   fl  [NW];
  logic fin [NW];

  taser_wl_runner #(.N(9),  .NB(128), .QPSK(1'b0), .NPROB(3), .MINPCT(90), .SIGMA(0.25),
                    .NAME("128x8 BPSK")) u_w0 (.clk(clk), .checks(chk[0]), .failures(fl[0]), .fin(fin[0]));
  taser_wl_runner #(.N(33), .NB(64),  .QPSK(1'b1), .NPROB(3), .MINPCT(90), .SIGMA(0.15),
                    .NAME("64x16 QPSK")) u_w1 (.clk(clk), .checks(chk[1]), .failures(fl[1]), .fin(fin[1]));
  taser_wl_runner #(.N(33), .NB(32),  .QPSK(1'b0), .NPROB(3), .MINPCT(75), .SIGMA(0.05),
                    .NAME("32x32 BPSK")) u_w2 (.clk(clk), .checks(chk[2]), .failures(fl[2]), .fin(fin[2]));
  taser_wl_runner #(.N(65), .NB(32),  .QPSK(1'b1), .NPROB(3), .MINPCT(75), .SIGMA(0.05),
                    .NAME("32x32 QPSK")) u_w3 (.clk(clk), .checks(chk[3]), .failures(fl[3]), .fin(fin[3]));

  int checks, failures;

  initial begin
    repeat (200000) @(posedge clk);
    checks = 0;
    failures = 1;
    for (int w = 0; w < NW; w++) begin
      checks += chk[w];
      failures += fl[w];
    end
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit all_fin;
    all_fin = 1'b0;
    while (!all_fin) begin
      @(posedge clk);
      all_fin = 1'b1;
      for (int w = 0; w < NW; w++) if (fin[w] !== 1'b1) all_fin = 1'b0;
    end
    checks = 0;
    failures = 0;
    for (int w = 0; w < NW; w++) begin
      checks += chk[w];
      failures += fl[w];
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
