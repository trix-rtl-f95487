// tb_trix_stats -- the grid's delay and skew statistics at two heights.
//
// Runs the grid at heights 20 and 50 with independent fair coin-flip link delays
// and checks the empirical standard deviations of the delay d(H) at one node and
// of the skew s(H) between neighbours against the values reported for this delay
// model from large-scale software experiments (H = 20: 0.901 and 0.741; H = 50:
// 1.115 and 0.751, in units of the delay uncertainty U), within 12 %, and the mean
// delay against H/2.
module tb_trix_stats;
  timeunit 1ns;
  timeprecision 100ps;

  logic done20, done50;
  int   c20, f20, c50, f50;

  trix_stats_probe #(.H(20), .NS(1500), .SD_D(0.9012352), .SD_S(0.74096549), .TOL(0.12)) u_h20 (
    .done(done20), .n_checks(c20), .n_failures(f20)
  );
  trix_stats_probe #(.H(50), .NS(1500), .SD_D(1.1147817), .SD_S(0.75071102), .TOL(0.12)) u_h50 (
    .done(done50), .n_checks(c50), .n_failures(f50)
  );

  initial begin : watchdog
    #(4_000_000);
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", c20 + c50, f20 + f50 + 1);
    $finish;
  end

  initial begin : main
    #1;   // let both probes clear their done flags first
    wait (done20 && done50);
    $display("TB_RESULT checks=%0d failures=%0d", c20 + c50, f20 + f50);
    $finish;
  end

endmodule
