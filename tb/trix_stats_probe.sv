// trix_stats_probe -- drives one TRIX grid with many random delay samples and
// estimates the statistics the grid is known for.
//
// For each of NS samples it draws a fair coin flip for every link, sends one
// rising edge from all generators, and records when nodes (0,H) and (1,H) fire.
// In units of U, d = firing time of (0,H) minus H*(D-U) is the delay and s =
// d(1,H) - d(0,H) the neighbour skew. Before the next sample the generators fall
// again. At the end it compares the empirical mean and standard deviations with
// the expected values given as parameters (SD_D, SD_S, in units of U, and H/2 for
// the mean) within relative tolerance TOL, and reports through its ports.
// The width W = 2H+2 makes (0,H) and (1,H) behave exactly as in an unbounded grid.
module trix_stats_probe #(
  parameter int unsigned H     = 20,
  parameter int          NS    = 1000,
  parameter real         SD_D  = 0.9012352,
  parameter real         SD_S  = 0.74096549,
  parameter real         TOL   = 0.1
) (
  output logic done,
  output int   n_checks,
  output int   n_failures
);
  timeunit 1ns;
  timeprecision 100ps;

  localparam int unsigned W = 2 * H + 2;
  localparam int unsigned D = 10;
  localparam int unsigned U = 1;

  logic [W-1:0]      src_clk;
  logic [2:0][W-1:0] link_slow [H];
  logic [W-1:0]      node_clk  [H+1];

  trix_grid #(.H(H), .W(W), .D(D), .U(U)) u_grid (
    .src_clk   (src_clk),
    .link_slow (link_slow),
    .node_clk  (node_clk)
  );

  initial begin : run
    real sd, sd2, ss, ss2, mean_d, sd_d, sd_s;
    done = 1'b0;
    n_checks = 0;
    n_failures = 0;
    src_clk = '0;
    sd = 0.0; sd2 = 0.0; ss = 0.0; ss2 = 0.0;
    #(2 * D);
    for (int n = 0; n < NS; n++) begin
      int t0, t1;
      for (int y = 0; y < int'(H); y++)
        for (int c = 0; c < 3; c++)
          for (int x = 0; x < int'(W); x++) link_slow[y][c][x] = 1'($urandom_range(0, 1));
      t0 = -1;
      t1 = -1;
      src_clk = '1;
      #0.5;
      for (int k = 0; k <= int'(H * D) + 1; k++) begin
        if (t0 < 0 && node_clk[H][0]) t0 = k;
        if (t1 < 0 && node_clk[H][1]) t1 = k;
        #1;
      end
      t0 = (t0 - int'(H * (D - U))) / int'(U);
      t1 = (t1 - int'(H * (D - U))) / int'(U);
      sd += real'(t0);
      sd2 += real'(t0 * t0);
      ss += real'(t1 - t0);
      ss2 += real'((t1 - t0) * (t1 - t0));
      src_clk = '0;
      #(H * D + 1);
    end
    mean_d = sd / real'(NS);
    sd_d = $sqrt((sd2 - sd * sd / real'(NS)) / real'(NS - 1));
    sd_s = $sqrt((ss2 - ss * ss / real'(NS)) / real'(NS - 1));
    $display("H=%0d, %0d samples: mean delay %f (expected %0d), sd delay %f (expected %f), sd skew %f (expected %f)",
             H, NS, mean_d, H / 2, sd_d, SD_D, sd_s, SD_S);
    n_checks = 3;
    if (mean_d < real'(H) / 2.0 - 4.0 * SD_D / $sqrt(real'(NS)) - 0.05 ||
        mean_d > real'(H) / 2.0 + 4.0 * SD_D / $sqrt(real'(NS)) + 0.05) n_failures++;
    if (sd_d < SD_D * (1.0 - TOL) || sd_d > SD_D * (1.0 + TOL)) n_failures++;
    if (sd_s < SD_S * (1.0 - TOL) || sd_s > SD_S * (1.0 + TOL)) n_failures++;
    done = 1'b1;
  end

endmodule
