// tb_trix_link -- checks the link delay model: D-U or D, transport, per link.
//
// N = 6 links side by side, every other one slow. Random subsets of the links
// toggle at random integer times, often while earlier edges are still in flight.
// The testbench records every link's input level at every integer time and
// checks, half a time unit after each, that every output equals its input as it
// was exactly one link delay earlier (D for slow links, D-U for fast ones). In
// the second half of the run the link choices are swapped while nothing is in
// flight.
module tb_trix_link;
  timeunit 1ns;
  timeprecision 100ps;

  localparam int unsigned N = 6;
  localparam int unsigned D = 10;
  localparam int unsigned U = 3;
  localparam int          T = 400;   // time units simulated

  logic [N-1:0] in_clk, slow, out_clk;

  trix_link #(.N(N), .D(D), .U(U)) dut (.in_clk(in_clk), .slow(slow), .out_clk(out_clk));

  int checks = 0, failures = 0;
  logic hist [N][T + 1];   // input level of each link at every integer time

  initial begin : watchdog
    #(10 * T);
    failures++;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : main
    int n_edges = 0;
    in_clk = '0;
    slow   = 6'b101010;
    for (int i = 0; i < int'(N); i++)
      for (int k = 0; k <= T; k++) hist[i][k] = 1'b0;
    #1;
    for (int k = 1; k <= T; k++) begin
      // now at integer time k
      if (k == T / 2) slow = ~slow;   // nothing is in flight here (quiet window)
      if ((k < T / 2 - int'(D) || (k > T / 2 && k < T - int'(D))) && $urandom_range(0, 2) == 0) begin
        in_clk = in_clk ^ N'($urandom);
        n_edges++;
      end
      for (int i = 0; i < int'(N); i++) hist[i][k] = in_clk[i];
      #0.5;
      for (int i = 0; i < int'(N); i++) begin
        int dl, ks;
        dl = slow[i] ? int'(D) : int'(D - U);
        ks = k - dl;
        checks++;
        if (out_clk[i] != (ks >= 0 ? hist[i][ks] : 1'b0)) begin
          failures++;
          if (failures < 10)
            $display("FAIL link %0d at %0d.5: out %b, expected %b", i, k, out_clk[i],
                     ks >= 0 ? hist[i][ks] : 1'b0);
        end
      end
      #0.5;
    end
    checks++;
    if (n_edges < 20) begin
      failures++;
      $display("FAIL too few input changes: %0d", n_edges);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
