// tb_trix_node -- checks the TRIX node's second-of-three forwarding rule.
//
// Part 1 applies all eight input levels to every one of N = 4 side-by-side nodes
// (with different patterns per node) and compares with "at least two inputs high",
// counted in the testbench. Part 2 lets rising and then falling edges reach a
// single node's three inputs at random, distinct times and checks that the output
// switches exactly at the second of the three arrivals (the median).
module tb_trix_node;
  timeunit 1ns;
  timeprecision 100ps;

  localparam int unsigned N = 4;

  logic [2:0][N-1:0] in4;
  logic [N-1:0]      out4;
  logic [2:0][0:0]   in1;
  logic [0:0]        out1;

  trix_node #(.N(N)) dut4 (.in_clk(in4), .clk_out(out4));
  trix_node          dut1 (.in_clk(in1), .clk_out(out1));

  int checks = 0, failures = 0;

  initial begin : watchdog
    #100000;
    failures++;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : main
    in4 = '0;
    in1 = '0;
    #1;
    // Part 1: every input pattern on every node.
    for (int p = 0; p < 64; p++) begin
      for (int i = 0; i < int'(N); i++)
        for (int c = 0; c < 3; c++) in4[c][i] = 1'((p + 3 * i) >> c);
      #1;
      for (int i = 0; i < int'(N); i++) begin
        int ones;
        ones = int'(in4[0][i]) + int'(in4[1][i]) + int'(in4[2][i]);
        checks++;
        if (out4[i] != (ones >= 2)) begin
          failures++;
          $display("FAIL level: node %0d inputs %b%b%b out %b", i, in4[2][i], in4[1][i],
                   in4[0][i], out4[i]);
        end
      end
    end

    // Part 2: edges arriving at distinct random times; output switches at the median.
    for (int s = 0; s < 200; s++) begin
      for (int e = 0; e < 2; e++) begin
        logic lvl;
        int t [3];
        int n_before, tm, t_out;
        lvl = (e == 0);
        t[0] = $urandom_range(1, 20);
        do t[1] = $urandom_range(1, 20); while (t[1] == t[0]);
        do t[2] = $urandom_range(1, 20); while (t[2] == t[0] || t[2] == t[1]);
        // the median is the arrival with exactly one other arrival before it
        tm = 0;
        for (int c = 0; c < 3; c++) begin
          n_before = 0;
          for (int o = 0; o < 3; o++) if (t[o] < t[c]) n_before++;
          if (n_before == 1) tm = t[c];
        end
        t_out = -1;
        for (int k = 1; k <= 21; k++) begin
          for (int c = 0; c < 3; c++) if (t[c] == k) in1[c][0] = lvl;
          #0.5;
          if (t_out < 0 && out1[0] == lvl) t_out = k;
          #0.5;
        end
        checks++;
        if (t_out != tm) begin
          failures++;
          $display("FAIL edge: arrivals %0d %0d %0d, output at %0d, expected %0d",
                   t[0], t[1], t[2], t_out, tm);
        end
      end
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
