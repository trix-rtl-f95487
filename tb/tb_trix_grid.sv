// tb_trix_grid -- end-to-end test of the TRIX grid against the median recurrence.
//
// The testbench drives the clock generators (layer 0) with one square wave and,
// for every edge, measures when each node of the grid switches. Independently of
// the grid it computes, in integer arithmetic, the arrival time model of TRIX:
//   t(x,0) = 0,  t(x,y) = median over c of t(x-1+c mod W, y-1) + w(c,x,y),
// with w the 0/1 link choice; a crashed node never arrives (+inf), a node stuck at
// the clock level arrives before everything (-inf). A node must switch exactly at
//   y*(D-U) + t(x,y)*U
// after the generators, for the rising and for the falling edge.
//
// Scenarios, each counted and required to happen at least once:
//   random      i.i.d. fair coin flips for every link (the evaluation's model)
//   second_edge a node fired on its second arrival, later than its first one
//   crash_equal all delays equal and one crashed node: every other node fires at
//               exactly y*D, as if nothing had failed
//   fault_bound random delays, one crashed and one stuck-high node: every
//               out-neighbour of a faulty node fires between its two correct inputs
//   worst_skew  slow links into one half of the cylinder, fast into the other:
//               neighbours on layer H differ by H*U, the worst case
//   complement  every link flipped: each top-layer time t becomes H - t
//   flush       a transient upset on a node is gone after the next edge
// Timing: edges are 2*H*D apart, so each wave has settled before the next starts.
module tb_trix_grid;
  timeunit 1ns;
  timeprecision 100ps;

  localparam int unsigned H  = 8;
  localparam int unsigned W  = 2 * H + 2;
  localparam int unsigned D  = 10;
  localparam int unsigned U  = 1;
  localparam int          NR = 60;          // random samples
  localparam int          INF = 1_000_000;  // "never arrives"

  logic [W-1:0]      src_clk;
  logic [2:0][W-1:0] link_slow [H];
  logic [W-1:0]      node_clk  [H+1];

  trix_grid #(.H(H), .W(W), .D(D), .U(U)) dut (
    .src_clk   (src_clk),
    .link_slow (link_slow),
    .node_clk  (node_clk)
  );

  int checks = 0, failures = 0;
  int n_random = 0, n_second = 0, n_crash_equal = 0, n_fault_bound = 0;
  int n_worst = 0, n_complement = 0, n_flush = 0;

  int model_t [H+1][W];   // model arrival time in units of U
  int meas_t  [H+1][W];   // measured switching time after the generators
  int fault   [H+1][W];   // 0 correct, 1 crashed (stuck low), 2 stuck high
  bit model_rise = 1'b1;  // the model describes a rising (1) or falling (0) edge

  function automatic int med3(int a, int b, int c);
    int lo, hi;
    lo = (a < b) ? a : b;
    hi = (a < b) ? b : a;
    if (c <= lo) return lo;
    if (c >= hi) return hi;
    return c;
  endfunction

  // Arrival-time model of the whole grid for the current link choices and faults.
  task automatic compute_model();
    for (int x = 0; x < W; x++) model_t[0][x] = 0;
    for (int y = 1; y <= H; y++) begin
      for (int x = 0; x < W; x++) begin
        int a [3];
        for (int c = 0; c < 3; c++) begin
          int sx;
          sx = (x + W + c - 1) % W;
          // A stuck node never delivers the edge towards the level it is stuck
          // away from, and delivers the edge towards its own level at once.
          if (fault[y-1][sx] == 1)      a[c] = model_rise ? INF : -INF;
          else if (fault[y-1][sx] == 2) a[c] = model_rise ? -INF : INF;
          else                          a[c] = model_t[y-1][sx] + int'(link_slow[y-1][c][x]);
        end
        model_t[y][x] = med3(a[0], a[1], a[2]);
      end
    end
  endtask

  // Drive all generators to `lvl` and record when each node reaches `lvl`.
  task automatic run_edge(input logic lvl);
    for (int y = 0; y <= H; y++)
      for (int x = 0; x < W; x++) meas_t[y][x] = INF;
    src_clk = {W{lvl}};
    #0.5;
    for (int k = 0; k <= int'(H * D) + 2; k++) begin
      for (int y = 0; y <= H; y++)
        for (int x = 0; x < W; x++)
          if (meas_t[y][x] == INF && node_clk[y][x] == lvl) meas_t[y][x] = k;
      #1;
    end
    #(H * D);
  endtask

  // Compare every correct node with the model; returns the number of mismatches.
  function automatic int compare_all(input string tag);
    int bad = 0;
    for (int y = 1; y <= H; y++) begin
      for (int x = 0; x < W; x++) begin
        if (fault[y][x] == 0) begin
          int expct;
          expct = int'(y * (D - U)) + model_t[y][x] * int'(U);
          checks++;
          if (meas_t[y][x] != expct) begin
            failures++;
            bad++;
            if (bad == 1)
              for (int c = 0; c < 3; c++) begin
                int sx; sx = (x + W + c - 1) % W;
                $display("  in %0d: src (%0d,%0d) model %0d meas %0d slow %0d fault %0d", c, sx, y-1,
                         model_t[y-1][sx], meas_t[y-1][sx], link_slow[y-1][c][x], fault[y-1][sx]);
              end
            if (bad <= 5)
              $display("FAIL %s: node (%0d,%0d) switched at %0d, expected %0d",
                       tag, x, y, meas_t[y][x], expct);
          end
        end
      end
    end
    return bad;
  endfunction

  task automatic random_links();
    for (int y = 0; y < H; y++)
      for (int c = 0; c < 3; c++)
        for (int x = 0; x < W; x++) link_slow[y][c][x] = 1'($urandom_range(0, 1));
  endtask

  task automatic clear_faults();
    for (int y = 0; y <= H; y++)
      for (int x = 0; x < W; x++) fault[y][x] = 0;
  endtask

  // One full clock period (rising then falling edge) checked against the model.
  task automatic full_period(input string tag);
    model_rise = 1'b1;
    compute_model();
    run_edge(1'b1);
    void'(compare_all({tag, " rise"}));
    model_rise = 1'b0;
    compute_model();
    run_edge(1'b0);
    void'(compare_all({tag, " fall"}));
  endtask

  // Count nodes that fired later than their first arrival (second-edge rule at work).
  function automatic int count_second();
    int n = 0;
    for (int y = 1; y <= H; y++)
      for (int x = 0; x < W; x++) begin
        int mn = INF;
        for (int c = 0; c < 3; c++) begin
          int sx, a;
          sx = (x + W + c - 1) % W;
          a = model_t[y-1][sx] + int'(link_slow[y-1][c][x]);
          if (a < mn) mn = a;
        end
        if (model_t[y][x] > mn) n++;
      end
    return n;
  endfunction

  initial begin : watchdog
    #(200_000 * D);
    failures++;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : main
    int top_t [W];
    src_clk = '0;
    clear_faults();
    for (int y = 0; y < H; y++) link_slow[y] = '0;
    #(2 * H * D);

    // Random coin-flip delays.
    for (int s = 0; s < NR; s++) begin
      random_links();
      full_period("random");
      n_random++;
      n_second += count_second();
    end

    // Fault-free worst case: slow links into columns W/2..W-1, fast elsewhere.
    for (int y = 0; y < H; y++)
      for (int x = 0; x < W; x++) link_slow[y][0][x] = 1'(x >= W / 2);
    for (int y = 0; y < H; y++) begin
      link_slow[y][1] = link_slow[y][0];
      link_slow[y][2] = link_slow[y][0];
    end
    full_period("worst");
    checks++;
    if (meas_t[H][W/2] - meas_t[H][W/2-1] != int'(H * U)) begin
      failures++;
      $display("FAIL worst: skew %0d, expected %0d", meas_t[H][W/2] - meas_t[H][W/2-1], H * U);
    end else n_worst++;

    // Complement: flip every link and compare the top layer with H - t.
    random_links();
    full_period("complement a");
    for (int x = 0; x < W; x++) top_t[x] = (meas_t[H][x] - int'(H * (D - U))) / int'(U);
    for (int y = 0; y < H; y++) link_slow[y] = ~link_slow[y];
    full_period("complement b");
    for (int x = 0; x < W; x++) begin
      checks++;
      if ((meas_t[H][x] - int'(H * (D - U))) / int'(U) != int'(H) - top_t[x]) begin
        failures++;
        $display("FAIL complement: column %0d", x);
      end
    end
    n_complement++;

    // All delays equal, one crashed node: nothing else notices (isolated crash).
    for (int y = 0; y < H; y++) link_slow[y] = '1;
    fault[2][3] = 1;
    force dut.g_layer[2].clk[3] = 1'b0;
    full_period("crash equal");
    for (int y = 1; y <= H; y++)
      for (int x = 0; x < W; x++)
        if (fault[y][x] == 0) begin
          checks++;
          if (meas_t[y][x] != int'(y * D)) begin
            failures++;
            $display("FAIL crash equal: node (%0d,%0d) at %0d", x, y, meas_t[y][x]);
          end
        end
    n_crash_equal++;
    release dut.g_layer[2].clk[3];
    clear_faults();

    // Random delays, one crashed and one stuck-high node well apart.
    for (int s = 0; s < 4; s++) begin
      int bad_before;
      random_links();
      fault[3][2]  = 1;
      fault[4][11] = 2;
      force dut.g_layer[3].clk[2]  = 1'b0;
      force dut.g_layer[4].clk[11] = 1'b1;
      model_rise = 1'b1;
      compute_model();
      run_edge(1'b1);
      bad_before = failures;
      void'(compare_all("fault rise"));
      // Out-neighbours fire between the arrivals of their two correct inputs.
      for (int f = 0; f < 2; f++) begin
        int fy, fx;
        fy = (f == 0) ? 3 : 4;
        fx = (f == 0) ? 2 : 11;
        for (int dx = -1; dx <= 1; dx++) begin
          int x, lo, hi;
          x  = (fx + dx + W) % W;
          lo = INF;
          hi = -INF;
          for (int c = 0; c < 3; c++) begin
            int sx, a;
            sx = (x + W + c - 1) % W;
            if (sx != fx) begin
              a = int'(fy * (D - U)) + (model_t[fy][sx] + int'(link_slow[fy][c][x])) * int'(U)
                  + int'(D - U);
              if (a < lo) lo = a;
              if (a > hi) hi = a;
            end
          end
          checks++;
          if (meas_t[fy+1][x] < lo || meas_t[fy+1][x] > hi) begin
            failures++;
            $display("FAIL fault bound: node (%0d,%0d) at %0d outside [%0d,%0d]",
                     x, fy + 1, meas_t[fy+1][x], lo, hi);
          end
        end
      end
      if (failures == bad_before) n_fault_bound++;
      // Stuck-high node: hold its clock low again before the falling edge is
      // checked, so the crash alone is compared on the way down.
      release dut.g_layer[4].clk[11];
      fault[4][11] = 0;
      model_rise = 1'b0;
      compute_model();
      run_edge(1'b0);
      void'(compare_all("fault fall"));
      release dut.g_layer[3].clk[2];
      clear_faults();
    end

    // Transient upset: glitch a whole group of nodes, then check the next period.
    random_links();
    force dut.g_layer[1].clk[4] = 1'b1;
    force dut.g_layer[1].clk[5] = 1'b1;
    #3;
    release dut.g_layer[1].clk[4];
    release dut.g_layer[1].clk[5];
    #(2 * H * D);
    begin
      int bad_before;
      bad_before = failures;
      full_period("flush");
      if (failures == bad_before) n_flush++;
    end

    $display("mechanisms: random=%0d second_edge=%0d crash_equal=%0d fault_bound=%0d worst_skew=%0d complement=%0d flush=%0d",
             n_random, n_second, n_crash_equal, n_fault_bound, n_worst, n_complement, n_flush);
    if (n_random == 0 || n_second == 0 || n_crash_equal == 0 || n_fault_bound == 0 ||
        n_worst == 0 || n_complement == 0 || n_flush == 0) begin
      failures++;
      $display("FAIL a mechanism was never exercised");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
