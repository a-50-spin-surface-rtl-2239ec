// sawim_workload_tb -- runs the problem classes used to evaluate the SAW
// Ising machine on the full-size block (default parameters) closed around
// the behavioural ring model, and reports solution statistics.
//
//  * Moebius ladders of 8, 16, 32 and 50 nodes (J = -1 on the ring and on
//    the rungs i -- i+n/2); their ground-state energies, with
//    H = -sum_{i!=j} J_ij s_i s_j, are -16, -40, -88 and -150. Smaller
//    problems use the first n spins; the others have no couplings.
//  * Two random 50-node graphs with 301 and 262 edges (the edge counts of
//    the two evaluated MAX-CUT problems; the graphs themselves are drawn
//    here, so their ground energies are not known).
//  * A sweep of the global coupling strength r on the 262-edge graph, from
//    zero coupling through -20 dB to +5 dB around a reference r.
//
// For each case it also reports the mean number of round trips (1160
// clocks, 12.01 us each) from loop gain on to the last spin flip, to hold
// against the 28 round trips (about 340 us) reported for the hardware.
//
// Checks: every solution equals the live spin vector at the end of its run;
// the 8- and 16-node ladders reach their ground state in at least one run
// (larger ones are only reported: how often they get there depends on the
// ring model); every ladder's mean energy is below zero; no
// solution ever goes below the ground energy; and with the coupling on the
// mean energy of the 262-edge graph is lower than with zero coupling.
module sawim_workload_tb;
  import sawim_pkg::*;
  localparam int N = NSPIN;
  localparam int RUNS = 8;

  logic clk = 1'b0, rst_n = 1'b0;
  logic [7:0] adc_data;
  mfb_cfg_t cfg;
  logic j_we = 1'b0; logic [5:0] j_row = '0, j_col = '0; logic signed [3:0] j_data = '0;
  logic run_enable = 1'b0;
  logic rf_switch, phase_sel, att2_on, fb_active, spin_flip, clip_hi, clip_lo, run_start, solution_valid;
  logic [5:0] att1_code, slot, fb_target;
  logic [N-1:0] spins, solution;
  logic [31:0] run_count;
  int checks = 0, failures = 0;

  sawim_mfb dut (.*);
  sawim_ring_model #(.NSLOT(NSLOT), .LAG(FB_LAG_DEFAULT)) ring (
    .clk, .rf_switch, .phase_sel, .att1_code, .att2_on, .adc_data);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  int J [N][N];

  task automatic load_matrix();
    run_enable = 1'b0;
    for (int i = 0; i < N; i++)
      for (int j = 0; j < N; j++) begin
        @(negedge clk); j_we = 1'b1; j_row = 6'(i); j_col = 6'(j); j_data = 4'(J[i][j]);
      end
    @(negedge clk); j_we = 1'b0;
    run_enable = 1'b1;
  endtask

  task automatic make_moebius(int n);
    foreach (J[i, j]) J[i][j] = 0;
    for (int i = 0; i < n; i++) begin
      J[i][(i + 1) % n] = -1; J[(i + 1) % n][i] = -1;
      J[i][(i + n / 2) % n] = -1; J[(i + n / 2) % n][i] = -1;
    end
  endtask

  task automatic make_random(int edges);
    int a, b, e;
    foreach (J[i, j]) J[i][j] = 0;
    e = 0;
    while (e < edges) begin
      a = $urandom_range(N - 1); b = $urandom_range(N - 1);
      if (a != b && J[a][b] == 0) begin J[a][b] = -1; J[b][a] = -1; e++; end
    end
  endtask

  function automatic int energy(logic [N-1:0] s);
    int h = 0;
    for (int i = 0; i < N; i++)
      for (int j = 0; j < N; j++)
        if (i != j) h -= J[i][j] * (s[i] ? 1 : -1) * (s[j] ? 1 : -1);
    return h;
  endfunction

  // runs `runs` computations, returns the number that reached `ground`
  // (if ground < 0), the best and the mean energy
  int n_ground, best, total;
  // clocks from loop gain on to the last spin flip of the run
  longint clk_n = 0, t_on = 0, t_last_flip = 0;
  always @(posedge clk) begin
    clk_n++;
    if (run_start) begin t_on = clk_n; t_last_flip = clk_n; end
    if (spin_flip && att2_on) t_last_flip = clk_n;
  end
  longint settle_sum;
  task automatic do_runs(int runs, string name, int ground);
    int h;
    n_ground = 0; best = 1 << 30; total = 0; settle_sum = 0;
    for (int r = 0; r < runs; r++) begin
      do @(negedge clk); while (!solution_valid);
      check(solution == spins, "solution equals spins at end of run");
      check(t_last_flip >= t_on, "settling time measured inside the run");
      settle_sum += t_last_flip - t_on;
      h = energy(solution);
      if (ground < 0) check(h >= ground, $sformatf("%s: H=%0d not below the ground state", name, h));
      if (h == ground) n_ground++;
      if (h < best) best = h;
      total += h;
    end
    if (ground < 0)
      $display("%-16s r=%5d: ground %0d reached in %0d/%0d runs, mean H %0d, settled after %0d round trips",
               name, cfg.r_coef, ground, n_ground, runs, total / runs, settle_sum / runs / (NSLOT * CLK_PER_SLOT));
    else
      $display("%-16s r=%5d: best H %0d, mean H %0d over %0d runs, settled after %0d round trips",
               name, cfg.r_coef, best, total / runs, runs, settle_sum / runs / (NSLOT * CLK_PER_SLOT));
  endtask

  int ml [4] = '{8, 16, 32, 50};
  int mg [4] = '{-16, -40, -88, -150};
  int mean_zero, mean_best;
  real db [6] = '{-20.0, -10.0, -5.0, 0.0, 5.0, 0.0};
  initial begin
    cfg.r_coef = 16'd1200; cfg.threshold = 8'd128;
    cfg.fb_lag = 6'(FB_LAG_DEFAULT); cfg.phase_invert = 1'b1;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    // the first run after each reload starts mid-load; one is discarded
    for (int k = 0; k < 4; k++) begin
      make_moebius(ml[k]);
      load_matrix();
      do @(negedge clk); while (!solution_valid);
      do_runs(RUNS, $sformatf("moebius-%0d", ml[k]), mg[k]);
      if (ml[k] <= 16) check(n_ground > 0, $sformatf("moebius-%0d reaches its ground state", ml[k]));
      check(total < 0, $sformatf("moebius-%0d: mean energy below zero", ml[k]));
    end
    cfg.r_coef = 16'd2000;
    make_random(301);
    load_matrix();
    do @(negedge clk); while (!solution_valid);
    do_runs(RUNS, "random-301", 0);
    make_random(262);
    load_matrix();
    do @(negedge clk); while (!solution_valid);
    do_runs(RUNS, "random-262", 0);
    // coupling sweep on the 262-edge graph; r changes between runs
    cfg.r_coef = 16'd0;
    do @(negedge clk); while (!solution_valid);
    do_runs(RUNS, "262, no coupling", 0);
    mean_zero = total / RUNS;
    mean_best = 1 << 30;
    for (int k = 0; k < 5; k++) begin
      cfg.r_coef = 16'(int'(2000.0 * (10.0 ** (db[k] / 20.0))));
      do @(negedge clk); while (!solution_valid);
      do_runs(RUNS, $sformatf("262, %0d dB", int'(db[k])), 0);
      if (total / RUNS < mean_best) mean_best = total / RUNS;
    end
    check(mean_best < mean_zero, "coupling lowers the mean energy");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (130 * RUN_PERIOD_CYCLES) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
