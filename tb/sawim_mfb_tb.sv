// sawim_mfb_tb -- end-to-end test of the measurement-and-feedback block at
// its default size (50 spins, 58 slots, 20 clocks per slot, 10 ms runs),
// closed around the behavioural ring model.
//
// The host loads a 50-node Moebius ladder (ring of 50 plus the 25 rungs
// i -- i+25, J = -1 on every edge), whose MAX-CUT ground state has Ising
// energy H = -sum_{i!=j} J_ij s_i s_j = -150, and then a random 50-node
// graph with 262 edges. Two 10 ms runs are made on each, the first with
// r = 1200/65536 (one neighbour gives 1.8%, raised to 2%), the second with
// r = 3000/65536 (seven aligned neighbours exceed 30%). Throughout, a
// scoreboard recomputes every coupling pulse from the spin vector and the
// testbench's own copy of J (field, c_i = -r f_i, 2%/30% clipping, 0.5 dB
// attenuator steps, phase calibration) and compares it with the phase and
// attenuator outputs in the slot the pulse is injected; spare slots must be
// uncoupled, and so must every pulse while the loop gain is off. It also
// checks the slot rate (one slot per 20 clocks, 1160
// per round trip), that the loop gain is off for the first 5% of each run,
// the latched solutions against the live spins, and that the closed loop
// lowers the Ising energy (H < 0 for every solution: a loop pushing the
// wrong way would give H > 0). Each mechanism -- spin flips, coupling
// clipped high and low, zero field, uncoupled spare pulses, coupling gated
// while the loop is off, loop-gain switching, solution capture -- must happen at least once.
module sawim_mfb_tb;
  import sawim_pkg::*;
  localparam int N = NSPIN;
  localparam real AMAX = real'(AMP_MAX_Q16), AMIN = real'(AMP_MIN_Q16);

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

  // ---- problem ----
  int J [N][N];

  task automatic load_matrix();
    for (int i = 0; i < N; i++)
      for (int j = 0; j < N; j++) begin
        @(negedge clk); j_we = 1'b1; j_row = 6'(i); j_col = 6'(j); j_data = 4'(J[i][j]);
      end
    @(negedge clk); j_we = 1'b0;
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

  // ---- scoreboard: expected coupling controls ----
  typedef struct { bit ph; int code; bit near; bit hi; bit lo; bit z; } cpl_t;

  function automatic cpl_t expect_cpl(int i, logic [N-1:0] s);
    cpl_t e; int f = 0; longint p; real mag, thr;
    for (int j = 0; j < N; j++) f += J[i][j] * (s[j] ? 1 : -1);
    p = longint'(cfg.r_coef) * longint'(f < 0 ? -f : f);
    e.z = (p == 0); e.hi = !e.z && p > longint'(AMAX); e.lo = !e.z && p < longint'(AMIN);
    mag = e.hi ? AMAX : e.lo ? AMIN : real'(p);
    e.ph = e.z ? 1'b0 : ((f > 0) ^ cfg.phase_invert);
    e.code = 0; e.near = 0;
    for (int k = 0; k < 63; k++) begin
      thr = AMAX * (10.0 ** (-(k + 0.5) / 40.0));
      if (mag < thr) e.code++;
      if ((mag - thr) < 0.002 * thr + 1.0 && (thr - mag) < 0.002 * thr + 1.0) e.near = 1;
    end
    if (e.z) e.code = 63;
    return e;
  endfunction

  int   n_flip = 0, n_hi = 0, n_lo = 0, n_zero = 0, n_spare = 0, n_on = 0, n_sol = 0, n_cpl = 0;
  int   phase_ctr = 0, slot_clocks = 0, last_slot = 0, trip_clocks = 0, trip_start_clk = -1, clk_ctr = 0;
  bit   sb_enable = 0, have_exp = 0;
  cpl_t exp_c; int exp_t; bit exp_on; int n_gated = 0;

  always @(negedge clk) if (rst_n) begin
    clk_ctr++;
    if (int'(slot) != last_slot) begin
      // slot boundary: check slot rate, then the coupling now applied
      check(slot_clocks == CLK_PER_SLOT, "slot lasts 20 clocks");
      check(int'(slot) == (last_slot + 1) % NSLOT, "slot order");
      if (slot == 0) begin
        if (trip_start_clk >= 0) check(clk_ctr - trip_start_clk == NSLOT * CLK_PER_SLOT, "round trip 1160 clocks");
        trip_start_clk = clk_ctr;
      end
      slot_clocks = 0; phase_ctr = 0; last_slot = int'(slot);
    end
    slot_clocks++;
    if (sb_enable && phase_ctr == 3) begin
      // outputs loaded at this slot's start
      if (have_exp && exp_on != att2_on) begin
        // loop gain switched during the slot: skip this one
      end else if (have_exp) begin
        check(int'(fb_target) == exp_t, "injector target");
        if (exp_t < N && !exp_on) begin
          check(!fb_active && att1_code == 6'h3f, "uncoupled while loop gain off");
          n_gated++;
        end else if (exp_t < N) begin
          check(fb_active && phase_sel == exp_c.ph, $sformatf("phase of pulse %0d", exp_t));
          if (exp_c.near) check(int'(att1_code) - exp_c.code <= 1 && exp_c.code - int'(att1_code) <= 1, "att code");
          else check(int'(att1_code) == exp_c.code, $sformatf("att code %0d exp %0d pulse %0d", att1_code, exp_c.code, exp_t));
          n_cpl++;
          if (exp_c.hi) n_hi++;
          if (exp_c.lo) n_lo++;
          if (exp_c.z) n_zero++;
        end else begin
          check(!fb_active && att1_code == 6'h3f, "spare pulse uncoupled");
          n_spare++;
        end
      end
      // expectation for next slot, from the spins as they stand now
      exp_t = (int'(slot) + 1 - int'(cfg.fb_lag) + NSLOT) % NSLOT;
      if (exp_t < N) exp_c = expect_cpl(exp_t, spins);
      exp_on = att2_on;
      have_exp = 1;
    end
    phase_ctr++;
  end

  always @(posedge clk) if (rst_n) begin
    if (spin_flip) n_flip++;
    if (run_start) n_on++;
  end

  // ---- runs ----
  int loop_on_clocks, run_clocks, h;
  task automatic do_runs(int runs, string name, int ground);
    for (int r = 0; r < runs; r++) begin
      loop_on_clocks = 0; run_clocks = 0;
      do begin
        @(negedge clk);
        run_clocks++;
        if (att2_on) loop_on_clocks++;
      end while (!solution_valid);
      n_sol++;
      check(solution == spins, "solution equals spins at end of run");
      check(run_clocks <= RUN_PERIOD_CYCLES + 2, "run length");
      if (run_clocks >= RUN_PERIOD_CYCLES - 2)
        check(loop_on_clocks == RUN_PERIOD_CYCLES - RUN_OFF_CYCLES, "loop gain on for 95% of the run");
      h = energy(solution);
      check(h < 0, $sformatf("%s: closed loop lowers the energy (H=%0d)", name, h));
      if (ground < 0) $display("%s run %0d: H = %0d (ground state %0d), solution %h", name, r, h, ground, solution);
      else $display("%s run %0d: H = %0d, solution %h", name, r, h, solution);
    end
  endtask

  initial begin
    cfg.r_coef = 16'd1200; cfg.threshold = 8'd128;
    cfg.fb_lag = 6'(FB_LAG_DEFAULT); cfg.phase_invert = 1'b1;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    make_moebius(N);
    load_matrix();
    sb_enable = 1;
    run_enable = 1'b1;
    // the first run started while loading: discard it
    do @(negedge clk); while (!solution_valid);
    do_runs(2, "moebius-50", -150);
    // new problem loaded between runs, while the loop is off
    run_enable = 1'b0; sb_enable = 0; have_exp = 0;
    make_random(262);
    cfg.r_coef = 16'd3000;   // stronger coupling: fields of 7 or more clip at 30%
    load_matrix();
    sb_enable = 1;
    run_enable = 1'b1;
    do_runs(2, "random-262", 0);
    check(n_flip > 0, "spin flips seen");
    check(n_hi > 0, "coupling clipped at 30% seen");
    check(n_lo > 0, "coupling raised to 2% seen");
    check(n_zero > 0, "zero field seen");
    check(n_spare > 0, "uncoupled spare pulses seen");
    check(n_on >= 4, "loop gain switched on each run");
    check(n_gated > 0, "coupling gated while loop gain off");
    check(n_sol == 4, "four solutions");
    $display("mechanisms: flips=%0d clip_hi=%0d clip_lo=%0d zero=%0d spare=%0d gated=%0d loop_on=%0d solutions=%0d couplings=%0d",
             n_flip, n_hi, n_lo, n_zero, n_spare, n_gated, n_on, n_sol, n_cpl);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (6 * RUN_PERIOD_CYCLES) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
