// coupling_encoder_tb -- self-checking test of the coupling-pulse encoder at
// its default settings (30% / 2% limits, 6-bit code in 0.5 dB steps).
// Random local fields and coupling ratios, plus sweeps that walk the
// magnitude across its whole range, are applied back to back. The expected
// phase bit, clip flags and attenuator code are computed in the testbench
// with real arithmetic (code = number of 0.5 dB step midpoints
// 0.30 * 10^(-(k+0.5)/40) above the clipped magnitude) and checked two
// clocks later. A result that lands within 0.2% of a step midpoint may
// differ by one code, since the block's table is integer-rounded.
module coupling_encoder_tb;
  localparam int SUM_W = 10, R_W = 16, ATT_W = 6;
  localparam real AMAX = 19661.0, AMIN = 1311.0;
  logic clk = 1'b0, rst_n = 1'b0;
  logic in_valid = 1'b0;
  logic signed [SUM_W-1:0] sum = '0;
  logic [R_W-1:0] r_coef = '0;
  logic phase_invert = 1'b0;
  logic out_valid, phase_sel, clip_hi, clip_lo, zero;
  logic [ATT_W-1:0] att_code;
  int checks = 0, failures = 0;

  coupling_encoder dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  typedef struct {
    bit valid; bit ph; int code; bit hi; bit lo; bit z; bit near;
  } exp_t;
  exp_t pipe [2];
  int n_hi = 0, n_lo = 0, n_zero = 0, n_mid = 0;

  function automatic exp_t model(int f, int r, bit inv, bit v);
    exp_t e;
    real mag, thr;
    longint p;
    e.valid = v;
    p = longint'(r) * longint'(f < 0 ? -f : f);
    e.z  = (p == 0);
    e.hi = !e.z && p > longint'(AMAX);
    e.lo = !e.z && p < longint'(AMIN);
    mag  = e.hi ? AMAX : e.lo ? AMIN : real'(p);
    e.ph = e.z ? 1'b0 : ((f > 0) ^ inv);
    e.code = 0; e.near = 0;
    for (int k = 0; k < 63; k++) begin
      thr = AMAX * (10.0 ** (-(k + 0.5) / 40.0));
      if (mag < thr) e.code++;
      if ((mag - thr) < 0.002 * thr + 1.0 && (thr - mag) < 0.002 * thr + 1.0) e.near = 1;
    end
    if (e.z) e.code = 63;
    return e;
  endfunction

  int f, r;
  initial begin
    pipe[0].valid = 0; pipe[1].valid = 0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    for (int t = 0; t < 6000; t++) begin
      @(negedge clk);
      if (pipe[1].valid) begin
        check(out_valid, "out_valid after two clocks");
        check(phase_sel == pipe[1].ph, "phase bit");
        check(clip_hi == pipe[1].hi && clip_lo == pipe[1].lo && zero == pipe[1].z, "clip/zero flags");
        if (pipe[1].near) check(int'(att_code) - pipe[1].code <= 1 && pipe[1].code - int'(att_code) <= 1, "att code near a step");
        else check(int'(att_code) == pipe[1].code, $sformatf("att code %0d expected %0d", att_code, pipe[1].code));
        if (pipe[1].hi) n_hi++;
        if (pipe[1].lo) n_lo++;
        if (pipe[1].z) n_zero++;
        if (!pipe[1].hi && !pipe[1].lo && !pipe[1].z) n_mid++;
      end else check(!out_valid, "no valid without input");
      pipe[1] = pipe[0];
      // stimulus: random, then a sweep of r at unit field, then sign mix
      if (t < 3000) begin
        f = $urandom_range(800) - 400;
        if (t % 11 == 0) f = 0;
        r = (t % 3 == 0) ? $urandom_range(65535) : $urandom_range(3000);
      end else begin
        f = ((t % 2) ? 1 : -1) * (1 + (t % 5));
        r = (t - 3000) * 7;
      end
      phase_invert = (t % 13 == 5);
      in_valid = (t % 9 != 4);
      sum = SUM_W'(f); r_coef = R_W'(r);
      pipe[0] = model(f, r, phase_invert, in_valid);
    end
    check(n_hi > 0 && n_lo > 0 && n_zero > 0 && n_mid > 0, "all clipping cases seen");
    $display("cases: clip_hi=%0d clip_lo=%0d zero=%0d in-range=%0d", n_hi, n_lo, n_zero, n_mid);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
