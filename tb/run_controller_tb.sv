// run_controller_tb -- self-checking test of the run sequencer with a short
// period (100 clocks, loop off for the first 5). It checks the position of
// every loop-on edge, the run_start and run_done strobes, the latched
// solution (the spin vector on the last clock of the run) and the run
// counter over ten runs, then that dropping run_enable switches the loop
// off at once and restarts the period from zero.
module run_controller_tb;
  localparam int NSPIN = 50, PER = 100, OFF = 5;
  logic clk = 1'b0, rst_n = 1'b0, run_enable = 1'b0;
  logic [NSPIN-1:0] spins = '0;
  logic loop_on, run_start, run_done; logic [NSPIN-1:0] solution; logic [31:0] run_count;
  int checks = 0, failures = 0;

  run_controller #(.NSPIN(NSPIN), .RUN_PERIOD_CYCLES(PER), .RUN_OFF_CYCLES(OFF)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  int n;
  initial begin
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    check(!loop_on && run_count == 0, "idle after reset");
    run_enable = 1'b1;
    n = 0;  // clocks since enable, counted at negedges
    for (int c = 0; c < 10 * PER + 3; c++) begin
      spins = {$urandom, $urandom};
      @(negedge clk);
      // n counts clocks done in the current run
      n = c + 1;
      check(loop_on == ((n % PER) >= OFF), $sformatf("loop_on at run clock %0d", n % PER));
      check(run_start == ((n % PER) == OFF), "run_start strobe");
      check(run_done == ((n % PER) == 0), "run_done strobe");
      if ((n % PER) == 0) begin
        check(solution == spins, "solution latched at end of run");
        check(run_count == 32'(n / PER), "run count");
      end
    end
    run_enable = 1'b0;
    @(negedge clk);
    check(!loop_on, "loop off when disabled");
    repeat (20) @(negedge clk);
    check(!loop_on && run_count == 10, "held while disabled");
    run_enable = 1'b1;
    repeat (OFF) @(negedge clk);
    check(loop_on && run_count == 10, "period restarts from zero");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
