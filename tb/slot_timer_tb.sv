// slot_timer_tb -- self-checking test of the pulse-slot timebase at its
// default size (58 slots of 20 clocks). A reference counter runs beside the
// block for three round trips and every clock compares slot, phase, the
// three strobes and the RF switch. It also measures the round-trip length
// (1160 clocks, 12.01 us at 96.58 MHz) and the switch duty cycle (50%).
module slot_timer_tb;
  localparam int NSLOT = 58, CPS = 20, PULSE = 10;
  logic clk = 1'b0, rst_n = 1'b0;
  logic [5:0] slot; logic [4:0] phase;
  logic slot_start, slot_last, trip_start, rf_switch;
  int checks = 0, failures = 0;

  slot_timer dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  int ref_slot = 0, ref_phase = 0, high = 0, cyc = 0, last_trip = -1, trips = 0;
  initial begin
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    for (cyc = 0; cyc < 3 * NSLOT * CPS + 5; cyc++) begin
      check(slot == 6'(ref_slot) && phase == 5'(ref_phase), "slot/phase");
      check(slot_start == (ref_phase == 0), "slot_start");
      check(slot_last == (ref_phase == CPS - 1), "slot_last");
      check(trip_start == (ref_phase == 0 && ref_slot == 0), "trip_start");
      check(rf_switch == (ref_phase < PULSE), "rf_switch");
      if (rf_switch) high++;
      if (trip_start) begin
        if (last_trip >= 0) check(cyc - last_trip == NSLOT * CPS, "round trip of 1160 clocks");
        last_trip = cyc; trips++;
      end
      @(negedge clk);
      if (++ref_phase == CPS) begin ref_phase = 0; ref_slot = (ref_slot + 1) % NSLOT; end
    end
    check(trips == 4, "four trip starts seen");
    check(high * 2 >= cyc - PULSE && high * 2 <= cyc + PULSE, "50% switch duty");
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
