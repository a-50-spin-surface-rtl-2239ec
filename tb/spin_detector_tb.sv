// spin_detector_tb -- self-checking test of the spin decision at its default
// size. A local slot counter drives slot/phase; each slot's ADC codes are
// random, with one level for the sample window and noise elsewhere. The
// expected spin (sum of the four window codes >= 4 * threshold) is worked out
// in the testbench and compared with the spin vector, the valid strobe, the
// slot index and the flip flag, for six round trips and several thresholds.
// Spare slots 50..57 must leave the spin vector untouched.
module spin_detector_tb;
  localparam int NSPIN = 50, NSLOT = 58, CPS = 20, FIRST = 10, NS = 4;
  logic clk = 1'b0, rst_n = 1'b0;
  logic [7:0] adc_data = '0, threshold = 8'd128;
  logic [5:0] slot = '0; logic [4:0] phase = '0;
  logic [NSPIN-1:0] spins; logic spin_valid; logic [5:0] spin_slot; logic spin_flip;
  int checks = 0, failures = 0;

  spin_detector dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  logic [NSPIN-1:0] model = '0;
  int sum, lvl, noise, flips = 0;
  bit  want, was;
  initial begin
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    check(spins == '0, "reset to all -1");
    for (int trip = 0; trip < 6; trip++) begin
      threshold = (trip < 3) ? 8'd128 : 8'(60 + 30 * trip);
      for (int s = 0; s < NSLOT; s++) begin
        sum = 0;
        lvl = $urandom_range(255);
        for (int p = 0; p < CPS; p++) begin
          @(negedge clk);
          slot = 6'(s); phase = 5'(p);
          if (p >= FIRST && p < FIRST + NS) begin
            noise = lvl + int'($urandom_range(6));
            adc_data = 8'(noise > 255 ? 255 : noise);
            sum += adc_data;
          end else adc_data = 8'($urandom_range(255));
          if (p == FIRST + NS + 1) begin
            // the decision was written on the previous edge
            check(spin_valid && spin_slot == 6'(s), "valid strobe and slot");
            want = (sum >= NS * threshold);
            if (s < NSPIN) begin
              was = model[s];
              model[s] = want;
              check(spin_flip == (was != want), "flip flag");
              if (was != want) flips++;
            end else check(!spin_flip, "no flip on spare slot");
            check(spins == model, "spin vector");
          end else check(!spin_valid, "no strobe outside decision");
        end
      end
    end
    check(flips > 20, "spins flipped during test");
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
