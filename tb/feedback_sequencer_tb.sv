// feedback_sequencer_tb -- self-checking test of the coupling-pulse
// scheduler at its default size (50 spins, 58 slots) with the real slot
// timer driving it. A stand-in for the row read, product and encoder
// answers every row request three clocks later with a code derived from the
// row number. For each slot the testbench checks that the outputs carry the
// pulse (m - lag) mod 58 -- the row's code for a spin, the "off" code for a
// spare pulse -- for lags 8, 0, 57 and 3, and that exactly one row is
// requested per spin slot. With fb_enable low every pulse must be left
// uncoupled.
module feedback_sequencer_tb;
  localparam int NSPIN = 50, NSLOT = 58;
  logic clk = 1'b0, rst_n = 1'b0;
  logic [5:0] slot; logic [4:0] phase;
  logic slot_start, slot_last, trip_start, rf_switch;
  logic [5:0] fb_lag = 6'd8;
  logic fb_enable = 1'b1;
  logic rd_en; logic [5:0] rd_row;
  logic enc_valid = 1'b0, enc_phase = 1'b0; logic [5:0] enc_att = '0;
  logic phase_sel; logic [5:0] att_code, fb_target; logic fb_active;
  int checks = 0, failures = 0;

  slot_timer u_t (.clk, .rst_n, .slot, .phase, .slot_start, .slot_last, .trip_start, .rf_switch);
  feedback_sequencer dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  // three-clock responder standing in for matrix read, product and encoder
  logic [2:0] v_sh = '0; logic [5:0] r_sh [3];
  always_ff @(posedge clk) begin
    v_sh <= {v_sh[1:0], rd_en};
    r_sh[0] <= rd_row; r_sh[1] <= r_sh[0]; r_sh[2] <= r_sh[1];
    enc_valid <= v_sh[2];
    enc_att   <= 6'((r_sh[2] * 5 + 1) % 48);
    enc_phase <= r_sh[2][0];
  end

  int reads = 0;
  always @(posedge clk) if (rst_n && rd_en) reads++;

  int lags [4] = '{8, 0, 57, 3};
  int tgt, spin_slots;
  initial begin
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    for (int l = 0; l < 4; l++) begin
      // change the lag at a slot boundary, let one slot pass to settle
      do @(negedge clk); while (!slot_last);
      fb_lag = 6'(lags[l]);
      do @(negedge clk); while (!slot_last);
      reads = 0; spin_slots = 0;
      for (int s = 0; s < 2 * NSLOT; s++) begin
        do @(negedge clk); while (phase != 5'd2);
        tgt = (int'(slot) - lags[l] + NSLOT) % NSLOT;
        check(int'(fb_target) == tgt, $sformatf("target %0d expected %0d (lag %0d)", fb_target, tgt, lags[l]));
        if (tgt < NSPIN) begin
          spin_slots++;
          check(fb_active && att_code == 6'((tgt * 5 + 1) % 48) && phase_sel == tgt[0], "spin coupling");
        end else
          check(!fb_active && att_code == 6'h3f && !phase_sel, "spare pulse uncoupled");
      end
      check(reads == spin_slots, $sformatf("one row read per spin slot (%0d/%0d)", reads, spin_slots));
    end
    // disabled: every pulse uncoupled, no matter what the encoder says
    fb_enable = 1'b0;
    do @(negedge clk); while (!slot_last);
    for (int s = 0; s < NSLOT; s++) begin
      do @(negedge clk); while (phase != 5'd2);
      check(!fb_active && att_code == 6'h3f && !phase_sel, "uncoupled while disabled");
    end
    fb_enable = 1'b1;
    do @(negedge clk); while (!slot_last);
    do @(negedge clk); while (phase != 5'd2);
    tgt = (int'(slot) - 3 + NSLOT) % NSLOT;
    check(fb_active == (tgt < NSPIN), "coupling resumes when enabled");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
