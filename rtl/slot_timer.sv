// slot_timer -- pulse-slot timebase of the SAW Ising machine.
//
// The ring holds NSLOT pulses per round trip; each pulse owns a slot of
// CLK_PER_SLOT system clocks. This counter gives every other block the index
// of the slot whose pulse is now at the phase detector (slot), the clock
// within that slot (phase) and one-clock strobes for the first clock of a
// slot, its last clock and the start of slot 0. It also drives the RF switch
// that carves the circulating pulses: high for the first PULSE_CYCLES clocks
// of every slot. With the defaults (58 slots of 20 clocks at 96.58 MHz) the
// switch runs at 4.829 MHz with 50% duty and a round trip is 1160 clocks,
// 12.01 us, as in the paper; the clock rate and the position of the on-half
// within a slot are this design's choices.
//
// Timing: after reset the first clock is slot 0, phase 0. All outputs are
// registered state or decoded from it; they change on the rising clock edge.
module slot_timer #(
  parameter int unsigned NSLOT        = sawim_pkg::NSLOT,
  parameter int unsigned CLK_PER_SLOT = sawim_pkg::CLK_PER_SLOT,
  parameter int unsigned PULSE_CYCLES = sawim_pkg::PULSE_CYCLES
) (
  input  logic                            clk,
  input  logic                            rst_n,
  output logic [$clog2(NSLOT)-1:0]        slot,
  output logic [$clog2(CLK_PER_SLOT)-1:0] phase,
  output logic                            slot_start,
  output logic                            slot_last,
  output logic                            trip_start,
  output logic                            rf_switch
);

  localparam int unsigned SW = $clog2(NSLOT);
  localparam int unsigned PW = $clog2(CLK_PER_SLOT);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      slot  <= '0;
      phase <= '0;
    end else if (phase == PW'(CLK_PER_SLOT - 1)) begin
      phase <= '0;
      slot  <= (slot == SW'(NSLOT - 1)) ? '0 : slot + 1'b1;
    end else begin
      phase <= phase + 1'b1;
    end
  end

  always_comb begin
    slot_start = (phase == '0);
    slot_last  = (phase == PW'(CLK_PER_SLOT - 1));
    trip_start = slot_start && (slot == '0);
    rf_switch  = (phase < PW'(PULSE_CYCLES));
  end

  initial begin
    assert (PULSE_CYCLES > 0 && PULSE_CYCLES < CLK_PER_SLOT)
      else $error("slot_timer: PULSE_CYCLES must lie inside a slot");
  end

endmodule
