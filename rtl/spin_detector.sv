// spin_detector -- turns the digitised phase-detector output into spins.
//
// A -15 dB coupler taps the ring towards a gain/phase detector whose phase
// output is digitised by an 8-bit ADC. A pulse that is in phase with the
// reference (s = +1) reads high, an out-of-phase pulse (s = -1) reads low.
// The detector needs 50-70 ns to settle inside a 100 ns pulse, so this block
// adds SAMPLE_N ADC codes from a window late in the slot (starting at clock
// SAMPLE_FIRST, which also absorbs the ADC pipeline delay), compares the sum
// with SAMPLE_N * threshold and writes the result into bit `slot` of the
// spin vector (1 = +1). Slots NSPIN..NSLOT-1 carry the spare pulses; they are
// measured but not stored. The paper gives the detector, the ADC and the
// pulse length; the window, the averaging and the threshold are this
// design's choices.
//
// Timing: the decision for a slot is written on the clock after its last
// sample, i.e. at phase SAMPLE_FIRST + SAMPLE_N of the same slot, with a
// one-clock spin_valid strobe, the slot index and whether the spin flipped.
// The spin vector resets to all -1.
module spin_detector #(
  parameter int unsigned NSPIN        = sawim_pkg::NSPIN,
  parameter int unsigned NSLOT        = sawim_pkg::NSLOT,
  parameter int unsigned CLK_PER_SLOT = sawim_pkg::CLK_PER_SLOT,
  parameter int unsigned ADC_W        = sawim_pkg::ADC_W,
  parameter int unsigned SAMPLE_FIRST = 10,
  parameter int unsigned SAMPLE_N     = 4
) (
  input  logic                            clk,
  input  logic                            rst_n,
  input  logic [ADC_W-1:0]                adc_data,
  input  logic [$clog2(NSLOT)-1:0]        slot,
  input  logic [$clog2(CLK_PER_SLOT)-1:0] phase,
  input  logic [ADC_W-1:0]                threshold,
  output logic [NSPIN-1:0]                spins,
  output logic                            spin_valid,
  output logic [$clog2(NSLOT)-1:0]        spin_slot,
  output logic                            spin_flip
);

  localparam int unsigned PW   = $clog2(CLK_PER_SLOT);
  localparam int unsigned SW   = $clog2(NSLOT);
  localparam int unsigned ACCW = ADC_W + $clog2(SAMPLE_N + 1);

  logic [ACCW-1:0] acc;
  logic            in_window, decide;
  logic            bit_now;
  logic [ACCW-1:0] level;

  always_comb begin
    in_window = (phase >= PW'(SAMPLE_FIRST)) && (phase < PW'(SAMPLE_FIRST + SAMPLE_N));
    decide    = (phase == PW'(SAMPLE_FIRST + SAMPLE_N));
    level     = ACCW'(threshold) * ACCW'(SAMPLE_N);
    bit_now   = (acc >= level);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc        <= '0;
      spins      <= '0;
      spin_valid <= 1'b0;
      spin_slot  <= '0;
      spin_flip  <= 1'b0;
    end else begin
      spin_valid <= 1'b0;
      spin_flip  <= 1'b0;
      if (phase == PW'(SAMPLE_FIRST))
        acc <= ACCW'(adc_data);
      else if (in_window)
        acc <= acc + ACCW'(adc_data);
      if (decide) begin
        spin_valid <= 1'b1;
        spin_slot  <= slot;
        if (slot < SW'(NSPIN)) begin
          spins[slot] <= bit_now;
          spin_flip   <= (spins[slot] != bit_now);
        end
      end
    end
  end

  initial begin
    assert (SAMPLE_FIRST + SAMPLE_N < CLK_PER_SLOT)
      else $error("spin_detector: sample window must end inside the slot");
  end

endmodule
