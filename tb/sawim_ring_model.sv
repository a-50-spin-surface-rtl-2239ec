// sawim_ring_model -- behavioural model of the analog ring of the SAW Ising
// machine, for simulation only (not synthesizable).
//
// It stands in for everything outside the measurement-and-feedback logic:
// the SAW delay line, the phase-sensitive and linear amplifiers, the RF
// switch, the two couplers, the 0/180 degree phase shifter, Attenuator 1
// (coupling amplitude), Attenuator 2 (loop gain on/off), the phase
// detector and its ADC. Each of the NSLOT circulating pulses is one real,
// signed amplitude a_k (the phase-sensitive amplifier keeps the phase at 0
// or 180 degrees; +1 is the saturated in-phase pulse).
//
// Timing follows the control pins: every rising edge of rf_switch brings
// the next pulse k to the detector. Its amplitude is then advanced by one
// round trip, a_k <- clip(g * a_k + inj_k + noise, -1, +1), where g is
// G_ON (2 dB small-signal loop gain) while att2_on is high and G_OFF
// (-20 dB) otherwise, and inj_k the coupling injected during the previous
// trip. The ADC code for the slot is 128 + 100 * a/(|a| + 0.002) plus
// +/-NOISE_CODE of noise, high for an in-phase pulse and low for an
// out-of-phase one. CLK_INJ clocks into every slot the model reads
// phase_sel and att1_code and adds a coupling pulse of amplitude
// 0.30 * 10^(-code/40) (0 deg: positive, 180 deg: negative) to the pulse
// LAG slots behind the one at the detector; the largest code (63) is taken
// as full isolation, no pulse. The gain, noise and the
// non-inverting injection path are modelling choices, not measured data.
module sawim_ring_model #(
  parameter int  NSLOT      = 58,
  parameter int  LAG        = 8,
  parameter int  CLK_INJ    = 5,
  parameter real G_ON       = 1.2589,   // +2 dB per round trip
  parameter real G_OFF      = 0.1,      // -20 dB per round trip
  parameter real NOISE_AMP  = 0.0005,
  parameter int  NOISE_CODE = 8
) (
  input  logic       clk,
  input  logic       rf_switch,
  input  logic       phase_sel,
  input  logic [5:0] att1_code,
  input  logic       att2_on,
  output logic [7:0] adc_data
);

  real amp [NSLOT];
  real inj [NSLOT];
  int  ptr = 0;
  int  clk_in_slot = 0;
  logic sw_q = 1'b1;

  function automatic real urand_sym(real scale);
    return scale * ((real'($urandom_range(20000)) / 10000.0) - 1.0);
  endfunction

  function automatic logic [7:0] adc_code(real a);
    real v;
    int  c;
    v = 128.0 + 100.0 * a / ((a < 0.0 ? -a : a) + 0.002);
    c = int'(v) + $urandom_range(2 * NOISE_CODE) - NOISE_CODE;
    return 8'(c < 0 ? 0 : c > 255 ? 255 : c);
  endfunction

  initial begin
    for (int k = 0; k < NSLOT; k++) begin
      amp[k] = urand_sym(NOISE_AMP);
      inj[k] = 0.0;
    end
    adc_data = adc_code(amp[0]);
  end

  real x;
  int  q;
  always @(posedge clk) begin
    sw_q <= rf_switch;
    if (rf_switch && !sw_q) begin
      ptr = (ptr + 1) % NSLOT;
      clk_in_slot = 0;
      x = (att2_on ? G_ON : G_OFF) * amp[ptr] + inj[ptr] + urand_sym(NOISE_AMP);
      amp[ptr] = (x > 1.0) ? 1.0 : (x < -1.0) ? -1.0 : x;
      inj[ptr] = 0.0;
      adc_data <= adc_code(amp[ptr]);
    end else begin
      clk_in_slot++;
      if (clk_in_slot == CLK_INJ) begin
        q = (ptr - LAG + NSLOT) % NSLOT;
        if (att1_code != 6'h3f)
          inj[q] += (phase_sel ? -1.0 : 1.0) * 0.30 * (10.0 ** (-real'(att1_code) / 40.0));
      end
    end
  end

  // amplitude of pulse k, for the testbench's traces
  function automatic real amplitude(int k);
    return amp[k];
  endfunction

endmodule
