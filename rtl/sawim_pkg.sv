// sawim_pkg -- constants and types shared by the measurement-and-feedback
// (MFB) logic of a 50-spin time-multiplexed surface-acoustic-wave Ising
// machine.
//
// The machine keeps 58 RF pulses circulating in a 12 us SAW delay-line ring;
// 50 of them are Ising spins and 8 are spare pulses that only give the
// feedback electronics time. The spin count, the pulse count, the 50% duty
// pulse train, the 8-bit phase-detector ADC, the 2%..30% limits on the
// coupling amplitude and the 10 ms / 95% run period follow the paper that
// describes the machine. The system clock (20 clocks per pulse slot, i.e.
// 96.58 MHz for a 4.829 MHz slot rate), the 6-bit attenuator code with
// 0.5 dB steps, the 4-bit coupling entries and the Q0.16 coupling ratio are
// this design's own choices.
package sawim_pkg;

  // ring organisation
  localparam int unsigned NSPIN        = 50;  // coupled Ising spins
  localparam int unsigned NSLOT        = 58;  // pulses circulating in the ring
  localparam int unsigned CLK_PER_SLOT = 20;  // system clocks per pulse slot
  localparam int unsigned PULSE_CYCLES = 10;  // RF switch on-time (50% duty)

  // converters and coupling arithmetic
  localparam int unsigned ADC_W = 8;          // phase-detector ADC code
  localparam int unsigned ATT_W = 6;          // attenuator code, 0.5 dB/LSB
  localparam int unsigned J_W   = 4;          // signed coupling entry
  localparam int unsigned R_W   = 16;         // coupling ratio r, Q0.16
  localparam int unsigned SUM_W = 10;         // signed local field, +/-400

  // coupling-pulse amplitude limits as Q0.16 fractions of the saturated
  // pulse amplitude: 2% (switching threshold) and 30% (top threshold)
  localparam int unsigned AMP_MIN_Q16 = 1311;
  localparam int unsigned AMP_MAX_Q16 = 19661;

  // run timing: 10 ms period, amplification off for the first 5%
  localparam int unsigned RUN_PERIOD_CYCLES = 965_820;
  localparam int unsigned RUN_OFF_CYCLES    = 48_291;

  // slots between a pulse passing the detector and passing the injector
  localparam int unsigned FB_LAG_DEFAULT = 8;

  // run-time configuration written by the host
  typedef struct packed {
    logic [R_W-1:0]   r_coef;        // coupling ratio r, Q0.16
    logic [ADC_W-1:0] threshold;     // spin decision level on the ADC code
    logic [5:0]       fb_lag;        // detector-to-injector distance, slots
    logic             phase_invert;  // swaps the 0/180 deg phase-shifter states
  } mfb_cfg_t;

endpackage
