// sawim_mfb -- measurement-and-feedback block of a 50-spin time-multiplexed
// surface-acoustic-wave Ising machine.
//
// The analog ring (SAW delay line, phase-sensitive and linear amplifiers,
// two couplers, RF switch, phase shifter and two attenuators) carries 58
// phase-binarised RF pulses per 12 us round trip; 50 are Ising spins. This
// block closes the all-to-all coupling loop around it:
//   slot_timer         slot timebase and RF-switch pulse train
//   spin_detector      ADC codes of the phase detector -> spin vector s
//   feedback_sequencer picks the pulse the injector meets next slot
//   coupling_matrix    row i of J
//   mvm_row            f_i = sum_j J_ij s_j
//   coupling_encoder   c_i = -r f_i -> phase-shifter bit, attenuator code
//   run_controller     10 ms runs, loop amplification off for the first 5%,
//                      solution latched at the end of each run
// The analog parts are outside: adc_data comes from the ADC behind the
// phase detector; rf_switch, phase_sel, att1_code and att2_on drive the
// switch, the phase shifter, Attenuator 1 and Attenuator 2.
//
// Interface: the host writes J one entry per clock (j_we, j_row, j_col,
// j_data), sets cfg (coupling ratio r, detector threshold, detector-to-
// injector lag in slots, injection phase calibration) and raises
// run_enable. Each finished run raises solution_valid for one clock with
// the spin vector in solution (bit i = 1 for s_i = +1).
//
// Timing: one spin decision and one coupling update per 20-clock slot, the
// whole spin vector refreshed and every coupling pulse re-computed from the
// latest spins once per 1160-clock round trip. The coupling of the pulse
// the injector meets in slot m+1 is computed during slot m from the spin
// vector as it stands then. Coupling pulses are only sent while the loop
// amplification is on.
module sawim_mfb #(
  parameter int unsigned NSPIN             = sawim_pkg::NSPIN,
  parameter int unsigned NSLOT             = sawim_pkg::NSLOT,
  parameter int unsigned CLK_PER_SLOT      = sawim_pkg::CLK_PER_SLOT,
  parameter int unsigned RUN_PERIOD_CYCLES = sawim_pkg::RUN_PERIOD_CYCLES,
  parameter int unsigned RUN_OFF_CYCLES    = sawim_pkg::RUN_OFF_CYCLES
) (
  input  logic                                   clk,
  input  logic                                   rst_n,
  // phase-detector ADC
  input  logic [sawim_pkg::ADC_W-1:0]            adc_data,
  // host
  input  sawim_pkg::mfb_cfg_t                    cfg,
  input  logic                                   j_we,
  input  logic [$clog2(NSPIN)-1:0]               j_row,
  input  logic [$clog2(NSPIN)-1:0]               j_col,
  input  logic signed [sawim_pkg::J_W-1:0]       j_data,
  input  logic                                   run_enable,
  // ring controls
  output logic                                   rf_switch,
  output logic                                   phase_sel,
  output logic [sawim_pkg::ATT_W-1:0]            att1_code,
  output logic                                   att2_on,
  // status
  output logic [$clog2(NSLOT)-1:0]               slot,
  output logic [$clog2(NSLOT)-1:0]               fb_target,
  output logic                                   fb_active,
  output logic [NSPIN-1:0]                       spins,
  output logic                                   spin_flip,
  output logic                                   clip_hi,
  output logic                                   clip_lo,
  output logic                                   run_start,
  output logic [NSPIN-1:0]                       solution,
  output logic                                   solution_valid,
  output logic [31:0]                            run_count
);

  import sawim_pkg::*;

  logic [$clog2(CLK_PER_SLOT)-1:0] phase;
  logic                            slot_start, slot_last, trip_start;

  slot_timer #(.NSLOT(NSLOT), .CLK_PER_SLOT(CLK_PER_SLOT), .PULSE_CYCLES(CLK_PER_SLOT / 2)) u_timer (
    .clk, .rst_n, .slot, .phase, .slot_start, .slot_last, .trip_start, .rf_switch);

  logic                     spin_valid;
  logic [$clog2(NSLOT)-1:0] spin_slot;

  spin_detector #(.NSPIN(NSPIN), .NSLOT(NSLOT), .CLK_PER_SLOT(CLK_PER_SLOT)) u_det (
    .clk, .rst_n, .adc_data, .slot, .phase, .threshold(cfg.threshold),
    .spins, .spin_valid, .spin_slot, .spin_flip);

  logic                      rd_en, rd_valid;
  logic [$clog2(NSPIN)-1:0]  rd_row;
  logic [NSPIN-1:0][J_W-1:0] jrow;

  coupling_matrix #(.NSPIN(NSPIN)) u_jmem (
    .clk, .rst_n, .we(j_we), .wrow(j_row), .wcol(j_col), .wdata(j_data),
    .re(rd_en), .rrow(rd_row), .rdata(jrow), .rvalid(rd_valid));

  logic                    sum_valid;
  logic signed [SUM_W-1:0] field;

  mvm_row #(.NSPIN(NSPIN)) u_mvm (
    .clk, .rst_n, .in_valid(rd_valid), .jrow, .spins, .out_valid(sum_valid), .sum(field));

  logic             enc_valid, enc_phase, enc_zero;
  logic [ATT_W-1:0] enc_att;
  logic             enc_hi, enc_lo;

  coupling_encoder u_enc (
    .clk, .rst_n, .in_valid(sum_valid), .sum(field), .r_coef(cfg.r_coef),
    .phase_invert(cfg.phase_invert), .out_valid(enc_valid), .phase_sel(enc_phase),
    .att_code(enc_att), .clip_hi(enc_hi), .clip_lo(enc_lo), .zero(enc_zero));

  always_comb begin
    clip_hi = enc_valid && enc_hi;
    clip_lo = enc_valid && enc_lo;
  end

  feedback_sequencer #(.NSPIN(NSPIN), .NSLOT(NSLOT)) u_seq (
    .clk, .rst_n, .slot, .slot_start, .slot_last, .fb_lag(cfg.fb_lag), .fb_enable(att2_on),
    .rd_en, .rd_row, .enc_valid, .enc_phase, .enc_att,
    .phase_sel, .att_code(att1_code), .fb_target, .fb_active);

  run_controller #(.NSPIN(NSPIN), .RUN_PERIOD_CYCLES(RUN_PERIOD_CYCLES),
                   .RUN_OFF_CYCLES(RUN_OFF_CYCLES)) u_run (
    .clk, .rst_n, .run_enable, .spins, .loop_on(att2_on), .run_start,
    .run_done(solution_valid), .solution, .run_count);

endmodule
