// coupling_encoder -- converts a spin's local field into the controls of
// its coupling pulse: the 0/180 degree phase-shifter bit and the attenuator
// code.
//
// The paper's feedback rule is c_i = -r * sum_j J_ij s_j, with r the ratio
// between the amplitude injected per unit of coupling and the saturated
// pulse amplitude. The phase shifter takes the sign of c_i and Attenuator 1
// the magnitude. The magnitude is clipped as the paper prescribes: a
// non-zero coupling is raised to at least 2% of the saturated amplitude
// (below that a spin cannot be switched) and cut to at most 30% (above that
// the ring is over-coupled). A zero field gives the largest attenuation and
// phase 0.
//
// Stage 1 forms |c_i| = r*|f| in Q0.16 and clips it. Stage 2 finds the
// attenuator code: the number of 0.5 dB steps below the 30% level, rounded
// to the nearest step, by comparing |c_i| against the step midpoints
// AMP_MAX * 10^(-(k+0.5)/40), k = 0..2^ATT_W-2, which a constant function
// computes at elaboration with integer arithmetic. The 0.5 dB step, the
// 6-bit code, 0 dB meaning the 30% level and r as an unsigned Q0.16 number
// are this design's choices.
//
// phase_invert swaps the two phase-shifter states. The injection path's own
// phase decides whether the literal sign of c_i pushes a spin away from its
// neighbours (as MAX-CUT with J_ij = -1 needs) or towards them; the bit lets
// the host calibrate that. With phase_invert = 0 the output follows the
// paper's formula: phase_sel = 1 (180 deg) when c_i < 0.
//
// Timing: two clocks from in_valid to out_valid; one result per clock.
module coupling_encoder #(
  parameter int unsigned SUM_W       = sawim_pkg::SUM_W,
  parameter int unsigned R_W         = sawim_pkg::R_W,
  parameter int unsigned ATT_W       = sawim_pkg::ATT_W,
  parameter int unsigned AMP_MIN_Q16 = sawim_pkg::AMP_MIN_Q16,
  parameter int unsigned AMP_MAX_Q16 = sawim_pkg::AMP_MAX_Q16
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  input  logic signed [SUM_W-1:0] sum,
  input  logic [R_W-1:0]          r_coef,
  input  logic                    phase_invert,
  output logic                    out_valid,
  output logic                    phase_sel,
  output logic [ATT_W-1:0]        att_code,
  output logic                    clip_hi,
  output logic                    clip_lo,
  output logic                    zero
);

  localparam int unsigned NSTEP = (1 << ATT_W) - 1;   // step midpoints
  localparam int unsigned PW    = R_W + SUM_W;         // product width
  localparam int unsigned MW    = 17;                  // clipped magnitude, Q0.16

  // 10^(-1/40) and 10^(-1/80) in Q0.16
  localparam longint unsigned STEP_Q16 = 61870;
  localparam longint unsigned HALF_Q16 = 63677;

  typedef logic [NSTEP-1:0][MW-1:0] thr_t;

  function automatic thr_t make_thresholds();
    thr_t            t;
    longint unsigned lvl;  // attenuator level k, Q0.32
    lvl = longint'(AMP_MAX_Q16) << 16;
    for (int k = 0; k < NSTEP; k++) begin
      t[k] = MW'(((lvl * HALF_Q16) >> 16) >> 16);
      lvl  = (lvl * STEP_Q16) >> 16;
    end
    return t;
  endfunction

  localparam thr_t THR = make_thresholds();

  // stage 1: magnitude, sign, clipping
  logic [SUM_W-1:0] abs_sum;
  logic [PW-1:0]    prod;
  logic [MW-1:0]    mag_c;
  logic             hi_c, lo_c, zero_c;

  always_comb begin
    abs_sum = sum[SUM_W-1] ? SUM_W'(-sum) : SUM_W'(sum);
    prod    = PW'(r_coef) * PW'(abs_sum);
    zero_c  = (prod == '0);
    hi_c    = !zero_c && (prod > PW'(AMP_MAX_Q16));
    lo_c    = !zero_c && (prod < PW'(AMP_MIN_Q16));
    if (hi_c)      mag_c = MW'(AMP_MAX_Q16);
    else if (lo_c) mag_c = MW'(AMP_MIN_Q16);
    else           mag_c = MW'(prod);
  end

  logic             v1, neg1, zero1, hi1, lo1;
  logic [MW-1:0]    mag1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1 <= 1'b0; neg1 <= 1'b0; zero1 <= 1'b1; hi1 <= 1'b0; lo1 <= 1'b0; mag1 <= '0;
    end else begin
      v1 <= in_valid;
      if (in_valid) begin
        neg1  <= (sum > 0) ^ phase_invert;  // c_i = -r*f_i < 0, calibrated
        zero1 <= zero_c;
        hi1   <= hi_c;
        lo1   <= lo_c;
        mag1  <= mag_c;
      end
    end
  end

  // stage 2: attenuator code
  logic [ATT_W-1:0] code_c;

  always_comb begin
    code_c = '0;
    for (int k = 0; k < NSTEP; k++)
      if (mag1 < THR[k]) code_c = code_c + 1'b1;
    if (zero1) code_c = ATT_W'(NSTEP);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0; phase_sel <= 1'b0; att_code <= ATT_W'(NSTEP);
      clip_hi <= 1'b0; clip_lo <= 1'b0; zero <= 1'b1;
    end else begin
      out_valid <= v1;
      if (v1) begin
        phase_sel <= zero1 ? 1'b0 : neg1;
        att_code  <= code_c;
        clip_hi   <= hi1;
        clip_lo   <= lo1;
        zero      <= zero1;
      end
    end
  end

  initial begin
    assert (AMP_MIN_Q16 > 0 && AMP_MIN_Q16 < AMP_MAX_Q16 && AMP_MAX_Q16 < (1 << 16))
      else $error("coupling_encoder: amplitude limits out of order");
  end

endmodule
