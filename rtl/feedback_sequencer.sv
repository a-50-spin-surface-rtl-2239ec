// feedback_sequencer -- schedules the coupling pulses onto the ring.
//
// Coupling pulses are injected by a second coupler that sits fb_lag slots
// downstream of the detector tap, so while the pulse of slot m is at the
// detector the injector sees pulse (m - fb_lag) mod NSLOT. One slot ahead,
// at the first clock of slot m, this block works out the pulse the injector
// will see during slot m+1 and, if it is one of the NSPIN spins, requests
// row i of the coupling matrix; the row, the local field and the encoded
// phase/attenuator controls come back a few clocks later. On the last
// clock of slot m it loads them into the phase-shifter and attenuator
// outputs, which then hold for the whole of slot m+1. The spare pulses
// (indices NSPIN..NSLOT-1) get no coupling: the attenuator is set to its
// largest code and the phase to 0. The paper reserves 8 spare pulses as
// delay for measurement and feedback; the programmable lag (reset value
// FB_LAG_DEFAULT), the one-slot look-ahead and holding the controls for a
// whole slot are this design's choices. While fb_enable is low (the loop
// amplification is off between runs) every pulse is left uncoupled, so
// the ring decays to thermal noise and the next run starts afresh; this
// gating is also this design's choice.
//
// Timing: rd_en is a one-clock strobe on the second clock of a slot; the
// encoded result must return before the slot's last clock (an assertion
// checks this). Outputs change on the clock edge that starts a new slot.
module feedback_sequencer #(
  parameter int unsigned NSPIN        = sawim_pkg::NSPIN,
  parameter int unsigned NSLOT        = sawim_pkg::NSLOT,
  parameter int unsigned ATT_W        = sawim_pkg::ATT_W
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic [$clog2(NSLOT)-1:0] slot,
  input  logic                     slot_start,
  input  logic                     slot_last,
  input  logic [5:0]               fb_lag,
  input  logic                     fb_enable,
  output logic                     rd_en,
  output logic [$clog2(NSPIN)-1:0] rd_row,
  input  logic                     enc_valid,
  input  logic                     enc_phase,
  input  logic [ATT_W-1:0]         enc_att,
  output logic                     phase_sel,
  output logic [ATT_W-1:0]         att_code,
  output logic [$clog2(NSLOT)-1:0] fb_target,
  output logic                     fb_active
);

  localparam int unsigned SW = $clog2(NSLOT);
  localparam int unsigned IW = $clog2(NSPIN);
  localparam logic [ATT_W-1:0] ATT_OFF = '1;

  // (slot + 1 - fb_lag) mod NSLOT, for fb_lag < NSLOT
  logic [SW+1:0] t_wide;
  logic [SW-1:0] t_next;

  always_comb begin
    t_wide = (SW+2)'(slot) + (SW+2)'(1) + (SW+2)'(NSLOT) - (SW+2)'(fb_lag);
    if (t_wide >= (SW+2)'(2 * NSLOT))  t_wide = t_wide - (SW+2)'(2 * NSLOT);
    else if (t_wide >= (SW+2)'(NSLOT)) t_wide = t_wide - (SW+2)'(NSLOT);
    t_next = SW'(t_wide);
  end

  logic [SW-1:0]    target;
  logic             pend_ok, pend_phase;
  logic [ATT_W-1:0] pend_att;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_en      <= 1'b0;
      rd_row     <= '0;
      target     <= '0;
      pend_ok    <= 1'b0;
      pend_phase <= 1'b0;
      pend_att   <= ATT_OFF;
      phase_sel  <= 1'b0;
      att_code   <= ATT_OFF;
      fb_target  <= '0;
      fb_active  <= 1'b0;
    end else begin
      rd_en <= 1'b0;
      if (slot_start) begin
        target  <= t_next;
        pend_ok <= 1'b0;
        if (t_next < SW'(NSPIN)) begin
          rd_en  <= 1'b1;
          rd_row <= IW'(t_next);
        end
      end
      if (enc_valid) begin
        pend_ok    <= 1'b1;
        pend_phase <= enc_phase;
        pend_att   <= enc_att;
      end
      if (slot_last) begin
        fb_target <= target;
        if (target < SW'(NSPIN) && pend_ok && fb_enable) begin
          phase_sel <= pend_phase;
          att_code  <= pend_att;
          fb_active <= 1'b1;
        end else begin
          phase_sel <= 1'b0;
          att_code  <= ATT_OFF;
          fb_active <= 1'b0;
        end
      end
    end
  end

  // the coupling of a spin must be ready by the end of the slot before it
  // is injected, and the lag must name a slot of the ring
  always_ff @(posedge clk) begin
    if (rst_n && slot_last && target < SW'(NSPIN))
      assert (pend_ok) else $error("feedback_sequencer: coupling for pulse %0d late", target);
    if (rst_n)
      assert (32'(fb_lag) < NSLOT) else $error("feedback_sequencer: fb_lag %0d outside the ring", fb_lag);
  end

endmodule
