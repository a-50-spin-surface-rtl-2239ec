// run_controller -- sequences consecutive computations of the Ising machine.
//
// Each run lasts RUN_PERIOD_CYCLES (10 ms). For the first RUN_OFF_CYCLES
// (5%) the loop amplification is switched off through Attenuator 2
// (loop_on = 0), so the circulating pulses and their echoes die out and the
// next run starts from noise; for the remaining 95% the amplification is on
// and the pulses grow, settle into a spin configuration and freeze. On the
// last clock of the run the spin vector is latched as that run's solution
// (solution, run_done strobe, run_count incremented). The 10 ms period and
// 95% duty follow the paper; putting the off-part first and latching the
// spins at the end of the run are this design's choices.
//
// Timing: run_enable = 0 holds the counter at zero with the loop off; runs
// then repeat back to back while it is 1. run_start strobes on the clock
// loop_on rises, run_done on the clock after the last clock of a run.
module run_controller #(
  parameter int unsigned NSPIN             = sawim_pkg::NSPIN,
  parameter int unsigned RUN_PERIOD_CYCLES = sawim_pkg::RUN_PERIOD_CYCLES,
  parameter int unsigned RUN_OFF_CYCLES    = sawim_pkg::RUN_OFF_CYCLES
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             run_enable,
  input  logic [NSPIN-1:0] spins,
  output logic             loop_on,
  output logic             run_start,
  output logic             run_done,
  output logic [NSPIN-1:0] solution,
  output logic [31:0]      run_count
);

  localparam int unsigned CW = $clog2(RUN_PERIOD_CYCLES);

  logic [CW-1:0] cnt;
  logic          last;

  always_comb last = (cnt == CW'(RUN_PERIOD_CYCLES - 1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt       <= '0;
      loop_on   <= 1'b0;
      run_start <= 1'b0;
      run_done  <= 1'b0;
      solution  <= '0;
      run_count <= '0;
    end else begin
      run_start <= 1'b0;
      run_done  <= 1'b0;
      if (!run_enable) begin
        cnt     <= '0;
        loop_on <= 1'b0;
      end else begin
        cnt <= last ? '0 : cnt + 1'b1;
        if (cnt == CW'(RUN_OFF_CYCLES - 1)) begin
          loop_on   <= 1'b1;
          run_start <= 1'b1;
        end
        if (last) begin
          loop_on   <= 1'b0;
          run_done  <= 1'b1;
          solution  <= spins;
          run_count <= run_count + 1'b1;
        end
      end
    end
  end

  initial begin
    assert (RUN_OFF_CYCLES > 0 && RUN_OFF_CYCLES < RUN_PERIOD_CYCLES)
      else $error("run_controller: off-time must lie inside the run period");
  end

endmodule
