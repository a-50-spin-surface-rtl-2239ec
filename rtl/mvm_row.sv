// mvm_row -- one row of the matrix-vector product that gives a spin's
// local field, f_i = sum_j J_ij * s_j.
//
// Spins are +/-1, stored as one bit (1 = +1), so each product is +J_ij or
// -J_ij and the row reduces to a sum of NSPIN signed terms, all added in
// the same clock. The coupling pulse c_i = -r * f_i is formed from the
// result downstream. The paper names the matrix multiplication; doing a
// whole row in one clock (a pulse slot is only 20 clocks, too short for a
// serial multiply-accumulate over 50 terms) is this design's choice. The
// diagonal term is included, as in the paper's sum over all j.
//
// Timing: sum and out_valid are registered one clock after in_valid.
module mvm_row #(
  parameter int unsigned NSPIN = sawim_pkg::NSPIN,
  parameter int unsigned J_W   = sawim_pkg::J_W,
  parameter int unsigned SUM_W = sawim_pkg::SUM_W
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      in_valid,
  input  logic [NSPIN-1:0][J_W-1:0] jrow,
  input  logic [NSPIN-1:0]          spins,
  output logic                      out_valid,
  output logic signed [SUM_W-1:0]   sum
);

  logic signed [SUM_W-1:0] acc;

  always_comb begin
    acc = '0;
    for (int j = 0; j < NSPIN; j++) begin
      if (spins[j]) acc = acc + SUM_W'(signed'(jrow[j]));
      else          acc = acc - SUM_W'(signed'(jrow[j]));
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      sum       <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) sum <= acc;
    end
  end

  initial begin
    assert ((NSPIN << (J_W - 1)) < (1 << (SUM_W - 1)))
      else $error("mvm_row: SUM_W too narrow for NSPIN terms");
  end

endmodule
