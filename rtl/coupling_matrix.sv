// coupling_matrix -- storage for the NSPIN x NSPIN coupling matrix J_ij.
//
// The machine is reprogrammed for a new problem by rewriting this matrix
// from the host, one signed J_W-bit entry per clock (we, wrow, wcol, wdata).
// The feedback path reads a whole row i at a time (re, rrow) because the
// local field of spin i needs every J_ij at once; rdata holds the row one
// clock after the request, flagged by rvalid. Entries are not cleared by
// reset: the host writes every entry before the first run. The paper states
// only that the matrix is arbitrary and programmable in the FPGA; the
// entry-wide write port, the row-wide read and the entry width are this
// design's choices.
module coupling_matrix #(
  parameter int unsigned NSPIN = sawim_pkg::NSPIN,
  parameter int unsigned J_W   = sawim_pkg::J_W
) (
  input  logic                            clk,
  input  logic                            rst_n,
  input  logic                            we,
  input  logic [$clog2(NSPIN)-1:0]        wrow,
  input  logic [$clog2(NSPIN)-1:0]        wcol,
  input  logic signed [J_W-1:0]           wdata,
  input  logic                            re,
  input  logic [$clog2(NSPIN)-1:0]        rrow,
  output logic [NSPIN-1:0][J_W-1:0]       rdata,
  output logic                            rvalid
);

  logic [NSPIN-1:0][J_W-1:0] mem [NSPIN];

  always_ff @(posedge clk) begin
    if (we) mem[wrow][wcol] <= wdata;
    if (re) rdata <= mem[rrow];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) rvalid <= 1'b0;
    else        rvalid <= re;
  end

  always_ff @(posedge clk) begin
    if (rst_n && we) assert (32'(wrow) < NSPIN && 32'(wcol) < NSPIN)
      else $error("coupling_matrix: write outside the matrix");
    if (rst_n && re) assert (32'(rrow) < NSPIN)
      else $error("coupling_matrix: read outside the matrix");
  end

endmodule
