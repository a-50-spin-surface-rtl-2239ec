// coupling_matrix_tb -- self-checking test of the J-matrix store at its
// default 50 x 50 size. The host port writes a random matrix (every entry
// once, then a few overwrites), and every row is read back and compared
// with a copy kept in the testbench, checking the one-clock read latency.
// A read and a write in the same clock must return the old row.
module coupling_matrix_tb;
  localparam int NSPIN = 50, J_W = 4;
  logic clk = 1'b0, rst_n = 1'b0;
  logic we = 1'b0, re = 1'b0;
  logic [5:0] wrow = '0, wcol = '0, rrow = '0;
  logic signed [J_W-1:0] wdata = '0;
  logic [NSPIN-1:0][J_W-1:0] rdata; logic rvalid;
  int checks = 0, failures = 0;

  coupling_matrix dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  logic [J_W-1:0] model [NSPIN][NSPIN];

  task automatic wr(input int r, input int c, input logic [J_W-1:0] d);
    @(negedge clk); we = 1'b1; wrow = 6'(r); wcol = 6'(c); wdata = d; model[r][c] = d;
    @(negedge clk); we = 1'b0;
  endtask

  task automatic rd_check(input int r);
    @(negedge clk); re = 1'b1; rrow = 6'(r);
    @(negedge clk); re = 1'b0;
    check(rvalid, "rvalid one clock after re");
    for (int c = 0; c < NSPIN; c++) check(rdata[c] == model[r][c], $sformatf("J[%0d][%0d]", r, c));
    @(negedge clk);
    check(!rvalid, "rvalid drops");
  endtask

  initial begin
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    for (int r = 0; r < NSPIN; r++)
      for (int c = 0; c < NSPIN; c++) wr(r, c, J_W'($urandom));
    for (int r = 0; r < NSPIN; r++) rd_check(r);
    for (int k = 0; k < 200; k++) wr($urandom_range(NSPIN - 1), $urandom_range(NSPIN - 1), J_W'($urandom));
    for (int r = NSPIN - 1; r >= 0; r--) rd_check(r);
    // read-during-write returns the row as it was
    @(negedge clk); re = 1'b1; rrow = 6'd7; we = 1'b1; wrow = 6'd7; wcol = 6'd3; wdata = ~model[7][3];
    @(negedge clk); re = 1'b0; we = 1'b0;
    check(rdata[3] == model[7][3], "read-during-write gives old entry");
    model[7][3] = ~model[7][3];
    rd_check(7);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
