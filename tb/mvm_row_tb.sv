// mvm_row_tb -- self-checking test of the row product f_i = sum_j J_ij s_j
// at its default size (50 terms of 4-bit signed J). Random rows and spin
// vectors, plus the extreme cases (all entries -8 or +7 with all spins
// aligned) are applied back to back; the expected sum is computed in the
// testbench with plain integer arithmetic and checked one clock later.
module mvm_row_tb;
  localparam int NSPIN = 50, J_W = 4, SUM_W = 10;
  logic clk = 1'b0, rst_n = 1'b0;
  logic in_valid = 1'b0;
  logic [NSPIN-1:0][J_W-1:0] jrow = '0;
  logic [NSPIN-1:0] spins = '0;
  logic out_valid; logic signed [SUM_W-1:0] sum;
  int checks = 0, failures = 0;

  mvm_row dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  int expected, prev_expected;
  bit prev_valid = 0;
  initial begin
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    for (int t = 0; t < 1004; t++) begin
      @(negedge clk);
      // result of the previous clock's inputs
      if (prev_valid) begin
        check(out_valid, "out_valid one clock later");
        check(int'(sum) == prev_expected, $sformatf("sum %0d expected %0d", sum, prev_expected));
      end else check(!out_valid, "no valid without input");
      in_valid = (t % 7 != 3);
      for (int j = 0; j < NSPIN; j++) jrow[j] = J_W'($urandom);
      spins = {$urandom, $urandom};
      if (t == 1000) begin jrow = {NSPIN{4'h8}}; spins = '1; end
      if (t == 1001) begin jrow = {NSPIN{4'h8}}; spins = '0; end
      if (t == 1002) begin jrow = {NSPIN{4'h7}}; spins = '0; end
      expected = 0;
      for (int j = 0; j < NSPIN; j++)
        expected += (spins[j] ? 1 : -1) * int'(signed'(jrow[j]));
      prev_expected = expected;
      prev_valid = in_valid;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
