// tb_early_term: self-checking test of the early-termination unit.
// Unmatch counts arrive row by row; after eval, converged must pulse one
// cycle later exactly when the total is 0, give_up exactly when the total is
// non-zero and iter + 1 >= max_iter, and next otherwise. clr restarts the sum.
`timescale 1ns/1ps
module tb_early_term;
  localparam int CW = 16, IW = 9;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic clr, row_valid, eval, converged, give_up, next;
  logic [CW-1:0] row_count, total;
  logic [IW-1:0] iter, max_iter;
  int checks = 0, failures = 0;

  early_term #(.CW(CW), .IW(IW)) dut (.*);

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    clr = 0; row_valid = 0; eval = 0; row_count = 0; iter = 0; max_iter = 0;
    repeat (2) @(negedge clk);
    check(!converged && !give_up && !next, "outputs low in reset");
    rst_n = 1'b1;
    for (int t = 0; t < 100; t++) begin
      int sum, rows;
      clr = 1'b1;
      @(negedge clk);
      clr = 1'b0;
      sum = 0;
      rows = 1 + $urandom % 6;
      for (int r = 0; r < rows; r++) begin
        row_valid = 1'b1;
        row_count = (t % 3 == 0) ? '0 : CW'($urandom % 5);
        sum += int'(row_count);
        @(negedge clk);
      end
      row_valid = 1'b0;
      check(int'(total) == sum, $sformatf("total %0d expected %0d", total, sum));
      iter = IW'($urandom % 20);
      max_iter = IW'(1 + $urandom % 20);
      eval = 1'b1;
      @(negedge clk);
      eval = 1'b0;
      check(converged == (sum == 0), "converged");
      check(give_up == (sum != 0 && int'(iter) + 1 >= int'(max_iter)), "give_up");
      check(next == (sum != 0 && int'(iter) + 1 < int'(max_iter)), "next");
      @(negedge clk);
      check(!converged && !give_up && !next, "results are single-cycle pulses");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
