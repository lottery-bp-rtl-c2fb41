// early_term: early termination and maximum-iteration check.
//
// While the syndrome comparison streams CN rows, the number of unmatched CNs
// of each row is accumulated. At the end of the pass (eval) the unit decides:
// all CNs matched -> converged (the hard decisions are the answer); otherwise,
// if this was iteration max_iter-1 -> give_up, which hands the frame to OSD;
// otherwise -> next, run another iteration (Alg. 1 lines 11-14).
//
// Timing: clr zeroes the accumulator; row_valid adds row_count at the clock
// edge; converged/give_up/next are registered one-cycle pulses after eval.
//
// The decision rule is the paper's; max_iter is a run-time input here, and
// counting mismatches row by row is this design's choice.
module early_term #(
  parameter int CW = 16,   // width of the unmatch count
  parameter int IW = 9     // iteration counter width (300 iterations in the paper's runs)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          clr,
  input  logic          row_valid,
  input  logic [CW-1:0] row_count,
  input  logic          eval,
  input  logic [IW-1:0] iter,
  input  logic [IW-1:0] max_iter,
  output logic [CW-1:0] total,
  output logic          converged,
  output logic          give_up,
  output logic          next
);

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      total     <= '0;
      converged <= 1'b0;
      give_up   <= 1'b0;
      next      <= 1'b0;
    end else begin
      converged <= 1'b0;
      give_up   <= 1'b0;
      next      <= 1'b0;
      if (clr)            total <= '0;
      else if (row_valid) total <= total + row_count;
      if (eval) begin
        if (total == '0)                           converged <= 1'b1;
        else if (32'(iter) + 1 >= 32'(max_iter))   give_up   <= 1'b1;
        else                                       next      <= 1'b1;
      end
    end

endmodule
