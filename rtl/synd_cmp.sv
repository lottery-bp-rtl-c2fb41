// synd_cmp: syndrome comparison for one CN row.
//
// Compares the estimated syndrome with the measured one for the ARRAY CNs of a
// row. cn_valid masks CNs past the end of the code (the last row of the memory
// is only partly used). Outputs the unmatch bits, which feed the lottery, and
// their count, which feeds early termination. Combinational.
//
// The comparison is the paper's; the cn_valid mask is this design's choice
// for the partly used last row.
module synd_cmp #(
  parameter int ARRAY = 256,
  parameter int CW    = $clog2(ARRAY + 1)
) (
  input  logic          s_hat    [ARRAY],
  input  logic          s_meas   [ARRAY],
  input  logic          cn_valid [ARRAY],
  output logic          unmatch  [ARRAY],
  output logic [CW-1:0] n_unmatch
);

  always_comb begin
    n_unmatch = '0;
    for (int k = 0; k < ARRAY; k++) begin
      unmatch[k] = cn_valid[k] & (s_hat[k] ^ s_meas[k]);
      n_unmatch  = n_unmatch + CW'(unmatch[k]);
    end
  end

endmodule
