// synd_est: syndrome estimation for one CN row.
//
// The estimated syndrome bit of a CN is the parity of the hard decisions of
// the VNs it touches, s_hat = e_hat * H^T mod 2 (Alg. 1 line 10). The hard
// decisions arrive already gathered into CN layout (six banks per CN) with a
// mask of which entries exist, so this is an ARRAY-wide masked XOR.
// Combinational.
//
// The function is the paper's; computing it in CN layout during the gather
// pass is this design's choice.
module synd_est
  import lbp_pkg::*;
#(
  parameter int ARRAY = 256
) (
  input  logic e_cn  [NBANK][ARRAY],
  input  logic mask  [NBANK][ARRAY],
  output logic s_hat [ARRAY]
);

  always_comb
    for (int k = 0; k < ARRAY; k++) begin
      s_hat[k] = 1'b0;
      for (int b = 0; b < NBANK; b++)
        s_hat[k] ^= e_cn[b][k] & mask[b][k];
    end

endmodule
