// vnu_array: variable-node update array, 2*ARRAY VNs per cycle.
//
// For each VN with incoming C2V messages b0, b1 (zero where the VN has no such
// edge) and prior LLR mu it forms
//   lambda = mu + b0 + b1            (posterior LLR, Alg. 1 line 8)
//   alpha0 = lambda - b0, alpha1 = lambda - b1   (V2C messages, line 6)
//   e_hat  = (lambda <= 0)           (hard decision, line 9)
// Sums are formed at full width and saturated once to the 8-bit message
// range (this design's choice; the paper only names the format Int3.4). The
// array is twice as wide as the CNU array because every VN has at most two
// CNs while every CN has up to six VNs, as the paper argues.
// With init set the C2V inputs are ignored and alpha = lambda = mu, the
// initialization iteration. Purely combinational.
module vnu_array
  import lbp_pkg::*;
#(
  parameter int ARRAY = 256
) (
  input  logic  init,
  input  msg_t  mu,
  input  msg_t  b0     [2*ARRAY],
  input  msg_t  b1     [2*ARRAY],
  output msg_t  lambda [2*ARRAY],
  output msg_t  alpha0 [2*ARRAY],
  output msg_t  alpha1 [2*ARRAY],
  output logic  e_hat  [2*ARRAY]
);

  always_comb
    for (int k = 0; k < 2*ARRAY; k++) begin
      logic signed [15:0] x0, x1, s;
      x0 = init ? 16'sd0 : 16'(b0[k]);
      x1 = init ? 16'sd0 : 16'(b1[k]);
      s  = 16'(mu) + x0 + x1;
      lambda[k] = sat_msg(s);
      alpha0[k] = sat_msg(s - x0);
      alpha1[k] = sat_msg(s - x1);
      e_hat[k]  = (s <= 0);
    end

endmodule
