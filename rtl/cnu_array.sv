// cnu_array: normalized min-sum check-node update, ARRAY CNs per cycle.
//
// For each CN and each of its (up to six) existing entries v the C2V message is
//   beta_v = (-1)^s_c * (1 - 2^-(i+1)) * prod_{v'!=v} sign(alpha_v')
//                                      * min_{v'!=v} |alpha_v'|
// (Alg. 1 line 7). It is computed the usual way: the two smallest magnitudes,
// the position of the smallest and the parity of all signs. The scaling
// 1 - 2^-(i+1) is a subtraction of the magnitude shifted right by i+1.
// Entries whose mask bit is 0 (missing connections at the lattice boundary)
// neither contribute nor receive a message; the paper stores them as zero.
// A zero alpha counts as positive. Purely combinational.
module cnu_array
  import lbp_pkg::*;
#(
  parameter int ARRAY = 256,
  parameter int IW    = 9
) (
  input  logic [IW-1:0] iter,
  input  msg_t          alpha [NBANK][ARRAY],
  input  logic          mask  [NBANK][ARRAY],
  input  logic          synd  [ARRAY],
  output msg_t          beta  [NBANK][ARRAY]
);

  always_comb
    for (int k = 0; k < ARRAY; k++) begin
      logic [MSG_W-1:0] min1, min2, a, mag;
      int               arg;
      logic             par;
      a    = '0;
      mag  = '0;
      min1 = MSG_W'(MSG_MAX);
      min2 = MSG_W'(MSG_MAX);
      arg  = 0;
      par  = synd[k];
      for (int b = 0; b < NBANK; b++)
        if (mask[b][k]) begin
          a   = abs_msg(alpha[b][k]);
          par = par ^ alpha[b][k][MSG_W-1];
          if (a < min1) begin
            min2 = min1;
            min1 = a;
            arg  = b;
          end else if (a < min2) begin
            min2 = a;
          end
        end
      for (int b = 0; b < NBANK; b++) begin
        mag = (b == arg) ? min2 : min1;
        if (int'(iter) + 1 < MSG_W) mag = mag - (mag >> (int'(iter) + 1));
        if (!mask[b][k])
          beta[b][k] = '0;
        else if (par ^ alpha[b][k][MSG_W-1])
          beta[b][k] = -msg_t'(mag);
        else
          beta[b][k] = msg_t'(mag);
      end
    end

endmodule
