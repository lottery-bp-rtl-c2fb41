// sign_flip: lottery sign flip on the V2C messages of one CN row.
//
// The lottery flips the sign of the selected VN's posterior LLR (Alg. 3 line
// 5). The VN memory holds V2C messages alpha = lambda - beta, so flipping
// lambda turns every message of that VN into -lambda - beta = alpha - 2*lambda.
// The unit regenerates the VN index of each of the row's 6*ARRAY entries with
// the CN-to-VN mapping, masks the entries of the selected VN and rewrites
// them (saturated), leaving all others untouched. It also outputs the mask of
// existing entries, which the CNU needs to ignore missing connections.
// Purely combinational.
//
// Flipping the selected VN's sign follows the paper; applying it to the
// stored V2C messages as alpha - 2*lambda while the row is read is this
// design's way of doing it.
module sign_flip
  import lbp_pkg::*;
#(
  parameter int D_MAX = 27,
  parameter int ARRAY = 256,
  parameter int NV    = num_vn(D_MAX),
  parameter int G     = (NV + 2*ARRAY - 1) / (2*ARRAY),
  parameter int VW    = $clog2(G*2*ARRAY),
  parameter int ROWS  = (num_cn(D_MAX) + ARRAY - 1) / ARRAY,
  parameter int RW    = $clog2(ROWS + 1)
) (
  input  logic           is_z,
  input  logic [5:0]     code_d,
  input  logic [RW-1:0]  row,
  input  logic           flip_en,
  input  logic [VW-1:0]  vstar,
  input  msg_t           lstar,
  input  msg_t           alpha_in  [NBANK][ARRAY],
  output msg_t           alpha_out [NBANK][ARRAY],
  output logic           mask      [NBANK][ARRAY],
  output logic           flipped
);

  always_comb begin
    flipped = 1'b0;
    for (int b = 0; b < NBANK; b++)
      for (int k = 0; k < ARRAY; k++) begin
        vn_ref_t r;
        r = cn_vn(is_z, int'(code_d), int'(row)*ARRAY + k, b);
        mask[b][k]      = r.valid;
        alpha_out[b][k] = alpha_in[b][k];
        if (flip_en && r.valid && r.idx == 32'(vstar)) begin
          alpha_out[b][k] = sat_msg(16'(alpha_in[b][k]) - 16'(lstar) - 16'(lstar));
          flipped = 1'b1;
        end
      end
  end

endmodule
