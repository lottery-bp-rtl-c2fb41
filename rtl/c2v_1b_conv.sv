// c2v_1b_conv: 1-bit C2V converter with the "VN un synd" register.
//
// Converts the unmatch bits of the CNs from CN layout to VN layout: for every
// VN it records, per edge slot, whether the CN on that edge is unsatisfied, so
// the number of unsatisfied CNs of a VN (0..2) is the sum of its two slot bits.
// This is the count the VN selector maximizes. The routing is the same
// closed-form CN-to-VN mapping as in the message converters. Slots without an
// edge are zeroed by the clear sweep (clr_en, 2*ARRAY VNs per cycle) at the
// start of a decode and are never written afterwards.
//
// Timing: writes at the clock edge; the six-entry read port is combinational.
//
// The unit and its purpose follow the paper's 1-bit C2V converter; storing
// one bit per edge slot (rather than a counter) is this design's choice.
module c2v_1b_conv
  import lbp_pkg::*;
#(
  parameter int D_MAX = 27,
  parameter int ARRAY = 256,
  parameter int NV    = num_vn(D_MAX),
  parameter int G     = (NV + 2*ARRAY - 1) / (2*ARRAY),
  parameter int ROWS  = (num_cn(D_MAX) + ARRAY - 1) / ARRAY,
  parameter int RW    = $clog2(ROWS + 1),
  parameter int GW    = $clog2(G + 1),
  parameter int VW    = $clog2(G*2*ARRAY)
) (
  input  logic           clk,
  input  logic           is_z,
  input  logic [5:0]     code_d,
  input  logic           clr_en,
  input  logic [GW-1:0]  clr_grp,
  input  logic           in_valid,
  input  logic [RW-1:0]  in_row,
  input  logic           in_unmatch [ARRAY],
  input  logic [VW-1:0]  rd_idx [NBANK],
  output logic [1:0]     rd_cnt [NBANK]
);

  logic u0 [G*2*ARRAY];
  logic u1 [G*2*ARRAY];

  always_ff @(posedge clk) begin
    if (clr_en) begin
      for (int k = 0; k < 2*ARRAY; k++) begin
        u0[int'(clr_grp)*2*ARRAY + k] <= 1'b0;
        u1[int'(clr_grp)*2*ARRAY + k] <= 1'b0;
      end
    end else if (in_valid) begin
      for (int b = 0; b < NBANK; b++)
        for (int k = 0; k < ARRAY; k++) begin
          vn_ref_t r;
          r = cn_vn(is_z, int'(code_d), int'(in_row)*ARRAY + k, b);
          if (r.valid && int'(r.idx) < G*2*ARRAY) begin
            if (bank_slot(b)) u1[r.idx] <= in_unmatch[k];
            else              u0[r.idx] <= in_unmatch[k];
          end
        end
    end
  end

  always_comb
    for (int b = 0; b < NBANK; b++)
      rd_cnt[b] = 2'(u0[rd_idx[b]]) + 2'(u1[rd_idx[b]]);

endmodule
