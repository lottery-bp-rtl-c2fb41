// v2c_conv: V2C converter, VN layout -> CN layout.
//
// The VNU array writes, per cycle, one group of 2*ARRAY VNs: both V2C messages
// (alpha0 for the VN's bank-0/2/5 edge, alpha1 for its bank-1/3/4 edge) and
// the hard decision. The converter keeps them in a VN-layout buffer and, when
// asked for CN row rd_row, gathers for each of the ARRAY CNs and six banks the
// message of the right VN and edge, again with the closed-form CN-to-VN
// mapping instead of a stored matrix. Along with the messages it returns the
// hard decisions of the same VNs and a mask of which bank entries exist, which
// the syndrome estimator uses. Messages of missing entries are stored as zero,
// as in the paper.
//
// Like c2v_conv it buffers a whole frame rather than the short delay lines the
// paper implies; that is this design's simplification.
//
// Timing: wr_* stored at the clock edge; rd_en/rd_row -> out_* one cycle later
// with out_valid and out_row.
module v2c_conv
  import lbp_pkg::*;
#(
  parameter int D_MAX = 27,
  parameter int ARRAY = 256,
  parameter int NV    = num_vn(D_MAX),
  parameter int G     = (NV + 2*ARRAY - 1) / (2*ARRAY),
  parameter int ROWS  = (num_cn(D_MAX) + ARRAY - 1) / ARRAY,
  parameter int RW    = $clog2(ROWS + 1),
  parameter int GW    = $clog2(G + 1)
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           is_z,
  input  logic [5:0]     code_d,
  input  logic           wr_en,
  input  logic [GW-1:0]  wr_grp,
  input  msg_t           wr_a0 [2*ARRAY],
  input  msg_t           wr_a1 [2*ARRAY],
  input  logic           wr_e  [2*ARRAY],
  input  logic           rd_en,
  input  logic [RW-1:0]  rd_row,
  output logic           out_valid,
  output logic [RW-1:0]  out_row,
  output msg_t           out_alpha [NBANK][ARRAY],
  output logic           out_e     [NBANK][ARRAY],
  output logic           out_mask  [NBANK][ARRAY]
);

  msg_t buf0 [G*2*ARRAY];
  msg_t buf1 [G*2*ARRAY];
  logic ebuf [G*2*ARRAY];

  always_ff @(posedge clk)
    if (wr_en)
      for (int k = 0; k < 2*ARRAY; k++) begin
        buf0[int'(wr_grp)*2*ARRAY + k] <= wr_a0[k];
        buf1[int'(wr_grp)*2*ARRAY + k] <= wr_a1[k];
        ebuf[int'(wr_grp)*2*ARRAY + k] <= wr_e[k];
      end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_row   <= '0;
    end else begin
      out_valid <= rd_en;
      out_row   <= rd_row;
    end

  always_ff @(posedge clk)
    if (rd_en)
      for (int b = 0; b < NBANK; b++)
        for (int k = 0; k < ARRAY; k++) begin
          vn_ref_t r;
          r = cn_vn(is_z, int'(code_d), int'(rd_row)*ARRAY + k, b);
          if (r.valid && int'(r.idx) < G*2*ARRAY) begin
            out_alpha[b][k] <= bank_slot(b) ? buf1[r.idx] : buf0[r.idx];
            out_e[b][k]     <= ebuf[r.idx];
            out_mask[b][k]  <= 1'b1;
          end else begin
            out_alpha[b][k] <= '0;
            out_e[b][k]     <= 1'b0;
            out_mask[b][k]  <= 1'b0;
          end
        end

endmodule
