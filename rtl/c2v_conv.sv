// c2v_conv: C2V converter, CN layout -> VN layout.
//
// The CN memory streams one row (ARRAY CNs x six banks) per cycle. For every
// message the converter works out, on the fly, which VN it belongs to with the
// closed-form CN-to-VN mapping (lbp_pkg::cn_vn, the paper's table), so the
// parity-check matrix is never stored. Each VN of the surface-code space-time
// graph has at most two CNs, one reached through bank 0/2/5 and one through
// bank 1/3/4, so the message is parked in slot 0 or 1 of that VN's entry in a
// VN-layout buffer until the VNU array reads the VN. The paper buffers only
// until the VN is "mapped" to the VNU and overlaps the two; this design holds
// a whole frame (one entry per VN) and lets the VNU read it after the row
// stream ends, which is simpler but costs one extra pass of latency.
//
// A clear sweep (clr_en, 2*ARRAY VNs per cycle at group clr_grp) zeroes the
// buffer at the start of a decode, so slots without an edge read as zero.
//
// Timing: in_valid/in_row/in_beta are stored at the clock edge; the read
// port (rd_grp -> rd_b0/rd_b1, 2*ARRAY VNs) is combinational.
module c2v_conv
  import lbp_pkg::*;
#(
  parameter int D_MAX = 27,
  parameter int ARRAY = 256,
  parameter int NV    = num_vn(D_MAX),
  parameter int G     = (NV + 2*ARRAY - 1) / (2*ARRAY),   // VN groups
  parameter int ROWS  = (num_cn(D_MAX) + ARRAY - 1) / ARRAY,
  parameter int RW    = $clog2(ROWS + 1),
  parameter int GW    = $clog2(G + 1)
) (
  input  logic           clk,
  input  logic           is_z,
  input  logic [5:0]     code_d,
  input  logic           clr_en,
  input  logic [GW-1:0]  clr_grp,
  input  logic           in_valid,
  input  logic [RW-1:0]  in_row,
  input  msg_t           in_beta [NBANK][ARRAY],
  input  logic [GW-1:0]  rd_grp,
  output msg_t           rd_b0 [2*ARRAY],
  output msg_t           rd_b1 [2*ARRAY]
);

  msg_t buf0 [G*2*ARRAY];
  msg_t buf1 [G*2*ARRAY];

  always_ff @(posedge clk) begin
    if (clr_en) begin
      for (int k = 0; k < 2*ARRAY; k++) begin
        buf0[int'(clr_grp)*2*ARRAY + k] <= '0;
        buf1[int'(clr_grp)*2*ARRAY + k] <= '0;
      end
    end else if (in_valid) begin
      for (int b = 0; b < NBANK; b++)
        for (int k = 0; k < ARRAY; k++) begin
          vn_ref_t r;
          r = cn_vn(is_z, int'(code_d), int'(in_row)*ARRAY + k, b);
          if (r.valid && int'(r.idx) < G*2*ARRAY) begin
            if (bank_slot(b)) buf1[r.idx] <= in_beta[b][k];
            else              buf0[r.idx] <= in_beta[b][k];
          end
        end
    end
  end

  always_comb
    for (int k = 0; k < 2*ARRAY; k++) begin
      rd_b0[k] = buf0[int'(rd_grp)*2*ARRAY + k];
      rd_b1[k] = buf1[int'(rd_grp)*2*ARRAY + k];
    end

endmodule
