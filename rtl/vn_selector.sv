// vn_selector: VN selector of the lottery (Alg. 3 lines 3-4).
//
// Given the CN chosen by the CN selector it lists the (up to six) VNs of that
// CN through the closed-form CN-to-VN mapping, reads for each the number of
// unsatisfied CNs (from the 1-bit C2V converter) and its posterior LLR (from
// the LLR register), and keeps the VN with the most unsatisfied CNs; a tie is
// broken by the smaller |LLR|, as the paper specifies. A remaining tie goes to
// the lowest bank (this design's choice). The winner's index and LLR are
// handed to the sign-flip unit, which builds the per-entry mask from them.
//
// Timing: cand_* outputs follow sel_cn combinationally; start registers the
// choice, valid the next cycle in flip_valid/vstar/lstar.
module vn_selector
  import lbp_pkg::*;
#(
  parameter int D_MAX = 27,
  parameter int ARRAY = 256,
  parameter int NV    = num_vn(D_MAX),
  parameter int G     = (NV + 2*ARRAY - 1) / (2*ARRAY),
  parameter int VW    = $clog2(G*2*ARRAY),
  parameter int CNW   = $clog2(num_cn(D_MAX) + 1)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            is_z,
  input  logic [5:0]      code_d,
  input  logic            start,
  input  logic            sel_valid,
  input  logic [CNW-1:0]  sel_cn,
  output logic [VW-1:0]   cand_idx   [NBANK],
  output logic            cand_valid [NBANK],
  input  logic [1:0]      cand_cnt   [NBANK],
  input  msg_t            cand_llr   [NBANK],
  output logic            flip_valid,
  output logic [VW-1:0]   vstar,
  output msg_t            lstar
);

  always_comb
    for (int b = 0; b < NBANK; b++) begin
      vn_ref_t r;
      r = cn_vn(is_z, int'(code_d), int'(sel_cn), b);
      cand_valid[b] = r.valid;
      cand_idx[b]   = VW'(r.idx);
    end

  logic            best_ok;
  logic [VW-1:0]   best_idx;
  msg_t            best_llr;
  always_comb begin
    logic [1:0]       bc;
    logic [MSG_W-1:0] ba;
    best_ok  = 1'b0;
    best_idx = '0;
    best_llr = '0;
    bc = '0;
    ba = '0;
    for (int b = 0; b < NBANK; b++)
      if (cand_valid[b]) begin
        if (!best_ok || cand_cnt[b] > bc ||
            (cand_cnt[b] == bc && abs_msg(cand_llr[b]) < ba)) begin
          best_ok  = 1'b1;
          best_idx = cand_idx[b];
          best_llr = cand_llr[b];
          bc       = cand_cnt[b];
          ba       = abs_msg(cand_llr[b]);
        end
      end
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      flip_valid <= 1'b0;
      vstar      <= '0;
      lstar      <= '0;
    end else if (start) begin
      flip_valid <= sel_valid & best_ok;
      vstar      <= best_idx;
      lstar      <= best_llr;
    end

endmodule
