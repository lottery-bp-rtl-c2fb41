// lbp_decoder: the Lottery BP local decoder of PolyQec.
//
// Decodes one d-round space-time surface-code frame (H_X or H_Z, d <= D_MAX)
// with normalized min-sum BP plus the lottery sign flip. The code structure
// is never stored: every unit regenerates the CN-to-VN connections from
// (code_d, is_z) with the closed-form mapping in lbp_pkg.
//
// Schedule of one decode (cycle counts for R = ceil(CNs/ARRAY) CN rows and
// G = ceil(VNs/(2*ARRAY)) VN groups):
//   CLR       G      zero the VN-layout buffers of the converters
//   INIT      G+R+1  VNU with beta = 0 gives alpha = mu, V2C converter writes
//                    the VN memory (iteration 0 initialization)
//   per iteration i:
//   V2C       R+1    read VN memory row, sign flip, CNU, write CN memory
//   C2V       R+1    read CN memory row, C2V converter scatters into VN layout
//   VNU       G      VNU array: LLR register, V2C messages, hard decisions
//   LOTTERY   (i >= LOTTERY_SKIP only) CN selector on the unmatch bits of
//                    iteration i-1, then VN selector with this iteration's
//                    LLRs; the flip is applied in the next V2C pass
//   GATHER    R+1    V2C converter gathers rows into the VN memory; syndrome
//                    estimation and comparison fill the unmatch register and
//                    the 1-bit C2V converter; early termination counts
//   CHECK     2      converged -> done; iteration max_iter-1 -> give up (OSD)
// So an iteration without lottery takes 3R+G+5 cycles. The paper overlaps
// these passes in one V2C and one C2V pipeline; this design runs them one
// after another (see the README for the difference).
//
// Interface: load the measured syndrome with s_wr_* (ARRAY CNs per row, CN
// layout), set code_d/is_z/mu/max_iter, pulse start. done pulses when finished
// with converged or failed; the LLRs and hard decisions of 2*ARRAY VNs can be
// read at group llr_rd_grp. rand_r is sampled when the CN selector starts.
module lbp_decoder
  import lbp_pkg::*;
#(
  parameter int D_MAX        = 27,
  parameter int ARRAY        = 256,
  parameter int LOTTERY_SKIP = 6,
  parameter int IW           = 9,
  parameter int NCN          = num_cn(D_MAX),
  parameter int NV           = num_vn(D_MAX),
  parameter int ROWS         = (NCN + ARRAY - 1) / ARRAY,
  parameter int G            = (NV + 2*ARRAY - 1) / (2*ARRAY),
  parameter int RW           = $clog2(ROWS + 1),
  parameter int GW           = $clog2(G + 1),
  parameter int VW           = $clog2(G*2*ARRAY),
  parameter int CNW          = $clog2(NCN + 1)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              is_z,
  input  logic [5:0]        code_d,
  input  msg_t              mu,
  input  logic [IW-1:0]     max_iter,
  input  logic              s_wr_en,
  input  logic [RW-1:0]     s_wr_row,
  input  logic [ARRAY-1:0]  s_wr_bits,
  input  logic [RAND_W-1:0] rand_r,
  input  logic              start,
  output logic              busy,
  output logic              done,
  output logic              converged,
  output logic              failed,
  output logic [IW-1:0]     iterations,
  output logic [15:0]       n_flips,
  input  logic [GW-1:0]     llr_rd_grp,
  output msg_t              llr_rd [2*ARRAY],
  output logic [2*ARRAY-1:0] ehat_rd
);

  typedef enum logic [3:0] {
    S_IDLE, S_CLR, S_INIT_VNU, S_INIT_GATH, S_V2C, S_C2V, S_VNU,
    S_LOT_CN, S_LOT_VN, S_GATH, S_CHECK, S_DONE
  } state_t;

  state_t            st;
  int unsigned       cnt;
  logic              isz;
  logic [5:0]        d;
  msg_t              mu_q;
  logic [IW-1:0]     maxit, iter;
  logic [RW-1:0]     nrows;
  logic [GW-1:0]     ngrp;
  logic              flip_en;
  logic [VW-1:0]     vstar;
  msg_t              lstar;
  logic              flipped_this_iter;

  logic [ARRAY-1:0]  synd [ROWS];
  msg_t              lam  [G*2*ARRAY];

  // ---------------------------------------------------------------- memories
  logic              vm_rd_en, vm_rd_valid, vm_wr_en, cm_rd_en, cm_rd_valid, cm_wr_en;
  logic [RW-1:0]     vm_rd_row, vm_wr_row, cm_rd_row, cm_wr_row, row_d;
  msg_t              vm_rd_data [NBANK][ARRAY];
  msg_t              vm_wr_data [NBANK][ARRAY];
  msg_t              cm_rd_data [NBANK][ARRAY];
  msg_t              cm_wr_data [NBANK][ARRAY];

  msg_mem #(.D_MAX(D_MAX), .ARRAY(ARRAY), .ROWS(ROWS), .RW(RW)) u_vn_mem (
    .clk, .rst_n, .rd_en(vm_rd_en), .rd_row(vm_rd_row), .rd_data(vm_rd_data),
    .rd_valid(vm_rd_valid), .wr_en(vm_wr_en), .wr_row(vm_wr_row), .wr_data(vm_wr_data));

  msg_mem #(.D_MAX(D_MAX), .ARRAY(ARRAY), .ROWS(ROWS), .RW(RW)) u_cn_mem (
    .clk, .rst_n, .rd_en(cm_rd_en), .rd_row(cm_rd_row), .rd_data(cm_rd_data),
    .rd_valid(cm_rd_valid), .wr_en(cm_wr_en), .wr_row(cm_wr_row), .wr_data(cm_wr_data));

  // ------------------------------------------------------ V2C processing path
  msg_t  sf_alpha [NBANK][ARRAY];
  logic  sf_mask  [NBANK][ARRAY];
  logic  sf_flipped;
  logic  cnu_synd [ARRAY];

  sign_flip #(.D_MAX(D_MAX), .ARRAY(ARRAY), .NV(NV), .G(G), .VW(VW), .ROWS(ROWS), .RW(RW)) u_sign_flip (
    .is_z(isz), .code_d(d), .row(row_d), .flip_en, .vstar, .lstar,
    .alpha_in(vm_rd_data), .alpha_out(sf_alpha), .mask(sf_mask), .flipped(sf_flipped));

  always_comb
    for (int k = 0; k < ARRAY; k++) cnu_synd[k] = synd[row_d][k];

  cnu_array #(.ARRAY(ARRAY), .IW(IW)) u_cnu (
    .iter, .alpha(sf_alpha), .mask(sf_mask), .synd(cnu_synd), .beta(cm_wr_data));

  // ------------------------------------------------------ C2V processing path
  logic           c2v_clr, c2v_in_valid;
  logic [GW-1:0]  grp;
  msg_t           b0 [2*ARRAY];
  msg_t           b1 [2*ARRAY];
  msg_t           v_lam [2*ARRAY];
  msg_t           v_a0  [2*ARRAY];
  msg_t           v_a1  [2*ARRAY];
  logic           v_e   [2*ARRAY];
  logic           vnu_init, v2c_wr_en, v2c_rd_en, v2c_out_valid;
  logic [RW-1:0]  v2c_rd_row, v2c_out_row;
  msg_t           g_alpha [NBANK][ARRAY];
  logic           g_e     [NBANK][ARRAY];
  logic           g_mask  [NBANK][ARRAY];

  c2v_conv #(.D_MAX(D_MAX), .ARRAY(ARRAY), .NV(NV), .G(G), .ROWS(ROWS), .RW(RW), .GW(GW)) u_c2v (
    .clk, .is_z(isz), .code_d(d), .clr_en(c2v_clr), .clr_grp(grp),
    .in_valid(c2v_in_valid), .in_row(row_d), .in_beta(cm_rd_data),
    .rd_grp(grp), .rd_b0(b0), .rd_b1(b1));

  vnu_array #(.ARRAY(ARRAY)) u_vnu (
    .init(vnu_init), .mu(mu_q), .b0, .b1, .lambda(v_lam), .alpha0(v_a0),
    .alpha1(v_a1), .e_hat(v_e));

  v2c_conv #(.D_MAX(D_MAX), .ARRAY(ARRAY), .NV(NV), .G(G), .ROWS(ROWS), .RW(RW), .GW(GW)) u_v2c (
    .clk, .rst_n, .is_z(isz), .code_d(d), .wr_en(v2c_wr_en), .wr_grp(grp),
    .wr_a0(v_a0), .wr_a1(v_a1), .wr_e(v_e), .rd_en(v2c_rd_en), .rd_row(v2c_rd_row),
    .out_valid(v2c_out_valid), .out_row(v2c_out_row), .out_alpha(g_alpha),
    .out_e(g_e), .out_mask(g_mask));

  // ------------------------------------- syndrome estimation and comparison
  localparam int CW = $clog2(ARRAY + 1);
  logic           s_hat [ARRAY];
  logic           s_meas [ARRAY];
  logic           cn_ok [ARRAY];
  logic           unm [ARRAY];
  logic [CW-1:0]  n_unm;
  logic           gath_valid;

  synd_est #(.ARRAY(ARRAY)) u_synd_est (.e_cn(g_e), .mask(g_mask), .s_hat);

  always_comb
    for (int k = 0; k < ARRAY; k++) begin
      s_meas[k] = synd[v2c_out_row][k];
      cn_ok[k]  = (int'(v2c_out_row) * ARRAY + k) < num_cn(int'(d));
    end

  synd_cmp #(.ARRAY(ARRAY), .CW(CW)) u_synd_cmp (
    .s_hat, .s_meas, .cn_valid(cn_ok), .unmatch(unm), .n_unmatch(n_unm));

  // ------------------------------------------------------------ lottery path
  logic            cs_clr, cs_start, cs_busy, cs_done, cs_sel_valid;
  logic [CNW-1:0]  cs_n, cs_sel;
  logic [VW-1:0]   cand_idx   [NBANK];
  logic            cand_valid [NBANK];
  logic [1:0]      cand_cnt   [NBANK];
  msg_t            cand_llr   [NBANK];
  logic            vs_start, vs_flip_valid;
  logic [VW-1:0]   vs_vstar;
  msg_t            vs_lstar;

  cn_selector #(.D_MAX(D_MAX), .ARRAY(ARRAY), .NCN(NCN), .ROWS(ROWS), .RW(RW), .CNW(CNW)) u_cn_sel (
    .clk, .rst_n, .clr(cs_clr), .wr_en(gath_valid), .wr_row(v2c_out_row), .wr_bits(unm),
    .nrows, .start(cs_start), .rand_r, .n_unsat(cs_n), .busy(cs_busy), .done(cs_done),
    .sel_valid(cs_sel_valid), .sel_cn(cs_sel));

  c2v_1b_conv #(.D_MAX(D_MAX), .ARRAY(ARRAY), .NV(NV), .G(G), .ROWS(ROWS), .RW(RW), .GW(GW), .VW(VW)) u_c2v_1b (
    .clk, .is_z(isz), .code_d(d), .clr_en(c2v_clr), .clr_grp(grp),
    .in_valid(gath_valid), .in_row(v2c_out_row), .in_unmatch(unm),
    .rd_idx(cand_idx), .rd_cnt(cand_cnt));

  always_comb
    for (int b = 0; b < NBANK; b++) cand_llr[b] = lam[cand_idx[b]];

  vn_selector #(.D_MAX(D_MAX), .ARRAY(ARRAY), .NV(NV), .G(G), .VW(VW), .CNW(CNW)) u_vn_sel (
    .clk, .rst_n, .is_z(isz), .code_d(d), .start(vs_start), .sel_valid(cs_sel_valid),
    .sel_cn(cs_sel), .cand_idx, .cand_valid, .cand_cnt, .cand_llr,
    .flip_valid(vs_flip_valid), .vstar(vs_vstar), .lstar(vs_lstar));

  // ------------------------------------------------------- early termination
  logic et_clr, et_eval, et_conv, et_give_up, et_next;
  logic [CNW-1:0] et_total;

  early_term #(.CW(CNW), .IW(IW)) u_early_term (
    .clk, .rst_n, .clr(et_clr), .row_valid(gath_valid), .row_count(CNW'(n_unm)),
    .eval(et_eval), .iter, .max_iter(maxit), .total(et_total),
    .converged(et_conv), .give_up(et_give_up), .next(et_next));

  // -------------------------------------------------------------- sequencing
  always_comb begin
    vm_rd_en     = (st == S_V2C) && cnt < nrows;
    vm_rd_row    = RW'(cnt);
    cm_wr_en     = (st == S_V2C) && vm_rd_valid;
    cm_wr_row    = row_d;
    cm_rd_en     = (st == S_C2V) && cnt < nrows;
    cm_rd_row    = RW'(cnt);
    c2v_in_valid = (st == S_C2V) && cm_rd_valid;
    c2v_clr      = (st == S_CLR);
    grp          = GW'(cnt);
    vnu_init     = (st == S_INIT_VNU);
    v2c_wr_en    = (st == S_INIT_VNU) || (st == S_VNU);
    v2c_rd_en    = (st == S_INIT_GATH || st == S_GATH) && cnt < nrows;
    v2c_rd_row   = RW'(cnt);
    vm_wr_en     = (st == S_INIT_GATH || st == S_GATH) && v2c_out_valid;
    vm_wr_row    = v2c_out_row;
    vm_wr_data   = g_alpha;
    gath_valid   = (st == S_GATH) && v2c_out_valid;
    cs_clr       = (st == S_CLR) || ((st == S_GATH) && cnt == 0);
    cs_start     = (st == S_LOT_CN) && cnt == 0;
    vs_start     = (st == S_LOT_VN) && cnt == 0;
    et_clr       = (st == S_GATH) && cnt == 0;
    et_eval      = (st == S_CHECK) && cnt == 0;
  end

  always_ff @(posedge clk)
    if (s_wr_en && int'(s_wr_row) < ROWS) synd[s_wr_row] <= s_wr_bits;

  always_ff @(posedge clk)
    if (st == S_INIT_VNU || st == S_VNU)
      for (int k = 0; k < 2*ARRAY; k++) lam[int'(grp)*2*ARRAY + k] <= v_lam[k];

  always_comb
    for (int k = 0; k < 2*ARRAY; k++) begin
      llr_rd[k]  = lam[int'(llr_rd_grp)*2*ARRAY + k];
      ehat_rd[k] = (llr_rd[k] <= 0);
    end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      st <= S_IDLE;
      cnt <= 0;
      isz <= 1'b0;
      d <= 6'd3;
      mu_q <= '0;
      maxit <= '0;
      iter <= '0;
      nrows <= '0;
      ngrp <= '0;
      flip_en <= 1'b0;
      vstar <= '0;
      lstar <= '0;
      row_d <= '0;
      flipped_this_iter <= 1'b0;
      busy <= 1'b0;
      done <= 1'b0;
      converged <= 1'b0;
      failed <= 1'b0;
      iterations <= '0;
      n_flips <= '0;
    end else begin
      done  <= 1'b0;
      row_d <= RW'(cnt);
      case (st)
        S_IDLE: if (start) begin
          isz   <= is_z;
          d     <= code_d;
          mu_q  <= mu;
          maxit <= (max_iter == '0) ? IW'(1) : max_iter;
          nrows <= RW'((num_cn(int'(code_d)) + ARRAY - 1) / ARRAY);
          ngrp  <= GW'((num_vn(int'(code_d)) + 2*ARRAY - 1) / (2*ARRAY));
          iter  <= '0;
          flip_en <= 1'b0;
          n_flips <= '0;
          converged <= 1'b0;
          failed <= 1'b0;
          busy  <= 1'b1;
          cnt   <= 0;
          st    <= S_CLR;
        end
        S_CLR: if (cnt + 1 >= int'(ngrp)) begin cnt <= 0; st <= S_INIT_VNU; end
               else cnt <= cnt + 1;
        S_INIT_VNU: if (cnt + 1 >= int'(ngrp)) begin cnt <= 0; st <= S_INIT_GATH; end
                    else cnt <= cnt + 1;
        S_INIT_GATH: if (cnt >= int'(nrows)) begin cnt <= 0; st <= S_V2C; end
                     else cnt <= cnt + 1;
        S_V2C: begin
          if (cm_wr_en && sf_flipped) flipped_this_iter <= 1'b1;
          if (cnt >= int'(nrows)) begin cnt <= 0; st <= S_C2V; end
          else cnt <= cnt + 1;
        end
        S_C2V: if (cnt >= int'(nrows)) begin cnt <= 0; st <= S_VNU; end
               else cnt <= cnt + 1;
        S_VNU: if (cnt + 1 >= int'(ngrp)) begin
                 cnt <= 0;
                 if (32'(iter) >= LOTTERY_SKIP) st <= S_LOT_CN;
                 else begin flip_en <= 1'b0; st <= S_GATH; end
               end else cnt <= cnt + 1;
        S_LOT_CN: begin
          cnt <= 1;
          if (cnt != 0 && cs_done) begin cnt <= 0; st <= S_LOT_VN; end
        end
        S_LOT_VN: if (cnt == 0) cnt <= 1;
                  else begin
                    flip_en <= vs_flip_valid;
                    vstar   <= vs_vstar;
                    lstar   <= vs_lstar;
                    cnt     <= 0;
                    st      <= S_GATH;
                  end
        S_GATH: if (cnt >= int'(nrows)) begin cnt <= 0; st <= S_CHECK; end
                else cnt <= cnt + 1;
        S_CHECK: if (cnt == 0) cnt <= 1;
                 else begin
                   cnt <= 0;
                   if (flipped_this_iter) n_flips <= n_flips + 1'b1;
                   flipped_this_iter <= 1'b0;
                   if (et_conv || et_give_up) begin
                     converged  <= et_conv;
                     failed     <= et_give_up;
                     iterations <= iter + 1'b1;
                     st         <= S_DONE;
                   end else begin
                     iter <= iter + 1'b1;
                     st   <= S_V2C;
                   end
                 end
        S_DONE: begin
          busy <= 1'b0;
          done <= 1'b1;
          st   <= S_IDLE;
        end
        default: st <= S_IDLE;
      endcase
    end

endmodule
