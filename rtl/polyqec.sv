// polyqec: PolyQec, a hierarchical quantum-error decoder: Lottery BP as the
// fast local decoder, OSD-0 as the global decoder for the frames BP cannot
// solve.
//
// One frame is the measured syndrome of d rounds of H_X or H_Z checks of an
// unrotated distance-d surface code (d <= D_MAX, chosen per frame with
// code_d/is_z, as the design's memories are sized once for D_MAX). The top
//  1. runs lbp_decoder; if it converges, the BP hard decisions are the answer;
//  2. otherwise (maximum iteration reached) streams the BP posterior LLRs
//     into the bitonic sorter, 2*ARRAY per cycle,
//  3. sorts them and runs osd_solver, whose error vector is the answer.
// The H matrix the OSD needs is an input (loaded once per code through
// h_wr_*), as in the paper's block diagram; the BP side needs no matrix.
// The random value for the lottery (rand_r) is an input too; how it is
// produced is not specified.
//
// Interface: write the syndrome rows (s_wr_*; they go to both decoders), pulse
// start, wait for done. converged says BP solved the frame, osd_used that OSD
// did. The error estimate, one bit per VN in the decoder's VN numbering, is
// read ARRAY bits at a time through err_rd_chunk/err_rd_data.
module polyqec
  import lbp_pkg::*;
#(
  parameter int D_MAX        = 27,
  parameter int ARRAY        = 256,
  parameter int LOTTERY_SKIP = 6,
  parameter int IW           = 9,
  parameter int N_SORT       = 65536
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                is_z,
  input  logic [5:0]          code_d,
  input  msg_t                mu,
  input  logic [IW-1:0]       max_iter,
  input  logic [RAND_W-1:0]   rand_r,
  input  logic                s_wr_en,
  input  logic [$clog2((num_cn(D_MAX) + ARRAY - 1) / ARRAY + 1)-1:0] s_wr_row,
  input  logic [ARRAY-1:0]    s_wr_bits,
  input  logic                h_wr_en,
  input  logic [$clog2(num_cn(D_MAX) + 1)-1:0] h_wr_row,
  input  logic [$clog2((num_vn(D_MAX) + ARRAY - 1) / ARRAY + 1)-1:0] h_wr_chunk,
  input  logic [ARRAY-1:0]    h_wr_data,
  input  logic                start,
  output logic                busy,
  output logic                done,
  output logic                converged,
  output logic                osd_used,
  output logic [IW-1:0]       iterations,
  output logic [15:0]         n_flips,
  output logic [$clog2(num_cn(D_MAX) + 1)-1:0] osd_rank,
  input  logic [$clog2((num_vn(D_MAX) + ARRAY - 1) / ARRAY + 1)-1:0] err_rd_chunk,
  output logic [ARRAY-1:0]    err_rd_data
);

  localparam int NV   = num_vn(D_MAX);
  localparam int G    = (NV + 2*ARRAY - 1) / (2*ARRAY);
  localparam int GW   = $clog2(G + 1);
  localparam int IDXW = $clog2(N_SORT);
  localparam int SGW  = $clog2(N_SORT / (2*ARRAY) + 1);
  localparam int QW   = $clog2((NV + ARRAY - 1) / ARRAY + 1);

  typedef enum logic [2:0] {S_IDLE, S_BP, S_LOAD, S_SORT, S_OSD, S_DONE} state_t;
  state_t          st;
  logic [GW-1:0]   ld_grp;
  logic [GW-1:0]   ngrp;

  // Lottery BP
  logic            bp_start, bp_busy, bp_done, bp_conv, bp_failed;
  logic [GW-1:0]   llr_grp;
  msg_t            llr [2*ARRAY];
  logic [2*ARRAY-1:0] ehat;

  lbp_decoder #(.D_MAX(D_MAX), .ARRAY(ARRAY), .LOTTERY_SKIP(LOTTERY_SKIP), .IW(IW)) u_lbp (
    .clk, .rst_n, .is_z, .code_d, .mu, .max_iter, .s_wr_en, .s_wr_row, .s_wr_bits,
    .rand_r, .start(bp_start), .busy(bp_busy), .done(bp_done), .converged(bp_conv),
    .failed(bp_failed), .iterations, .n_flips, .llr_rd_grp(llr_grp), .llr_rd(llr),
    .ehat_rd(ehat));

  // OSD: sorter with LLR and index memories, then the GF(2) solver
  logic            so_start, so_busy, so_done;
  logic [IDXW-1:0] so_pos, so_idx;
  msg_t            so_llr;
  logic            os_start, os_busy, os_done;
  logic [ARRAY-1:0] os_e;

  bitonic_sorter #(.N_MAX(N_SORT), .ARRAY(ARRAY), .IDXW(IDXW), .GW(SGW)) u_sorter (
    .clk, .rst_n, .ld_en(st == S_LOAD), .ld_grp(SGW'(ld_grp)), .ld_llr(llr),
    .start(so_start), .n((IDXW+1)'(num_vn(int'(code_d)))), .busy(so_busy), .done(so_done),
    .rd_pos(so_pos), .rd_idx(so_idx), .rd_llr(so_llr));

  osd_solver #(.D_MAX(D_MAX), .ARRAY(ARRAY), .QW(QW), .IDXW(IDXW)) u_osd (
    .clk, .rst_n, .code_d, .h_wr_en, .h_wr_row, .h_wr_chunk, .h_wr_data,
    .s_wr_en, .s_wr_chunk(QW'(s_wr_row)), .s_wr_data(s_wr_bits), .start(os_start),
    .busy(os_busy), .done(os_done), .rank(osd_rank), .sort_pos(so_pos), .sort_idx(so_idx),
    .e_rd_chunk(err_rd_chunk), .e_rd_data(os_e));

  assign llr_grp  = (st == S_LOAD) ? ld_grp : GW'(err_rd_chunk >> 1);
  assign bp_start = (st == S_IDLE) && start;
  assign so_start = (st == S_LOAD) && (ld_grp + 1'b1 >= ngrp);
  assign err_rd_data = osd_used ? os_e
                                : (err_rd_chunk[0] ? ehat[ARRAY +: ARRAY] : ehat[0 +: ARRAY]);

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      st        <= S_IDLE;
      ld_grp    <= '0;
      ngrp      <= '0;
      busy      <= 1'b0;
      done      <= 1'b0;
      converged <= 1'b0;
      osd_used  <= 1'b0;
      os_start  <= 1'b0;
    end else begin
      done     <= 1'b0;
      os_start <= 1'b0;
      case (st)
        S_IDLE: if (start) begin
          busy      <= 1'b1;
          converged <= 1'b0;
          osd_used  <= 1'b0;
          ngrp      <= GW'((num_vn(int'(code_d)) + 2*ARRAY - 1) / (2*ARRAY));
          st        <= S_BP;
        end
        S_BP: if (bp_done) begin
          if (bp_conv) begin
            converged <= 1'b1;
            st        <= S_DONE;
          end else begin
            ld_grp <= '0;
            st     <= S_LOAD;
          end
        end
        S_LOAD: if (ld_grp + 1'b1 >= ngrp) st <= S_SORT;
                else ld_grp <= ld_grp + 1'b1;
        S_SORT: if (so_done) begin
          os_start <= 1'b1;
          osd_used <= 1'b1;
          st       <= S_OSD;
        end
        S_OSD: if (os_done) st <= S_DONE;
        S_DONE: begin
          busy <= 1'b0;
          done <= 1'b1;
          st   <= S_IDLE;
        end
        default: st <= S_IDLE;
      endcase
    end

endmodule
