// osd_solver: OSD-0 solve over GF(2): basis selection with LU decomposition
// (fused with forward substitution), backward substitution and error vector
// construction, holding the dense H, L and U matrices.
//
// H is the d-round space-time check matrix (rows = CNs, columns = VNs in the
// decoder's numbering), written in through h_wr_* as dense ARRAY-bit chunks,
// as the paper stores H, L and U densely. For a frame the solver
//  1. copies H into the working matrix U, clears L, y and e and copies the
//     measured syndrome s into s' (the row-permuted syndrome);
//  2. walks the columns in sorted-LLR order (it asks the sorter for the VN at
//     position k); for each column it searches the rows not yet frozen for a
//     one, and if there is one (the column is independent of the basis so far)
//     swaps that row up to position rank in U, L and s', clears the column in
//     every row below by XOR with the pivot row, recording each such
//     elimination as a one in L. Row rank is then final and forward
//     substitution y[rank] = s'[rank] ^ (L[rank] . y) is done at once, which is
//     the pipelining of LU and forward substitution the paper describes;
//  3. stops when rank reaches the number of rows or the columns run out and
//     solves U e_S = y from the last pivot up (backward substitution); every
//     non-basis column of e stays 0, which also maps e back to VN order since
//     the columns were never physically permuted.
// The result satisfies H e = s whenever s lies in the column space of H.
// Work is done one ARRAY-bit chunk per cycle; a row search looks at one row per
// cycle. This sequencing is this design's choice; the paper gives the stages,
// not their cycle schedule.
//
// Interface: load H and s, pulse start; done pulses when e is ready;
// e_rd_chunk -> e_rd_data combinationally. sort_pos/sort_idx connect to the
// sorter's read port.
module osd_solver
  import lbp_pkg::*;
#(
  parameter int D_MAX = 27,
  parameter int ARRAY = 256,
  parameter int MR    = num_cn(D_MAX),
  parameter int MC    = num_vn(D_MAX),
  parameter int CH    = (MC + ARRAY - 1) / ARRAY,   // chunks per H/U row
  parameter int CHL   = (MR + ARRAY - 1) / ARRAY,   // chunks per L row / of s
  parameter int RWD   = $clog2(MR + 1),
  parameter int CWD   = $clog2(MC + 1),
  parameter int QW    = $clog2(CH + 1),
  parameter int IDXW  = 16
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [5:0]        code_d,
  input  logic              h_wr_en,
  input  logic [RWD-1:0]    h_wr_row,
  input  logic [QW-1:0]     h_wr_chunk,
  input  logic [ARRAY-1:0]  h_wr_data,
  input  logic              s_wr_en,
  input  logic [QW-1:0]     s_wr_chunk,
  input  logic [ARRAY-1:0]  s_wr_data,
  input  logic              start,
  output logic              busy,
  output logic              done,
  output logic [RWD-1:0]    rank,
  output logic [IDXW-1:0]   sort_pos,
  input  logic [IDXW-1:0]   sort_idx,
  input  logic [QW-1:0]     e_rd_chunk,
  output logic [ARRAY-1:0]  e_rd_data
);

  logic [ARRAY-1:0] h_mem [MR*CH];
  logic [ARRAY-1:0] u_mem [MR*CH];
  logic [ARRAY-1:0] l_mem [MR*CHL];
  logic [ARRAY-1:0] s_mem [CHL];
  logic [CHL*ARRAY-1:0] sp, yv;
  logic [CH*ARRAY-1:0]  ev;
  logic [CWD-1:0]   pivcol [MR];

  typedef enum logic [3:0] {
    S_IDLE, S_COPY, S_COL, S_SEARCH, S_SWAP, S_TEST, S_XOR, S_FWD, S_BWD, S_BWD_SET, S_DONE
  } state_t;
  state_t           st;
  int unsigned      m, nc, cha, chla;
  int unsigned      r, q, piv, kpos, col, p;
  logic             acc;

  assign sort_pos  = IDXW'(kpos);
  assign e_rd_data = ev[int'(e_rd_chunk)*ARRAY +: ARRAY];

  always_ff @(posedge clk) begin
    if (h_wr_en && int'(h_wr_row) < MR && int'(h_wr_chunk) < CH)
      h_mem[int'(h_wr_row)*CH + int'(h_wr_chunk)] <= h_wr_data;
    if (s_wr_en && int'(s_wr_chunk) < CHL)
      s_mem[s_wr_chunk] <= s_wr_data;
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      st <= S_IDLE;
      busy <= 1'b0;
      done <= 1'b0;
      rank <= '0;
      m <= 0; nc <= 0; cha <= 0; chla <= 0;
      r <= 0; q <= 0; piv <= 0; kpos <= 0; col <= 0; p <= 0;
      acc <= 1'b0;
      sp <= '0;
      yv <= '0;
      ev <= '0;
    end else begin
      done <= 1'b0;
      case (st)
        S_IDLE: if (start) begin
          m    <= 32'(num_cn(int'(code_d)));
          nc   <= 32'(num_vn(int'(code_d)));
          cha  <= 32'((num_vn(int'(code_d)) + ARRAY - 1) / ARRAY);
          chla <= 32'((num_cn(int'(code_d)) + ARRAY - 1) / ARRAY);
          r <= 0; q <= 0; kpos <= 0;
          rank <= '0;
          yv <= '0;
          ev <= '0;
          busy <= 1'b1;
          st <= S_COPY;
        end
        // U <- H, L <- 0, s' <- s
        S_COPY: begin
          u_mem[r*CH + q] <= h_mem[r*CH + q];
          if (q < chla) l_mem[r*CHL + q] <= '0;
          if (r == 0 && q < chla) sp[q*ARRAY +: ARRAY] <= s_mem[q];
          if (q + 1 < cha) q <= q + 1;
          else begin
            q <= 0;
            if (r + 1 < m) r <= r + 1;
            else st <= S_COL;
          end
        end
        // next column in sorted order
        S_COL: begin
          if (int'(rank) >= int'(m) || kpos >= nc) begin
            p  <= 32'(rank);
            q  <= 0;
            acc <= 1'b0;
            st <= S_BWD;
          end else if (32'(sort_idx) >= nc) begin
            kpos <= kpos + 1;               // padding entry of the sorter
          end else begin
            col <= 32'(sort_idx);
            r   <= 32'(rank);
            st  <= S_SEARCH;
          end
        end
        // find a row >= rank with a one in this column
        S_SEARCH: begin
          if (u_mem[r*CH + col/ARRAY][col%ARRAY]) begin
            piv <= r;
            q   <= 0;
            if (r == 32'(rank)) begin
              r  <= 32'(rank) + 1;
              st <= S_TEST;
            end else st <= S_SWAP;
          end else if (r + 1 < m) r <= r + 1;
          else begin
            kpos <= kpos + 1;               // dependent column: not in the basis
            st   <= S_COL;
          end
        end
        // swap rows rank and piv of U, L and s'
        S_SWAP: begin
          u_mem[32'(rank)*CH + q] <= u_mem[piv*CH + q];
          u_mem[piv*CH + q]       <= u_mem[32'(rank)*CH + q];
          if (q < chla) begin
            l_mem[32'(rank)*CHL + q] <= l_mem[piv*CHL + q];
            l_mem[piv*CHL + q]       <= l_mem[32'(rank)*CHL + q];
          end
          if (q == 0) begin
            sp[rank] <= sp[piv];
            sp[piv]  <= sp[rank];
          end
          if (q + 1 < cha) q <= q + 1;
          else begin
            q  <= 0;
            r  <= 32'(rank) + 1;
            st <= S_TEST;
          end
        end
        // rows below the pivot: eliminate the column where it is set
        S_TEST: begin
          if (r >= m) begin
            q   <= 0;
            acc <= 1'b0;
            st  <= S_FWD;
          end else if (u_mem[r*CH + col/ARRAY][col%ARRAY]) begin
            q  <= 0;
            l_mem[r*CHL + int'(rank)/ARRAY][int'(rank)%ARRAY] <= 1'b1;
            st <= S_XOR;
          end else r <= r + 1;
        end
        S_XOR: begin
          u_mem[r*CH + q] <= u_mem[r*CH + q] ^ u_mem[32'(rank)*CH + q];
          if (q + 1 < cha) q <= q + 1;
          else begin
            q  <= 0;
            r  <= r + 1;
            st <= S_TEST;
          end
        end
        // forward substitution for the row just frozen
        S_FWD: begin
          logic a;
          a = acc ^ (^(l_mem[32'(rank)*CHL + q] & yv[q*ARRAY +: ARRAY]));
          if (q + 1 < chla) begin
            acc <= a;
            q   <= q + 1;
          end else begin
            yv[rank]     <= sp[rank] ^ a;
            pivcol[rank] <= CWD'(col);
            rank         <= rank + 1'b1;
            kpos         <= kpos + 1;
            st           <= S_COL;
          end
        end
        // backward substitution, pivots rank-1 down to 0
        S_BWD: begin
          if (p == 0) st <= S_DONE;
          else begin
            q   <= 0;
            acc <= 1'b0;
            p   <= p - 1;
            st  <= S_BWD_SET;
          end
        end
        S_BWD_SET: begin
          logic a;
          a = acc ^ (^(u_mem[p*CH + q] & ev[q*ARRAY +: ARRAY]));
          if (q + 1 < cha) begin
            acc <= a;
            q   <= q + 1;
          end else begin
            ev[pivcol[p]] <= yv[p] ^ a;
            st <= S_BWD;
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
