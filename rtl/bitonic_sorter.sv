// bitonic_sorter: LLR sorter of the OSD stage, with its LLR memory and LLR
// index memory.
//
// OSD-0 orders the VNs by reliability: ascending posterior LLR, most likely
// error first (Alg. 2 line 1). The LLRs are loaded from the BP LLR register,
// 2*ARRAY per cycle, into the LLR memory while the index memory records each
// entry's VN index. The sort is a bitonic network over P = next power of two
// >= n entries; entries at or beyond n (padding) sort last. Rather than one
// comparator per network position, a small array of ARRAY compare-and-swap
// (CAS) units works through each network step, ARRAY pairs per cycle, so one
// step takes ceil(P/2/ARRAY) cycles and a full sort
// log2(P)*(log2(P)+1)/2 such steps. This follows the paper (bitonic network,
// small CAS array, up to 65536 LLRs for d <= 27). The paper's two-bank row
// layout, with its write-back address swap that avoids read bank conflicts,
// is not modelled: here the memories can serve any ARRAY pairs per cycle.
//
// Interface: ld_en/ld_grp/ld_llr write entries ld_grp*2*ARRAY + k; start with
// n; done pulses when sorted; rd_pos -> rd_idx/rd_llr combinationally.
module bitonic_sorter
  import lbp_pkg::*;
#(
  parameter int N_MAX = 65536,
  parameter int ARRAY = 256,
  parameter int IDXW  = $clog2(N_MAX),
  parameter int GW    = $clog2(N_MAX / (2*ARRAY) + 1)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             ld_en,
  input  logic [GW-1:0]    ld_grp,
  input  msg_t             ld_llr [2*ARRAY],
  input  logic             start,
  input  logic [IDXW:0]    n,
  output logic             busy,
  output logic             done,
  input  logic [IDXW-1:0]  rd_pos,
  output logic [IDXW-1:0]  rd_idx,
  output msg_t             rd_llr
);

  msg_t            llr_mem [N_MAX];
  logic [IDXW-1:0] idx_mem [N_MAX];

  typedef enum logic [1:0] {S_IDLE, S_PAD, S_SORT} state_t;
  state_t          st;
  logic [IDXW:0]   nq, p2, k, j, base;

  function automatic logic [MSG_W:0] key(input logic [IDXW-1:0] idx, input msg_t l,
                                         input logic [IDXW:0] nn);
    // padding after every real entry; otherwise the LLR, offset to unsigned
    return {(IDXW+1)'(idx) >= nn, l[MSG_W-1] ^ 1'b1, l[MSG_W-2:0]};
  endfunction

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      st <= S_IDLE;
      busy <= 1'b0;
      done <= 1'b0;
      nq <= '0;
      p2 <= '0;
      k <= '0;
      j <= '0;
      base <= '0;
    end else begin
      done <= 1'b0;
      case (st)
        S_IDLE: if (start) begin
          logic [IDXW:0] p;
          p = 2;
          for (int t = 1; t < IDXW; t++) if (p < n) p = p << 1;
          nq   <= n;
          p2   <= p;
          base <= (IDXW+1)'((int'(n) / (2*ARRAY)) * (2*ARRAY));
          busy <= 1'b1;
          st   <= S_PAD;
        end
        S_PAD: begin
          if (base + (IDXW+1)'(2*ARRAY) >= p2) begin
            k    <= 2;
            j    <= 1;
            base <= '0;
            st   <= S_SORT;
          end else base <= base + (IDXW+1)'(2*ARRAY);
        end
        S_SORT: begin
          if (base + (IDXW+1)'(ARRAY) < (p2 >> 1)) base <= base + (IDXW+1)'(ARRAY);
          else begin
            base <= '0;
            if (j > 1) j <= j >> 1;
            else if (k < p2) begin
              k <= k << 1;
              j <= k;
            end else begin
              busy <= 1'b0;
              done <= 1'b1;
              st   <= S_IDLE;
            end
          end
        end
        default: st <= S_IDLE;
      endcase
    end

  // memory writes: load, padding and the CAS array
  always_ff @(posedge clk) begin
    if (st == S_IDLE && ld_en)
      for (int q = 0; q < 2*ARRAY; q++) begin
        llr_mem[int'(ld_grp)*2*ARRAY + q] <= ld_llr[q];
        idx_mem[int'(ld_grp)*2*ARRAY + q] <= IDXW'(int'(ld_grp)*2*ARRAY + q);
      end
    if (st == S_PAD)
      for (int q = 0; q < 2*ARRAY; q++)
        if (int'(base) + q >= int'(nq) && int'(base) + q < N_MAX) begin
          llr_mem[int'(base) + q] <= MSG_MAX;
          idx_mem[int'(base) + q] <= IDXW'(int'(base) + q);
        end
    if (st == S_SORT)
      for (int q = 0; q < ARRAY; q++) begin
        int c, lo, hi, lj;
        logic asc, swap;
        c = int'(base) + q;
        lj = $clog2(int'(j));
        lo = ((c >> lj) << (lj + 1)) | (c & (int'(j) - 1));
        hi = lo | int'(j);
        if (c < (int'(p2) >> 1) && hi < N_MAX) begin
          asc  = ((lo & int'(k)) == 0);
          swap = asc ? (key(idx_mem[lo], llr_mem[lo], nq) > key(idx_mem[hi], llr_mem[hi], nq))
                     : (key(idx_mem[lo], llr_mem[lo], nq) < key(idx_mem[hi], llr_mem[hi], nq));
          if (swap) begin
            llr_mem[lo] <= llr_mem[hi];
            llr_mem[hi] <= llr_mem[lo];
            idx_mem[lo] <= idx_mem[hi];
            idx_mem[hi] <= idx_mem[lo];
          end
        end
      end
  end

  assign rd_idx = idx_mem[rd_pos];
  assign rd_llr = llr_mem[rd_pos];

endmodule
