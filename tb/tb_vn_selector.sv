// tb_vn_selector: self-checking test of the lottery VN selector at
// D_MAX = 5, ARRAY = 8, d = 3 and 5, X and Z checks. For a random check the
// candidate outputs must list exactly its neighbours from the lattice
// geometry. Given random unsatisfied-check counts and distinct-magnitude
// LLRs, one cycle after start the chosen VN must be the neighbour with the
// most unsatisfied checks, ties going to the smallest |LLR|, with its LLR
// as lstar; flip_valid follows sel_valid.
`timescale 1ns/1ps
module tb_vn_selector;
  import lbp_pkg::*;
  localparam int D_MAX = 5, ARRAY = 8;
  localparam int NV = num_vn(D_MAX);
  localparam int G = (NV + 2*ARRAY - 1) / (2*ARRAY);
  localparam int ROWS = (num_cn(D_MAX) + ARRAY - 1) / ARRAY;
  localparam int RW = $clog2(ROWS + 1);
  localparam int GW = $clog2(G + 1);
  localparam int VW = $clog2(G*2*ARRAY);
  localparam int CNW = $clog2(num_cn(D_MAX) + 1);
  localparam int WD = 200000;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic is_z, start, sel_valid, flip_valid;
  logic [5:0] code_d;
  logic [CNW-1:0] sel_cn;
  logic [VW-1:0] cand_idx [NBANK];
  logic cand_valid [NBANK];
  logic [1:0] cand_cnt [NBANK];
  msg_t cand_llr [NBANK];
  logic [VW-1:0] vstar;
  msg_t lstar;

  vn_selector #(.D_MAX(D_MAX), .ARRAY(ARRAY)) dut (.*);

  initial begin
    int q[$];
    is_z = 0; code_d = 5; start = 0; sel_valid = 0; sel_cn = 0;
    foreach (cand_cnt[b]) begin cand_cnt[b] = 0; cand_llr[b] = 0; end
    repeat (2) @(negedge clk);
    check(!flip_valid, "flip_valid low after reset");
    rst_n = 1'b1;
    for (int t = 0; t < 200; t++) begin
      int d, c, bad, best_v, best_c, best_a, nvalid;
      bit z;
      int cnt_of [int];
      int llr_of [int];
      d = (t % 4 < 2) ? 5 : 3;
      z = t[0];
      c = $urandom % num_cn(d);
      is_z = z; code_d = 6'(d); sel_cn = CNW'(c);
      sel_valid = (t % 10 != 9);
      geo_nbrs(d, z, c, q);
      // distinct magnitudes per neighbour
      foreach (q[i]) begin
        cnt_of[q[i]] = 1 + $urandom % 2;
        llr_of[q[i]] = (1 + i + 10 * ($urandom % 10)) * (($urandom % 2) ? 1 : -1);
      end
      #1;
      bad = 0; nvalid = 0;
      for (int b = 0; b < NBANK; b++) begin
        cand_cnt[b] = '0; cand_llr[b] = '0;
        if (cand_valid[b]) begin
          nvalid++;
          if (!cnt_of.exists(int'(cand_idx[b]))) bad++;
          else begin
            cand_cnt[b] = 2'(cnt_of[int'(cand_idx[b])]);
            cand_llr[b] = msg_t'(llr_of[int'(cand_idx[b])]);
          end
        end
      end
      check(bad == 0 && nvalid == q.size(), $sformatf("check %0d: candidates do not match its neighbours", c));
      best_v = -1; best_c = -1; best_a = 1000;
      foreach (q[i]) begin
        int a;
        a = llr_of[q[i]] < 0 ? -llr_of[q[i]] : llr_of[q[i]];
        if (cnt_of[q[i]] > best_c || (cnt_of[q[i]] == best_c && a < best_a)) begin
          best_v = q[i]; best_c = cnt_of[q[i]]; best_a = a;
        end
      end
      start = 1'b1;
      @(negedge clk);
      start = 1'b0;
      check(flip_valid == sel_valid, "flip_valid");
      if (sel_valid)
        check(int'(vstar) == best_v && int'(lstar) == llr_of[best_v],
              $sformatf("chose VN %0d (llr %0d), expected %0d (llr %0d)", vstar, lstar, best_v, llr_of[best_v]));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Neighbours of check cn in the space-time graph, from the lattice geometry
  // of the unrotated surface code: sub-lattice A (d x d) and B ((d-1) x (d-1));
  // X check (r,c) touches A(r,c), A(r+1,c), B(r,c-1), B(r,c); Z check (r,c)
  // touches A(r,c), A(r,c+1), B(r-1,c), B(r,c); plus the measurement-error
  // columns of this round and of the previous round.
  function automatic void geo_nbrs(input int d, input bit z, input int cn, output int q[$]);
    int m, n, t, j, r, c;
    m = d * (d - 1);
    n = d * d + (d - 1) * (d - 1);
    t = cn / m;
    j = cn % m;
    q = {};
    if (!z) begin
      r = j / d; c = j % d;
      q.push_back(t*n + r*d + c);
      q.push_back(t*n + (r+1)*d + c);
      if (c >= 1)     q.push_back(t*n + d*d + r*(d-1) + c-1);
      if (c <= d - 2) q.push_back(t*n + d*d + r*(d-1) + c);
    end else begin
      r = j / (d - 1); c = j % (d - 1);
      q.push_back(t*n + r*d + c);
      q.push_back(t*n + r*d + c+1);
      if (r >= 1)     q.push_back(t*n + d*d + (r-1)*(d-1) + c);
      if (r <= d - 2) q.push_back(t*n + d*d + r*(d-1) + c);
    end
    q.push_back(d*n + cn);
    if (t > 0) q.push_back(d*n + cn - m);
  endfunction

  function automatic int geo_degree(input int d, input bit z, input int v);
    int q[$], deg;
    deg = 0;
    for (int c = 0; c < d * d * (d - 1); c++) begin
      geo_nbrs(d, z, c, q);
      foreach (q[i]) if (q[i] == v) deg++;
    end
    return deg;
  endfunction

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", msg); end
  endtask

  initial begin  // watchdog
    repeat (WD) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
