// tb_osd_solver: self-checking test of the OSD-0 solver at D_MAX = 3,
// ARRAY = 16 (18 x 57 space-time matrix, 4 column chunks, 2 row chunks).
// H comes from the lattice geometry of the unrotated surface code (X or Z
// checks), the column order from a random permutation served on the
// sort_pos/sort_idx port (with padding indices at the end, which the solver
// must skip). For random errors the testbench computes s = H e and its own
// OSD-0 reference: the first rank-many independent columns in the given
// order (Gaussian elimination). The solver's answer must satisfy H e = s,
// use only those basis columns (which makes it the unique OSD-0 answer), and
// report the same rank. One frame uses an H with a repeated row, so the rank
// is below the row count.
`timescale 1ns/1ps
module tb_osd_solver;
  import lbp_pkg::*;
  localparam int D_MAX = 3, ARRAY = 16;
  localparam int MR = num_cn(D_MAX), MC = num_vn(D_MAX);
  localparam int CH = (MC + ARRAY - 1) / ARRAY, CHL = (MR + ARRAY - 1) / ARRAY;
  localparam int RWD = $clog2(MR + 1), QW = $clog2(CH + 1), IDXW = 16;
  localparam int NPOS = CH * ARRAY;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic [5:0] code_d;
  logic h_wr_en, s_wr_en, start, busy, done;
  logic [RWD-1:0] h_wr_row, rank;
  logic [QW-1:0] h_wr_chunk, s_wr_chunk, e_rd_chunk;
  logic [ARRAY-1:0] h_wr_data, s_wr_data, e_rd_data;
  logic [IDXW-1:0] sort_pos, sort_idx;
  int perm [NPOS];
  int mr = MR, mc = MC;   // run-time loop bounds (keeps the reference loops rolled)
  int checks = 0, failures = 0;

  osd_solver #(.D_MAX(D_MAX), .ARRAY(ARRAY)) dut (.*);

  assign sort_idx = (int'(sort_pos) < NPOS) ? IDXW'(perm[sort_pos]) : IDXW'(sort_pos);

  bit hm [MR][MC];
  bit ev [MC], sv [MR], dec [MC], basis [MC];

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", msg); end
  endtask

  task automatic build_h(input int d, input bit z);
    int m, n;
    m = d * (d - 1);
    n = d * d + (d - 1) * (d - 1);
    foreach (hm[i, j]) hm[i][j] = 1'b0;
    for (int t = 0; t < d; t++)
      for (int r = 0; r < (z ? d : d - 1); r++)
        for (int c = 0; c < (z ? d - 1 : d); c++) begin
          int row;
          row = t * m + (z ? r * (d - 1) + c : r * d + c);
          if (!z) begin
            hm[row][t*n + r*d + c] = 1'b1;
            hm[row][t*n + (r+1)*d + c] = 1'b1;
            if (c >= 1)     hm[row][t*n + d*d + r*(d-1) + c-1] = 1'b1;
            if (c <= d - 2) hm[row][t*n + d*d + r*(d-1) + c] = 1'b1;
          end else begin
            hm[row][t*n + r*d + c] = 1'b1;
            hm[row][t*n + r*d + c+1] = 1'b1;
            if (r >= 1)     hm[row][t*n + d*d + (r-1)*(d-1) + c] = 1'b1;
            if (r <= d - 2) hm[row][t*n + d*d + r*(d-1) + c] = 1'b1;
          end
          hm[row][d*n + row] = 1'b1;
          if (t > 0) hm[row][d*n + row - m] = 1'b1;
        end
  endtask

  // reference basis: columns taken in perm order when independent of those before
  function automatic int ref_basis();
    bit w [MR][MC];
    int rk;
    w = hm;
    rk = 0;
    foreach (basis[c]) basis[c] = 0;
    for (int k = 0; k < mc; k++) begin
      int c, pr;
      c = perm[k];
      pr = -1;
      for (int r = rk; r < mr; r++) if (pr < 0 && w[r][c]) pr = r;
      if (pr >= 0) begin
        for (int j = 0; j < mc; j++) begin bit tmp; tmp = w[rk][j]; w[rk][j] = w[pr][j]; w[pr][j] = tmp; end
        for (int r = 0; r < mr; r++)
          if (r != rk && w[r][c]) for (int j = 0; j < mc; j++) w[r][j] ^= w[rk][j];
        basis[c] = 1;
        rk++;
      end
    end
    return rk;
  endfunction

  initial begin
    h_wr_en = 0; s_wr_en = 0; start = 0; h_wr_row = 0; h_wr_chunk = 0; h_wr_data = 0;
    s_wr_chunk = 0; s_wr_data = 0; e_rd_chunk = 0; code_d = 6'(D_MAX);
    foreach (perm[i]) perm[i] = i;
    repeat (2) @(negedge clk);
    check(!busy && !done, "idle after reset");
    rst_n = 1'b1;
    for (int t = 0; t < 12; t++) begin
      int rk, bad, outside, w;
      build_h(D_MAX, t[0]);
      if (t == 11) for (int j = 0; j < mc; j++) hm[MR-1][j] = hm[MR-2][j];   // dependent row
      // random column order over the real columns, padding last
      for (int i = 0; i < mc; i++) perm[i] = i;
      for (int i = MC - 1; i > 0; i--) begin int j, tmp; j = $urandom % (i + 1); tmp = perm[i]; perm[i] = perm[j]; perm[j] = tmp; end
      for (int i = MC; i < NPOS; i++) perm[i] = i;
      foreach (ev[i]) ev[i] = 0;
      w = 1 + $urandom % 6;
      for (int k = 0; k < w; k++) ev[$urandom % MC] = 1;
      for (int i = 0; i < mr; i++) begin
        sv[i] = 0;
        for (int j = 0; j < mc; j++) sv[i] ^= hm[i][j] & ev[j];
      end
      rk = ref_basis();
      @(negedge clk);
      for (int i = 0; i < mr; i++)
        for (int c = 0; c < CH; c++) begin
          h_wr_en = 1; h_wr_row = RWD'(i); h_wr_chunk = QW'(c);
          for (int k = 0; k < ARRAY; k++) h_wr_data[k] = (c*ARRAY + k < mc) ? hm[i][c*ARRAY + k] : 1'b0;
          @(negedge clk);
        end
      h_wr_en = 0;
      for (int c = 0; c < CHL; c++) begin
        s_wr_en = 1; s_wr_chunk = QW'(c);
        for (int k = 0; k < ARRAY; k++) s_wr_data[k] = (c*ARRAY + k < MR) ? sv[c*ARRAY + k] : 1'b0;
        @(negedge clk);
      end
      s_wr_en = 0;
      start = 1;
      @(negedge clk);
      start = 0;
      while (!done) @(negedge clk);
      for (int c = 0; c < CH; c++) begin
        e_rd_chunk = QW'(c);
        #1;
        for (int k = 0; k < ARRAY; k++) if (c*ARRAY + k < mc) dec[c*ARRAY + k] = e_rd_data[k];
      end
      bad = 0; outside = 0;
      for (int i = 0; i < mr; i++) begin
        bit s;
        s = 0;
        for (int j = 0; j < mc; j++) s ^= hm[i][j] & dec[j];
        if (s != sv[i]) bad++;
      end
      for (int j = 0; j < mc; j++) if (dec[j] && !basis[j]) outside++;
      check(bad == 0, $sformatf("frame %0d: %0d syndrome bits not reproduced", t, bad));
      check(outside == 0, $sformatf("frame %0d: %0d error bits outside the OSD-0 basis", t, outside));
      check(int'(rank) == rk, $sformatf("frame %0d: rank %0d, expected %0d", t, rank, rk));
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (500000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
