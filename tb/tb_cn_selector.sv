// tb_cn_selector: self-checking test of the lottery CN selector at
// D_MAX = 5, ARRAY = 8 (13 rows). Random unmatch bits are written row by row;
// n_unsat must equal their count. After start with a random r, the selector
// must return, within nrows + 1 cycles, the floor(r * N / 2^16)-th (from 0)
// unsatisfied CN in CN order, or sel_valid = 0 when N = 0.
`timescale 1ns/1ps
module tb_cn_selector;
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

  logic clr, wr_en, start, busy, done, sel_valid;
  logic [RW-1:0] wr_row, nrows;
  logic wr_bits [ARRAY];
  logic [15:0] rand_r;
  logic [CNW-1:0] n_unsat, sel_cn;

  cn_selector #(.D_MAX(D_MAX), .ARRAY(ARRAY)) dut (.*);

  initial begin
    clr = 0; wr_en = 0; start = 0; wr_row = 0; nrows = RW'(ROWS); rand_r = 0;
    foreach (wr_bits[k]) wr_bits[k] = 0;
    repeat (2) @(negedge clk);
    check(!busy && !done, "idle after reset");
    rst_n = 1'b1;
    for (int t = 0; t < 60; t++) begin
      int rows, n, target, expect_cn, lat, seen;
      bit u [];
      rows = 1 + $urandom % ROWS;
      u = new[rows * ARRAY];
      nrows = RW'(rows);
      clr = 1'b1;
      @(negedge clk);
      clr = 1'b0;
      n = 0;
      for (int r = 0; r < rows; r++) begin
        wr_en = 1'b1; wr_row = RW'(r);
        for (int k = 0; k < ARRAY; k++) begin
          wr_bits[k] = (t % 7 == 0) ? 1'b0 : (($urandom % 4) == 0);
          u[r*ARRAY + k] = wr_bits[k];
          n += int'(wr_bits[k]);
        end
        @(negedge clk);
      end
      wr_en = 1'b0;
      check(int'(n_unsat) == n, $sformatf("n_unsat %0d expected %0d", n_unsat, n));
      rand_r = 16'($urandom);
      target = int'((longint'(n) * longint'(rand_r)) >>> 16);
      expect_cn = -1; seen = 0;
      foreach (u[i]) if (u[i]) begin if (seen == target) expect_cn = i; seen++; end
      start = 1'b1;
      @(negedge clk);
      start = 1'b0;
      lat = 1;
      while (!done && lat < 100) begin @(negedge clk); lat++; end
      check(lat <= rows + 1, $sformatf("selection took %0d cycles for %0d rows", lat, rows));
      if (n == 0) check(!sel_valid, "no selection when every check is satisfied");
      else check(sel_valid && int'(sel_cn) == expect_cn,
                 $sformatf("selected %0d (valid %0d), expected %0d", sel_cn, sel_valid, expect_cn));
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
