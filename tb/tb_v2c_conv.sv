// tb_v2c_conv: self-checking test of the V2C converter (VN layout -> CN
// layout) at D_MAX = 5, ARRAY = 8, for d = 3 and 5, X and Z checks.
// VN v is written with alpha0 = +g(v), alpha1 = -g(v) and a hard decision
// e(v). Gathering every CN row must (one cycle after rd_en, with out_valid
// and out_row) present on the existing banks (out_mask) exactly the VNs the
// lattice geometry gives that check, with the matching e(v); over the whole
// pass a degree-2 VN must deliver its slot-0 message to one check and its
// slot-1 message to the other. Missing banks must read 0.
`timescale 1ns/1ps
module tb_v2c_conv;
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

  logic is_z, wr_en, rd_en, out_valid;
  logic [5:0] code_d;
  logic [GW-1:0] wr_grp;
  logic [RW-1:0] rd_row, out_row;
  msg_t wr_a0 [2*ARRAY], wr_a1 [2*ARRAY];
  logic wr_e [2*ARRAY];
  msg_t out_alpha [NBANK][ARRAY];
  logic out_e [NBANK][ARRAY], out_mask [NBANK][ARRAY];

  v2c_conv #(.D_MAX(D_MAX), .ARRAY(ARRAY)) dut (.*);

  function automatic int gval(input int v);
    return 1 + v % 127;
  endfunction
  function automatic bit eval_of(input int v);
    return (v % 3) == 0;
  endfunction

  initial begin
    int q[$];
    wr_en = 0; rd_en = 0; wr_grp = 0; rd_row = 0; is_z = 0; code_d = 5;
    foreach (wr_a0[k]) begin wr_a0[k] = '0; wr_a1[k] = '0; wr_e[k] = 0; end
    repeat (2) @(negedge clk);
    check(out_valid == 1'b0, "out_valid low in reset");
    rst_n = 1'b1;
    for (int g = 0; g < G; g++) begin
      wr_en = 1'b1; wr_grp = GW'(g);
      for (int k = 0; k < 2*ARRAY; k++) begin
        wr_a0[k] = msg_t'(gval(g*2*ARRAY + k));
        wr_a1[k] = -msg_t'(gval(g*2*ARRAY + k));
        wr_e[k]  = eval_of(g*2*ARRAY + k);
      end
      @(negedge clk);
    end
    wr_en = 1'b0;
    for (int d = 3; d <= 5; d += 2)
      for (int z = 0; z < 2; z++) begin
        int pos [NV];
        int neg [NV];
        int deg [NV];
        int ncn, bad;
        ncn = num_cn(d);
        foreach (pos[v]) begin pos[v] = 0; neg[v] = 0; deg[v] = 0; end
        is_z = z[0]; code_d = 6'(d);
        bad = 0;
        for (int r = 0; r * ARRAY < ncn; r++) begin
          rd_en = 1'b1; rd_row = RW'(r);
          @(negedge clk);
          rd_en = 1'b0;
          check(out_valid && int'(out_row) == r, "out_valid/out_row one cycle after rd_en");
          for (int k = 0; k < ARRAY; k++) begin
            int c, used [NBANK], nmask;
            c = r*ARRAY + k;
            if (c < ncn) geo_nbrs(d, z[0], c, q); else q = {};
            foreach (q[i]) deg[q[i]]++;
            foreach (used[i]) used[i] = 0;
            nmask = 0;
            for (int b = 0; b < NBANK; b++)
              if (out_mask[b][k]) begin
                int a, hit;
                nmask++;
                a = (out_alpha[b][k] < 0) ? -int'(out_alpha[b][k]) : int'(out_alpha[b][k]);
                hit = -1;
                foreach (q[i]) if (hit < 0 && !used[i] && gval(q[i]) == a && eval_of(q[i]) == out_e[b][k]) hit = i;
                if (hit < 0) bad++;
                else begin
                  used[hit] = 1;
                  if (out_alpha[b][k] > 0) pos[q[hit]]++; else neg[q[hit]]++;
                end
              end else if (out_alpha[b][k] != 0) bad++;
            if (nmask != q.size()) bad++;
          end
        end
        for (int v = 0; v < NV; v++)
          if ((deg[v] == 2 && (pos[v] != 1 || neg[v] != 1)) || (deg[v] == 1 && pos[v] + neg[v] != 1)) bad++;
        check(bad == 0, $sformatf("d=%0d z=%0d: %0d mismatches", d, z, bad));
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
