// tb_c2v_conv: self-checking test of the C2V converter (CN layout -> VN
// layout) at D_MAX = 5, ARRAY = 8, for d = 3 and 5, X and Z checks.
// Every CN sends the same value f(cn) on all six banks (the converter must
// drop the banks that do not exist). After the clear sweep and one scatter
// pass, each VN's two slots must hold the messages of exactly the checks the
// lattice geometry connects it to: b0 + b1 equals the sum of f over those
// checks, a degree-2 VN has both slots filled, a degree-1 VN one, and VNs
// beyond the code are zero.
`timescale 1ns/1ps
module tb_c2v_conv;
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

  logic is_z, clr_en, in_valid;
  logic [5:0] code_d;
  logic [GW-1:0] clr_grp, rd_grp;
  logic [RW-1:0] in_row;
  msg_t in_beta [NBANK][ARRAY], rd_b0 [2*ARRAY], rd_b1 [2*ARRAY];

  c2v_conv #(.D_MAX(D_MAX), .ARRAY(ARRAY)) dut (.*);

  initial begin
    int q[$];
    clr_en = 0; in_valid = 0; clr_grp = 0; in_row = 0; rd_grp = 0; is_z = 0; code_d = 5;
    foreach (in_beta[b, k]) in_beta[b][k] = '0;
    rst_n = 1'b1;
    for (int d = 3; d <= 5; d += 2)
      for (int z = 0; z < 2; z++) begin
        int sum [NV];
        int cnt [NV];
        int ncn, bad;
        ncn = num_cn(d);
        foreach (sum[v]) begin sum[v] = 0; cnt[v] = 0; end
        for (int c = 0; c < ncn; c++) begin
          geo_nbrs(d, z[0], c, q);
          foreach (q[i]) begin sum[q[i]] += 1 + c % 50; cnt[q[i]]++; end
        end
        @(negedge clk);
        is_z = z[0]; code_d = 6'(d);
        for (int g = 0; g < G; g++) begin
          clr_en = 1'b1; clr_grp = GW'(g);
          @(negedge clk);
        end
        clr_en = 1'b0;
        for (int r = 0; r * ARRAY < ncn; r++) begin
          in_valid = 1'b1; in_row = RW'(r);
          for (int k = 0; k < ARRAY; k++)
            for (int b = 0; b < NBANK; b++) in_beta[b][k] = msg_t'(1 + (r*ARRAY + k) % 50);
          @(negedge clk);
        end
        in_valid = 1'b0;
        bad = 0;
        for (int g = 0; g < G; g++) begin
          rd_grp = GW'(g);
          #1;
          for (int k = 0; k < 2*ARRAY; k++) begin
            int v, filled;
            v = g*2*ARRAY + k;
            filled = int'(rd_b0[k] != 0) + int'(rd_b1[k] != 0);
            if (v < NV) begin
              if (int'(rd_b0[k]) + int'(rd_b1[k]) != sum[v] || filled != cnt[v]) bad++;
            end else if (filled != 0) bad++;
          end
        end
        check(bad == 0, $sformatf("d=%0d z=%0d: %0d VNs hold wrong messages", d, z, bad));
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
