// tb_sign_flip: self-checking test of the lottery sign flip at D_MAX = 5,
// ARRAY = 8, d = 3 and 5, X and Z checks. For a random selected VN v* with
// LLR l*, one pass over all CN rows must change exactly the messages on the
// edges of v* given by the lattice geometry, each to sat(alpha - 2 l*),
// leave every other message alone, assert flipped only on rows holding v*,
// and give a mask with one entry per existing edge. With flip_en low no
// message may change.
`timescale 1ns/1ps
module tb_sign_flip;
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

  logic is_z, flip_en, flipped;
  logic [5:0] code_d;
  logic [RW-1:0] row;
  logic [VW-1:0] vstar;
  msg_t lstar;
  msg_t alpha_in [NBANK][ARRAY], alpha_out [NBANK][ARRAY];
  logic mask [NBANK][ARRAY];

  sign_flip #(.D_MAX(D_MAX), .ARRAY(ARRAY)) dut (.*);

  function automatic int sat(input int x);
    return x > 127 ? 127 : (x < -127 ? -127 : x);
  endfunction

  initial begin
    int q[$];
    rst_n = 1'b1;
    for (int t = 0; t < 24; t++) begin
      int d, ncn, nv, vs, changed, bad, edges;
      bit z;
      d = (t % 4 < 2) ? 5 : 3;
      z = t[0];
      ncn = num_cn(d);
      nv = num_vn(d);
      vs = $urandom % nv;
      is_z = z; code_d = 6'(d); vstar = VW'(vs);
      lstar = msg_t'(($urandom % 255) - 127);
      flip_en = (t % 6 != 5);
      changed = 0; bad = 0; edges = 0;
      for (int r = 0; r * ARRAY < ncn; r++) begin
        bit row_has;
        row = RW'(r);
        foreach (alpha_in[b, k]) alpha_in[b][k] = msg_t'(($urandom % 255) - 127);
        #1;
        row_has = 0;
        for (int k = 0; k < ARRAY; k++) begin
          int c, nm, adj;
          c = r*ARRAY + k;
          if (c < ncn) geo_nbrs(d, z, c, q); else q = {};
          adj = 0;
          foreach (q[i]) if (q[i] == vs) adj = 1;
          nm = 0;
          for (int b = 0; b < NBANK; b++) begin
            if (mask[b][k]) nm++;
            if (alpha_out[b][k] != alpha_in[b][k]) begin
              changed++;
              if (!adj || !flip_en || int'(alpha_out[b][k]) != sat(int'(alpha_in[b][k]) - 2*int'(lstar))) bad++;
            end
          end
          if (nm != q.size()) bad++;
          if (adj && flip_en) begin
            row_has = 1;
            edges++;
          end
        end
        if (flipped != row_has) bad++;
      end
      // an unchanged value is allowed only where alpha - 2 l* saturates back to alpha
      check(bad == 0, $sformatf("d=%0d z=%0d v*=%0d: %0d errors", d, z, vs, bad));
      check(changed <= edges, $sformatf("%0d messages changed, v* has %0d edges", changed, edges));
      check(!flip_en || lstar == 0 || changed > 0 || edges == 0, "no message of v* changed");
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
