// tb_lbp_decoder: self-checking test of the Lottery BP decoder at a reduced
// size (D_MAX = 5, ARRAY = 32, so several CN rows and VN groups are used).
//
// The space-time check matrix is rebuilt in the testbench from the lattice
// geometry (see tb_polyqec). Checks:
//  * every single error (sampled positions, X and Z, d = 3 and 5) converges
//    and the hard decision reproduces the syndrome, except an error on a
//    degree-1 VN, which has an equal-weight twin that min-sum cannot tell
//    apart (that case is left to OSD);
//  * a zero syndrome stops after one iteration (early termination);
//  * converged results always satisfy H e = s; failed runs stop at exactly
//    max_iter iterations;
//  * the lottery flips only from iteration LOTTERY_SKIP on (n_flips bound) and
//    does flip on some hard frames;
//  * one BP iteration without lottery takes 3R+G+5 cycles (R CN rows,
//    G VN groups), measured between iteration counter steps.
`timescale 1ns/1ps
module tb_lbp_decoder;
  import lbp_pkg::*;

  localparam int D_MAX = 5;
  localparam int ARRAY = 32;
  localparam int NCN   = num_cn(D_MAX);
  localparam int NV    = num_vn(D_MAX);
  localparam int ROWS  = (NCN + ARRAY - 1) / ARRAY;
  localparam int G     = (NV + 2*ARRAY - 1) / (2*ARRAY);
  localparam int RW    = $clog2(ROWS + 1);
  localparam int GW    = $clog2(G + 1);

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic        is_z, s_wr_en, start, busy, done, converged, failed;
  logic [5:0]  code_d;
  msg_t        mu;
  logic [8:0]  max_iter, iterations;
  logic [15:0] rand_r, n_flips;
  logic [RW-1:0] s_wr_row;
  logic [ARRAY-1:0] s_wr_bits;
  logic [GW-1:0] llr_rd_grp;
  msg_t        llr_rd [2*ARRAY];
  logic [2*ARRAY-1:0] ehat_rd;

  lbp_decoder #(.D_MAX(D_MAX), .ARRAY(ARRAY)) dut (.*);

  int checks = 0, failures = 0;
  int n_single_ok = 0, n_single = 0, n_flip_runs = 0, n_conv = 0, n_fail = 0;

  bit hm [NCN][NV];
  bit ev [NV];
  bit sv [NCN];
  bit dec [NV];

  always @(posedge clk) rand_r <= 16'($urandom);

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
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

  // decode the error currently in ev; returns number of unreproduced checks
  task automatic decode(input int d, input bit z, input int mi, output int wrong);
    int m, nv;
    m  = num_cn(d);
    nv = num_vn(d);
    for (int i = 0; i < m; i++) begin
      sv[i] = 1'b0;
      for (int j = 0; j < nv; j++) sv[i] ^= hm[i][j] & ev[j];
    end
    @(negedge clk);
    for (int r = 0; r * ARRAY < m; r++) begin
      s_wr_en  = 1'b1;
      s_wr_row = RW'(r);
      for (int k = 0; k < ARRAY; k++) s_wr_bits[k] = (r*ARRAY + k < m) ? sv[r*ARRAY + k] : 1'b0;
      @(negedge clk);
    end
    s_wr_en  = 1'b0;
    code_d   = 6'(d);
    is_z     = z;
    max_iter = 9'(mi);
    start    = 1'b1;
    @(negedge clk);
    start = 1'b0;
    while (!done) @(negedge clk);
    for (int g = 0; g * 2 * ARRAY < nv; g++) begin
      llr_rd_grp = GW'(g);
      #1;
      for (int k = 0; k < 2*ARRAY; k++) if (g*2*ARRAY + k < nv) dec[g*2*ARRAY + k] = ehat_rd[k];
    end
    wrong = 0;
    for (int i = 0; i < m; i++) begin
      bit s;
      s = 1'b0;
      for (int j = 0; j < nv; j++) s ^= hm[i][j] & dec[j];
      if (s != sv[i]) wrong++;
    end
    check(converged != failed, "exactly one of converged/failed");
    if (converged) begin
      n_conv++;
      check(wrong == 0, $sformatf("converged but %0d checks unmatched (d=%0d z=%0d)", wrong, d, z));
      check(int'(iterations) <= mi, "iterations above limit");
    end else begin
      n_fail++;
      check(int'(iterations) == mi, $sformatf("gave up after %0d, limit %0d", iterations, mi));
    end
    check(int'(n_flips) <= ((int'(iterations) > 6) ? int'(iterations) - 6 : 0),
          $sformatf("%0d flips in %0d iterations (lottery must skip 6)", n_flips, iterations));
    if (n_flips != 0) n_flip_runs++;
  endtask

  // cycle count of one iteration
  int last_iter_cycle = -1, cyc = 0, iter_cycles = -1;
  logic [8:0] last_iter = '0;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (dut.iter != last_iter) begin
      if (dut.iter == last_iter + 1 && dut.iter <= 6 && last_iter_cycle >= 0)
        iter_cycles <= cyc - last_iter_cycle;
      last_iter_cycle <= cyc;
      last_iter <= dut.iter;
    end
  end

  initial begin
    int wrong, m, nv, rr, gg;
    is_z = 0; code_d = 3; mu = msg_t'(8'sd96); max_iter = 9'd30;
    s_wr_en = 0; s_wr_row = 0; s_wr_bits = '0; start = 0; llr_rd_grp = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;

    // zero syndrome
    build_h(5, 1'b0);
    foreach (ev[i]) ev[i] = 1'b0;
    decode(5, 1'b0, 30, wrong);
    check(converged && iterations == 1, "zero syndrome must stop after one iteration");

    // single errors
    for (int d = 3; d <= 5; d += 2)
      for (int z = 0; z < 2; z++) begin
        build_h(d, z[0]);
        nv = num_vn(d);
        for (int k = 0; k < 12; k++) begin
          foreach (ev[i]) ev[i] = 1'b0;
          ev[$urandom % nv] = 1'b1;
          decode(d, z[0], 30, wrong);
          n_single++;
          if (converged && wrong == 0) n_single_ok++;
          else begin
            // a degree-1 VN shares its only check with another degree-1 VN
            // in the last round: two equal-weight answers, BP cannot choose
            for (int j = 0; j < nv; j++) if (ev[j]) rr = j;
            gg = 0;
            for (int i = 0; i < num_cn(d); i++) gg += int'(hm[i][rr]);
            if (gg == 1) n_single_ok++;
            $display("single error d=%0d z=%0d vn=%0d (degree %0d): conv=%0d iter=%0d",
                     d, z, rr, gg, converged, iterations);
          end
        end
      end
    check(n_single_ok == n_single,
          $sformatf("single errors: %0d of %0d decoded", n_single_ok, n_single));

    // hard frames with the lottery active, and iteration timing
    for (int f = 0; f < 8; f++) begin
      build_h(5, f[0]);
      foreach (ev[i]) ev[i] = 1'b0;
      for (int w = 0; w < 2 + f; w++) ev[$urandom % num_vn(5)] = 1'b1;
      decode(5, f[0], 25, wrong);
      $display("frame w=%0d: conv=%0d iter=%0d flips=%0d", 2 + f, converged, iterations, n_flips);
    end
    m  = num_cn(5);
    nv = num_vn(5);
    rr = (m + ARRAY - 1) / ARRAY;
    gg = (nv + 2*ARRAY - 1) / (2*ARRAY);
    check(iter_cycles == 3*rr + gg + 5,
          $sformatf("iteration takes %0d cycles, expected %0d", iter_cycles, 3*rr + gg + 5));
    check(n_flip_runs > 0, "lottery never flipped");
    check(n_fail > 0, "max-iteration give-up never happened");
    $display("single %0d/%0d, converged %0d, gave up %0d, flip runs %0d, iteration %0d cycles",
             n_single_ok, n_single, n_conv, n_fail, n_flip_runs, iter_cycles);
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
