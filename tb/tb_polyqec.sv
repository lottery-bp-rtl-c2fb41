// tb_polyqec: end-to-end test of the PolyQec decoder at its default (full)
// parameters: D_MAX = 27, ARRAY = 256, 65536-entry sorter.
//
// The testbench builds the space-time check matrix on its own from the
// lattice geometry of the unrotated surface code (two qubit sub-lattices A
// (d x d) and B ((d-1) x (d-1)); X check (r,c) touches A(r,c), A(r+1,c),
// B(r,c-1), B(r,c); Z check (r,c) touches A(r,c), A(r,c+1), B(r-1,c), B(r,c);
// one measurement-error column per check and round) and first checks that
// H_X and H_Z commute. For each frame it draws a random error, forms the
// syndrome, loads syndrome and H, runs the decoder and checks that the
// returned error reproduces the syndrome (H e = s), whichever decoder made it.
// It counts the mechanisms a run should exercise: BP convergence, early exit
// on a zero syndrome, the maximum-iteration hand-over to OSD, the lottery sign
// flip, both X and Z checks and two code distances; one that never happened
// is a failure.
`timescale 1ns/1ps
module tb_polyqec;
  import lbp_pkg::*;

  localparam int ARRAY = 256;
  localparam int DT    = 5;                  // largest distance simulated
  localparam int MRT   = num_cn(DT);
  localparam int MCT   = num_vn(DT);

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic        is_z, s_wr_en, h_wr_en, start, busy, done, converged, osd_used;
  logic [5:0]  code_d;
  msg_t        mu;
  logic [8:0]  max_iter, iterations;
  logic [15:0] rand_r, n_flips;
  logic [6:0]  s_wr_row;
  logic [ARRAY-1:0] s_wr_bits, h_wr_data, err_rd_data;
  logic [14:0] h_wr_row, osd_rank;
  logic [7:0]  h_wr_chunk, err_rd_chunk;

  polyqec dut (.*);

  int checks = 0, failures = 0;
  int n_conv = 0, n_osd = 0, n_flip_runs = 0, n_zero = 0, n_x = 0, n_z = 0, n_d3 = 0, n_d5 = 0;

  bit hm [MRT][MCT];
  bit ev [MCT];
  bit sv [MRT];
  bit dec [MCT];

  always @(posedge clk) rand_r <= 16'($urandom);

  // ---------------------------------------------------------------- H model
  task automatic build_h(input int d, input bit z);
    int m, n, cnt;
    m = d * (d - 1);
    n = d * d + (d - 1) * (d - 1);
    foreach (hm[i, j]) hm[i][j] = 1'b0;
    for (int t = 0; t < d; t++)
      for (int r = 0; r < (z ? d : d - 1); r++)
        for (int c = 0; c < (z ? d - 1 : d); c++) begin
          int row;
          row = t * m + (z ? r * (d - 1) + c : r * d + c);
          if (!z) begin
            hm[row][t*n + r*d + c] = 1'b1;                    // A(r,c)
            hm[row][t*n + (r+1)*d + c] = 1'b1;                // A(r+1,c)
            if (c >= 1)     hm[row][t*n + d*d + r*(d-1) + c-1] = 1'b1;  // B(r,c-1)
            if (c <= d - 2) hm[row][t*n + d*d + r*(d-1) + c] = 1'b1;    // B(r,c)
          end else begin
            hm[row][t*n + r*d + c] = 1'b1;                    // A(r,c)
            hm[row][t*n + r*d + c+1] = 1'b1;                  // A(r,c+1)
            if (r >= 1)     hm[row][t*n + d*d + (r-1)*(d-1) + c] = 1'b1; // B(r-1,c)
            if (r <= d - 2) hm[row][t*n + d*d + r*(d-1) + c] = 1'b1;     // B(r,c)
          end
          hm[row][d*n + row] = 1'b1;                          // this round's measurement
          if (t > 0) hm[row][d*n + row - m] = 1'b1;           // previous round's
        end
  endtask

  // X and Z stabilizers of one round must overlap on an even number of qubits
  task automatic check_commute(input int d);
    bit hx [MRT][MCT];
    int m, n, bad;
    m = d * (d - 1);
    n = d * d + (d - 1) * (d - 1);
    build_h(d, 1'b0);
    hx = hm;
    build_h(d, 1'b1);
    bad = 0;
    for (int a = 0; a < m; a++)
      for (int b = 0; b < m; b++) begin
        int ov;
        ov = 0;
        for (int q = 0; q < n; q++) ov += int'(hx[a][q] & hm[b][q]);
        if (ov % 2) bad++;
      end
    checks++;
    if (bad != 0) begin
      failures++;
      $display("FAIL: lattice model, %0d anticommuting pairs at d=%0d", bad, d);
    end
  endtask

  // -------------------------------------------------------------- one frame
  task automatic run_frame(input int d, input bit z, input int weight, input int mi,
                           input bit load_h);
    int m, nv, wrong;
    m  = num_cn(d);
    nv = num_vn(d);
    build_h(d, z);
    foreach (ev[i]) ev[i] = 1'b0;
    for (int w = 0; w < weight; w++) ev[$urandom % nv] = 1'b1;
    for (int i = 0; i < m; i++) begin
      sv[i] = 1'b0;
      for (int j = 0; j < nv; j++) sv[i] ^= hm[i][j] & ev[j];
    end
    @(negedge clk);
    for (int r = 0; r * ARRAY < m; r++) begin
      s_wr_en  = 1'b1;
      s_wr_row = 7'(r);
      for (int k = 0; k < ARRAY; k++) s_wr_bits[k] = (r*ARRAY + k < m) ? sv[r*ARRAY + k] : 1'b0;
      @(negedge clk);
    end
    s_wr_en = 1'b0;
    if (load_h)
      for (int i = 0; i < m; i++)
        for (int c = 0; c * ARRAY < nv; c++) begin
          h_wr_en    = 1'b1;
          h_wr_row   = 15'(i);
          h_wr_chunk = 8'(c);
          for (int k = 0; k < ARRAY; k++)
            h_wr_data[k] = (c*ARRAY + k < nv) ? hm[i][c*ARRAY + k] : 1'b0;
          @(negedge clk);
        end
    h_wr_en  = 1'b0;
    code_d   = 6'(d);
    is_z     = z;
    max_iter = 9'(mi);
    start    = 1'b1;
    @(negedge clk);
    start = 1'b0;
    while (!done) @(negedge clk);
    // read back the decision
    for (int c = 0; c * ARRAY < nv; c++) begin
      err_rd_chunk = 8'(c);
      #1;
      for (int k = 0; k < ARRAY; k++) if (c*ARRAY + k < nv) dec[c*ARRAY + k] = err_rd_data[k];
    end
    wrong = 0;
    for (int i = 0; i < m; i++) begin
      bit s;
      s = 1'b0;
      for (int j = 0; j < nv; j++) s ^= hm[i][j] & dec[j];
      if (s != sv[i]) wrong++;
    end
    checks++;
    if (wrong != 0) begin
      failures++;
      $display("FAIL: d=%0d z=%0d w=%0d conv=%0d osd=%0d: %0d syndrome bits not reproduced",
               d, z, weight, converged, osd_used, wrong);
    end
    checks++;
    if (converged == osd_used) begin
      failures++;
      $display("FAIL: exactly one of BP and OSD must produce the answer");
    end
    checks++;
    if (converged && int'(iterations) > mi) begin
      failures++;
      $display("FAIL: %0d iterations with a limit of %0d", iterations, mi);
    end
    if (converged) n_conv++;
    if (osd_used) n_osd++;
    if (n_flips != 0) n_flip_runs++;
    if (weight == 0 && converged && iterations == 1) n_zero++;
    if (z) n_z++; else n_x++;
    if (d == 3) n_d3++;
    if (d == 5) n_d5++;
    $display("frame d=%0d %s w=%0d: conv=%0d osd=%0d iter=%0d flips=%0d rank=%0d",
             d, z ? "Z" : "X", weight, converged, osd_used, iterations, n_flips, osd_rank);
  endtask

  initial begin
    is_z = 0; code_d = 3; mu = msg_t'(8'sd96); max_iter = 9'd30;
    s_wr_en = 0; s_wr_row = 0; s_wr_bits = '0; h_wr_en = 0; h_wr_row = 0;
    h_wr_chunk = 0; h_wr_data = '0; start = 0; err_rd_chunk = 0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    check_commute(3);
    check_commute(5);
    run_frame(3, 1'b0, 0, 30, 1'b1);     // zero syndrome: converges at once
    run_frame(3, 1'b0, 1, 30, 1'b0);     // single error: BP converges
    run_frame(3, 1'b1, 2, 30, 1'b1);     // Z checks
    run_frame(5, 1'b0, 6, 1, 1'b1);      // one iteration only: OSD takes over
    run_frame(5, 1'b1, 3, 40, 1'b1);
    for (int f = 0; f < 6; f++) run_frame(5, f[0], 10, 20, 1'b1);  // heavy: lottery, OSD
    for (int f = 0; f < 4; f++) run_frame(3, f[0], 4, 12, 1'b1);
    checks++; if (n_conv == 0)      begin failures++; $display("FAIL: BP never converged"); end
    checks++; if (n_zero == 0)      begin failures++; $display("FAIL: no immediate early exit"); end
    checks++; if (n_osd == 0)       begin failures++; $display("FAIL: OSD never invoked"); end
    checks++; if (n_flip_runs == 0) begin failures++; $display("FAIL: lottery never flipped"); end
    checks++; if (n_x == 0 || n_z == 0) begin failures++; $display("FAIL: X/Z mode not both used"); end
    checks++; if (n_d3 == 0 || n_d5 == 0) begin failures++; $display("FAIL: not both distances"); end
    $display("mechanisms: converged=%0d zero_exit=%0d osd=%0d lottery_runs=%0d X=%0d Z=%0d",
             n_conv, n_zero, n_osd, n_flip_runs, n_x, n_z);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
