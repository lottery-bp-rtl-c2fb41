// tb_bitonic_sorter: self-checking test of the bitonic LLR sorter at
// N_MAX = 256, ARRAY = 8 (16 entries loaded per cycle, 8 compare-and-swap
// units). For random sizes n (powers of two and not), random LLRs are loaded
// and sorted; the read port must give, for positions 0..n-1, LLRs in
// ascending order (most likely error first) whose indices form a permutation
// of 0..n-1 and point back at the loaded values. The run time must be the
// padding sweep plus log2(P)(log2(P)+1)/2 bitonic steps of P/(2*ARRAY)
// cycles each (P = n rounded up to a power of two).
`timescale 1ns/1ps
module tb_bitonic_sorter;
  import lbp_pkg::*;
  localparam int N_MAX = 256, ARRAY = 8;
  localparam int IDXW = $clog2(N_MAX);
  localparam int GW = $clog2(N_MAX / (2*ARRAY) + 1);
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic ld_en, start, busy, done;
  logic [GW-1:0] ld_grp;
  msg_t ld_llr [2*ARRAY];
  logic [IDXW:0] n;
  logic [IDXW-1:0] rd_pos, rd_idx;
  msg_t rd_llr;
  int checks = 0, failures = 0;

  bitonic_sorter #(.N_MAX(N_MAX), .ARRAY(ARRAY)) dut (.*);

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", msg); end
  endtask

  initial begin
    ld_en = 0; start = 0; ld_grp = 0; n = 0; rd_pos = 0;
    foreach (ld_llr[k]) ld_llr[k] = '0;
    repeat (2) @(negedge clk);
    check(!busy && !done, "idle after reset");
    rst_n = 1'b1;
    for (int t = 0; t < 24; t++) begin
      int nn, p, lg, steps, cyc, expect_cyc, bad, pad0;
      msg_t val [N_MAX];
      msg_t prev;
      int seen [N_MAX];
      case (t % 4)
        0: nn = 1 << (1 + $urandom % IDXW);
        1: nn = 2 + $urandom % (N_MAX - 1);
        2: nn = N_MAX;
        default: nn = 2 + $urandom % 40;
      endcase
      p = 2; lg = 1;
      while (p < nn) begin p = p * 2; lg++; end
      for (int g = 0; g * 2 * ARRAY < nn; g++) begin
        ld_en = 1'b1; ld_grp = GW'(g);
        for (int k = 0; k < 2*ARRAY; k++) begin
          ld_llr[k] = msg_t'(($urandom % 255) - 127);
          if (t % 5 == 0) ld_llr[k] = msg_t'(($urandom % 5) - 2);   // many ties
          val[g*2*ARRAY + k] = ld_llr[k];
        end
        @(negedge clk);
      end
      ld_en = 1'b0;
      n = (IDXW+1)'(nn);
      start = 1'b1;
      @(negedge clk);
      start = 1'b0;
      cyc = 1;
      while (!done && cyc < 100000) begin @(negedge clk); cyc++; end
      steps = lg * (lg + 1) / 2;
      pad0 = (nn / (2*ARRAY)) * (2*ARRAY);
      expect_cyc = 1 + ((p - pad0 + 2*ARRAY - 1) / (2*ARRAY) > 0 ? (p - pad0 + 2*ARRAY - 1) / (2*ARRAY) : 1)
                   + steps * ((p / 2 + ARRAY - 1) / ARRAY);
      check(cyc == expect_cyc, $sformatf("n=%0d: %0d cycles, expected %0d", nn, cyc, expect_cyc));
      foreach (seen[i]) seen[i] = 0;
      bad = 0;
      prev = MSG_MIN;
      for (int i = 0; i < nn; i++) begin
        rd_pos = IDXW'(i);
        #1;
        if (int'(rd_idx) >= nn) bad++;
        else begin
          seen[rd_idx]++;
          if (val[rd_idx] != rd_llr) bad++;
        end
        if (rd_llr < prev) bad++;
        prev = rd_llr;
      end
      for (int i = 0; i < nn; i++) if (seen[i] != 1) bad++;
      @(negedge clk);
      check(bad == 0, $sformatf("n=%0d: %0d ordering/permutation errors", nn, bad));
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
