// tb_synd_est: self-checking test of the syndrome estimator (ARRAY = 16).
// Each CN's estimated syndrome bit must be the XOR of the hard decisions of
// its existing edges (mask = 1); masked-off banks must not count.
`timescale 1ns/1ps
module tb_synd_est;
  import lbp_pkg::*;
  localparam int ARRAY = 16;
  logic e_cn [NBANK][ARRAY], mask [NBANK][ARRAY], s_hat [ARRAY];
  int checks = 0, failures = 0;

  synd_est #(.ARRAY(ARRAY)) dut (.*);

  initial begin
    for (int t = 0; t < 300; t++) begin
      foreach (e_cn[b, k]) begin e_cn[b][k] = 1'($urandom); mask[b][k] = 1'($urandom); end
      #1;
      for (int k = 0; k < ARRAY; k++) begin
        int ones;
        ones = 0;
        for (int b = 0; b < NBANK; b++) if (mask[b][k] && e_cn[b][k]) ones++;
        checks++;
        if (s_hat[k] != 1'(ones % 2)) begin
          failures++;
          if (failures < 10) $display("FAIL: CN %0d: s_hat=%0d, %0d ones", k, s_hat[k], ones);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
