// tb_synd_cmp: self-checking test of the syndrome comparison (ARRAY = 16).
// unmatch must be (estimated XOR measured) on existing CNs only, and
// n_unmatch its population count.
`timescale 1ns/1ps
module tb_synd_cmp;
  localparam int ARRAY = 16;
  localparam int CW = $clog2(ARRAY + 1);
  logic s_hat [ARRAY], s_meas [ARRAY], cn_valid [ARRAY], unmatch [ARRAY];
  logic [CW-1:0] n_unmatch;
  int checks = 0, failures = 0;

  synd_cmp #(.ARRAY(ARRAY)) dut (.*);

  initial begin
    for (int t = 0; t < 300; t++) begin
      int cnt, bad;
      for (int k = 0; k < ARRAY; k++) begin
        s_hat[k] = 1'($urandom);
        s_meas[k] = 1'($urandom);
        cn_valid[k] = (t % 4 == 0) ? 1'b1 : 1'($urandom);
      end
      #1;
      cnt = 0; bad = 0;
      for (int k = 0; k < ARRAY; k++) begin
        logic u;
        u = cn_valid[k] & (s_hat[k] ^ s_meas[k]);
        if (u) cnt++;
        if (unmatch[k] != u) bad++;
      end
      checks++;
      if (bad != 0 || int'(n_unmatch) != cnt) begin
        failures++;
        if (failures < 10) $display("FAIL: %0d bits wrong, count %0d expected %0d", bad, n_unmatch, cnt);
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
