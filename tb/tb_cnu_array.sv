// tb_cnu_array: self-checking test of the normalized min-sum CNU array
// (ARRAY = 16, six banks per CN). Reference per CN, written from the
// min-sum definition: over the existing edges (mask = 1), the magnitude sent
// on edge b is the smallest |alpha| of the other edges, scaled by
// (1 - 2^-(iter+1)) (computed as m - floor(m / 2^(iter+1)), no scaling
// once 2^(iter+1) exceeds the magnitude range); its sign is the product
// of the other edges' signs and (-1)^syndrome. Masked edges get 0.
`timescale 1ns/1ps
module tb_cnu_array;
  import lbp_pkg::*;
  localparam int ARRAY = 16, IW = 9;
  logic [IW-1:0] iter;
  msg_t alpha [NBANK][ARRAY], beta [NBANK][ARRAY];
  logic mask [NBANK][ARRAY], synd [ARRAY];
  int checks = 0, failures = 0;

  cnu_array #(.ARRAY(ARRAY), .IW(IW)) dut (.*);

  function automatic int iabs(input int x);
    return x < 0 ? (x < -127 ? 127 : -x) : x;
  endfunction

  initial begin
    for (int t = 0; t < 300; t++) begin
      iter = IW'($urandom % 12);
      foreach (alpha[b, k]) begin
        alpha[b][k] = msg_t'(($urandom % 255) - 127);
        mask[b][k]  = (t % 5 == 0) ? 1'b1 : 1'($urandom);
      end
      for (int k = 0; k < ARRAY; k++) synd[k] = 1'($urandom);
      #1;
      for (int k = 0; k < ARRAY; k++)
        for (int b = 0; b < NBANK; b++) begin
          int m, neg, exp;
          m = 127; neg = int'(synd[k]);
          for (int o = 0; o < NBANK; o++)
            if (o != b && mask[o][k]) begin
              if (iabs(int'(alpha[o][k])) < m) m = iabs(int'(alpha[o][k]));
              if (alpha[o][k] < 0) neg ^= 1;
            end
          if (int'(iter) + 1 < 8) m = m - (m >> (int'(iter) + 1));
          exp = !mask[b][k] ? 0 : (neg ? -m : m);
          checks++;
          if (int'(beta[b][k]) != exp) begin
            failures++;
            if (failures < 10) $display("FAIL: CN %0d bank %0d iter %0d: beta %0d expected %0d",
                                        k, b, iter, beta[b][k], exp);
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
