// tb_vnu_array: self-checking test of the combinational VNU array
// (ARRAY = 16, so 32 VNUs). For random mu and C2V inputs it checks the
// posterior LLR lambda = mu + b0 + b1, the extrinsic V2C messages
// alpha0 = lambda - b0 and alpha1 = lambda - b1 (all saturated to +-127),
// the hard decision e = (lambda <= 0) on the unsaturated sum, and the
// initialization mode (init = 1: all outputs are mu).
`timescale 1ns/1ps
module tb_vnu_array;
  import lbp_pkg::*;
  localparam int ARRAY = 16;
  logic init;
  msg_t mu;
  msg_t b0 [2*ARRAY], b1 [2*ARRAY], lambda [2*ARRAY], alpha0 [2*ARRAY], alpha1 [2*ARRAY];
  logic e_hat [2*ARRAY];
  int checks = 0, failures = 0;

  vnu_array #(.ARRAY(ARRAY)) dut (.*);

  function automatic int sat(input int x);
    return x > 127 ? 127 : (x < -127 ? -127 : x);
  endfunction

  initial begin
    for (int t = 0; t < 200; t++) begin
      init = (t % 10 == 0);
      mu = msg_t'(($urandom % 255) - 127);
      for (int k = 0; k < 2*ARRAY; k++) begin
        b0[k] = msg_t'(($urandom % 255) - 127);
        b1[k] = (t % 3 == 0) ? msg_t'(0) : msg_t'(($urandom % 255) - 127);
      end
      #1;
      for (int k = 0; k < 2*ARRAY; k++) begin
        int x0, x1, s;
        x0 = init ? 0 : int'(b0[k]);
        x1 = init ? 0 : int'(b1[k]);
        s  = int'(mu) + x0 + x1;
        checks++;
        if (int'(lambda[k]) != sat(s) || int'(alpha0[k]) != sat(s - x0) ||
            int'(alpha1[k]) != sat(s - x1) || e_hat[k] != (s <= 0)) begin
          failures++;
          if (failures < 10)
            $display("FAIL: mu=%0d b0=%0d b1=%0d init=%0d -> l=%0d a0=%0d a1=%0d e=%0d",
                     mu, b0[k], b1[k], init, lambda[k], alpha0[k], alpha1[k], e_hat[k]);
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
