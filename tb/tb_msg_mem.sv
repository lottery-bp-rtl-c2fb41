// tb_msg_mem: self-checking test of the six-bank message memory (used as both
// the CN memory and the VN memory) at D_MAX = 5, ARRAY = 8 (13 rows).
// Writes random rows, reads them back in random order against a reference
// copy, checks the one-cycle read latency (rd_valid the cycle after rd_en)
// and that a read and a write of the same row in one cycle return the old
// contents (read-before-write).
`timescale 1ns/1ps
module tb_msg_mem;
  import lbp_pkg::*;
  localparam int D_MAX = 5, ARRAY = 8;
  localparam int ROWS = (num_cn(D_MAX) + ARRAY - 1) / ARRAY;
  localparam int RW = $clog2(ROWS + 1);

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic rd_en, rd_valid, wr_en;
  logic [RW-1:0] rd_row, wr_row;
  msg_t rd_data [NBANK][ARRAY];
  msg_t wr_data [NBANK][ARRAY];
  msg_t ref_mem [ROWS][NBANK][ARRAY];
  int checks = 0, failures = 0;

  msg_mem #(.D_MAX(D_MAX), .ARRAY(ARRAY)) dut (.*);

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  task automatic compare(input int r);
    int bad;
    bad = 0;
    for (int b = 0; b < NBANK; b++)
      for (int k = 0; k < ARRAY; k++) if (rd_data[b][k] != ref_mem[r][b][k]) bad++;
    check(bad == 0, $sformatf("row %0d: %0d words differ", r, bad));
  endtask

  initial begin
    rd_en = 0; wr_en = 0; rd_row = 0; wr_row = 0;
    foreach (wr_data[b, k]) wr_data[b][k] = '0;
    repeat (2) @(negedge clk);
    check(rd_valid == 1'b0, "rd_valid must be low after reset");
    rst_n = 1'b1;
    for (int r = 0; r < ROWS; r++) begin
      wr_en = 1'b1; wr_row = RW'(r);
      foreach (wr_data[b, k]) begin wr_data[b][k] = msg_t'($urandom); ref_mem[r][b][k] = wr_data[b][k]; end
      @(negedge clk);
    end
    wr_en = 1'b0;
    for (int t = 0; t < 60; t++) begin
      int r;
      r = $urandom % ROWS;
      rd_en = 1'b1; rd_row = RW'(r);
      @(negedge clk);
      rd_en = 1'b0;
      check(rd_valid == 1'b1, "rd_valid one cycle after rd_en");
      compare(r);
      @(negedge clk);
      check(rd_valid == 1'b0, "rd_valid is a single-cycle pulse");
    end
    // read and write the same row in one cycle: the read sees the old data
    rd_en = 1'b1; rd_row = RW'(3); wr_en = 1'b1; wr_row = RW'(3);
    foreach (wr_data[b, k]) wr_data[b][k] = msg_t'($urandom);
    @(negedge clk);
    rd_en = 1'b0; wr_en = 1'b0;
    compare(3);
    foreach (wr_data[b, k]) ref_mem[3][b][k] = wr_data[b][k];
    rd_en = 1'b1;
    @(negedge clk);
    rd_en = 1'b0;
    compare(3);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
