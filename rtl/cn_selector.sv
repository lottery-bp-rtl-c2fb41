// cn_selector: CN selector of the lottery, with the unmatch register.
//
// During syndrome comparison every CN row writes its unmatch bits here and the
// selector keeps the running count N of unsatisfied CNs. When the lottery
// starts it takes the random value r in [0,1) (RAND_W-bit fraction) and picks
// the floor(r*N)-th unsatisfied CN, counting in CN order, as the paper
// describes ("selects a CN based on a random number by counting mismatches").
// The count is done one row per cycle: a row whose population count takes the
// running prefix past the target holds the selected CN.
//
// Timing: start is accepted when idle; done pulses 1 to nrows+1 cycles later
// with sel_valid (0 when N = 0) and sel_cn. clr zeroes N before a new pass of
// writes.
module cn_selector
  import lbp_pkg::*;
#(
  parameter int D_MAX = 27,
  parameter int ARRAY = 256,
  parameter int NCN   = num_cn(D_MAX),
  parameter int ROWS  = (NCN + ARRAY - 1) / ARRAY,
  parameter int RW    = $clog2(ROWS + 1),
  parameter int CNW   = $clog2(NCN + 1)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              clr,
  input  logic              wr_en,
  input  logic [RW-1:0]     wr_row,
  input  logic              wr_bits [ARRAY],
  input  logic [RW-1:0]     nrows,
  input  logic              start,
  input  logic [RAND_W-1:0] rand_r,
  output logic [CNW-1:0]    n_unsat,
  output logic              busy,
  output logic              done,
  output logic              sel_valid,
  output logic [CNW-1:0]    sel_cn
);

  logic [ARRAY-1:0] ureg [ROWS];
  logic [RW-1:0]    row;
  logic [CNW-1:0]   prefix, target;

  always_ff @(posedge clk)
    if (wr_en && int'(wr_row) < ROWS)
      for (int k = 0; k < ARRAY; k++) ureg[wr_row][k] <= wr_bits[k];

  // population count and position of the (target-prefix)-th one in the row
  logic [CNW-1:0]            pc;
  logic [$clog2(ARRAY)-1:0]  pos;
  always_comb begin
    logic [CNW-1:0] seen;
    pc   = '0;
    pos  = '0;
    seen = '0;
    for (int k = 0; k < ARRAY; k++)
      if (ureg[row][k]) begin
        if (prefix + seen == target) pos = ($clog2(ARRAY))'(k);
        seen = seen + 1'b1;
        pc   = pc + 1'b1;
      end
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      n_unsat   <= '0;
      busy      <= 1'b0;
      done      <= 1'b0;
      sel_valid <= 1'b0;
      sel_cn    <= '0;
      row       <= '0;
      prefix    <= '0;
      target    <= '0;
    end else begin
      done <= 1'b0;
      if (clr) n_unsat <= '0;
      else if (wr_en) begin
        logic [CNW-1:0] c;
        c = '0;
        for (int k = 0; k < ARRAY; k++) c = c + CNW'(wr_bits[k]);
        n_unsat <= n_unsat + c;
      end
      if (!busy && start) begin
        if (n_unsat == '0) begin
          done      <= 1'b1;
          sel_valid <= 1'b0;
        end else begin
          busy   <= 1'b1;
          row    <= '0;
          prefix <= '0;
          target <= CNW'((64'(n_unsat) * 64'(rand_r)) >> RAND_W);
        end
      end else if (busy) begin
        if (prefix + pc > target) begin
          busy      <= 1'b0;
          done      <= 1'b1;
          sel_valid <= 1'b1;
          sel_cn    <= CNW'(int'(row) * ARRAY + int'(pos));
        end else if (row + 1'b1 >= nrows) begin
          busy      <= 1'b0;     // count and register disagree: no selection
          done      <= 1'b1;
          sel_valid <= 1'b0;
        end else begin
          prefix <= prefix + pc;
          row    <= row + 1'b1;
        end
      end
    end

endmodule
