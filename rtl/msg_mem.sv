// msg_mem: message memory in CN layout, used for both the CN memory (C2V
// messages beta) and the VN memory (V2C messages alpha).
//
// Six banks (VN0..VN3, previous-round, next-round) sit side by side; one row of
// every bank holds the messages of the same ARRAY adjacent CNs, so row r covers
// CNs r*ARRAY .. r*ARRAY+ARRAY-1. All six banks are read and written together,
// one full row per cycle, which is what lets the check-node array consume a
// row directly. Depth is ceil(CNs/ARRAY) for the largest supported distance.
// Layout and bank roles follow the paper; the single read port with one cycle
// of latency and the single write port are this design's choice for an SRAM.
//
// Interface: rd_en/rd_row -> rd_data valid the next cycle (rd_valid);
//            wr_en/wr_row/wr_data written at the clock edge.
module msg_mem
  import lbp_pkg::*;
#(
  parameter int D_MAX = 27,
  parameter int ARRAY = 256,
  parameter int ROWS  = (num_cn(D_MAX) + ARRAY - 1) / ARRAY,
  parameter int RW    = $clog2(ROWS + 1)
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   rd_en,
  input  logic [RW-1:0]          rd_row,
  output msg_t                   rd_data [NBANK][ARRAY],
  output logic                   rd_valid,
  input  logic                   wr_en,
  input  logic [RW-1:0]          wr_row,
  input  msg_t                   wr_data [NBANK][ARRAY]
);

  msg_t mem [ROWS][NBANK][ARRAY];

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) rd_valid <= 1'b0;
    else        rd_valid <= rd_en;

  always_ff @(posedge clk) begin
    if (rd_en && int'(rd_row) < ROWS) rd_data <= mem[rd_row];
    if (wr_en && int'(wr_row) < ROWS) mem[wr_row] <= wr_data;
  end

endmodule
