// sharp_inter_buffer: the double-buffered intermediate scratchpad (24 KB) that
// carries input-MVM results from one phase of the Unfolded schedule to the next.
//
// In the Unfolded schedule the input MVM W*x_t of a time step is computed ahead
// of the hidden MVM U*h_{t-1}; its K-element partial-result blocks are stored
// here and added to the hidden MVM's blocks just before activation. Two halves,
// selected by the parity of the time step, let the input MVM of step t+1 be
// written while the hidden MVM of step t still reads its half. A line holds the
// K results of one K-row block. Results are stored in fp16, which is what lets
// 24 KB hold two steps of the largest evaluated layer (4 x 1536 gate rows);
// this precision is this design's choice. Reads take one cycle.
module sharp_inter_buffer
  import sharp_pkg::*;
#(
  parameter int unsigned K     = 32,
  parameter int unsigned LINES = 384,   // 24 KB / (K * 2 bytes), both halves
  localparam int unsigned HALF = LINES / 2,
  localparam int unsigned AW   = $clog2(HALF)
) (
  input  logic          clk,
  input  logic          wr_en,
  input  logic          wr_half,
  input  logic [AW-1:0] wr_blk,
  input  fp16_t         wr_data [K],
  input  logic          rd_en,
  input  logic          rd_half,
  input  logic [AW-1:0] rd_blk,
  output fp16_t         rd_data [K]
);
  fp16_t mem [2][HALF][K];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_half][wr_blk] <= wr_data;
    if (rd_en) rd_data <= mem[rd_half][rd_blk];
  end
endmodule
