// sharp_cell_state: the double-buffered cell-state scratchpad (192 KB).
//
// A line holds the K/4 fp32 cell-state elements that the cell updater produces
// per cycle. Time step t reads c_{t-1} from half (t-1) mod 2 and writes c_t into
// half t mod 2, so a step never overwrites a value it still has to read. Reads
// take one cycle. Size and double buffering follow the accelerator's
// description; line width and latency are this design's choices.
module sharp_cell_state
  import sharp_pkg::*;
#(
  parameter int unsigned W     = 8,      // fp32 elements per line (K/4)
  parameter int unsigned LINES = 6144,   // 192 KB / (W * 4 bytes), both halves
  localparam int unsigned HALF = LINES / 2,
  localparam int unsigned AW   = $clog2(HALF)
) (
  input  logic          clk,
  input  logic          wr_en,
  input  logic          wr_half,
  input  logic [AW-1:0] wr_addr,
  input  fp32_t         wr_data [W],
  input  logic          rd_en,
  input  logic          rd_half,
  input  logic [AW-1:0] rd_addr,
  output fp32_t         rd_data [W]
);
  fp32_t mem [2][HALF][W];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_half][wr_addr] <= wr_data;
    if (rd_en) rd_data <= mem[rd_half][rd_addr];
  end
endmodule
