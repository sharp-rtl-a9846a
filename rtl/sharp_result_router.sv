// sharp_result_router: routes the finished MVM tiles of the Unfolded schedule.
//
// Completed tiles (up to eight K-vectors of fp32 MVM results, with their tag)
// wait in a local FIFO in front of this stage; the router takes one tile at a
// time and sends its valid K-row blocks out one per cycle:
//  * input-MVM tile (W*x_t): each block is narrowed to fp16 and written to the
//    intermediate buffer, half t mod 2, line = block index;
//  * hidden-MVM tile (U*h_{t-1}): the matching block is read back from the
//    intermediate buffer (one cycle), added lane-wise in fp32, and the sum, the
//    complete gate pre-activation of the block, goes to the A-MFU.
// Because tiles leave the compute unit in issue order and the input MVM of a
// step is issued before its hidden MVM, a block is always stored before it is
// read back. Throughput is one block per cycle; the hidden path has two cycles
// of latency. Adding the two MVM halves before activation is the accelerator's
// Unfolded schedule; the per-block serialisation is this design's choice.
module sharp_result_router
  import sharp_pkg::*;
#(
  parameter int unsigned K     = 32,
  parameter int unsigned IB_AW = 7      // intermediate-buffer half address width
) (
  input  logic               clk,
  input  logic               rst_n,
  // tile in (from the local FIFO)
  input  logic               tile_valid,
  output logic               tile_ready,
  input  tile_tag_t          tile_tag,
  input  fp32_t              tile_res [MAX_GROUPS][K],
  // intermediate buffer
  output logic               ib_wr_en,
  output logic               ib_wr_half,
  output logic [IB_AW-1:0]   ib_wr_blk,
  output fp16_t              ib_wr_data [K],
  output logic               ib_rd_en,
  output logic               ib_rd_half,
  output logic [IB_AW-1:0]   ib_rd_blk,
  input  fp16_t              ib_rd_data [K],
  // gate pre-activations out (to the A-MFU)
  output logic               out_valid,
  output logic [BLK_W-1:0]   out_blk,
  output logic [STEP_W-1:0]  out_step,
  output fp32_t              out_vec [K]
);
  logic [2:0]        idx;          // block within the current tile
  logic              last_blk;
  logic              fire;
  logic [BLK_W-1:0]  cur_blk;
  fp32_t             cur [K];

  assign fire       = tile_valid;
  assign last_blk   = (4'(idx) + 4'd1 >= tile_tag.nvalid);
  assign tile_ready = tile_valid && last_blk;
  assign cur_blk    = tile_tag.blk + BLK_W'(idx);
  assign cur        = tile_res[idx];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                idx <= '0;
    else if (fire && last_blk) idx <= '0;
    else if (fire)             idx <= idx + 3'd1;
  end

  // input-MVM blocks go to the intermediate buffer
  always_comb begin
    ib_wr_en   = fire && tile_tag.phase == PH_INPUT;
    ib_wr_half = tile_tag.step[0];
    ib_wr_blk  = IB_AW'(cur_blk);
    for (int k = 0; k < K; k++) ib_wr_data[k] = fp32_to_fp16(cur[k]);
    ib_rd_en   = fire && tile_tag.phase == PH_HIDDEN;
    ib_rd_half = tile_tag.step[0];
    ib_rd_blk  = IB_AW'(cur_blk);
  end

  // hidden-MVM blocks: wait one cycle for the read, then add
  logic              h1_v;
  logic [BLK_W-1:0]  h1_blk;
  logic [STEP_W-1:0] h1_step;
  fp32_t             h1_vec [K];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      h1_v      <= 1'b0;
      out_valid <= 1'b0;
    end else begin
      h1_v      <= ib_rd_en;
      out_valid <= h1_v;
    end
  end

  always_ff @(posedge clk) begin
    h1_blk  <= cur_blk;
    h1_step <= tile_tag.step;
    h1_vec  <= cur;
    out_blk  <= h1_blk;
    out_step <= h1_step;
    for (int k = 0; k < K; k++) out_vec[k] <= fp32_add(h1_vec[k], fp16_to_fp32(ib_rd_data[k]));
  end
endmodule
