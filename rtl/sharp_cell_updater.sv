// sharp_cell_updater: the Cell Updater stage, which turns the four activated
// gates of K/4 hidden units into the new cell state and hidden output,
//   c_t = f .* c_{t-1} + i .* g        h_t = o .* tanh(c_t).
//
// Input is one K-lane vector of activated gate values per cycle, for one K-row
// block; the block's lanes are ordered [i | f | g | o], K/4 lanes each (the
// offline weight layout places the rows that way, so that one block carries
// every gate of the same K/4 hidden units). Pipeline:
//   C0  register the gates, read c_{t-1} from the cell-state scratchpad
//   C1  two point-wise fp16 multiplies f*c_{t-1} and i*g (operands narrowed to fp16)
//   C2  fp32 add gives c_t, which is written back to the scratchpad
//   C3..C6  A-MFU tanh(c_t)
//   C7  fp16 multiply by o; h_t is narrowed to fp16 and sent to the I/H buffer
// K/4 hidden elements leave every cycle; latency from valid_i to h_valid is 8
// cycles. On the first time step (first_i) c_{t-1} is taken as zero. The
// operator set and the throughput of K/4 elements per cycle follow the
// accelerator's description; the gate lane order and the stage split are this
// design's choices.
module sharp_cell_updater
  import sharp_pkg::*;
#(
  parameter int unsigned K    = 32,
  parameter int unsigned CS_AW = 12,   // cell-state half address width
  localparam int unsigned Q   = K / 4
) (
  input  logic                clk,
  input  logic                rst_n,
  // activated gates of one K-row block
  input  logic                valid_i,
  input  logic [BLK_W-1:0]    blk_i,
  input  logic [STEP_W-1:0]   step_i,
  input  logic                first_i,
  input  fp32_t               act [K],
  // cell-state scratchpad
  output logic                cs_rd_en,
  output logic                cs_rd_half,
  output logic [CS_AW-1:0]    cs_rd_addr,
  input  fp32_t               cs_rd_data [Q],
  output logic                cs_wr_en,
  output logic                cs_wr_half,
  output logic [CS_AW-1:0]    cs_wr_addr,
  output fp32_t               cs_wr_data [Q],
  // hidden output, Q elements of h_t
  output logic                h_valid,
  output logic [BLK_W-1:0]    h_blk,
  output logic [STEP_W-1:0]   h_step,
  output fp16_t               h_data [Q]
);
  localparam int unsigned TW = BLK_W + STEP_W;

  // C0
  logic v0, first0;
  logic [BLK_W-1:0]  blk0;
  logic [STEP_W-1:0] step0;
  fp32_t ig0 [Q], fg0 [Q], gg0 [Q], og0 [Q];
  // C1
  logic v1;
  logic [BLK_W-1:0]  blk1;
  logic [STEP_W-1:0] step1;
  fp32_t fc1 [Q], ig1 [Q], og1 [Q];
  // C2
  logic v2;
  logic [BLK_W-1:0]  blk2;
  logic [STEP_W-1:0] step2;
  fp32_t c2 [Q], og2 [Q];
  // C3..C6 (A-MFU) and C7
  fp32_t og_d [4][Q];
  logic          tv;
  logic [TW-1:0] ttag;
  fp32_t         th [Q];

  assign cs_rd_en   = valid_i;
  assign cs_rd_half = ~step_i[0];
  assign cs_rd_addr = CS_AW'(blk_i);

  always_ff @(posedge clk) begin
    blk0 <= blk_i; step0 <= step_i; first0 <= first_i;
    for (int q = 0; q < Q; q++) begin
      ig0[q] <= act[q];
      fg0[q] <= act[Q + q];
      gg0[q] <= act[2*Q + q];
      og0[q] <= act[3*Q + q];
    end
    blk1 <= blk0; step1 <= step0;
    for (int q = 0; q < Q; q++) begin
      fc1[q] <= first0 ? 32'd0 : fp16_mul(fp32_to_fp16(fg0[q]), fp32_to_fp16(cs_rd_data[q]));
      ig1[q] <= fp16_mul(fp32_to_fp16(ig0[q]), fp32_to_fp16(gg0[q]));
      og1[q] <= og0[q];
    end
    blk2 <= blk1; step2 <= step1;
    for (int q = 0; q < Q; q++) begin
      c2[q]  <= fp32_add(fc1[q], ig1[q]);
      og2[q] <= og1[q];
    end
    og_d[0] <= og2;
    for (int i = 1; i < 4; i++) og_d[i] <= og_d[i-1];
    for (int q = 0; q < Q; q++)
      h_data[q] <= fp32_to_fp16(fp16_mul(fp32_to_fp16(og_d[3][q]), fp32_to_fp16(th[q])));
    {h_step, h_blk} <= ttag;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v0 <= 1'b0; v1 <= 1'b0; v2 <= 1'b0; h_valid <= 1'b0;
    end else begin
      v0 <= valid_i; v1 <= v0; v2 <= v1; h_valid <= tv;
    end
  end

  assign cs_wr_en   = v2;
  assign cs_wr_half = step2[0];
  assign cs_wr_addr = CS_AW'(blk2);
  assign cs_wr_data = c2;

  sharp_amfu #(.LANES(Q), .TAG_W(TW)) u_tanh (
    .clk, .rst_n,
    .valid_i (v2),
    .tag_i   ({step2, blk2}),
    .func    ({Q{1'b1}}),
    .x       (c2),
    .valid_o (tv),
    .tag_o   (ttag),
    .y       (th)
  );
endmodule
