// sharp_add_reduce: the Reconfigurable Add-Reduce stage (R-Add-Reduce) of the
// compute unit: a pipelined tree of K-wide fp32 adders, the reconfiguration
// multiplexers and eight K-accumulators.
//
// Level 0 of the tree is the N product vectors of the VS units; node i of level
// l sums VS units i*2^l .. (i+1)*2^l-1, so level logN-g holds 2^g sums, one per
// row group of a configuration with 2^g groups. Every level is registered, giving
// one reduction per cycle once the pipeline is full. The outputs of levels
// logN-3 .. logN-1 are delayed to line up with the root, and per accumulator a
// multiplexer selects, by the step's tile configuration, the level whose nodes
// are whole row groups: CFG1 (8 groups) takes level logN-3, CFG2 logN-2, CFG3
// logN-1, CFG4 the root. Accumulator g loads its node on the first column step
// of a tile, adds it on later steps, and on the last step the completed tile
// (up to 8 K-vectors of MVM results) is presented on res with valid_o.
// Latency: logN + 1 cycles from valid_i to valid_o; a new step every cycle.
// The tree, the four-level multiplexing and the eight accumulators follow the
// accelerator's description; the alignment registers are this design's choice.
module sharp_add_reduce
  import sharp_pkg::*;
#(
  parameter int unsigned N = 32,
  parameter int unsigned K = 32,
  localparam int unsigned LOGN = $clog2(N)
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      valid_i,
  input  tile_tag_t tag_i,
  input  fp32_t     prod [N][K],
  output logic      valid_o,        // a completed tile
  output tile_tag_t tag_o,
  output fp32_t     res [MAX_GROUPS][K]
);
  // node values of every level; lvl[l] has N >> l nodes (stored N wide)
  fp32_t     lvl   [LOGN+1][N][K];
  logic      vld   [LOGN+1];
  tile_tag_t tg    [LOGN+1];

  always_comb begin
    lvl[0] = prod;
    vld[0] = valid_i;
    tg[0]  = tag_i;
  end

  for (genvar l = 1; l <= LOGN; l++) begin : g_level
    for (genvar i = 0; i < N; i++) begin : g_node
      for (genvar k = 0; k < K; k++) begin : g_lane
        if (i < (N >> l)) begin : g_add
          always_ff @(posedge clk) lvl[l][i][k] <= fp32_add(lvl[l-1][2*i][k], lvl[l-1][2*i+1][k]);
        end else begin : g_unused
          always_ff @(posedge clk) lvl[l][i][k] <= '0;
        end
      end
    end
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) vld[l] <= 1'b0;
      else        vld[l] <= vld[l-1];
    end
    always_ff @(posedge clk) tg[l] <= tg[l-1];
  end

  // Alignment: the top four levels (or fewer for small N), delayed to the root's time.
  localparam int unsigned NSEL = (LOGN < 3) ? LOGN + 1 : 4;  // selectable levels
  fp32_t aligned [4][MAX_GROUPS][K];   // index g = log2(groups)

  for (genvar g = 0; g < 4; g++) begin : g_align
    if (g < NSEL) begin : g_used
      localparam int unsigned L = LOGN - g;   // level holding 2^g row groups
      fp32_t dly [g+1][1 << g][K];
      always_comb begin
        for (int m = 0; m < (1 << g); m++) dly[0][m] = lvl[L][m];
      end
      for (genvar d = 1; d <= g; d++) begin : g_d
        always_ff @(posedge clk) dly[d] <= dly[d-1];
      end
      for (genvar m = 0; m < MAX_GROUPS; m++) begin : g_m
        if (m < (1 << g)) begin : g_v
          assign aligned[g][m] = dly[g][m];
        end else begin : g_z
          assign aligned[g][m] = '{default: '0};
        end
      end
    end else begin : g_none
      assign aligned[g] = '{default: '{default: '0}};
    end
  end

  // Reconfiguration multiplexers and K-accumulators.
  fp32_t acc [MAX_GROUPS][K];
  fp32_t sel [MAX_GROUPS][K];
  fp32_t nxt [MAX_GROUPS][K];
  tile_tag_t t_top;
  logic      v_top;
  assign t_top = tg[LOGN];
  assign v_top = vld[LOGN];

  always_comb begin
    for (int m = 0; m < MAX_GROUPS; m++) begin
      for (int k = 0; k < K; k++) begin
        sel[m][k] = aligned[cfg_log_groups(t_top.cfg)][m][k];
        nxt[m][k] = t_top.first ? sel[m][k] : fp32_add(acc[m][k], sel[m][k]);
      end
    end
  end

  always_ff @(posedge clk) begin
    if (v_top) acc <= nxt;
    if (v_top && t_top.last) res <= nxt;
    tag_o <= t_top;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) valid_o <= 1'b0;
    else        valid_o <= v_top && t_top.last;
  end
endmodule
