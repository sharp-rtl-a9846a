// sharp_config_table: the small on-chip table of tile configurations.
//
// The best tile configuration for each LSTM hidden dimension is found offline
// and preloaded here. Before a layer runs, the pipeline controller looks up the
// layer's hidden dimension; the answer (hit and configuration) appears one cycle
// after lookup_en. Every valid entry is compared at once and the lowest-numbered
// match wins; a miss returns CFG4 (32-row tiles), the configuration the
// accelerator uses when no exploration result is given. The table's purpose
// comes from the accelerator's description; its size, the match rule and the
// default on a miss are this design's choices.
module sharp_config_table
  import sharp_pkg::*;
#(
  parameter int unsigned ENTRIES = 16,
  localparam int unsigned IW = (ENTRIES > 1) ? $clog2(ENTRIES) : 1
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       wr_en,
  input  logic [IW-1:0] wr_idx,
  input  logic [15:0] wr_dim,
  input  tile_cfg_e  wr_cfg,
  input  logic       wr_valid,      // 0 clears the entry
  input  logic       lookup_en,
  input  logic [15:0] lookup_dim,
  output logic       hit,
  output tile_cfg_e  cfg
);
  logic [ENTRIES-1:0] valid;
  logic [15:0]        dim [ENTRIES];
  tile_cfg_e          tcfg [ENTRIES];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) valid <= '0;
    else if (wr_en) valid[wr_idx] <= wr_valid;
  end

  always_ff @(posedge clk) begin
    if (wr_en) begin
      dim[wr_idx]  <= wr_dim;
      tcfg[wr_idx] <= wr_cfg;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      hit <= 1'b0;
      cfg <= CFG4;
    end else if (lookup_en) begin
      hit <= 1'b0;
      cfg <= CFG4;
      for (int i = ENTRIES - 1; i >= 0; i--) begin
        if (valid[i] && dim[i] == lookup_dim) begin
          hit <= 1'b1;
          cfg <= tcfg[i];
        end
      end
    end
  end
endmodule
