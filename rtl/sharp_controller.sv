// sharp_controller: the pipeline controller. It runs one LSTM layer over T time
// steps in the Unfolded order and drives the compute unit tile step by tile step.
//
// Schedule. Each time step t has two MVM phases over the stacked gate matrix
// (4H rows, in K-row blocks of B = ceil(4H/K)): the input phase W*x_t, whose
// results go to the intermediate buffer, and the hidden phase U*h_{t-1}, whose
// results are added to them and go on to activation and the cell updater. The
// phases are issued as I(0) H(0) I(1) H(1) ...; I(t+1) needs nothing from step t
// and is issued straight after H(t), so the compute unit works on it while H(t)
// is still being activated and turned into h_t. H(t+1) waits (a dependency stall)
// until the cell updater has delivered every block of h_t. At t = 0, h_{-1} = 0:
// the hidden phase runs with all scalars masked to zero.
//
// Tiling and reconfiguration. Before the layer starts, the layer's hidden
// dimension is looked up in the configuration table; the hit gives the tile
// configuration (R = 8, 4, 2 or 1 row groups of K rows), a miss gives CFG4. A
// phase walks the row blocks in tiles of R blocks; a tile takes
// ceil(cols / (N/R)) column steps, one per cycle. With pad_reconfig_en set, the
// last tile of a phase, if fewer than R blocks remain, is reconfigured to the
// smallest R' >= remaining blocks, which cuts the padded work.
//
// Per step the controller reads one weight line (same address in all banks; the
// weights are laid out offline in this issue order, input-weight partition at
// wi_base, hidden-weight partition at wh_base) and one I/H line; one cycle later
// it presents the step's control word to the compute unit. A tile's last step
// only issues while a credit for the tile FIFO behind the adder tree is free
// (a FIFO-full stall otherwise). Memory layout of the I/H buffer: x_t at line
// x_base + t*ceil(X/N); h_t at h_base + (t mod 2)*ceil(H/N).
// The Unfolded order, the table lookup and the padding reconfiguration follow
// the accelerator's description; the credit scheme, the memory layout and the
// zero-masked first hidden phase are this design's choices.
module sharp_controller
  import sharp_pkg::*;
#(
  parameter int unsigned N          = 32,
  parameter int unsigned K          = 32,
  parameter int unsigned WB_AW      = 14,
  parameter int unsigned IH_AW      = 16,
  parameter int unsigned FIFO_DEPTH = 4,
  localparam int unsigned LOGN = $clog2(N),
  localparam int unsigned LW   = (N > 1) ? $clog2(N) : 1,
  localparam int unsigned Q    = K / 4
) (
  input  logic               clk,
  input  logic               rst_n,
  // layer description
  input  logic               start,
  input  logic [15:0]        x_len,        // input-vector length (bias column included)
  input  logic [15:0]        h_len,        // hidden dimension H
  input  logic [STEP_W-1:0]  t_len,        // time steps T (>= 1)
  input  logic [WB_AW-1:0]   wi_base,
  input  logic [WB_AW-1:0]   wh_base,
  input  logic [IH_AW-1:0]   x_base,
  input  logic [IH_AW-1:0]   h_base,
  input  logic               pad_reconfig_en,
  output logic               busy,
  output logic               done,
  // configuration table
  output logic               ct_lookup_en,
  output logic [15:0]        ct_lookup_dim,
  input  logic               ct_hit,
  input  tile_cfg_e          ct_cfg,
  // memory reads for the next step
  output logic               wb_rd_en,
  output logic [WB_AW-1:0]   wb_rd_addr,
  output logic               ih_rd_en,
  output logic [IH_AW-1:0]   ih_rd_line,
  // control word to the compute unit (one cycle after the reads)
  output logic               cu_valid,
  output tile_tag_t          cu_tag,
  output logic [LW-1:0]      cu_col_off,
  output logic [LW:0]        cu_col_valid,
  // pipeline feedback
  input  logic               tile_pop,     // a tile left the FIFO
  input  logic               h_blk_done,   // the cell updater wrote one block of h_t
  input  logic [BLK_W-1:0]   h_wr_blk,
  input  logic [STEP_W-1:0]  h_wr_step,
  output logic [IH_AW-1:0]   ih_hwr_line,  // where that block goes in the I/H buffer
  output logic [LW-1:0]      ih_hwr_lane,
  // statistics
  output tile_cfg_e          layer_cfg,
  output logic               layer_cfg_hit,
  output logic [31:0]        cnt_steps,
  output logic [31:0]        cnt_dep_stall,
  output logic [31:0]        cnt_fifo_stall,
  output logic [31:0]        cnt_pad_reconfig
);
  typedef enum logic [1:0] {S_IDLE, S_LOOKUP, S_RUN, S_FINISH} state_e;
  state_e state;

  logic [15:0]        xl, hl;           // lines per x / h vector
  logic [BLK_W-1:0]   nblk;             // B
  logic [STEP_W-1:0]  t;                // current step
  logic [STEP_W-1:0]  steps_done;       // steps whose h_t is complete
  logic [BLK_W-1:0]   hblk_cnt;
  phase_e             ph;
  logic [BLK_W-1:0]   blk_base;
  logic [15:0]        s;                // column step within tile
  logic [WB_AW-1:0]   waddr;
  logic [IH_AW-1:0]   xline;            // first line of x_t
  logic [$clog2(FIFO_DEPTH+1)-1:0] credits;
  logic [15:0]        x_len_q, h_len_q;
  logic [STEP_W-1:0]  t_len_q;
  logic [WB_AW-1:0]   wi_q, wh_q;
  logic [IH_AW-1:0]   hb_q;
  logic               pad_q;

  // ---- current tile, combinational
  logic [BLK_W-1:0] rem;
  logic [1:0]       lg_r;               // log2 of the tile's row groups
  logic [3:0]       nvalid;
  logic [15:0]      cols, col_start, nsteps, remcols;
  logic [LW:0]      span;               // N / R
  logic             is_last, pad_now, dep_ok, credit_ok, issue;

  always_comb begin
    rem    = nblk - blk_base;
    lg_r   = 2'(cfg_log_groups(layer_cfg));
    pad_now = 1'b0;
    if (pad_q && rem < BLK_W'(cfg_groups(layer_cfg))) begin
      lg_r    = (rem <= 1) ? 2'd0 : (rem <= 2) ? 2'd1 : (rem <= 4) ? 2'd2 : 2'd3;
      pad_now = (lg_r != 2'(cfg_log_groups(layer_cfg)));
    end
    nvalid    = (rem < BLK_W'(1 << lg_r)) ? 4'(rem) : 4'(1 << lg_r);
    span      = (LW+1)'(N >> lg_r);
    cols      = (ph == PH_INPUT) ? x_len_q : h_len_q;
    nsteps    = 16'((32'(cols) + 32'(span) - 1) >> (LOGN - lg_r));
    col_start = 16'(32'(s) << (LOGN - lg_r));
    remcols   = cols - col_start;
    is_last   = (s + 16'd1 == nsteps);
    dep_ok    = (ph == PH_INPUT) || (steps_done >= t);
    credit_ok = !is_last || credits != '0;
    issue     = (state == S_RUN) && dep_ok && credit_ok;
  end

  assign busy          = (state != S_IDLE);
  assign ct_lookup_en  = (state == S_IDLE) && start;
  assign ct_lookup_dim = h_len;

  assign wb_rd_en   = issue;
  assign wb_rd_addr = waddr;
  assign ih_rd_en   = issue;
  assign ih_rd_line = (ph == PH_INPUT)
                    ? xline + IH_AW'(col_start >> LOGN)
                    : hb_q + (t[0] ? IH_AW'(0) : IH_AW'(hl)) + IH_AW'(col_start >> LOGN);

  // where the cell updater's block of h_t goes (half t mod 2)
  logic [31:0] helem;
  assign helem       = 32'(h_wr_blk) * Q;
  assign ih_hwr_line = hb_q + (h_wr_step[0] ? IH_AW'(hl) : IH_AW'(0)) + IH_AW'(helem >> LOGN);
  assign ih_hwr_lane = LW'(helem);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; done <= 1'b0; cu_valid <= 1'b0;
      credits <= ($clog2(FIFO_DEPTH+1))'(FIFO_DEPTH);
      t <= '0; steps_done <= '0; hblk_cnt <= '0; ph <= PH_INPUT;
      blk_base <= '0; s <= '0; waddr <= '0; xline <= '0;
      layer_cfg <= CFG4; layer_cfg_hit <= 1'b0;
      cnt_steps <= '0; cnt_dep_stall <= '0; cnt_fifo_stall <= '0; cnt_pad_reconfig <= '0;
      xl <= '0; hl <= '0; nblk <= '0; x_len_q <= '0; h_len_q <= '0; t_len_q <= '0;
      wi_q <= '0; wh_q <= '0; hb_q <= '0; pad_q <= 1'b0;
    end else begin
      done     <= 1'b0;
      cu_valid <= issue;
      credits  <= credits - ((issue && is_last) ? 1'b1 : 1'b0) + (tile_pop ? 1'b1 : 1'b0);
      if (h_blk_done) begin
        if (hblk_cnt + 1'b1 == nblk) begin
          hblk_cnt   <= '0;
          steps_done <= steps_done + 1'b1;
        end else begin
          hblk_cnt <= hblk_cnt + 1'b1;
        end
      end
      case (state)
        S_IDLE: if (start) begin
          state   <= S_LOOKUP;
          x_len_q <= x_len; h_len_q <= h_len; t_len_q <= t_len;
          wi_q <= wi_base; wh_q <= wh_base; hb_q <= h_base; pad_q <= pad_reconfig_en;
          xl   <= 16'((32'(x_len) + N - 1) / N);
          hl   <= 16'((32'(h_len) + N - 1) / N);
          nblk <= BLK_W'((32'(h_len) * 4 + K - 1) / K);
          xline <= x_base;
          waddr <= wi_base;
          t <= '0; steps_done <= '0; hblk_cnt <= '0; ph <= PH_INPUT;
          blk_base <= '0; s <= '0;
          cnt_steps <= '0; cnt_dep_stall <= '0; cnt_fifo_stall <= '0; cnt_pad_reconfig <= '0;
        end
        S_LOOKUP: begin
          layer_cfg     <= ct_hit ? ct_cfg : CFG4;
          layer_cfg_hit <= ct_hit;
          state         <= S_RUN;
        end
        S_RUN: begin
          if (!dep_ok) cnt_dep_stall <= cnt_dep_stall + 1;
          else if (!credit_ok) cnt_fifo_stall <= cnt_fifo_stall + 1;
          if (issue) begin
            cnt_steps <= cnt_steps + 1;
            waddr     <= waddr + 1'b1;
            if (!is_last) begin
              s <= s + 16'd1;
            end else begin
              s <= '0;
              if (pad_now) cnt_pad_reconfig <= cnt_pad_reconfig + 1;
              if (32'(blk_base) + (32'd1 << lg_r) < 32'(nblk)) begin
                blk_base <= blk_base + BLK_W'(1 << lg_r);
              end else begin
                blk_base <= '0;
                if (ph == PH_INPUT) begin
                  ph    <= PH_HIDDEN;
                  waddr <= wh_q;
                end else if (t + 1'b1 == t_len_q) begin
                  state <= S_FINISH;
                end else begin
                  ph    <= PH_INPUT;
                  waddr <= wi_q;
                  t     <= t + 1'b1;
                  xline <= xline + IH_AW'(xl);
                end
              end
            end
          end
        end
        S_FINISH: if (steps_done == t_len_q) begin
          state <= S_IDLE;
          done  <= 1'b1;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // control word, aligned with the memory read data
  always_ff @(posedge clk) begin
    cu_tag.first  <= (s == 16'd0);
    cu_tag.last   <= is_last;
    cu_tag.cfg    <= tile_cfg_e'(2'd3 - lg_r);
    cu_tag.phase  <= ph;
    cu_tag.nvalid <= nvalid;
    cu_tag.blk    <= blk_base;
    cu_tag.step   <= t;
    cu_col_off    <= LW'(col_start);
    cu_col_valid  <= (ph == PH_HIDDEN && t == '0) ? '0
                   : (remcols < 16'(span)) ? (LW+1)'(remcols) : span;
  end
endmodule
