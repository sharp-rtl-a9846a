// sharp_top: the SHARP LSTM accelerator, one LSTM layer at a time.
//
// Dataflow: the pipeline controller reads one line of every weight-buffer bank
// and one I/H-buffer line per cycle; the compute unit (N vector-scalar units of
// K fp16 multipliers and the reconfigurable add-reduce tree with its eight
// K-accumulators) turns each tile of R*K weight rows into R K-vectors of MVM
// results; completed tiles queue in a local FIFO; the result router stores
// input-MVM tiles in the intermediate buffer and adds them to the matching
// hidden-MVM tiles; the A-MFU applies sigmoid (gates i, f, o) or tanh (gate g)
// to one K-row block per cycle; the cell updater updates the cell state and
// writes K/4 elements of h_t per cycle back into the I/H buffer, from where the
// next step's hidden MVM reads them, and also presents them on h_*.
//
// Host interface (stands in for the memory controller and main memory, which
// are not part of this RTL): load ports for the weight buffer, the I/H buffer
// and the configuration table, a layer descriptor with start/busy/done, the h_t
// output stream and performance counters. Defaults are the 1K-MAC
// configuration (N = 32 VS units of K = 32) with the buffer sizes of the
// evaluated accelerator: 26 MB weights, 2.3 MB I/H, 24 KB intermediate, 192 KB
// cell state. Weight layout expected in the weight buffer: for each phase
// (input weights from wi_base, hidden weights from wh_base), one line per tile
// step in issue order; in line l of bank n, lane k holds
// W[(blk + n div (N/R))*K + k][col_start + n mod (N/R)], zero outside the
// matrix, rows ordered per K-row block as [i | f | g | o] of K/4 hidden units.
// Reset: rst_n is an asynchronous active-low reset of all control state. It
// also disables the FIFO-overflow assertion below, which is why lint reports
// rst_n as used both asynchronously and synchronously; the assertion is not
// logic, so the warning is expected.
module sharp_top
  import sharp_pkg::*;
#(
  parameter int unsigned N          = 32,
  parameter int unsigned K          = 32,
  parameter int unsigned WB_LINES   = 13312,
  parameter int unsigned IH_LINES   = 37683,
  parameter int unsigned IB_LINES   = 384,
  parameter int unsigned CS_LINES   = 6144,
  parameter int unsigned CT_ENTRIES = 16,
  parameter int unsigned FIFO_DEPTH = 4,
  localparam int unsigned Q     = K / 4,
  localparam int unsigned WB_AW = $clog2(WB_LINES),
  localparam int unsigned IH_AW = $clog2(IH_LINES),
  localparam int unsigned IB_AW = $clog2(IB_LINES / 2),
  localparam int unsigned CS_AW = $clog2(CS_LINES / 2),
  localparam int unsigned BW    = (N > 1) ? $clog2(N) : 1,
  localparam int unsigned CT_IW = (CT_ENTRIES > 1) ? $clog2(CT_ENTRIES) : 1
) (
  input  logic               clk,
  input  logic               rst_n,
  // layer descriptor
  input  logic               start,
  input  logic [15:0]        x_len,
  input  logic [15:0]        h_len,
  input  logic [STEP_W-1:0]  t_len,
  input  logic [WB_AW-1:0]   wi_base,
  input  logic [WB_AW-1:0]   wh_base,
  input  logic [IH_AW-1:0]   x_base,
  input  logic [IH_AW-1:0]   h_base,
  input  logic               pad_reconfig_en,
  output logic               busy,
  output logic               done,
  // weight-buffer load port
  input  logic               wb_ld_en,
  input  logic [BW-1:0]      wb_ld_bank,
  input  logic [WB_AW-1:0]   wb_ld_addr,
  input  fp16_t              wb_ld_data [K],
  // I/H-buffer load port
  input  logic               ih_ld_en,
  output logic               ih_ld_ready,
  input  logic [IH_AW-1:0]   ih_ld_line,
  input  logic [N-1:0]       ih_ld_mask,
  input  fp16_t              ih_ld_data [N],
  // configuration-table load port
  input  logic               ct_wr_en,
  input  logic [CT_IW-1:0]   ct_wr_idx,
  input  logic [15:0]        ct_wr_dim,
  input  tile_cfg_e          ct_wr_cfg,
  input  logic               ct_wr_valid,
  // hidden output stream
  output logic               h_valid,
  output logic [BLK_W-1:0]   h_blk,
  output logic [STEP_W-1:0]  h_step,
  output fp16_t              h_data [Q],
  // statistics
  output tile_cfg_e          layer_cfg,
  output logic               layer_cfg_hit,
  output logic [31:0]        cnt_steps,
  output logic [31:0]        cnt_dep_stall,
  output logic [31:0]        cnt_fifo_stall,
  output logic [31:0]        cnt_pad_reconfig
);
  // ---------------------------------------------------------------- controller
  logic             ct_lookup_en, ct_hit;
  logic [15:0]      ct_lookup_dim;
  tile_cfg_e        ct_cfg;
  logic             wb_rd_en, ih_rd_en;
  logic [WB_AW-1:0] wb_rd_addr;
  logic [IH_AW-1:0] ih_rd_line, ih_hwr_line;
  logic [BW-1:0]    ih_hwr_lane;
  logic             cu_valid;
  tile_tag_t        cu_tag;
  logic [BW-1:0]    cu_col_off;
  logic [BW:0]      cu_col_valid;
  logic             tile_pop;

  sharp_controller #(.N(N), .K(K), .WB_AW(WB_AW), .IH_AW(IH_AW), .FIFO_DEPTH(FIFO_DEPTH)) u_ctrl (
    .clk, .rst_n, .start, .x_len, .h_len, .t_len, .wi_base, .wh_base, .x_base, .h_base,
    .pad_reconfig_en, .busy, .done,
    .ct_lookup_en, .ct_lookup_dim, .ct_hit, .ct_cfg,
    .wb_rd_en, .wb_rd_addr, .ih_rd_en, .ih_rd_line,
    .cu_valid, .cu_tag, .cu_col_off, .cu_col_valid,
    .tile_pop, .h_blk_done(h_valid), .h_wr_blk(h_blk), .h_wr_step(h_step),
    .ih_hwr_line, .ih_hwr_lane,
    .layer_cfg, .layer_cfg_hit, .cnt_steps, .cnt_dep_stall, .cnt_fifo_stall, .cnt_pad_reconfig
  );

  sharp_config_table #(.ENTRIES(CT_ENTRIES)) u_ctab (
    .clk, .rst_n, .wr_en(ct_wr_en), .wr_idx(ct_wr_idx), .wr_dim(ct_wr_dim), .wr_cfg(ct_wr_cfg),
    .wr_valid(ct_wr_valid), .lookup_en(ct_lookup_en), .lookup_dim(ct_lookup_dim),
    .hit(ct_hit), .cfg(ct_cfg)
  );

  // ---------------------------------------------------------------- buffers
  fp16_t wb_q [N][K];
  fp16_t ih_q [N];

  sharp_weight_buffer #(.N(N), .K(K), .LINES(WB_LINES)) u_wbuf (
    .clk, .rd_en(wb_rd_en), .rd_addr(wb_rd_addr), .rd_data(wb_q),
    .wr_en(wb_ld_en), .wr_bank(wb_ld_bank), .wr_addr(wb_ld_addr), .wr_data(wb_ld_data)
  );

  sharp_ih_buffer #(.N(N), .HW(Q), .LINES(IH_LINES)) u_ihbuf (
    .clk, .rd_en(ih_rd_en), .rd_line(ih_rd_line), .rd_data(ih_q),
    .h_wr_en(h_valid), .h_wr_line(ih_hwr_line), .h_wr_lane(ih_hwr_lane), .h_wr_data(h_data),
    .ld_en(ih_ld_en), .ld_ready(ih_ld_ready), .ld_line(ih_ld_line), .ld_mask(ih_ld_mask),
    .ld_data(ih_ld_data)
  );

  // ---------------------------------------------------------------- compute unit
  logic      vm_valid, ar_valid;
  tile_tag_t vm_tag, ar_tag;
  fp32_t     vm_prod [N][K];
  fp32_t     ar_res [MAX_GROUPS][K];

  sharp_vector_multiply #(.N(N), .K(K)) u_vmul (
    .clk, .rst_n, .valid_i(cu_valid), .tag_i(cu_tag), .col_off(cu_col_off),
    .col_valid(cu_col_valid), .weights(wb_q), .ih_line(ih_q),
    .valid_o(vm_valid), .tag_o(vm_tag), .prod(vm_prod)
  );

  sharp_add_reduce #(.N(N), .K(K)) u_reduce (
    .clk, .rst_n, .valid_i(vm_valid), .tag_i(vm_tag), .prod(vm_prod),
    .valid_o(ar_valid), .tag_o(ar_tag), .res(ar_res)
  );

  // ---------------------------------------------------------------- tile FIFO
  localparam int unsigned TILE_W = $bits(tile_tag_t) + MAX_GROUPS * K * 32;
  logic [TILE_W-1:0] f_in, f_out;
  logic              f_valid, f_ready, f_push_ready;
  tile_tag_t         f_tag;
  fp32_t             f_res [MAX_GROUPS][K];

  always_comb begin
    f_in[TILE_W-1 -: $bits(tile_tag_t)] = ar_tag;
    for (int g = 0; g < MAX_GROUPS; g++)
      for (int k = 0; k < K; k++) begin
        f_in[(g*K + k)*32 +: 32] = ar_res[g][k];
        f_res[g][k] = f_out[(g*K + k)*32 +: 32];
      end
    f_tag = f_out[TILE_W-1 -: $bits(tile_tag_t)];
  end

  sharp_fifo #(.WIDTH(TILE_W), .DEPTH(FIFO_DEPTH)) u_fifo (
    .clk, .rst_n, .push_valid(ar_valid), .push_ready(f_push_ready), .push_data(f_in),
    .pop_valid(f_valid), .pop_ready(f_ready), .pop_data(f_out), .count()
  );
  assign tile_pop = f_valid && f_ready;

  // the controller's credits guarantee room for every tile
  assert property (@(posedge clk) disable iff (!rst_n) ar_valid |-> f_push_ready);

  // ---------------------------------------------------------------- router + intermediate buffer
  logic             ib_wr_en, ib_wr_half, ib_rd_en, ib_rd_half;
  logic [IB_AW-1:0] ib_wr_blk, ib_rd_blk;
  fp16_t            ib_wr_data [K], ib_rd_data [K];
  logic              pa_valid;
  logic [BLK_W-1:0]  pa_blk;
  logic [STEP_W-1:0] pa_step;
  fp32_t             pa_vec [K];

  sharp_result_router #(.K(K), .IB_AW(IB_AW)) u_router (
    .clk, .rst_n, .tile_valid(f_valid), .tile_ready(f_ready), .tile_tag(f_tag), .tile_res(f_res),
    .ib_wr_en, .ib_wr_half, .ib_wr_blk, .ib_wr_data,
    .ib_rd_en, .ib_rd_half, .ib_rd_blk, .ib_rd_data,
    .out_valid(pa_valid), .out_blk(pa_blk), .out_step(pa_step), .out_vec(pa_vec)
  );

  sharp_inter_buffer #(.K(K), .LINES(IB_LINES)) u_ibuf (
    .clk, .wr_en(ib_wr_en), .wr_half(ib_wr_half), .wr_blk(ib_wr_blk), .wr_data(ib_wr_data),
    .rd_en(ib_rd_en), .rd_half(ib_rd_half), .rd_blk(ib_rd_blk), .rd_data(ib_rd_data)
  );

  // ---------------------------------------------------------------- activation
  localparam int unsigned AT_W = BLK_W + STEP_W;
  logic [K-1:0]       gate_fn;
  logic               act_valid;
  logic [AT_W-1:0]    act_tag;
  fp32_t              act_vec [K];

  always_comb begin
    for (int k = 0; k < K; k++) gate_fn[k] = (k / Q == 2);   // lanes of gate g use tanh
  end

  sharp_amfu #(.LANES(K), .TAG_W(AT_W)) u_amfu (
    .clk, .rst_n, .valid_i(pa_valid), .tag_i({pa_step, pa_blk}), .func(gate_fn), .x(pa_vec),
    .valid_o(act_valid), .tag_o(act_tag), .y(act_vec)
  );

  // ---------------------------------------------------------------- cell update
  logic             cs_rd_en, cs_rd_half, cs_wr_en, cs_wr_half;
  logic [CS_AW-1:0] cs_rd_addr, cs_wr_addr;
  fp32_t            cs_rd_data [Q], cs_wr_data [Q];
  logic [BLK_W-1:0]  act_blk;
  logic [STEP_W-1:0] act_step;
  assign {act_step, act_blk} = act_tag;

  sharp_cell_updater #(.K(K), .CS_AW(CS_AW)) u_cell (
    .clk, .rst_n, .valid_i(act_valid), .blk_i(act_blk), .step_i(act_step),
    .first_i(act_step == '0), .act(act_vec),
    .cs_rd_en, .cs_rd_half, .cs_rd_addr, .cs_rd_data,
    .cs_wr_en, .cs_wr_half, .cs_wr_addr, .cs_wr_data,
    .h_valid, .h_blk, .h_step, .h_data
  );

  sharp_cell_state #(.W(Q), .LINES(CS_LINES)) u_cstate (
    .clk, .wr_en(cs_wr_en), .wr_half(cs_wr_half), .wr_addr(cs_wr_addr), .wr_data(cs_wr_data),
    .rd_en(cs_rd_en), .rd_half(cs_rd_half), .rd_addr(cs_rd_addr), .rd_data(cs_rd_data)
  );
endmodule
