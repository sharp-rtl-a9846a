// tb_sharp_top_full: the end-to-end test of tb_sharp_top with the accelerator at its
// default (full) size: 32 VS units of 32 multipliers, 26 MB weight buffer, 2.3 MB
// I/H buffer, 24 KB intermediate buffer, 192 KB cell state, on two LSTM layers.
//
// The testbench builds random LSTM weights (bias as an extra input column fixed
// at 1.0), lays them out in the weight buffer in the order in which the
// controller issues tile steps (its own model of the tiling, including the
// padding reconfiguration of the last tile), loads the input sequence into the
// I/H buffer and a configuration-table entry, and runs two layers:
//   A  hidden dimension found in the table (CFG2, 4 row groups), padding
//      reconfiguration enabled, H = X = 40, 3 time steps;
//   B  hidden dimension missing from the table (CFG4), H = 24, X = 20, 2 time steps.
// Every h_t element is compared with a double-precision LSTM (tolerance 2e-2,
// the design computes in fp16/fp32). It also checks the number of issued tile
// steps against the tiling model (one step per cycle of the compute unit) and
// counts the mechanisms of the design, each of which must occur: table hit,
// table miss, padding reconfiguration, dependency stall of the hidden phase,
// tile-FIFO stall, and Unfolded overlap (an input MVM of step t+1 issued while
// h_t is still being produced).
module tb_sharp_top_full;
  import sharp_pkg::*;
  import sharp_tb_pkg::*;
  localparam int N = 32, K = 32, Q = K / 4;
  localparam int WB_LINES = 13312, IH_LINES = 37683, IB_LINES = 384, CS_LINES = 6144;
  localparam int CT_ENTRIES = 16, FIFO_DEPTH = 4;
  localparam int WB_AW = $clog2(WB_LINES), IH_AW = $clog2(IH_LINES), BW = $clog2(N);
  localparam int CT_IW = $clog2(CT_ENTRIES);
  localparam int MAXH = 64, MAXX = 64, MAXT = 8;
  // layer A / B sizes (inputs exclude the bias column)
  localparam int HA = 40, XA = 40, TA = 3, HB = 24, XB = 20, TB = 2;

  logic clk = 0, rst_n = 0;
  logic start = 0, pad_reconfig_en = 0, busy, done;
  logic [15:0] x_len = 0, h_len = 0;
  logic [STEP_W-1:0] t_len = 0;
  logic [WB_AW-1:0] wi_base = 0, wh_base = 0;
  logic [IH_AW-1:0] x_base = 0, h_base = 0;
  logic wb_ld_en = 0;
  logic [BW-1:0] wb_ld_bank = 0;
  logic [WB_AW-1:0] wb_ld_addr = 0;
  fp16_t wb_ld_data [K];
  logic ih_ld_en = 0, ih_ld_ready;
  logic [IH_AW-1:0] ih_ld_line = 0;
  logic [N-1:0] ih_ld_mask = 0;
  fp16_t ih_ld_data [N];
  logic ct_wr_en = 0, ct_wr_valid = 0;
  logic [CT_IW-1:0] ct_wr_idx = 0;
  logic [15:0] ct_wr_dim = 0;
  tile_cfg_e ct_wr_cfg = CFG4;
  logic h_valid;
  logic [BLK_W-1:0] h_blk;
  logic [STEP_W-1:0] h_step;
  fp16_t h_data [Q];
  tile_cfg_e layer_cfg;
  logic layer_cfg_hit;
  logic [31:0] cnt_steps, cnt_dep_stall, cnt_fifo_stall, cnt_pad_reconfig;

  sharp_top dut (.*);

  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  initial begin #50000000; failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  // ---- model state
  real Wm [4*MAXH][MAXX+1];     // stacked input weights, row = gate*H + unit
  real Um [4*MAXH][MAXH];
  real xs [MAXT][MAXX+1];
  real h_ref [MAXT][MAXH];
  int  H, X, T, nseen;
  int  m_hit, m_miss, m_pad, m_dep, m_fifo, m_overlap;

  // row r of the stacked, block-interleaved matrix -> (gate, unit); -1 if padding
  function automatic int row_unit(int r, output int gate);
    int blk, lane;
    blk = r / K; lane = r % K;
    gate = lane / Q;
    return blk * Q + lane % Q;
  endfunction

  function automatic real wval(bit hid, int r, int c);
    int g, j;
    j = row_unit(r, g);
    if (j >= H) return 0.0;
    return hid ? Um[g*H + j][c] : Wm[g*H + j][c];
  endfunction

  // lay out one phase's weights in issue order; returns lines used
  task automatic layout(bit hid, int base, int cols, tile_cfg_e cfg, bit pad, output int lines);
    int b, nb, r, lg, span, ns, a;
    nb = (4 * H + K - 1) / K;
    a = base; b = 0;
    while (b < nb) begin
      r = cfg_groups(cfg);
      if (pad && nb - b < r) begin
        r = 1; while (r < nb - b) r *= 2;
      end
      span = N / r;
      ns = (cols + span - 1) / span;
      for (int s = 0; s < ns; s++) begin
        for (int n = 0; n < N; n++) begin
          int grp, col;
          grp = n / span; col = s * span + n % span;
          @(negedge clk);
          wb_ld_en = 1; wb_ld_bank = BW'(n); wb_ld_addr = WB_AW'(a);
          for (int k = 0; k < K; k++)
            wb_ld_data[k] = (b + grp < nb && col < cols) ? r2f16(wval(hid, (b + grp) * K + k, col)) : 16'h0;
        end
        a++;
      end
      b += r;
    end
    @(negedge clk); wb_ld_en = 0;
    lines = a - base;
  endtask

  task automatic reference();
    real c [MAXH], hp [MAXH], pre [4][MAXH];
    for (int j = 0; j < H; j++) begin c[j] = 0.0; hp[j] = 0.0; end
    for (int t = 0; t < T; t++) begin
      for (int g = 0; g < 4; g++)
        for (int j = 0; j < H; j++) begin
          pre[g][j] = 0.0;
          for (int q = 0; q <= X; q++) pre[g][j] += Wm[g*H + j][q] * xs[t][q];
          for (int q = 0; q < H; q++)  pre[g][j] += Um[g*H + j][q] * hp[q];
        end
      for (int j = 0; j < H; j++) begin
        c[j] = sigmoid(pre[1][j]) * c[j] + sigmoid(pre[0][j]) * tanh_r(pre[2][j]);
        h_ref[t][j] = sigmoid(pre[3][j]) * tanh_r(c[j]);
      end
      for (int j = 0; j < H; j++) hp[j] = f16r(r2f16(h_ref[t][j]));
    end
  endtask

  // ---- monitors
  always @(negedge clk) if (rst_n && h_valid) begin
    for (int q = 0; q < Q; q++) begin
      int j;
      j = int'(h_blk) * Q + q;
      if (j < H) begin
        checks++;
        if (!close(f16r(h_data[q]), h_ref[h_step][j], 2e-2, 0.0)) begin
          failures++;
          if (failures < 10) $display("h[t=%0d][%0d] = %f, expected %f", h_step, j, f16r(h_data[q]), h_ref[h_step][j]);
        end
        nseen++;
      end
    end
  end
  // Unfolded overlap: an input-MVM step of step t+1 enters the compute unit
  // while h_t is not yet complete (steps_done counts the finished steps)
  always @(negedge clk) if (rst_n && dut.cu_valid && dut.cu_tag.phase == PH_INPUT && dut.cu_tag.step != 0 &&
                            dut.u_ctrl.steps_done < dut.cu_tag.step) m_overlap++;

  task automatic run_layer(int h, int x, int t, bit pad, bit in_table);
    int li, lh, exp_steps;
    tile_cfg_e cfg;
    H = h; X = x; T = t; nseen = 0;
    for (int r = 0; r < 4 * H; r++) begin
      for (int q = 0; q <= X; q++) Wm[r][q] = rnd_small(0.5);
      for (int q = 0; q < H; q++)  Um[r][q] = rnd_small(0.5);
    end
    for (int s = 0; s < T; s++) begin
      for (int q = 0; q < X; q++) xs[s][q] = rnd_small(1.0);
      xs[s][X] = 1.0;   // bias column
    end
    reference();
    cfg = in_table ? CFG2 : CFG4;
    layout(0, 0, X + 1, cfg, pad, li);
    layout(1, li, H, cfg, pad, lh);
    // input sequence: x_t at line t * ceil((X+1)/N)
    for (int s = 0; s < T; s++)
      for (int l = 0; l < (X + 1 + N - 1) / N; l++) begin
        @(negedge clk);
        ih_ld_en = 1; ih_ld_line = IH_AW'(s * ((X + 1 + N - 1) / N) + l); ih_ld_mask = '1;
        for (int n = 0; n < N; n++) ih_ld_data[n] = (l * N + n <= X) ? r2f16(xs[s][l * N + n]) : 16'h0;
      end
    @(negedge clk); ih_ld_en = 0;
    @(negedge clk);
    x_len = 16'(X + 1); h_len = 16'(H); t_len = STEP_W'(T);
    wi_base = '0; wh_base = WB_AW'(li); x_base = '0; h_base = IH_AW'(128);
    pad_reconfig_en = pad; start = 1;
    @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    repeat (2) @(negedge clk);
    exp_steps = (li + lh) * T;
    checks++; if (nseen != H * T) begin failures++; $display("saw %0d h elements, expected %0d", nseen, H * T); end
    checks++; if (cnt_steps != 32'(exp_steps)) begin failures++; $display("steps %0d expected %0d", cnt_steps, exp_steps); end
    checks++; if (layer_cfg != cfg || layer_cfg_hit != in_table) begin failures++; $display("layer cfg %0d hit %0b", layer_cfg, layer_cfg_hit); end
    if (layer_cfg_hit) m_hit++; else m_miss++;
    m_pad  += cnt_pad_reconfig;
    m_dep  += cnt_dep_stall;
    m_fifo += cnt_fifo_stall;
    $display("layer H=%0d X=%0d T=%0d cfg=%0d: %0d tile steps, %0d dependency-stall cycles, %0d FIFO-stall cycles, %0d padding reconfigurations",
             H, X, T, layer_cfg, cnt_steps, cnt_dep_stall, cnt_fifo_stall, cnt_pad_reconfig);
  endtask

  initial begin
    for (int k = 0; k < K; k++) wb_ld_data[k] = '0;
    for (int n = 0; n < N; n++) ih_ld_data[n] = '0;
    repeat (3) @(negedge clk); rst_n = 1;
    @(negedge clk);
    ct_wr_en = 1; ct_wr_idx = '0; ct_wr_dim = 16'(HA); ct_wr_cfg = CFG2; ct_wr_valid = 1;
    @(negedge clk); ct_wr_en = 0;
    run_layer(HA, XA, TA, 1, 1);
    run_layer(HB, XB, TB, 1, 0);
    $display("mechanisms: table hit %0d, table miss %0d, padding reconfig %0d, dependency stall %0d, FIFO stall %0d, unfolded overlap %0d",
             m_hit, m_miss, m_pad, m_dep, m_fifo, m_overlap);
    checks++; if (m_hit == 0) failures++;
    checks++; if (m_miss == 0) failures++;
    checks++; if (m_pad == 0) failures++;
    checks++; if (m_dep == 0) failures++;
    checks++; if (m_fifo == 0) failures++;
    checks++; if (m_overlap == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
