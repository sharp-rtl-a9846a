// tb_sharp_controller: runs the controller alone, with a behavioural stand-in
// for the datapath (tiles leave the FIFO a fixed time after their last step;
// blocks of h_t come back 20 cycles after the hidden tile that produced them).
// Every issued step is compared with an independent model of the Unfolded
// schedule and tiling: weight address, I/H line, tile configuration, column
// offset, valid columns, first/last, phase, block and time step. It also checks
// that no hidden phase starts before h_{t-1} is complete, that the FIFO credits
// are never exceeded, the padding-reconfiguration count, the hidden-write
// address mapping, and done. Two layers: table hit with CFG1 and padding, and a
// miss (CFG4).
module tb_sharp_controller;
  import sharp_pkg::*;
  localparam int N = 8, K = 8, Q = K / 4, WB_AW = 10, IH_AW = 8, FD = 2, LW = 3;
  logic clk = 0, rst_n = 0, start = 0, pad_reconfig_en = 0, busy, done;
  logic [15:0] x_len = 0, h_len = 0;
  logic [STEP_W-1:0] t_len = 0;
  logic [WB_AW-1:0] wi_base = 0, wh_base = 0;
  logic [IH_AW-1:0] x_base = 0, h_base = 0;
  logic ct_lookup_en, ct_hit;
  logic [15:0] ct_lookup_dim;
  tile_cfg_e ct_cfg;
  logic wb_rd_en, ih_rd_en, cu_valid;
  logic [WB_AW-1:0] wb_rd_addr;
  logic [IH_AW-1:0] ih_rd_line, ih_hwr_line;
  tile_tag_t cu_tag;
  logic [LW-1:0] cu_col_off, ih_hwr_lane;
  logic [LW:0] cu_col_valid;
  logic tile_pop = 0, h_blk_done = 0;
  logic [BLK_W-1:0] h_wr_blk = 0;
  logic [STEP_W-1:0] h_wr_step = 0;
  tile_cfg_e layer_cfg;
  logic layer_cfg_hit;
  logic [31:0] cnt_steps, cnt_dep_stall, cnt_fifo_stall, cnt_pad_reconfig;

  sharp_controller #(.N(N), .K(K), .WB_AW(WB_AW), .IH_AW(IH_AW), .FIFO_DEPTH(FD)) dut (.*);
  always #5 clk = ~clk;

  typedef struct { int addr, line, cfg, off, nv, first, last, ph, blk, step, nvalid; } step_t;
  step_t exp_q [$];
  int checks = 0, failures = 0, cyc = 0, outstanding = 0, hdone_steps = 0, hcnt = 0, nb_cur = 0;
  int pop_at [$], hblk_at [$], hblk_blk [$], hblk_step [$];
  logic last_rd;
  step_t pend;
  initial begin #4000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  always @(posedge clk) cyc <= cyc + 1;

  // config table stand-in: answers one cycle after the lookup
  logic tbl_has; tile_cfg_e tbl_cfg;
  always_ff @(posedge clk) if (ct_lookup_en) begin ct_hit <= tbl_has; ct_cfg <= tbl_has ? tbl_cfg : CFG4; end

  // model of the issue order
  task automatic build(int X, int H, int T, int cfgr, bit pad, int wi, int wh, int xb, int hb);
    int nb, xl, hl;
    nb = (4 * H + K - 1) / K; xl = (X + N - 1) / N; hl = (H + N - 1) / N;
    for (int t = 0; t < T; t++)
      for (int ph = 0; ph < 2; ph++) begin
        int b, a, cols;
        b = 0; a = ph ? wh : wi; cols = ph ? H : X;
        while (b < nb) begin
          int r, span, ns;
          r = cfgr;
          if (pad && nb - b < r) begin r = 1; while (r < nb - b) r *= 2; end
          span = N / r; ns = (cols + span - 1) / span;
          for (int s = 0; s < ns; s++) begin
            step_t e;
            e.addr = a++; e.cfg = (r == 8) ? 0 : (r == 4) ? 1 : (r == 2) ? 2 : 3;
            e.line = ph ? hb + ((t % 2 == 1) ? 0 : hl) + (s * span) / N : xb + t * xl + (s * span) / N;
            e.off = (s * span) % N;
            e.nv = (ph == 1 && t == 0) ? 0 : ((cols - s * span < span) ? cols - s * span : span);
            e.first = (s == 0); e.last = (s == ns - 1); e.ph = ph; e.blk = b; e.step = t;
            e.nvalid = (nb - b < r) ? nb - b : r;
            exp_q.push_back(e);
          end
          b += r;
        end
      end
  endtask

  // datapath stand-in and checks
  always @(negedge clk) if (rst_n) begin
    tile_pop = 0; h_blk_done = 0;
    if (pop_at.size() > 0 && pop_at[0] <= cyc) begin void'(pop_at.pop_front()); tile_pop = 1; outstanding--; end
    if (hblk_at.size() > 0 && hblk_at[0] <= cyc) begin
      void'(hblk_at.pop_front());
      h_blk_done = 1; h_wr_blk = BLK_W'(hblk_blk.pop_front()); h_wr_step = STEP_W'(hblk_step.pop_front());
      #1;
      checks++;
      if (int'(ih_hwr_line) != int'(h_base) + ((h_wr_step % 2 == 1) ? (int'(h_len) + N - 1) / N : 0) + int'(h_wr_blk) * Q / N ||
          int'(ih_hwr_lane) != (int'(h_wr_blk) * Q) % N) begin
        failures++; $display("hidden write address %0d/%0d for blk %0d", ih_hwr_line, ih_hwr_lane, h_wr_blk);
      end
      hcnt++;
      if (hcnt == nb_cur) begin hcnt = 0; hdone_steps++; end
    end
    if (cu_valid) begin
      step_t e;
      checks++;
      if (exp_q.size() == 0) begin failures++; $display("extra step"); end
      else begin
        e = exp_q.pop_front();
        if (pend.addr != e.addr || pend.line != e.line || int'(cu_tag.cfg) != e.cfg || int'(cu_col_off) != e.off ||
            int'(cu_col_valid) != e.nv || cu_tag.first != e.first || cu_tag.last != e.last || int'(cu_tag.phase) != e.ph ||
            int'(cu_tag.blk) != e.blk || int'(cu_tag.step) != e.step || int'(cu_tag.nvalid) != e.nvalid) begin
          failures++;
          if (failures < 6) $display("step mismatch: got a%0d l%0d c%0d o%0d v%0d f%0d l%0d p%0d b%0d t%0d n%0d, exp a%0d l%0d c%0d o%0d v%0d f%0d l%0d p%0d b%0d t%0d n%0d",
            pend.addr, pend.line, cu_tag.cfg, cu_col_off, cu_col_valid, cu_tag.first, cu_tag.last, cu_tag.phase, cu_tag.blk, cu_tag.step, cu_tag.nvalid,
            e.addr, e.line, e.cfg, e.off, e.nv, e.first, e.last, e.ph, e.blk, e.step, e.nvalid);
        end
        // a hidden phase may not start before h_{t-1} is complete
        if (cu_tag.phase == PH_HIDDEN) begin
          checks++; if (hdone_steps < int'(cu_tag.step)) begin failures++; $display("hidden phase of step %0d started early", cu_tag.step); end
        end
        if (cu_tag.last) begin
          outstanding++;
          checks++; if (outstanding > FD) begin failures++; $display("FIFO credits exceeded"); end
          pop_at.push_back(cyc + 6 + int'(cu_tag.nvalid));
          if (cu_tag.phase == PH_HIDDEN)
            for (int g = 0; g < int'(cu_tag.nvalid); g++) begin
              hblk_at.push_back(cyc + 20 + g); hblk_blk.push_back(int'(cu_tag.blk) + g); hblk_step.push_back(int'(cu_tag.step));
            end
        end
      end
    end
    if (wb_rd_en) begin
      pend.addr = int'(wb_rd_addr); pend.line = int'(ih_rd_line);
    end
  end

  task automatic run(int X, int H, int T, bit has, tile_cfg_e c, bit pad, int exp_pad);
    int cfgr, t0;
    cfgr = has ? ((c == CFG1) ? 8 : (c == CFG2) ? 4 : (c == CFG3) ? 2 : 1) : 1;
    tbl_has = has; tbl_cfg = c;
    nb_cur = (4 * H + K - 1) / K; hdone_steps = 0; hcnt = 0;
    build(X, H, T, cfgr, pad, 5, 300, 3, 100);
    @(negedge clk);
    x_len = 16'(X); h_len = 16'(H); t_len = STEP_W'(T); wi_base = 5; wh_base = 300; x_base = 3; h_base = 100;
    pad_reconfig_en = pad; start = 1;
    @(negedge clk); start = 0;
    t0 = cyc;
    while (!done && cyc - t0 < 20000) @(negedge clk);
    checks++; if (!done) begin failures++; $display("no done"); end
    checks++; if (exp_q.size() != 0) begin failures++; $display("%0d steps not issued", exp_q.size()); exp_q.delete(); end
    checks++; if (int'(cnt_pad_reconfig) != exp_pad) begin failures++; $display("pad reconfig %0d expected %0d", cnt_pad_reconfig, exp_pad); end
    checks++; if (layer_cfg_hit != has) failures++;
    repeat (30) @(negedge clk);
  endtask

  initial begin
    repeat (3) @(negedge clk); rst_n = 1;
    // H=13 -> 7 blocks; CFG1 (8 groups) -> one 8-group tile reconfigured to 8 (no pad: 7 < 8 -> R'=8)
    run(21, 13, 3, 1, CFG1, 1, 0);
    // H=10 -> 5 blocks; CFG2 (4) -> 4 + 1 (reconfigured) per phase: 2*T reconfigurations
    run(17, 10, 3, 1, CFG2, 1, 6);
    // same layer without padding reconfiguration
    run(17, 10, 2, 1, CFG2, 0, 0);
    // miss -> CFG4
    run(9, 6, 2, 0, CFG1, 1, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
