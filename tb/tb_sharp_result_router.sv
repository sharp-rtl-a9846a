// tb_sharp_result_router: presents pairs of tiles (input MVM, then hidden MVM of
// the same blocks and step) with 1..8 valid blocks, as the tile FIFO would, to the
// router and a real intermediate buffer. Checks that a tile is popped only after
// its last block, that hidden blocks leave in order with value
// fp16(input part) + hidden part (double-precision reference), and the step tags.
module tb_sharp_result_router;
  import sharp_pkg::*;
  import sharp_tb_pkg::*;
  localparam int K = 4, IB_AW = 3, NPAIR = 60;
  logic clk = 0, rst_n = 0, tile_valid = 0, tile_ready;
  tile_tag_t tile_tag;
  fp32_t tile_res [MAX_GROUPS][K];
  logic ib_wr_en, ib_wr_half, ib_rd_en, ib_rd_half, out_valid;
  logic [IB_AW-1:0] ib_wr_blk, ib_rd_blk;
  fp16_t ib_wr_data [K], ib_rd_data [K];
  logic [BLK_W-1:0] out_blk;
  logic [STEP_W-1:0] out_step;
  fp32_t out_vec [K];
  typedef struct { real v [K]; int blk; int step; } exp_t;
  exp_t q [$];
  int checks = 0, failures = 0, nout = 0, nexp = 0;

  sharp_result_router #(.K(K), .IB_AW(IB_AW)) dut (.*);
  sharp_inter_buffer #(.K(K), .LINES(16)) u_ib (
    .clk, .wr_en(ib_wr_en), .wr_half(ib_wr_half), .wr_blk(ib_wr_blk), .wr_data(ib_wr_data),
    .rd_en(ib_rd_en), .rd_half(ib_rd_half), .rd_blk(ib_rd_blk), .rd_data(ib_rd_data));
  always #5 clk = ~clk;
  initial begin #400000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  always @(negedge clk) if (rst_n && out_valid) begin
    exp_t e;
    checks++;
    if (q.size() == 0) begin failures++; $display("unexpected output"); end
    else begin
      e = q.pop_front();
      if (int'(out_blk) != e.blk || int'(out_step) != e.step) begin
        failures++; $display("blk/step %0d/%0d vs %0d/%0d", out_blk, out_step, e.blk, e.step);
      end
      for (int k = 0; k < K; k++) begin
        checks++;
        if (!close(f32r(out_vec[k]), e.v[k], 1e-6, 1e-5)) begin
          failures++; $display("blk %0d lane %0d: %f vs %f", e.blk, k, f32r(out_vec[k]), e.v[k]);
        end
      end
    end
    nout++;
  end

  task automatic send(tile_tag_t tg);
    int n;
    @(negedge clk);
    tile_valid = 1; tile_tag = tg;
    n = 0;
    forever begin
      @(posedge clk); n++;
      checks++;
      if (tile_ready !== (n == int'(tg.nvalid))) begin failures++; $display("ready at block %0d of %0d", n, tg.nvalid); end
      if (tile_ready) break;
      @(negedge clk);
    end
    @(negedge clk); tile_valid = 0;
  endtask

  initial begin
    real inp [MAX_GROUPS][K];
    tile_tag_t tg;
    tg = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int p = 0; p < NPAIR; p++) begin
      tg.nvalid = 4'($urandom_range(1, 8));
      tg.blk    = '0;
      tg.step   = STEP_W'(p);
      tg.phase  = PH_INPUT;
      for (int g = 0; g < MAX_GROUPS; g++)
        for (int k = 0; k < K; k++) begin
          inp[g][k] = rnd_small(4.0);
          tile_res[g][k] = r2f32(inp[g][k]);
        end
      send(tg);
      tg.phase = PH_HIDDEN;
      for (int g = 0; g < MAX_GROUPS; g++)
        for (int k = 0; k < K; k++) tile_res[g][k] = r2f32(rnd_small(4.0) + rnd_small(0.01));
      for (int g = 0; g < int'(tg.nvalid); g++) begin
        exp_t e;
        e.blk = g; e.step = p;
        for (int k = 0; k < K; k++) e.v[k] = inp[g][k] + f32r(tile_res[g][k]);
        q.push_back(e); nexp++;
      end
      send(tg);
    end
    repeat (6) @(negedge clk);
    checks++; if (nout != nexp) begin failures++; $display("outputs %0d of %0d", nout, nexp); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
