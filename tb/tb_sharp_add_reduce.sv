// tb_sharp_add_reduce: sends tiles of 1..5 column steps, with every tile
// configuration and random idle cycles between steps, through the tree adder and
// checks each completed tile's R K-vectors against double-precision sums of the
// products of each row group (relative tolerance 1e-5), the tag, the order of the
// tiles and the logN+1-cycle latency from a tile's last step to its result.
module tb_sharp_add_reduce;
  import sharp_pkg::*;
  import sharp_tb_pkg::*;
  localparam int N = 16, K = 2, LOGN = 4;
  logic clk = 0, rst_n = 0, valid_i = 0, valid_o;
  tile_tag_t tag_i, tag_o;
  fp32_t prod [N][K], res [MAX_GROUPS][K];
  int checks = 0, failures = 0, cyc = 0;
  int cfg_seen [4];

  typedef struct { real v [MAX_GROUPS][K]; int r; int blk; int due; } exp_t;
  exp_t q [$];

  sharp_add_reduce #(.N(N), .K(K)) dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;
  initial begin #2000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  always @(negedge clk) if (rst_n && valid_o) begin
    exp_t e;
    checks++;
    if (q.size() == 0) begin failures++; $display("unexpected tile"); end
    else begin
      e = q.pop_front();
      if (tag_o.blk != 12'(e.blk) || cyc != e.due) begin
        failures++; $display("tile blk %0d at %0d, expected blk %0d at %0d", tag_o.blk, cyc, e.blk, e.due);
      end
      for (int g = 0; g < e.r; g++)
        for (int k = 0; k < K; k++) begin
          checks++;
          if (!close(f32r(res[g][k]), e.v[g][k], 1e-6, 1e-5)) begin
            failures++;
            if (failures < 6) $display("group %0d lane %0d: %f vs %f", g, k, f32r(res[g][k]), e.v[g][k]);
          end
        end
    end
  end

  initial begin
    tag_i = '0;
    for (int n = 0; n < N; n++) for (int k = 0; k < K; k++) prod[n][k] = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 200; t++) begin
      exp_t e;
      int ns, r;
      tile_cfg_e c;
      c  = tile_cfg_e'($urandom_range(0, 3));
      cfg_seen[c]++;
      r  = (c == CFG1) ? 8 : (c == CFG2) ? 4 : (c == CFG3) ? 2 : 1;
      ns = $urandom_range(1, 5);
      e.r = r; e.blk = t;
      for (int g = 0; g < MAX_GROUPS; g++) for (int k = 0; k < K; k++) e.v[g][k] = 0.0;
      for (int s = 0; s < ns; s++) begin
        if ($urandom_range(0, 3) == 0) begin @(negedge clk); valid_i = 0; end
        @(negedge clk);
        valid_i = 1;
        tag_i.cfg = c; tag_i.first = (s == 0); tag_i.last = (s == ns - 1); tag_i.blk = 12'(t);
        for (int n = 0; n < N; n++)
          for (int k = 0; k < K; k++) begin
            real p;
            p = rnd_small(8.0) * rnd_small(1.0);
            prod[n][k] = r2f32(p);
            e.v[n / (N / r)][k] += f32r(prod[n][k]);
          end
        if (s == ns - 1) begin e.due = cyc + LOGN + 1; q.push_back(e); end
      end
    end
    @(negedge clk); valid_i = 0;
    repeat (20) @(negedge clk);
    checks++; if (q.size() != 0) begin failures++; $display("%0d tiles missing", q.size()); end
    for (int c = 0; c < 4; c++) begin checks++; if (cfg_seen[c] == 0) failures++; end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
