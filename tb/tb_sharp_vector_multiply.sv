// tb_sharp_vector_multiply: drives random fp16 weights and I/H lines with every
// tile configuration, column offset and number of valid columns, and checks
// each VS unit's K products (exact in fp32) against double-precision products
// of the scalar the unit should have picked; also checks the one-cycle latency.
module tb_sharp_vector_multiply;
  import sharp_pkg::*;
  import sharp_tb_pkg::*;
  localparam int N = 16, K = 4;
  logic clk = 0, rst_n = 0, valid_i = 0, valid_o;
  tile_tag_t tag_i, tag_o;
  logic [3:0] col_off;
  logic [4:0] col_valid;
  fp16_t weights [N][K], ih_line [N];
  fp32_t prod [N][K];
  int checks = 0, failures = 0;

  sharp_vector_multiply #(.N(N), .K(K)) dut (.*);
  always #5 clk = ~clk;
  initial begin #400000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    tag_i = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    repeat (300) begin
      int r, span;
      @(negedge clk);
      tag_i.cfg = tile_cfg_e'($urandom_range(0, 3));
      r = (tag_i.cfg == CFG1) ? 8 : (tag_i.cfg == CFG2) ? 4 : (tag_i.cfg == CFG3) ? 2 : 1;
      span = N / r;
      col_off   = 4'(span * $urandom_range(0, r - 1));
      col_valid = 5'($urandom_range(0, span));
      tag_i.blk = 12'($urandom);
      for (int n = 0; n < N; n++) begin
        ih_line[n] = r2f16(rnd_small(4.0));
        for (int k = 0; k < K; k++) weights[n][k] = r2f16(rnd_small(2.0));
      end
      valid_i = 1;
      @(negedge clk); valid_i = 0;
      checks++; if (valid_o !== 1'b1 || tag_o.blk !== tag_i.blk) failures++;
      for (int n = 0; n < N; n++) begin
        int j; real s;
        j = n % span;
        s = (j < col_valid) ? f16r(ih_line[col_off + j]) : 0.0;
        for (int k = 0; k < K; k++) begin
          checks++;
          if (f32r(prod[n][k]) != s * f16r(weights[n][k])) begin
            failures++;
            if (failures < 5) $display("unit %0d lane %0d: %f vs %f", n, k, f32r(prod[n][k]), s * f16r(weights[n][k]));
          end
        end
      end
      @(negedge clk);
      checks++; if (valid_o !== 1'b0) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
