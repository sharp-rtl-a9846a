// tb_sharp_inter_buffer: writes different data to the same block index of both
// halves and checks that each half returns its own data one cycle after a read.
module tb_sharp_inter_buffer;
  import sharp_pkg::*;
  localparam int K = 4, LINES = 16, HALF = LINES / 2;
  logic clk = 0, wr_en = 0, wr_half = 0, rd_en = 0, rd_half = 0;
  logic [2:0] wr_blk = 0, rd_blk = 0;
  fp16_t wr_data [K], rd_data [K];
  fp16_t shadow [2][HALF][K];
  int checks = 0, failures = 0;

  sharp_inter_buffer #(.K(K), .LINES(LINES)) dut (.*);
  always #5 clk = ~clk;
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    for (int h = 0; h < 2; h++)
      for (int b = 0; b < HALF; b++) begin
        @(negedge clk); wr_en = 1; wr_half = h[0]; wr_blk = 3'(b);
        for (int k = 0; k < K; k++) begin wr_data[k] = 16'($urandom); shadow[h][b][k] = wr_data[k]; end
      end
    // interleave writes to one half with reads of the other, as the schedule does
    for (int b = 0; b < HALF; b++) begin
      @(negedge clk);
      wr_en = 1; wr_half = 1'b1; wr_blk = 3'(b);
      for (int k = 0; k < K; k++) begin wr_data[k] = 16'($urandom); shadow[1][b][k] = wr_data[k]; end
      rd_en = 1; rd_half = 1'b0; rd_blk = 3'(b);
      @(negedge clk); wr_en = 0; rd_en = 0;
      for (int k = 0; k < K; k++) begin checks++; if (rd_data[k] !== shadow[0][b][k]) failures++; end
    end
    for (int b = 0; b < HALF; b++) begin
      @(negedge clk); rd_en = 1; rd_half = 1'b1; rd_blk = 3'(b);
      @(negedge clk); rd_en = 0;
      for (int k = 0; k < K; k++) begin checks++; if (rd_data[k] !== shadow[1][b][k]) failures++; end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
