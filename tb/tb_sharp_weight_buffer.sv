// tb_sharp_weight_buffer: loads random lines into random banks and addresses
// of a reduced weight buffer, then reads every written address back and checks
// all banks against a shadow copy, including the one-cycle read latency.
module tb_sharp_weight_buffer;
  import sharp_pkg::*;
  localparam int N = 8, K = 4, LINES = 64;
  logic clk = 0, rd_en = 0, wr_en = 0;
  logic [5:0] rd_addr = 0, wr_addr = 0;
  logic [2:0] wr_bank = 0;
  fp16_t rd_data [N][K], wr_data [K];
  fp16_t shadow [N][LINES][K];
  int checks = 0, failures = 0;

  sharp_weight_buffer #(.N(N), .K(K), .LINES(LINES)) dut (.*);
  always #5 clk = ~clk;
  initial begin #200000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    // fill everything so every read is defined
    for (int b = 0; b < N; b++)
      for (int a = 0; a < LINES; a++) begin
        @(negedge clk);
        wr_en = 1; wr_bank = 3'(b); wr_addr = 6'(a);
        for (int k = 0; k < K; k++) begin wr_data[k] = 16'($urandom); shadow[b][a][k] = wr_data[k]; end
      end
    // overwrite a few
    repeat (40) begin
      @(negedge clk);
      wr_bank = 3'($urandom_range(0, N-1)); wr_addr = 6'($urandom_range(0, LINES-1));
      for (int k = 0; k < K; k++) begin wr_data[k] = 16'($urandom); shadow[wr_bank][wr_addr][k] = wr_data[k]; end
    end
    @(negedge clk); wr_en = 0;
    for (int a = 0; a < LINES; a++) begin
      @(negedge clk); rd_en = 1; rd_addr = 6'(a);
      @(negedge clk); rd_en = 0;
      for (int b = 0; b < N; b++)
        for (int k = 0; k < K; k++) begin
          checks++;
          if (rd_data[b][k] !== shadow[b][a][k]) begin
            failures++;
            if (failures < 5) $display("mismatch bank %0d addr %0d lane %0d: %h vs %h", b, a, k, rd_data[b][k], shadow[b][a][k]);
          end
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
