// tb_sharp_ih_buffer: exercises the load port with lane masks, the hidden-vector
// port (K/4 elements at an aligned lane), the priority of the hidden port over
// the load port (ld_ready), and reads every line back against a shadow copy.
module tb_sharp_ih_buffer;
  import sharp_pkg::*;
  localparam int N = 8, HW = 2, LINES = 16;
  logic clk = 0;
  logic rd_en = 0, h_wr_en = 0, ld_en = 0, ld_ready;
  logic [3:0] rd_line = 0, h_wr_line = 0, ld_line = 0;
  logic [2:0] h_wr_lane = 0;
  logic [N-1:0] ld_mask = 0;
  fp16_t rd_data [N], h_wr_data [HW], ld_data [N];
  fp16_t shadow [LINES][N];
  int checks = 0, failures = 0, conflicts = 0;

  sharp_ih_buffer #(.N(N), .HW(HW), .LINES(LINES)) dut (.*);
  always #5 clk = ~clk;
  initial begin #200000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    for (int a = 0; a < LINES; a++) begin
      @(negedge clk); ld_en = 1; ld_line = 4'(a); ld_mask = '1;
      for (int l = 0; l < N; l++) begin ld_data[l] = 16'($urandom); shadow[a][l] = ld_data[l]; end
    end
    repeat (200) begin
      @(negedge clk);
      ld_en = $urandom_range(0, 1); ld_line = 4'($urandom); ld_mask = 8'($urandom);
      for (int l = 0; l < N; l++) ld_data[l] = 16'($urandom);
      h_wr_en = $urandom_range(0, 1); h_wr_line = 4'($urandom); h_wr_lane = 3'(HW * $urandom_range(0, N/HW-1));
      for (int i = 0; i < HW; i++) h_wr_data[i] = 16'($urandom);
      #1;
      checks++;
      if (ld_ready !== !h_wr_en) failures++;
      if (h_wr_en) begin
        for (int i = 0; i < HW; i++) shadow[h_wr_line][h_wr_lane + i] = h_wr_data[i];
        if (ld_en) conflicts++;
      end else if (ld_en) begin
        for (int l = 0; l < N; l++) if (ld_mask[l]) shadow[ld_line][l] = ld_data[l];
      end
    end
    @(negedge clk); ld_en = 0; h_wr_en = 0;
    for (int a = 0; a < LINES; a++) begin
      @(negedge clk); rd_en = 1; rd_line = 4'(a);
      @(negedge clk); rd_en = 0;
      for (int l = 0; l < N; l++) begin
        checks++;
        if (rd_data[l] !== shadow[a][l]) begin
          failures++;
          if (failures < 5) $display("mismatch line %0d lane %0d: %h vs %h", a, l, rd_data[l], shadow[a][l]);
        end
      end
    end
    checks++; if (conflicts == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
