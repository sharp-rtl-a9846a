// tb_sharp_amfu: streams random values back to back through the A-MFU, half of
// the lanes set to tanh, and checks every result against double-precision
// sigmoid/tanh (absolute tolerance 2e-3), the 4-cycle latency, the tag and the
// one-result-per-cycle throughput. Saturated inputs (|x| up to 40) are included.
module tb_sharp_amfu;
  import sharp_pkg::*;
  import sharp_tb_pkg::*;
  localparam int LANES = 4, NV = 400;
  logic clk = 0, rst_n = 0, valid_i = 0, valid_o;
  logic [15:0] tag_i = 0, tag_o;
  logic [LANES-1:0] func = 0;
  fp32_t x [LANES], y [LANES];
  real xin [NV][LANES];
  logic [LANES-1:0] fin [NV];
  int checks = 0, failures = 0, outs = 0, cyc = 0, first_in = -1, first_out = -1;

  sharp_amfu #(.LANES(LANES), .TAG_W(16)) dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;
  initial begin #400000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  always @(negedge clk) if (rst_n && valid_o) begin
    if (first_out < 0) first_out = cyc;
    checks++; if (tag_o != 16'(outs)) failures++;
    for (int l = 0; l < LANES; l++) begin
      real e;
      e = fin[outs][l] ? tanh_r(xin[outs][l]) : sigmoid(xin[outs][l]);
      checks++;
      if (!close(f32r(y[l]), e, 2e-3, 0.0)) begin
        failures++;
        if (failures < 8) $display("x=%f fn=%0d got %f exp %f", xin[outs][l], fin[outs][l], f32r(y[l]), e);
      end
    end
    outs++;
  end

  initial begin
    for (int i = 0; i < NV; i++) begin
      fin[i] = LANES'($urandom);
      for (int l = 0; l < LANES; l++)
        xin[i][l] = (i % 10 == 9) ? rnd_small(40.0) : rnd_small(6.0) + rnd_small(0.01);
    end
    repeat (2) @(negedge clk); rst_n = 1;
    for (int i = 0; i < NV; i++) begin
      @(negedge clk);
      if (i == 0) first_in = cyc;
      valid_i = 1; tag_i = 16'(i); func = fin[i];
      for (int l = 0; l < LANES; l++) x[l] = r2f32(xin[i][l]);
    end
    @(negedge clk); valid_i = 0;
    repeat (10) @(negedge clk);
    checks++; if (outs != NV) begin failures++; $display("outputs %0d", outs); end
    checks++; if (first_out - first_in != 4) begin failures++; $display("latency %0d", first_out - first_in); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
