// tb_sharp_cell_updater: runs three time steps of 6 blocks each, back to back,
// through the cell updater and a real cell-state scratchpad. Gate values are
// random (i, f, o in (0,1), g in (-1,1)); the expected c_t and h_t are computed in
// double precision from the testbench's own c_{t-1}. Checks h_t (tolerance 5e-3),
// the cell state written back, block/step tags, 8-cycle latency and one block per
// cycle.
module tb_sharp_cell_updater;
  import sharp_pkg::*;
  import sharp_tb_pkg::*;
  localparam int K = 8, Q = K / 4, NB = 6, NT = 3, CS_AW = 3;
  logic clk = 0, rst_n = 0, valid_i = 0, first_i = 0;
  logic [BLK_W-1:0] blk_i = 0, h_blk;
  logic [STEP_W-1:0] step_i = 0, h_step;
  fp32_t act [K];
  logic cs_rd_en, cs_rd_half, cs_wr_en, cs_wr_half, h_valid;
  logic [CS_AW-1:0] cs_rd_addr, cs_wr_addr;
  fp32_t cs_rd_data [Q], cs_wr_data [Q];
  fp16_t h_data [Q];
  real c_ref [NB][Q], h_ref [NT][NB][Q], c_hist [NT][NB][Q];
  int checks = 0, failures = 0, cyc = 0, nout = 0, t_in [NT][NB];

  sharp_cell_updater #(.K(K), .CS_AW(CS_AW)) dut (.*);
  sharp_cell_state #(.W(Q), .LINES(16)) u_cs (
    .clk, .wr_en(cs_wr_en), .wr_half(cs_wr_half), .wr_addr(cs_wr_addr), .wr_data(cs_wr_data),
    .rd_en(cs_rd_en), .rd_half(cs_rd_half), .rd_addr(cs_rd_addr), .rd_data(cs_rd_data));
  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;
  initial begin #200000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  always @(negedge clk) if (rst_n && h_valid) begin
    int t, b;
    t = int'(h_step); b = int'(h_blk);
    checks++;
    if (t >= NT || b >= NB || cyc - t_in[t][b] != 8) begin
      failures++; $display("tag/latency: step %0d blk %0d latency %0d", t, b, cyc - t_in[t][b]);
    end else
      for (int q = 0; q < Q; q++) begin
        checks++;
        if (!close(f16r(h_data[q]), h_ref[t][b][q], 5e-3, 5e-3)) begin
          failures++;
          $display("h step %0d blk %0d lane %0d: %f vs %f", t, b, q, f16r(h_data[q]), h_ref[t][b][q]);
        end
      end
    nout++;
  end

  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    for (int t = 0; t < NT; t++) begin
      for (int b = 0; b < NB; b++) begin
        real iv, fv, gv, ov;
        @(negedge clk);
        valid_i = 1; blk_i = BLK_W'(b); step_i = STEP_W'(t); first_i = (t == 0);
        t_in[t][b] = cyc;
        for (int q = 0; q < Q; q++) begin
          iv = 0.5 + rnd_small(0.49); fv = 0.5 + rnd_small(0.49);
          gv = rnd_small(0.99);       ov = 0.5 + rnd_small(0.49);
          act[q] = r2f32(iv); act[Q+q] = r2f32(fv); act[2*Q+q] = r2f32(gv); act[3*Q+q] = r2f32(ov);
          c_ref[b][q]      = ((t == 0) ? 0.0 : fv * c_ref[b][q]) + iv * gv;
          c_hist[t][b][q]  = c_ref[b][q];
          h_ref[t][b][q]   = ov * tanh_r(c_ref[b][q]);
        end
      end
    end
    @(negedge clk); valid_i = 0;
    repeat (12) @(negedge clk);
    checks++; if (nout != NT * NB) begin failures++; $display("outputs %0d", nout); end
    // cell state of the last step, half (NT-1) mod 2
    for (int b = 0; b < NB; b++)
      for (int q = 0; q < Q; q++) begin
        checks++;
        if (!close(f32r(u_cs.mem[(NT-1) % 2][b][q]), c_ref[b][q], 5e-3, 5e-3)) begin
          failures++; $display("c blk %0d lane %0d: %f vs %f", b, q, f32r(u_cs.mem[(NT-1)%2][b][q]), c_ref[b][q]);
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
