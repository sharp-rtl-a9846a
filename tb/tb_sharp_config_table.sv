// tb_sharp_config_table: preloads entries, then checks hits (configuration and
// one-cycle answer), misses (CFG4), clearing an entry, and the lowest-index
// match when two entries hold the same dimension.
module tb_sharp_config_table;
  import sharp_pkg::*;
  localparam int ENTRIES = 8;
  logic clk = 0, rst_n = 0, wr_en = 0, wr_valid = 0, lookup_en = 0, hit;
  logic [2:0] wr_idx = 0;
  logic [15:0] wr_dim = 0, lookup_dim = 0;
  tile_cfg_e wr_cfg = CFG1, cfg;
  int checks = 0, failures = 0;
  int dims [ENTRIES] = '{128, 256, 340, 512, 1024, 1536, 64, 340};
  tile_cfg_e cfgs [ENTRIES] = '{CFG4, CFG3, CFG2, CFG1, CFG2, CFG3, CFG4, CFG1};

  sharp_config_table #(.ENTRIES(ENTRIES)) dut (.*);
  always #5 clk = ~clk;
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  task automatic look(int d, bit exp_hit, tile_cfg_e exp_cfg);
    @(negedge clk); lookup_en = 1; lookup_dim = 16'(d);
    @(negedge clk); lookup_en = 0;
    checks++;
    if (hit !== exp_hit || cfg !== exp_cfg) begin
      failures++;
      $display("lookup %0d: hit %0b cfg %0d, expected %0b %0d", d, hit, cfg, exp_hit, exp_cfg);
    end
  endtask

  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    look(340, 0, CFG4);                 // empty table
    for (int i = 0; i < ENTRIES; i++) begin
      @(negedge clk); wr_en = 1; wr_idx = 3'(i); wr_dim = 16'(dims[i]); wr_cfg = cfgs[i]; wr_valid = 1;
    end
    @(negedge clk); wr_en = 0;
    for (int i = 0; i < ENTRIES - 1; i++) look(dims[i], 1, cfgs[i]);
    look(340, 1, CFG2);                 // index 2 wins over index 7
    look(777, 0, CFG4);
    @(negedge clk); wr_en = 1; wr_idx = 3'd2; wr_valid = 0;
    @(negedge clk); wr_en = 0;
    look(340, 1, CFG1);                 // now only index 7 matches
    look(512, 1, CFG1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
