// sharp_weight_buffer: the multi-banked on-chip weight SRAM (26 MB by default).
//
// There is one bank per vector-scalar (VS) unit, N banks in all, and each bank
// line holds the K fp16 weights that its VS unit multiplies in one cycle. The
// weights are interleaved offline in the exact order in which the pipeline
// controller issues tile steps, so all banks are read at the same line address
// and no two VS units ever collide on a bank. A read issued in cycle c delivers
// rd_data in cycle c+1. The load port writes one bank line per cycle and stands
// for the memory controller's fills from main memory. Bank count, line width,
// total size and interleaving follow the accelerator's description; the
// one-cycle read latency and the load-port format are this design's choices.
module sharp_weight_buffer
  import sharp_pkg::*;
#(
  parameter int unsigned N     = 32,     // VS units = banks
  parameter int unsigned K     = 32,     // fp16 weights per bank line
  parameter int unsigned LINES = 13312,  // 26 MB / (N * K * 2 bytes)
  localparam int unsigned AW   = $clog2(LINES),
  localparam int unsigned BW   = (N > 1) ? $clog2(N) : 1
) (
  input  logic              clk,
  // read side: compute unit
  input  logic              rd_en,
  input  logic [AW-1:0]     rd_addr,
  output fp16_t             rd_data [N][K],
  // load side: memory controller
  input  logic              wr_en,
  input  logic [BW-1:0]     wr_bank,
  input  logic [AW-1:0]     wr_addr,
  input  fp16_t             wr_data [K]
);
  logic [K*16-1:0] mem [N][LINES];
  logic [K*16-1:0] q   [N];
  logic [K*16-1:0] wline;

  always_comb begin
    for (int k = 0; k < K; k++) wline[k*16 +: 16] = wr_data[k];
  end

  for (genvar b = 0; b < N; b++) begin : g_bank
    always_ff @(posedge clk) begin
      if (wr_en && wr_bank == BW'(b)) mem[b][wr_addr] <= wline;
      if (rd_en) q[b] <= mem[b][rd_addr];
    end
    for (genvar k = 0; k < K; k++) begin : g_lane
      assign rd_data[b][k] = q[b][k*16 +: 16];
    end
  end
endmodule
