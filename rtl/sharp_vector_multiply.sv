// sharp_vector_multiply: the Vector-Multiply stage of the compute unit, N
// vector-scalar (VS) units of K fp16 multipliers each.
//
// Each VS unit multiplies one scalar of the input or hidden vector by K weights,
// which belong to K consecutive rows of one column of the weight matrix (the
// row-wise dispatch of the accelerator), and yields K fp32 partial products. The
// tile configuration decides how the VS units are placed: with R row groups
// (R = 8, 4, 2, 1 for CFG1..CFG4) unit n works on tile column n mod (N/R), so
// the N/R units of a group take consecutive vector elements and the R groups
// take the same elements for different row blocks. The unit picks its scalar
// from the I/H line, starting at lane col_off; scalars at or beyond col_valid
// are replaced by zero, which is how padding columns are kept out of the sums.
// One register stage: products appear one cycle after valid_i.
module sharp_vector_multiply
  import sharp_pkg::*;
#(
  parameter int unsigned N = 32,
  parameter int unsigned K = 32,
  localparam int unsigned LW = (N > 1) ? $clog2(N) : 1
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         valid_i,
  input  tile_tag_t    tag_i,
  input  logic [LW-1:0] col_off,    // lane of the first tile column in the I/H line
  input  logic [LW:0]   col_valid,  // tile columns that lie inside the vector
  input  fp16_t        weights [N][K],
  input  fp16_t        ih_line [N],
  output logic         valid_o,
  output tile_tag_t    tag_o,
  output fp32_t        prod [N][K]
);
  for (genvar n = 0; n < N; n++) begin : g_vs
    logic [LW:0] j;     // tile column of this unit
    fp16_t       s;
    always_comb begin
      j = (LW+1)'(n % (N / cfg_groups(tag_i.cfg)));
      s = (j < col_valid) ? ih_line[LW'(int'(col_off) + int'(j))] : 16'h0000;
    end
    for (genvar k = 0; k < K; k++) begin : g_mul
      always_ff @(posedge clk) prod[n][k] <= fp16_mul(weights[n][k], s);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) valid_o <= 1'b0;
    else        valid_o <= valid_i;
  end
  always_ff @(posedge clk) tag_o <= tag_i;
endmodule
