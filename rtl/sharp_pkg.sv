// sharp_pkg: types, tile configurations and floating-point arithmetic shared by
// the SHARP LSTM accelerator.
//
// Number formats follow the accelerator's precision split: operands of every
// multiplication are IEEE half precision (fp16), sums and accumulators are IEEE
// single precision (fp32). An fp16 x fp16 product has a 22-bit significand and
// therefore fits exactly in fp32, so fp16_mul never rounds.
//
// Design choices of this implementation (not fixed by the accelerator's
// description): subnormal inputs and results are flushed to zero, NaN is not
// generated or propagated, fp32 addition and every narrowing conversion truncate
// (round toward zero), and exp() is computed with a fixed-point cubic for 2^f.
// All functions are combinational and synthesizable.
package sharp_pkg;

  typedef logic [15:0] fp16_t;
  typedef logic [31:0] fp32_t;

  // MVM tile configurations. Every VS unit is K (=32) weight rows tall; the N
  // VS units are grouped into R row-groups of N/R units each, so the tile is
  // R*K rows by N/R columns. CFG1 is 8*K = 256 rows tall, CFG4 is K rows tall.
  typedef enum logic [1:0] {
    CFG1 = 2'd0,  // R = 8 row groups, adder-tree level logN-3
    CFG2 = 2'd1,  // R = 4, level logN-2
    CFG3 = 2'd2,  // R = 2, level logN-1
    CFG4 = 2'd3   // R = 1, level logN (root)
  } tile_cfg_e;

  typedef enum logic {PH_INPUT = 1'b0, PH_HIDDEN = 1'b1} phase_e;

  localparam int MAX_GROUPS = 8;  // K-accumulators behind the tree adder
  localparam int BLK_W      = 12; // row-block index width
  localparam int STEP_W     = 16; // time-step index width

  // Control word that travels with one tile step through multiplier and tree.
  typedef struct packed {
    logic                first;   // first column step of the tile: load accumulators
    logic                last;    // last column step: emit the accumulated tile
    tile_cfg_e           cfg;     // tile configuration of this step
    phase_e              phase;   // input MVM or hidden MVM
    logic [3:0]          nvalid;  // row blocks of this tile that lie inside the matrix
    logic [BLK_W-1:0]    blk;     // first K-row block of the tile
    logic [STEP_W-1:0]   step;    // LSTM time step
  } tile_tag_t;

  function automatic int unsigned cfg_groups(tile_cfg_e c);
    case (c)
      CFG1:    return 8;
      CFG2:    return 4;
      CFG3:    return 2;
      default: return 1;
    endcase
  endfunction

  function automatic int unsigned cfg_log_groups(tile_cfg_e c);
    case (c)
      CFG1:    return 3;
      CFG2:    return 2;
      CFG3:    return 1;
      default: return 0;
    endcase
  endfunction

  localparam fp32_t FP32_ONE = 32'h3F80_0000;
  localparam fp32_t FP32_TWO = 32'h4000_0000;

  // ---------------------------------------------------------------- fp16 * fp16 -> fp32 (exact)
  function automatic fp32_t fp16_mul(fp16_t a, fp16_t b);
    logic        s;
    logic [21:0] p;
    logic [8:0]  e;
    s = a[15] ^ b[15];
    if (a[14:10] == 5'd0 || b[14:10] == 5'd0) return {s, 31'd0};
    p = {1'b1, a[9:0]} * {1'b1, b[9:0]};
    e = 9'(a[14:10]) + 9'(b[14:10]) + 9'd97;  // -15 -15 +127
    if (p[21]) return {s, 8'(e + 9'd1), p[20:0], 2'b00};
    else       return {s, 8'(e), p[19:0], 3'b000};
  endfunction

  // ---------------------------------------------------------------- fp32 + fp32 (truncating)
  function automatic fp32_t fp32_add(fp32_t a, fp32_t b);
    fp32_t       x, y;
    logic [7:0]  d;
    logic [26:0] mx, my;
    logic [27:0] sum;
    logic signed [9:0] e;
    int unsigned lz;
    if (a[30:23] == 8'd0) return (b[30:23] == 8'd0) ? 32'd0 : b;
    if (b[30:23] == 8'd0) return a;
    if (a[30:0] >= b[30:0]) begin x = a; y = b; end
    else                    begin x = b; y = a; end
    d  = x[30:23] - y[30:23];
    mx = {1'b1, x[22:0], 3'b000};
    my = (d > 8'd26) ? 27'd0 : ({1'b1, y[22:0], 3'b000} >> d);
    e  = 10'(x[30:23]);
    if (x[31] == y[31]) begin
      sum = 28'(mx) + 28'(my);
      if (sum[27]) begin sum = sum >> 1; e = e + 10'sd1; end
    end else begin
      sum = 28'(mx) - 28'(my);
      if (sum == 28'd0) return 32'd0;
      lz = 0;
      for (int i = 26; i >= 0; i--) begin
        if (sum[i]) break;
        lz++;
      end
      sum = sum << lz;
      e   = e - 10'(lz);
    end
    if (e >= 10'sd255) return {x[31], 8'hFF, 23'd0};
    if (e <= 10'sd0)   return 32'd0;
    return {x[31], e[7:0], sum[25:3]};
  endfunction

  function automatic fp32_t fp32_neg(fp32_t a);
    return {~a[31], a[30:0]};
  endfunction

  // ---------------------------------------------------------------- conversions
  function automatic fp16_t fp32_to_fp16(fp32_t a);
    logic signed [9:0] e;
    if (a[30:23] == 8'd0) return {a[31], 15'd0};
    e = 10'(a[30:23]) - 10'sd112;             // -127 +15
    if (e >= 10'sd31) return {a[31], 5'h1F, 10'd0};
    if (e <= 10'sd0)  return {a[31], 15'd0};
    return {a[31], e[4:0], a[22:13]};
  endfunction

  function automatic fp32_t fp16_to_fp32(fp16_t a);
    if (a[14:10] == 5'd0) return {a[15], 31'd0};
    if (a[14:10] == 5'h1F) return {a[15], 8'hFF, 23'd0};
    return {a[15], 8'(9'(a[14:10]) + 9'd112), a[9:0], 13'd0};
  endfunction

  // ---------------------------------------------------------------- exp, for |y| <= 32
  // y*log2(e) is formed in fixed point (24 fraction bits); the integer part
  // becomes the exponent and 2^f, f in [0,1), is a cubic
  // 1 + c1 f + c2 f^2 + c3 f^3 (c1..c3 fitted for relative error ~1e-4).
  function automatic fp32_t fp32_exp(fp32_t y);
    localparam logic [25:0] LOG2E = 26'd24204406;  // log2(e) * 2^24
    localparam logic [25:0] C1 = 26'd11669508;     // 0.695556856 * 2^24
    localparam logic [25:0] C2 = 26'd3794563;      // 0.226173572 * 2^24
    localparam logic [25:0] C3 = 26'd1311065;      // 0.0781455737 * 2^24
    logic [39:0]        mag;
    logic signed [40:0] yq;
    logic signed [67:0] z;
    logic signed [43:0] zi;
    logic signed [15:0] n;
    logic [23:0]        f;
    logic [49:0]        t;
    logic [25:0]        p;
    logic signed [15:0] e;
    if (y[30:23] == 8'd0) return FP32_ONE;
    if (y[30:23] >= 8'd126)
      mag = 40'({1'b1, y[22:0]}) << (y[30:23] - 8'd126);
    else
      mag = 40'({1'b1, y[22:0]}) >> (8'd126 - y[30:23]);
    yq = y[31] ? -$signed({1'b0, mag}) : $signed({1'b0, mag});
    z  = 68'(yq) * $signed({1'b0, LOG2E});
    zi = 44'(z >>> 24);                            // Q.24, floor semantics
    n  = 16'(zi >>> 24);
    f  = zi[23:0];
    // Horner in Q.24: p = 1 + f*(C1 + f*(C2 + f*C3))
    t  = 50'(f) * 50'(C3);
    t  = 50'(f) * 50'(C2 + 26'(t >> 24));
    t  = 50'(f) * 50'(C1 + 26'(t >> 24));
    p  = 26'd16777216 + 26'(t >> 24);
    if (p[25]) p = 26'h1FF_FFFF;                    // keep below 2.0
    e  = n + 16'sd127;
    if (e >= 16'sd255) return {1'b0, 8'hFE, 23'h7F_FFFF};
    if (e <= 16'sd0)   return 32'd0;
    return {1'b0, e[7:0], p[23:1]};
  endfunction

  // ---------------------------------------------------------------- a / b (truncating)
  function automatic fp32_t fp32_div(fp32_t a, fp32_t b);
    logic              s;
    logic [47:0]       q;
    logic signed [9:0] e;
    s = a[31] ^ b[31];
    if (a[30:23] == 8'd0) return {s, 31'd0};
    if (b[30:23] == 8'd0) return {s, 8'hFF, 23'd0};
    q = {1'b1, a[22:0], 24'd0} / 48'({1'b1, b[22:0]});
    e = 10'(a[30:23]) - 10'(b[30:23]) + 10'sd126;
    if (q[24]) begin
      e = e + 10'sd1;
      q = q >> 1;
    end
    if (e >= 10'sd255) return {s, 8'hFF, 23'd0};
    if (e <= 10'sd0)   return {s, 31'd0};
    return {s, e[7:0], q[22:0]};
  endfunction

endpackage
