// sharp_amfu: the Activation multi-functional unit (A-MFU), LANES lanes that
// each apply a sigmoid or a hyperbolic tangent to an fp32 value.
//
// Both functions are built from one chain of floating-point operators, as in
// the accelerator: sigmoid(x) = 1 / (1 + e^-x) and
// tanh(x) = (1 - e^-2x) / (1 + e^-2x). The chain is split into four registered
// stages so that every lane accepts a new value each cycle:
//   1 fp-shift  y = -x (sigmoid) or y = -2x (tanh, an exponent increment),
//               clamped to |y| <= 32 where both functions are saturated
//   2 fp-exp    e = exp(y)
//   3 fp-add    den = 1 + e, num = 1 (sigmoid) or 1 - e (tanh)
//   4 fp-div    out = num / den
// func[l] selects the function of lane l (0 sigmoid, 1 tanh). A TAG_W-bit tag
// travels alongside. Latency is 4 cycles. The operator chain follows the
// accelerator's description; writing tanh as a quotient (so that one chain
// serves both functions), the clamp and the exp method are this design's choices.
module sharp_amfu
  import sharp_pkg::*;
#(
  parameter int unsigned LANES = 32,
  parameter int unsigned TAG_W = 16
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             valid_i,
  input  logic [TAG_W-1:0] tag_i,
  input  logic [LANES-1:0] func,
  input  fp32_t            x [LANES],
  output logic             valid_o,
  output logic [TAG_W-1:0] tag_o,
  output fp32_t            y [LANES]
);
  localparam fp32_t CLAMP = 32'h4200_0000;  // 32.0

  logic [3:0]       v;
  logic [TAG_W-1:0] tg [4];
  logic [LANES-1:0] fn [3];
  fp32_t            s1 [LANES];   // after fp-shift
  fp32_t            s2 [LANES];   // after fp-exp
  fp32_t            num [LANES], den [LANES];

  always_ff @(posedge clk) begin
    for (int l = 0; l < LANES; l++) begin
      fp32_t t;
      // stage 1: fp-shift
      t = fp32_neg(x[l]);
      if (func[l] && t[30:23] != 8'd0 && t[30:23] != 8'hFF) t[30:23] = t[30:23] + 8'd1;
      if (t[30:0] > CLAMP[30:0]) t = {t[31], CLAMP[30:0]};
      s1[l] <= t;
      // stage 2: fp-exp
      s2[l] <= fp32_exp(s1[l]);
      // stage 3: fp-add
      den[l] <= fp32_add(FP32_ONE, s2[l]);
      num[l] <= fn[1][l] ? fp32_add(FP32_ONE, fp32_neg(s2[l])) : FP32_ONE;
      // stage 4: fp-div
      y[l] <= fp32_div(num[l], den[l]);
    end
    fn[0] <= func;
    fn[1] <= fn[0];
    fn[2] <= fn[1];
    tg[0] <= tag_i;
    for (int i = 1; i < 4; i++) tg[i] <= tg[i-1];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) v <= '0;
    else        v <= {v[2:0], valid_i};
  end

  assign valid_o = v[3];
  assign tag_o   = tg[3];
endmodule
