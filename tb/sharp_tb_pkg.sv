// sharp_tb_pkg: reference arithmetic for the SHARP testbenches. Converts
// between the IEEE fp16/fp32 bit patterns used by the RTL and SystemVerilog
// real (double), so that expected values are computed in double precision,
// independently of the RTL's own arithmetic.
package sharp_tb_pkg;

  function automatic real f32r(logic [31:0] b);
    logic [63:0] d;
    if (b[30:23] == 8'd0) return 0.0;
    d = {b[31], 11'(int'(b[30:23]) - 127 + 1023), b[22:0], 29'd0};
    return $bitstoreal(d);
  endfunction

  function automatic logic [31:0] r2f32(real r);
    logic [63:0] d;
    int e;
    if (r == 0.0) return 32'd0;
    d = $realtobits(r);
    e = int'(d[62:52]) - 1023 + 127;
    if (e <= 0) return {d[63], 31'd0};
    if (e >= 255) return {d[63], 8'hFF, 23'd0};
    return {d[63], 8'(e), d[51:29]};
  endfunction

  function automatic real f16r(logic [15:0] b);
    logic [63:0] d;
    if (b[14:10] == 5'd0) return 0.0;
    d = {b[15], 11'(int'(b[14:10]) - 15 + 1023), b[9:0], 42'd0};
    return $bitstoreal(d);
  endfunction

  // nearest-even is not needed: the testbenches only feed values that are exact
  // in fp16 or compare with a tolerance
  function automatic logic [15:0] r2f16(real r);
    logic [63:0] d;
    int e;
    if (r == 0.0) return 16'd0;
    d = $realtobits(r);
    e = int'(d[62:52]) - 1023 + 15;
    if (e <= 0) return {d[63], 15'd0};
    if (e >= 31) return {d[63], 5'h1F, 10'd0};
    return {d[63], 5'(e), d[51:42]};
  endfunction

  // a random value with few significant bits, exactly representable in fp16
  function automatic real rnd_small(real scale);
    int v;
    v = int'($urandom_range(0, 255)) - 128;
    return scale * real'(v) / 128.0;
  endfunction

  function automatic real sigmoid(real x);
    return 1.0 / (1.0 + $exp(-x));
  endfunction

  function automatic real tanh_r(real x);
    return (1.0 - $exp(-2.0 * x)) / (1.0 + $exp(-2.0 * x));
  endfunction

  function automatic bit close(real a, real b, real abs_tol, real rel_tol);
    real d, m;
    d = (a > b) ? a - b : b - a;
    m = (b > 0.0) ? b : -b;
    return (d <= abs_tol) || (d <= rel_tol * m);
  endfunction

endpackage
