// fp32_mul: combinational IEEE-754 single-precision multiplier ("Mult" in
// each inner-product unit).
//
// The paper fixes the number format (32-bit float) but not how the
// multiplier is built; this is a plain sign/exponent/mantissa datapath:
// 24x24-bit mantissa product, one-bit normalisation and round-to-nearest-even.
// Design choices: subnormal inputs are read as zero and subnormal results are
// flushed to signed zero; overflow gives infinity; any NaN, or inf*0, gives the
// quiet NaN 0x7FC00000.  Purely combinational: the caller registers the result.
//
// Lint: -Wall reports the scnn_pkg constants this module does not use
// (UNUSEDPARAM); they are shared defaults for other modules.
module fp32_mul
  import scnn_pkg::*;
(
  input  fp32_t a,
  input  fp32_t b,
  output fp32_t y
);
  logic        s;
  logic [7:0]  ea, eb;
  logic [47:0] p;
  logic [22:0] m;
  logic        g, st, rnd;
  logic [9:0]  e;          // biased exponent, two's complement
  logic [23:0] mr;         // rounded fraction with carry
  logic        a_nan, b_nan, a_inf, b_inf, a_zero, b_zero;

  always_comb begin
    s      = a[31] ^ b[31];
    ea     = a[30:23];
    eb     = b[30:23];
    a_nan  = (ea == 8'hFF) && (a[22:0] != 0);
    b_nan  = (eb == 8'hFF) && (b[22:0] != 0);
    a_inf  = (ea == 8'hFF) && (a[22:0] == 0);
    b_inf  = (eb == 8'hFF) && (b[22:0] == 0);
    a_zero = (ea == 8'h00);
    b_zero = (eb == 8'h00);
    p      = {1'b1, a[22:0]} * {1'b1, b[22:0]};
    if (p[47]) begin
      m  = p[46:24];
      g  = p[23];
      st = |p[22:0];
      e  = 10'(ea) + 10'(eb) - 10'd126;
    end else begin
      m  = p[45:23];
      g  = p[22];
      st = |p[21:0];
      e  = 10'(ea) + 10'(eb) - 10'd127;
    end
    rnd = g & (st | m[0]);
    mr  = {1'b0, m} + 24'(rnd);
    if (mr[23]) e = e + 10'd1;
    if (a_nan || b_nan || (a_inf && b_zero) || (b_inf && a_zero))
      y = 32'h7FC0_0000;
    else if (a_inf || b_inf)
      y = {s, 8'hFF, 23'd0};
    else if (a_zero || b_zero)
      y = {s, 31'd0};
    else if (e[9] || e == 10'd0)          // underflow: flush to zero
      y = {s, 31'd0};
    else if (e >= 10'd255)                // overflow
      y = {s, 8'hFF, 23'd0};
    else
      y = {s, e[7:0], mr[22:0]};
  end
endmodule
