// fp32_max: combinational maximum of two single-precision values, the
// comparison used by the max-pooling kernel.
//
// Each operand is mapped to an unsigned key that orders like the real number
// (negative values are bit-inverted, positive ones get their sign bit set), so
// one unsigned compare picks the larger value.  -0 and +0 compare as -0 < +0.
// NaN handling is not defined (the paper does not use NaN).  Combinational.
//
// Lint: -Wall reports the scnn_pkg constants this module does not use
// (UNUSEDPARAM); they are shared defaults for other modules.
module fp32_max
  import scnn_pkg::*;
(
  input  fp32_t a,
  input  fp32_t b,
  output fp32_t y
);
  logic [31:0] ka, kb;
  always_comb begin
    ka = a[31] ? ~a : (a | 32'h8000_0000);
    kb = b[31] ? ~b : (b | 32'h8000_0000);
    y  = (ka >= kb) ? a : b;
  end
endmodule
