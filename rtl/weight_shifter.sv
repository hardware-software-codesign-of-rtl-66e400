// weight_shifter: the multiplier replacement of one synapse.
//
// Weights are integer powers of two, w = s * 2^e with e in {0,-1,...,-7},
// stored in 4 bits. The product x*w is therefore an arithmetic shift of the
// 8-bit activation. To keep every bit of the product, the result is
// produced with 7 more fractional bits than the input: p = (s*x) << (7+e).
// The largest magnitude is 128 << 7 = 16384, which fits the 16-bit output.
//
// Interface: x (signed 8-bit activation), w = {sign, -e[2:0]} (sign 1 means
// negative), p (signed 16-bit product). Purely combinational.
//
// From the paper: the 8/4/16-bit widths, the sign/exponent form and the
// exponent range. This design's choice: the bit layout of the 4-bit code
// and the fixed 7-bit alignment of the product.
module weight_shifter
  import mfdfp_pkg::*;
(
  input  act_t   x,
  input  wcode_t w,
  output prod_t  p
);
  logic          neg;
  logic [EXP_W-1:0] k;        // -e, right-shift distance before alignment
  prod_t         xs;          // sign-applied, sign-extended input

  assign neg = w[W_W-1];
  assign k   = w[EXP_W-1:0];

  always_comb begin
    xs = neg ? -prod_t'(x) : prod_t'(x);
    p  = xs <<< (PROD_FRAC - int'(k));
  end
endmodule
