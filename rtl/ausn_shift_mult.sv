// ausn_shift_mult: decoder-free product of a signed fixed-point input and an
// AUSN weight code, built from two shifters and one adder.
//
// The weight's basic power p0 and subdivision power p1 are bit slices of the
// code (ausn_pkg::split_code). The product x * 2^-p0 * (1 + 2^-p1) is formed
// as (x << (FRAC - p0)) + (x << (FRAC - p0 - p1)), so the result carries FRAC
// fraction bits and is exact. A zero basic power gives 0, a zero subdivision
// power drops the second shift. The sign bit of the code negates the sum.
// The per-layer PreConvert factor 2^power_j is not applied here; it only moves
// the binary point of the result and is handled where the result is
// re-quantized.
// Interface: x (X_W signed), w (AUSN code), sub_bits (subdivision bits of
// this layer's allocation, 0..2), prod (PROD_W signed, FRAC fraction bits).
// Purely combinational. The shift-and-add structure follows the paper; the
// exact fixed-point scaling is this design's choice.
module ausn_shift_mult
  import ausn_pkg::*;
(
  input  logic signed [X_W-1:0]    x,
  input  code_t                    w,
  input  subb_t                    sub_bits,
  output logic signed [PROD_W-1:0] prod
);
  fields_t f;
  logic signed [PROD_W-1:0] xe, t0, t1, mag;
  logic [5:0] sh0, sh1;

  always_comb begin
    f   = split_code(w, sub_bits);
    xe  = PROD_W'(x);
    sh0 = 6'(FRAC) - 6'(f.p0);
    sh1 = sh0 - 6'(f.p1);
    t0  = (f.p0 != '0) ? (xe <<< sh0) : '0;
    t1  = (f.p0 != '0 && f.p1 != '0) ? (xe <<< sh1) : '0;
    mag = t0 + t1;
    prod = f.sign ? -mag : mag;
  end
endmodule
