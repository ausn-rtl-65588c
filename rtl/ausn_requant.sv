// ausn_requant: writes a rounded result (at most two powers of two) back as an
// AUSN code for the next layer.
//
// Inputs describe the value (-1)^sign * (2^-hi_pow + 2^-(hi_pow + gap)) with
// cnt = number of terms (0: zero, 1: only the first term). The next layer's
// PreConvert scale is a shift of the power: p0 = hi_pow + pre_shift, where
// pre_shift (signed) is the difference between the power_j of the producing
// and the consuming layer. Then, for the output allocation sub_bits:
//   cnt = 0 or p0 > p0_max      -> code 0 (below the smallest basis element)
//   p0 < 1                      -> largest code, p0 = 1, p1 = 1 (clipping)
//   otherwise                   -> p0, and p1 = gap if cnt = 2 and
//                                  gap <= p1_max, else p1 = 0 (the smaller
//                                  term is dropped, Scenario 3)
// Purely combinational. The power shift for PreConvert follows the paper; the
// clipping and underflow rules are this design's choices.
module ausn_requant
  import ausn_pkg::*;
(
  input  logic              sign,
  input  logic [1:0]        cnt,
  input  logic signed [9:0] hi_pow,
  input  logic [8:0]        gap,
  input  logic signed [7:0] pre_shift,
  input  subb_t             sub_bits,
  output code_t             code
);
  int p0;

  always_comb begin
    p0   = int'(hi_pow) + int'(pre_shift);
    code = '0;
    if (cnt != 2'd0) begin
      if (p0 < 1)
        code = join_code(sign, pow_t'(1), (sub_bits != '0) ? pow_t'(1) : '0, sub_bits);
      else if (p0 <= int'(p0_max(sub_bits)))
        code = join_code(sign, pow_t'(p0),
                         (cnt >= 2'd2 && int'(gap) <= int'(p1_max(sub_bits))) ? pow_t'(gap) : '0,
                         sub_bits);
    end
  end
endmodule
