// ausn_act_quantizer: turns a signed fixed-point activation into an AUSN code
// with the paper's superposition algorithm (two tiers: basic, subdivision).
//
// The input din has FRAC fraction bits. The layer power power_j (layer_pow,
// signed) places the PreConvert scale: the basis of the layer is
// 2^power_j * {0, 2^-1, ..., 2^-p0_max}. Let M = |din|, L = position of M's
// leading one and T = power_j + FRAC (position of 2^power_j).
//   tier 0: p0 = T - L, the largest basis element not above M. If M is at or
//           above 2^power_j (p0 < 1) the value is clipped to the largest
//           code, p0 = 1 and p1 = 1. If p0 > p0_max the result is 0.
//   tier 1: rem = M / 2^L - 1; its leading one gives p1 = L - L2, the
//           largest subdivision element not above rem. rem = 0, or a p1
//           beyond p1_max, leaves p1 = 0.
// Both tiers round down, as the paper's algorithm picks the largest basis
// element not above the remainder.
// Interface: in_valid/din/layer_pow/sub_bits in; out_valid/code out, one
// register stage (latency 1). The algorithm is the paper's; the fixed-point
// interface, clipping and the register are this design's choices.
module ausn_act_quantizer
  import ausn_pkg::*;
#(
  parameter int unsigned IN_W = 48
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   in_valid,
  input  logic signed [IN_W-1:0] din,
  input  logic signed [7:0]      layer_pow,
  input  subb_t                  sub_bits,
  output logic                   out_valid,
  output code_t                  code
);
  logic [IN_W-1:0]       mag, rem;
  logic                  sgn;
  int                    lead, lead2, t, p0;
  pow_t                  p1;
  code_t                 code_d;

  function automatic int msb_pos(logic [IN_W-1:0] v);
    int pos;
    pos = -1;
    for (int i = 0; i < IN_W; i++)
      if (v[i]) pos = i;
    return pos;
  endfunction

  always_comb begin
    sgn  = din[IN_W-1];
    mag  = sgn ? IN_W'(-din) : IN_W'(din);
    lead = msb_pos(mag);
    t    = int'(layer_pow) + int'(FRAC);
    rem  = '0;
    p1   = '0;
    p0   = 0;
    lead2 = -1;
    code_d = '0;
    if (lead >= 0) begin
      p0 = t - lead;
      if (p0 < 1) begin
        code_d = join_code(sgn, pow_t'(1), (sub_bits != '0) ? pow_t'(1) : '0, sub_bits);
      end else if (p0 <= int'(p0_max(sub_bits))) begin
        rem   = mag & ~(IN_W'(1) << lead);
        lead2 = msb_pos(rem);
        if (lead2 >= 0 && (lead - lead2) <= int'(p1_max(sub_bits)))
          p1 = pow_t'(lead - lead2);
        code_d = join_code(sgn, pow_t'(p0), p1, sub_bits);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      code      <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) code <= code_d;
    end
  end

endmodule
