// ausn_pow_lane: one power-domain lane. It multiplies an AUSN activation by an
// AUSN weight without a multiplier and delivers the result as an AUSN code,
// with the rounding scheme in place of re-quantization.
//
// ausn_pow_mult gives the (up to) four product terms 2^-e. They are mapped to
// nonnegative exponents n = E_REF - e for ausn_rounding_unit, which keeps
// B_sub + 1 terms (B_sub = 1 when the output code has a subdivision part,
// 0 when it has none). ausn_requant turns the kept terms back into a code,
// applying the next layer's PreConvert shift pre_shift.
// Timing: one register at the output; a pair applied with in_valid in cycle t
// appears with out_valid after the clock edge ending cycle t.
// The chain multiply -> round -> code follows the paper; the register and the
// exponent mapping are this design's choices.
module ausn_pow_lane
  import ausn_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  input  code_t             a,
  input  code_t             w,
  input  subb_t             a_sub_bits,
  input  subb_t             w_sub_bits,
  input  subb_t             out_sub_bits,
  input  logic signed [7:0] pre_shift,
  output logic              out_valid,
  output code_t             code
);
  localparam int unsigned E_REF = (1 << POWS_W) - 1;
  localparam int unsigned SW    = (1 << POWS_W) + $clog2(4) + 2;
  localparam int unsigned XW    = $clog2(SW);

  logic [POWS_W-1:0] term_pow [4];
  logic [POWS_W-1:0] term_exp [4];
  logic              term_vld [4];
  logic [3:0]        tv;
  logic              sign;
  logic [1:0]        cnt;
  logic [XW-1:0]     hi, lo;
  logic signed [9:0] hi_pow;
  logic [8:0]        gap;
  code_t             code_d;

  ausn_pow_mult u_mult (
    .a          (a),
    .w          (w),
    .a_sub_bits (a_sub_bits),
    .w_sub_bits (w_sub_bits),
    .term_pow   (term_pow),
    .term_valid (tv),
    .sign       (sign)
  );

  always_comb
    for (int i = 0; i < 4; i++) begin
      term_exp[i] = POWS_W'(E_REF) - term_pow[i];
      term_vld[i] = tv[i];
    end

  ausn_rounding_unit #(.N_TERMS(4), .E_W(POWS_W), .MAX_BSUB(1)) u_round (
    .term_exp   (term_exp),
    .term_valid (term_vld),
    .b_sub      (out_sub_bits != '0),
    .out_mask   (),
    .out_cnt    (cnt),
    .out_hi     (hi),
    .out_lo     (lo)
  );

  always_comb begin
    hi_pow = signed'(10'(E_REF) - 10'(hi));
    gap    = 9'(hi) - 9'(lo);
  end

  ausn_requant u_requant (
    .sign      (sign),
    .cnt       (cnt),
    .hi_pow    (hi_pow),
    .gap       (gap),
    .pre_shift (pre_shift),
    .sub_bits  (out_sub_bits),
    .code      (code_d)
  );

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
