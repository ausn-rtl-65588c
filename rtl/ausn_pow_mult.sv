// ausn_pow_mult: product of an AUSN activation and an AUSN weight done in the
// power domain, with adders only.
//
// With a = 2^-a0 (1 + 2^-a1) and w = 2^-w0 (1 + 2^-w1) the product is the sum
// of four powers of two (the paper's (a+b)(c+d) = A+B+C+D):
//   term 0: 2^-(a0 + w0)
//   term 1: 2^-(a0 + w0 + w1)        present if w1 != 0
//   term 2: 2^-(a0 + a1 + w0)        present if a1 != 0
//   term 3: 2^-(a0 + a1 + w0 + w1)   present if a1 != 0 and w1 != 0
// First a0 + a1 and w0 + w1 are formed, then the four pairwise sums, so every
// addition is one 6 + 6 -> 7-bit ausn_pow_adder. A zero basic power in either
// operand makes the product zero (no term valid). The sign is the XOR of the
// operand signs.
// Interface: a, w (codes), a_sub_bits, w_sub_bits (allocations), term_pow[4]
// (power of each term, value 2^-term_pow), term_valid[4], sign.
// Purely combinational. The term expansion follows the paper; the order of
// the additions is this design's choice.
module ausn_pow_mult
  import ausn_pkg::*;
(
  input  code_t              a,
  input  code_t              w,
  input  subb_t              a_sub_bits,
  input  subb_t              w_sub_bits,
  output logic [POWS_W-1:0]  term_pow   [4],
  output logic [3:0]         term_valid,
  output logic               sign
);
  fields_t fa, fw;
  logic [POWS_W-1:0] sa_full, sw_full;
  logic [POW_W-1:0]  a0, w0, sa, sw;

  always_comb begin
    fa = split_code(a, a_sub_bits);
    fw = split_code(w, w_sub_bits);
    a0 = POW_W'(fa.p0);
    w0 = POW_W'(fw.p0);
  end

  // a0 + a1 and w0 + w1 never exceed 2^D_W - 1 for any allocation, so they
  // fit the POW_W-bit operands of the next rank.
  ausn_pow_adder #(.W(POW_W)) u_sa (.a(a0), .b(POW_W'(fa.p1)), .sum(sa_full));
  ausn_pow_adder #(.W(POW_W)) u_sw (.a(w0), .b(POW_W'(fw.p1)), .sum(sw_full));
  assign sa = sa_full[POW_W-1:0];
  assign sw = sw_full[POW_W-1:0];

  ausn_pow_adder #(.W(POW_W)) u_t0 (.a(a0), .b(w0), .sum(term_pow[0]));
  ausn_pow_adder #(.W(POW_W)) u_t1 (.a(a0), .b(sw), .sum(term_pow[1]));
  ausn_pow_adder #(.W(POW_W)) u_t2 (.a(sa), .b(w0), .sum(term_pow[2]));
  ausn_pow_adder #(.W(POW_W)) u_t3 (.a(sa), .b(sw), .sum(term_pow[3]));

  always_comb begin
    logic nz;
    nz = (fa.p0 != '0) && (fw.p0 != '0);
    term_valid[0] = nz;
    term_valid[1] = nz && (fw.p1 != '0);
    term_valid[2] = nz && (fa.p1 != '0);
    term_valid[3] = nz && (fa.p1 != '0) && (fw.p1 != '0);
    sign = fa.sign ^ fw.sign;
  end
endmodule
