// ausn_pow_adder: adds two powers, the operation that replaces a multiply when
// both operands are AUSN codes (2^-a * 2^-b = 2^-(a+b)).
//
// The W-bit addition is split into three narrower additions, as in the
// paper's LUT mapping of a 6 + 6 -> 7-bit power addition:
//   1. low halves:   DEF + def  -> carry c4' and sum bits 3..1
//   2. high halves:  ABC + abc  -> 4-bit partial sum 7..4
//   3. fix-up:       partial sum 7..4 + c4' at its LSB -> bits 7'..4''
// The result is {bits 7'..4'', bits 3..1}, W+1 bits wide. Each step is small
// enough for one rank of 6-input LUTs on an FPGA; here it is plain logic.
// Interface: a, b (W bits, unsigned), sum (W+1 bits). Purely combinational.
// W must be even; the default W = 6 is the paper's example.
module ausn_pow_adder #(
  parameter int unsigned W = 6
) (
  input  logic [W-1:0] a,
  input  logic [W-1:0] b,
  output logic [W:0]   sum
);
  localparam int unsigned H = W / 2;

  logic [H:0] lo_sum;   // {c4', bits 3..1}
  logic [H:0] hi_part;  // bits 7..4 before the carry fix-up
  logic [H:0] hi_sum;   // bits 7'..4''

  always_comb begin
    lo_sum  = {1'b0, a[H-1:0]} + {1'b0, b[H-1:0]};
    hi_part = {1'b0, a[W-1:H]} + {1'b0, b[W-1:H]};
    hi_sum  = hi_part + {{H{1'b0}}, lo_sum[H]};
    sum     = {hi_sum, lo_sum[H-1:0]};
  end

  initial assert (W % 2 == 0) else $error("ausn_pow_adder: W must be even");
endmodule
