// tb_ausn_pow_mult: all pairs of codes for each allocation pair; the sum of
// the valid terms 2^-term_pow, with the sign, must equal value(a) * value(w)
// computed with real numbers, and the number of terms must match the
// operands' subdivision parts.
module tb_ausn_pow_mult;
  import ausn_pkg::*;
  import ausn_ref_pkg::*;
  logic clk = 1'b0;
  code_t a, w;
  subb_t asb, wsb;
  logic [6:0] tp [4];
  logic [3:0] tv;
  logic sign;
  int checks = 0, failures = 0;

  ausn_pow_mult dut (.a(a), .w(w), .a_sub_bits(asb), .w_sub_bits(wsb),
    .term_pow(tp), .term_valid(tv), .sign(sign));

  always #5 clk = ~clk;

  initial begin
    repeat (1000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real got, expv;
    int nterm, expn, da, dw;
    for (int sa = 0; sa <= 2; sa++)
      for (int sw = 0; sw <= 2; sw++)
        for (int ai = 0; ai < 64; ai++)
          for (int wi = 0; wi < 64; wi++) begin
            a = 6'(ai); w = 6'(wi); asb = 2'(sa); wsb = 2'(sw);
            #1;
            got = 0.0; nterm = 0;
            for (int t = 0; t < 4; t++)
              if (tv[t]) begin got += $pow(2.0, -real'(tp[t])); nterm++; end
            if (sign) got = -got;
            expv = ref_value(ai, sa) * ref_value(wi, sw);
            da = ai % 32; dw = wi % 32;
            if (da / (2 ** sa) == 0 || dw / (2 ** sw) == 0) expn = 0;
            else expn = (1 + (da % (2 ** sa) != 0)) * (1 + (dw % (2 ** sw) != 0));
            checks++;
            if ((expv != 0.0 && got != expv) || nterm != expn) begin
              failures++;
              if (failures < 10) $display("FAIL a=%0h w=%0h sa=%0d sw=%0d got=%e exp=%e n=%0d/%0d", ai, wi, sa, sw, got, expv, nterm, expn);
            end
          end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
