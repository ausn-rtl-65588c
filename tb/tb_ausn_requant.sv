// tb_ausn_requant: random rounded values (one or two terms, shift, allocation)
// are coded; the expected code is the superposition algorithm applied to the
// real value 2^-(hi_pow + pre_shift) * (1 + 2^-gap).
module tb_ausn_requant;
  import ausn_pkg::*;
  import ausn_ref_pkg::*;
  logic clk = 1'b0;
  logic sign;
  logic [1:0] cnt;
  logic signed [9:0] hp;
  logic [8:0] gap;
  logic signed [7:0] ps;
  subb_t sb;
  code_t code;
  int checks = 0, failures = 0, sat = 0, under = 0;

  ausn_requant dut (.sign(sign), .cnt(cnt), .hi_pow(hp), .gap(gap), .pre_shift(ps),
    .sub_bits(sb), .code(code));

  always #5 clk = ~clk;

  initial begin
    repeat (1000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int s, c, h, g, p, b, expc;
    real v;
    repeat (50000) begin
      s = int'($urandom % 2); c = int'($urandom % 3);
      h = int'($urandom % 70) - 4; g = 1 + int'($urandom % 8);
      p = int'($urandom % 21) - 10; b = int'($urandom % 3);
      sign = s[0]; cnt = 2'(c); hp = 10'(h); gap = 9'(g); ps = 8'(p); sb = 2'(b);
      #1;
      v = 0.0;
      if (c >= 1) v = 2.0 ** (-(h + p));
      if (c == 2) v = v + 2.0 ** (-(h + p + g));
      if (s) v = -v;
      expc = ref_quant(v, b);
      if (c > 0 && h + p < 1) sat++;
      if (c > 0 && expc == 0) under++;
      checks++;
      if (int'(code) != expc) begin
        failures++;
        if (failures < 10) $display("FAIL s=%0d c=%0d h=%0d g=%0d p=%0d b=%0d code=%0h exp=%0h", s, c, h, g, p, b, code, expc);
      end
    end
    checks++;
    if (sat == 0 || under == 0) begin failures++; $display("FAIL saturation/underflow not exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
