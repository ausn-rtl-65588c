// tb_ausn_pow_lane: random activation/weight codes, allocations and
// PreConvert shifts through one power-domain lane; each result, one cycle
// later, is compared with a model that expands the product into powers of
// two, applies the rounding scheme and codes the result.
module tb_ausn_pow_lane;
  import ausn_pkg::*;
  import ausn_ref_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0, in_valid = 1'b0, out_valid;
  code_t a, w, code;
  subb_t asb, wsb, osb;
  logic signed [7:0] ps;
  int checks = 0, failures = 0, n1 = 0, n2 = 0, n3 = 0, nsat = 0;

  ausn_pow_lane dut (.clk(clk), .rst_n(rst_n), .in_valid(in_valid), .a(a), .w(w),
    .a_sub_bits(asb), .w_sub_bits(wsb), .out_sub_bits(osb), .pre_shift(ps),
    .out_valid(out_valid), .code(code));

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int ai, wi, sa, sw, so, p, expc, s1, s2, s3;
    bit sat;
    a = '0; w = '0; asb = '0; wsb = '0; osb = '0; ps = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    repeat (30000) begin
      @(negedge clk);
      ai = int'($urandom % 64); wi = int'($urandom % 64);
      sa = int'($urandom % 3); sw = int'($urandom % 3); so = int'($urandom % 3);
      p  = int'($urandom % 15) - 10;
      a = 6'(ai); w = 6'(wi); asb = 2'(sa); wsb = 2'(sw); osb = 2'(so); ps = 8'(p);
      in_valid = 1'b1;
      expc = ref_lane(ai, wi, sa, sw, so, p, s1, s2, s3, sat);
      n1 += (s1 > 0); n2 += (s2 > 0); n3 += (s3 > 0); nsat += sat;
      @(negedge clk);
      in_valid = 1'b0;
      checks++;
      if (!out_valid || int'(code) != expc) begin
        failures++;
        if (failures < 10) $display("FAIL a=%0h w=%0h sa=%0d sw=%0d so=%0d ps=%0d code=%0h exp=%0h", ai, wi, sa, sw, so, p, code, expc);
      end
    end
    checks++;
    if (n1 == 0 || n2 == 0 || n3 == 0 || nsat == 0) begin failures++; $display("FAIL mechanism not exercised"); end
    $display("step1=%0d step2=%0d step3=%0d sat=%0d", n1, n2, n3, nsat);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
