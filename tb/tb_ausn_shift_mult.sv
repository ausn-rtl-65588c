// tb_ausn_shift_mult: random and corner inputs for the shift-and-add product;
// the expected product is x * value(w) * 2^31 computed with real numbers.
module tb_ausn_shift_mult;
  import ausn_pkg::*;
  import ausn_ref_pkg::*;
  logic clk = 1'b0;
  logic signed [7:0]  x;
  code_t              w;
  subb_t              sb;
  logic signed [39:0] prod;
  int checks = 0, failures = 0;

  ausn_shift_mult dut (.x(x), .w(w), .sub_bits(sb), .prod(prod));

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(int xi, int wi, int sbi);
    real expv;
    x = 8'(xi); w = 6'(wi); sb = 2'(sbi);
    #1;
    expv = real'(xi) * ref_value(wi, sbi) * (2.0 ** 31);
    checks++;
    if (real'(prod) != expv) begin
      failures++;
      if (failures < 10) $display("FAIL x=%0d w=%0h sb=%0d prod=%0d exp=%f", xi, wi, sbi, prod, expv);
    end
  endtask

  initial begin
    for (int s = 0; s <= 2; s++)
      for (int wi = 0; wi < 64; wi++) begin
        check(-128, wi, s);
        check(127, wi, s);
        check(1, wi, s);
      end
    repeat (20000) check($signed(8'($urandom)), int'($urandom % 64), int'($urandom % 3));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
