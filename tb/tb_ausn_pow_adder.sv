// tb_ausn_pow_adder: exhaustive check of the split 6 + 6 -> 7-bit power adder
// against ordinary integer addition.
module tb_ausn_pow_adder;
  logic clk = 1'b0;
  logic [5:0] a, b;
  logic [6:0] sum;
  int checks = 0, failures = 0;

  ausn_pow_adder #(.W(6)) dut (.a(a), .b(b), .sum(sum));

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 64; i++)
      for (int j = 0; j < 64; j++) begin
        a = 6'(i); b = 6'(j);
        #1;
        checks++;
        if (int'(sum) != i + j) begin
          failures++;
          if (failures < 10) $display("FAIL %0d + %0d = %0d", i, j, sum);
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
