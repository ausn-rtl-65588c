// tb_ausn_act_quantizer: quantizes random activations (many magnitudes, both
// signs, several layer powers and allocations) and compares with the
// superposition algorithm run on real numbers; checks the 1-cycle latency and
// that clipping and underflow to zero both occur.
module tb_ausn_act_quantizer;
  import ausn_pkg::*;
  import ausn_ref_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  logic in_valid = 1'b0;
  logic signed [47:0] din;
  logic signed [7:0]  lp;
  subb_t sb;
  logic out_valid;
  code_t code;
  int checks = 0, failures = 0, clipped = 0, zeros = 0;

  ausn_act_quantizer #(.IN_W(48)) dut (.clk(clk), .rst_n(rst_n), .in_valid(in_valid),
    .din(din), .layer_pow(lp), .sub_bits(sb), .out_valid(out_valid), .code(code));

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int expc, sh, lpi, sbi;
    longint mag;
    real v;
    din = '0; lp = '0; sb = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < 20000; n++) begin
      @(negedge clk);
      sh  = int'($urandom % 46);
      mag = longint'({$urandom, $urandom}) & ((64'd1 << sh) - 1) | (64'd1 << sh);
      if ($urandom % 8 == 0) mag = 0;
      if ($urandom % 2) mag = -mag;
      lpi = int'($urandom % 17) - 8;
      sbi = int'($urandom % 3);
      din = 48'(mag); lp = 8'(lpi); sb = 2'(sbi);
      in_valid = 1'b1;
      v    = real'(mag) / (2.0 ** 31) / (2.0 ** lpi);
      expc = ref_quant(v, sbi);
      if ((v >= 1.0) || (v <= -1.0)) clipped++;
      if (expc == 0) zeros++;
      @(negedge clk);
      in_valid = 1'b0;
      checks++;
      if (!out_valid || int'(code) != expc) begin
        failures++;
        if (failures < 10) $display("FAIL din=%0d lp=%0d sb=%0d code=%0h exp=%0h v=%f", mag, lpi, sbi, code, expc, v);
      end
    end
    checks++;
    if (clipped == 0 || zeros == 0) begin failures++; $display("FAIL clip/zero not exercised"); end
    $display("clipped=%0d zeros=%0d", clipped, zeros);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
