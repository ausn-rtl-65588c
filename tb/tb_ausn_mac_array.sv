// tb_ausn_mac_array: loads random AUSN weights into a reduced array, streams
// random input vectors with and without acc_clear and compares the column
// accumulators, one cycle after each vector, with sums of real products.
module tb_ausn_mac_array;
  import ausn_pkg::*;
  import ausn_ref_pkg::*;
  localparam int R = 8, C = 4, AW = 48;
  logic clk = 1'b0, rst_n = 1'b0;
  subb_t sb;
  logic w_we = 1'b0;
  logic [$clog2(R)-1:0] w_row = '0;
  code_t w_data [C];
  logic in_valid = 1'b0, acc_clear = 1'b0;
  logic signed [7:0] x [R];
  logic out_valid;
  logic signed [AW-1:0] acc [C];
  int checks = 0, failures = 0;
  int wmem [R][C];
  real expacc [C];

  ausn_mac_array #(.ROWS(R), .COLS(C), .ACC_W(AW)) dut (
    .clk(clk), .rst_n(rst_n), .sub_bits(sb), .w_we(w_we), .w_row(w_row),
    .w_data(w_data), .in_valid(in_valid), .acc_clear(acc_clear), .x(x),
    .out_valid(out_valid), .acc(acc));

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    foreach (x[i]) x[i] = '0;
    foreach (w_data[i]) w_data[i] = '0;
    sb = 2'd2;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int alloc = 0; alloc <= 2; alloc++) begin
      sb = 2'(alloc);
      // load weights
      for (int r = 0; r < R; r++) begin
        @(negedge clk);
        w_we = 1'b1; w_row = 3'(r);
        for (int c = 0; c < C; c++) begin
          wmem[r][c] = int'($urandom % 64);
          w_data[c]  = 6'(wmem[r][c]);
        end
      end
      @(negedge clk); w_we = 1'b0;
      for (int v = 0; v < 12; v++) begin
        @(negedge clk);
        in_valid  = 1'b1;
        acc_clear = (v % 4 == 0);
        foreach (x[i]) x[i] = $signed(8'($urandom));
        for (int c = 0; c < C; c++) begin
          if (acc_clear) expacc[c] = 0.0;
          for (int r = 0; r < R; r++)
            expacc[c] += real'(x[r]) * ref_value(wmem[r][c], alloc) * (2.0 ** 31);
        end
        @(negedge clk);
        in_valid = 1'b0;
        checks++;
        if (!out_valid) begin failures++; $display("FAIL out_valid not high one cycle after the vector"); end
        for (int c = 0; c < C; c++) begin
          checks++;
          if (real'(acc[c]) != expacc[c]) begin
            failures++;
            $display("FAIL alloc=%0d v=%0d c=%0d acc=%0d exp=%f", alloc, v, c, acc[c], expacc[c]);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
