// tb_ausn_top: end-to-end test of the AUSN datapath at a reduced array size.
// Each job picks bit allocations, a layer power and a PreConvert shift, loads
// random weights, streams 1..4 input vectors and then checks the column sums
// (1 cycle after the last vector), the AUSN activations (2 cycles) and the
// power-lane outputs (3 cycles) against real-number models. It counts the
// mechanisms of the design (multi-vector accumulation, clipping and underflow
// in the quantizer, each rounding step, output saturation, every bit
// allocation) and fails if one never happened.
module tb_ausn_top;
  import ausn_pkg::*;
  import ausn_ref_pkg::*;
  localparam int R = 8, C = 4, JOBS = 400;
  logic clk = 1'b0, rst_n = 1'b0;
  subb_t w_sb, a_sb, pw_sb, o_sb;
  logic w_we = 1'b0, in_valid = 1'b0, acc_clear = 1'b0, acc_last = 1'b0;
  logic [$clog2(R)-1:0] w_row = '0;
  code_t w_data [C];
  logic signed [7:0] x [R];
  logic signed [47:0] acc [C];
  logic signed [7:0] lp, ps;
  logic act_valid, out_valid;
  code_t act_code [C], pw_code [C], out_code [C];
  int checks = 0, failures = 0;
  int m_accum = 0, m_clip = 0, m_zero = 0, m_st1 = 0, m_st2 = 0, m_st3 = 0, m_sat = 0;
  int m_alloc [3] = '{0, 0, 0};
  int wmem [R][C];
  real expacc [C];

  ausn_top #(.ROWS(R), .COLS(C)) dut (
    .clk(clk), .rst_n(rst_n), .w_sub_bits(w_sb), .w_we(w_we), .w_row(w_row), .w_data(w_data),
    .in_valid(in_valid), .acc_clear(acc_clear), .acc_last(acc_last), .x(x), .acc(acc),
    .layer_pow(lp), .act_sub_bits(a_sb), .act_valid(act_valid), .act_code(act_code),
    .pw_code(pw_code), .pw_sub_bits(pw_sb), .out_sub_bits(o_sb), .pre_shift(ps),
    .out_valid(out_valid), .out_code(out_code));

  always #5 clk = ~clk;

  initial begin
    repeat (JOBS * (R + 12) + 100) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_eq(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 12) $display("FAIL %s got=%0d exp=%0d", what, got, exp);
    end
  endtask

  initial begin
    int nvec, wsbi, asbi, pwsbi, osbi, lpi, psi, ea [C], eo [C], s1, s2, s3;
    bit sat;
    real v;
    foreach (x[i]) x[i] = '0;
    foreach (w_data[i]) begin w_data[i] = '0; pw_code[i] = '0; end
    w_sb = '0; a_sb = '0; pw_sb = '0; o_sb = '0; lp = '0; ps = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int job = 0; job < JOBS; job++) begin
      wsbi = int'($urandom % 3); asbi = int'($urandom % 3);
      pwsbi = int'($urandom % 3); osbi = int'($urandom % 3);
      lpi = int'($urandom % 16) - 4; psi = int'($urandom % 13) - 8;
      m_alloc[wsbi]++; m_alloc[asbi]++; m_alloc[osbi]++;
      @(negedge clk);
      w_sb = 2'(wsbi); a_sb = 2'(asbi); pw_sb = 2'(pwsbi); o_sb = 2'(osbi);
      lp = 8'(lpi); ps = 8'(psi);
      for (int r = 0; r < R; r++) begin
        w_we = 1'b1; w_row = $clog2(R)'(r);
        for (int c = 0; c < C; c++) begin
          wmem[r][c] = int'($urandom % 64);
          w_data[c] = 6'(wmem[r][c]);
        end
        @(negedge clk);
      end
      w_we = 1'b0;
      foreach (pw_code[c]) pw_code[c] = 6'($urandom % 64);
      nvec = 1 + int'($urandom % 4);
      if (nvec > 1) m_accum++;
      for (int vv = 0; vv < nvec; vv++) begin
        in_valid = 1'b1; acc_clear = (vv == 0); acc_last = (vv == nvec - 1);
        foreach (x[i]) x[i] = $signed(8'($urandom));
        for (int c = 0; c < C; c++) begin
          if (vv == 0) expacc[c] = 0.0;
          for (int r = 0; r < R; r++)
            expacc[c] += real'(x[r]) * ref_value(wmem[r][c], wsbi) * (2.0 ** 31);
        end
        @(negedge clk);
      end
      in_valid = 1'b0; acc_clear = 1'b0; acc_last = 1'b0;
      // 1 cycle after the last vector: column sums.
      for (int c = 0; c < C; c++) begin
        expect_eq("acc", acc[c], longint'(expacc[c]));
        v = expacc[c] / (2.0 ** 31) / (2.0 ** lpi);
        ea[c] = ref_quant(v, asbi);
        if (v >= 1.0 || v <= -1.0) m_clip++;
        if (ea[c] == 0) m_zero++;
        eo[c] = ref_lane(ea[c], int'(pw_code[c]), asbi, pwsbi, osbi, psi, s1, s2, s3, sat);
        m_st1 += (s1 > 0); m_st2 += (s2 > 0); m_st3 += (s3 > 0); m_sat += sat;
      end
      expect_eq("act_valid early", act_valid, 0);
      @(negedge clk);
      expect_eq("act_valid", act_valid, 1);
      for (int c = 0; c < C; c++) expect_eq("act_code", act_code[c], ea[c]);
      expect_eq("out_valid early", out_valid, 0);
      @(negedge clk);
      expect_eq("out_valid", out_valid, 1);
      for (int c = 0; c < C; c++) expect_eq("out_code", out_code[c], eo[c]);
    end
    $display("mechanisms: accumulate=%0d clip=%0d zero=%0d step1=%0d step2=%0d step3=%0d saturate=%0d alloc0=%0d alloc1=%0d alloc2=%0d",
             m_accum, m_clip, m_zero, m_st1, m_st2, m_st3, m_sat, m_alloc[0], m_alloc[1], m_alloc[2]);
    checks++;
    if (m_accum == 0 || m_clip == 0 || m_zero == 0 || m_st1 == 0 || m_st2 == 0 || m_st3 == 0 ||
        m_sat == 0 || m_alloc[0] == 0 || m_alloc[1] == 0 || m_alloc[2] == 0) begin
      failures++;
      $display("FAIL a mechanism never happened");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
