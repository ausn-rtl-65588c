// tb_ausn_rounding_unit: the paper's worked example (412 -> 384, B_sub = 1),
// hand-made cases for each step, then random multisets of exponents compared
// with a list-based model of the four rounding steps.
module tb_ausn_rounding_unit;
  import ausn_ref_pkg::*;
  localparam int N = 6, EW = 7, SW = (1 << EW) + $clog2(N) + 2, XW = $clog2(SW);
  logic clk = 1'b0;
  logic [EW-1:0] te [N];
  logic          tv [N];
  logic          bsub;
  logic [SW-1:0] mask;
  logic [1:0]    cnt;
  logic [XW-1:0] hi, lo;
  int checks = 0, failures = 0, n_st1 = 0, n_st2 = 0, n_st3 = 0;

  ausn_rounding_unit #(.N_TERMS(N), .E_W(EW), .MAX_BSUB(1)) dut (
    .term_exp(te), .term_valid(tv), .b_sub(bsub),
    .out_mask(mask), .out_cnt(cnt), .out_hi(hi), .out_lo(lo));

  always #5 clk = ~clk;

  initial begin
    repeat (1000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(int exps[$], int b);
    int kept[$];
    int s1, s2, s3;
    logic [SW-1:0] expmask;
    foreach (tv[i]) begin tv[i] = 1'b0; te[i] = '0; end
    foreach (exps[i]) begin tv[i] = 1'b1; te[i] = EW'(exps[i]); end
    bsub = b[0];
    #1;
    ref_round(exps, b, kept, s1, s2, s3);
    n_st1 += (s1 > 0); n_st2 += (s2 > 0); n_st3 += (s3 > 0);
    expmask = '0;
    foreach (kept[i]) expmask[kept[i]] = 1'b1;
    checks++;
    if (mask != expmask || int'(cnt) != kept.size() ||
        (kept.size() > 0 && int'(hi) != kept[0]) || (kept.size() > 1 && int'(lo) != kept[1])) begin
      failures++;
      if (failures < 10) $display("FAIL exps=%p b=%0d kept=%p cnt=%0d hi=%0d lo=%0d", exps, b, kept, cnt, hi, lo);
    end
  endtask

  initial begin
    int e[$];
    // Paper example: 2^2+2^3+2^4+2^6+2^6+2^8 with B_sub = 1 gives 2^7+2^8.
    e = '{2, 3, 4, 6, 6, 8};
    run(e, 1);
    checks++;
    if (!(mask[8] && mask[7] && cnt == 2'd2 && hi == XW'(8) && lo == XW'(7))) begin
      failures++; $display("FAIL paper example");
    end
    e = '{5, 5};        run(e, 1);   // Scenario 2
    e = '{1, 9};        run(e, 0);   // Scenario 3
    e = '{0, 1, 2};     run(e, 1);   // Scenario 1
    e = '{3, 4};        run(e, 0);   // Scenario 1 with B_sub = 0
    e = '{};            run(e, 1);
    e = '{127, 127, 126, 125, 124, 127}; run(e, 1);
    repeat (30000) begin
      int k, base, span;
      e.delete();
      k    = 1 + int'($urandom % N);
      span = 2 + int'($urandom % 12);
      base = int'($urandom % (128 - span));
      repeat (k) e.push_back(base + int'($urandom % span));
      run(e, int'($urandom % 2));
    end
    checks++;
    if (n_st1 == 0 || n_st2 == 0 || n_st3 == 0) begin failures++; $display("FAIL a step never used"); end
    $display("step1=%0d step2=%0d step3=%0d", n_st1, n_st2, n_st3);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
