// ausn_rounding_unit: the AUSN rounding scheme. It reduces a sum of powers of
// two to at most B_sub + 1 powers, so that a product or sum of AUSN values
// fits the next layer's code again without re-quantization.
//
// Input: up to N_TERMS terms 2^n (term_exp = n, term_valid per term); equal
// exponents may repeat. The steps of the scheme map onto plain arithmetic:
//   Step 1 (Scenario 1): every maximal run of consecutive present exponents
//          n..m with at least B_sub + 2 members becomes one term 2^(m+1).
//          Because 2^(m+1) = (2^n + ... + 2^m) + 2^n, this is done by adding
//          2^n to the sum of all terms.
//   Step 2 (Scenario 2): equal terms merge, 2^k + 2^k = 2^(k+1), repeatedly;
//          that is binary carry, so the sum of step 1 is already merged.
//   Steps 3/4 (Scenarios 3/4): while more than B_sub + 1 terms remain the
//          smallest is dropped, i.e. only the B_sub + 1 highest set bits of
//          the merged sum are kept (rounding down).
// Example from the paper (B_sub = 1): 2^2+2^3+2^4+2^6+2^6+2^8 = 412 gives
// 2^7 + 2^8 = 384.
// Outputs: out_mask (kept terms as bits), out_cnt (number kept), out_hi and
// out_lo (the largest and second largest kept exponent; 0 when absent).
// Purely combinational. The steps are the paper's; their arithmetic
// realisation and the round-down choice left open by Scenario 4 are this
// design's.
module ausn_rounding_unit #(
  parameter int unsigned N_TERMS  = 6,
  parameter int unsigned E_W      = 7,
  parameter int unsigned MAX_BSUB = 1,
  localparam int unsigned SW      = (1 << E_W) + $clog2(N_TERMS) + 2,
  localparam int unsigned XW      = $clog2(SW),
  localparam int unsigned BW      = $clog2(MAX_BSUB + 1) > 0 ? $clog2(MAX_BSUB + 1) : 1,
  localparam int unsigned CW      = $clog2(MAX_BSUB + 2)
) (
  input  logic [E_W-1:0] term_exp   [N_TERMS],
  input  logic           term_valid [N_TERMS],
  input  logic [BW-1:0]  b_sub,
  output logic [SW-1:0]  out_mask,
  output logic [CW-1:0]  out_cnt,
  output logic [XW-1:0]  out_hi,
  output logic [XW-1:0]  out_lo
);
  logic [SW-1:0] raw, present, runs, merged;
  int            run_len, kept;
  logic          all_set;

  always_comb begin
    raw     = '0;
    present = '0;
    for (int i = 0; i < N_TERMS; i++)
      if (term_valid[i]) begin
        raw     = raw + (SW'(1) << term_exp[i]);
        present = present | (SW'(1) << term_exp[i]);
      end

    // Step 1: mark the start of every run of at least b_sub + 2 exponents.
    run_len = int'(b_sub) + 2;
    runs    = '0;
    for (int k = 0; k < SW; k++) begin
      all_set = 1'b1;
      for (int j = 0; j <= MAX_BSUB + 1; j++)
        if (j < run_len && (k + j >= SW || !present[(k + j) % SW]))
          all_set = 1'b0;
      if (all_set && (k == 0 || !present[(k + SW - 1) % SW]))
        runs[k] = 1'b1;
    end

    // Steps 1 and 2: sum with round-up, carries merge equal terms.
    merged = raw + runs;

    // Steps 3 and 4: keep the b_sub + 1 highest terms.
    out_mask = '0;
    out_hi   = '0;
    out_lo   = '0;
    kept     = 0;
    for (int k = SW - 1; k >= 0; k--)
      if (merged[k] && kept <= int'(b_sub)) begin
        out_mask[k] = 1'b1;
        if (kept == 0) out_hi = XW'(k);
        if (kept == 1) out_lo = XW'(k);
        kept++;
      end
    out_cnt = CW'(kept);
  end
endmodule
