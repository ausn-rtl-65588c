// ausn_pkg: constants, types and helper functions shared by the AUSN datapath.
//
// An AUSN code is {sign, data}. The data part (D_W = 5 bits) is split at run
// time into a basic part (upper D_W - sub_bits bits) and a subdivision part
// (lower sub_bits bits). A field holding p stands for the power-of-two basis
// element 2^-p, with p = 0 standing for the basis element zero. The value of
// a code is
//     (-1)^sign * 2^power_j * 2^-p0 * (1 + 2^-p1)        (p0 != 0, p1 != 0)
//     (-1)^sign * 2^power_j * 2^-p0                       (p0 != 0, p1 == 0)
//     0                                                   (p0 == 0)
// where power_j is the per-layer PreConvert power. The 1 + 3 + 2 layout is the
// one the paper draws for its 5-bit data example; the run-time split of the
// data bits follows the paper's per-layer bit allocation (4+1, 3+2, 3+0 ...).
// Placing the sign in the MSB and the subdivision part in the LSBs is this
// design's choice.
package ausn_pkg;

  localparam int unsigned D_W          = 5;            // data bits of a code
  localparam int unsigned CODE_W       = D_W + 1;      // sign + data
  localparam int unsigned SUBB_W       = 2;            // width of a sub_bits field
  localparam int unsigned X_W          = 8;            // fixed-point input width
  localparam int unsigned P_W          = 5;            // width of one field's power
  // Largest p0 + p1 over all allocations (sub_bits = 0: 31 + 0). Products of
  // the shift datapath carry FRAC fraction bits and are then exact.
  localparam int unsigned FRAC         = (1 << D_W) - 1;
  localparam int unsigned PROD_W       = X_W + FRAC + 1;
  localparam int unsigned POW_W        = 6;            // power adder operand width
  localparam int unsigned POWS_W       = POW_W + 1;    // power adder result width

  typedef logic [CODE_W-1:0] code_t;
  typedef logic [SUBB_W-1:0] subb_t;
  typedef logic [P_W-1:0]    pow_t;

  // The two powers of a code, split by the layer's bit allocation.
  typedef struct packed {
    logic sign;
    pow_t p0;   // basic power (0 = zero value)
    pow_t p1;   // subdivision power (0 = no second term)
  } fields_t;

  // Field extraction is only a bit slice: there is no decoding table.
  function automatic fields_t split_code(code_t c, subb_t sub_bits);
    fields_t f;
    logic [D_W-1:0] d;
    d       = c[D_W-1:0];
    f.sign  = c[CODE_W-1];
    f.p0    = pow_t'(d >> sub_bits);
    f.p1    = pow_t'(d & D_W'((1 << sub_bits) - 1));
    return f;
  endfunction

  function automatic code_t join_code(logic sign, pow_t p0, pow_t p1, subb_t sub_bits);
    logic [D_W-1:0] d;
    d = D_W'((p0 << sub_bits) | (p1 & P_W'((1 << sub_bits) - 1)));
    return {sign, d};
  endfunction

  // Largest basic / subdivision power for an allocation.
  function automatic pow_t p0_max(subb_t sub_bits);
    return pow_t'((1 << (int'(D_W) - int'(sub_bits))) - 1);
  endfunction

  function automatic pow_t p1_max(subb_t sub_bits);
    return pow_t'((1 << sub_bits) - 1);
  endfunction

endpackage
