// ausn_top: AUSN inference datapath. Two kinds of layer meet here:
//   * a shift layer: fixed-point inputs times AUSN weights on the ROWS x COLS
//     shift-and-add array (ausn_mac_array), exact accumulation per column;
//   * a power layer: AUSN activations times AUSN weights by power addition,
//     with the AUSN rounding scheme instead of accumulation and
//     re-quantization (one ausn_pow_lane per column).
// Between them, one ausn_act_quantizer per column turns the finished column
// sum into an AUSN activation with the superposition algorithm and the
// layer's PreConvert power layer_pow.
//
// Operation: load weights row by row (w_we, w_row, w_data). Stream input
// vectors with in_valid; acc_clear marks the first vector of a sum, acc_last
// the last. The cycle after the last vector, acc holds the column sums; one
// cycle later act_valid pulses with act_code (the AUSN activations); one more
// cycle later out_valid pulses with out_code = act_code[c] * pw_code[c],
// rounded and coded for the next layer (pre_shift, out_sub_bits).
// Latency from the last vector: acc 1 cycle, act_code 2, out_code 3.
// Bit allocations (sub_bits of weights, activations and outputs) and powers
// are run-time inputs, so the coding can change per layer without new
// hardware. The blocks and their arithmetic follow the paper; how they are
// chained and the control signals are this design's choices.
module ausn_top
  import ausn_pkg::*;
#(
  parameter int unsigned ROWS  = 64,
  parameter int unsigned COLS  = 64,
  parameter int unsigned ACC_W = 48
) (
  input  logic                      clk,
  input  logic                      rst_n,
  // shift layer
  input  subb_t                     w_sub_bits,
  input  logic                      w_we,
  input  logic [$clog2(ROWS)-1:0]   w_row,
  input  code_t                     w_data    [COLS],
  input  logic                      in_valid,
  input  logic                      acc_clear,
  input  logic                      acc_last,
  input  logic signed [X_W-1:0]     x         [ROWS],
  output logic signed [ACC_W-1:0]   acc       [COLS],
  // activation quantizer
  input  logic signed [7:0]         layer_pow,
  input  subb_t                     act_sub_bits,
  output logic                      act_valid,
  output code_t                     act_code  [COLS],
  // power layer
  input  code_t                     pw_code   [COLS],
  input  subb_t                     pw_sub_bits,
  input  subb_t                     out_sub_bits,
  input  logic signed [7:0]         pre_shift,
  output logic                      out_valid,
  output code_t                     out_code  [COLS]
);
  logic              arr_valid, last_q, q_in_valid;
  logic [COLS-1:0]   act_v, lane_v;

  ausn_mac_array #(.ROWS(ROWS), .COLS(COLS), .ACC_W(ACC_W)) u_array (
    .clk       (clk),
    .rst_n     (rst_n),
    .sub_bits  (w_sub_bits),
    .w_we      (w_we),
    .w_row     (w_row),
    .w_data    (w_data),
    .in_valid  (in_valid),
    .acc_clear (acc_clear),
    .x         (x),
    .out_valid (arr_valid),
    .acc       (acc)
  );

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) last_q <= 1'b0;
    else        last_q <= in_valid && acc_last;

  assign q_in_valid = arr_valid && last_q;

  for (genvar c = 0; c < COLS; c++) begin : g_col
    ausn_act_quantizer #(.IN_W(ACC_W)) u_q (
      .clk       (clk),
      .rst_n     (rst_n),
      .in_valid  (q_in_valid),
      .din       (acc[c]),
      .layer_pow (layer_pow),
      .sub_bits  (act_sub_bits),
      .out_valid (act_v[c]),
      .code      (act_code[c])
    );

    ausn_pow_lane u_lane (
      .clk          (clk),
      .rst_n        (rst_n),
      .in_valid     (act_v[c]),
      .a            (act_code[c]),
      .w            (pw_code[c]),
      .a_sub_bits   (act_sub_bits),
      .w_sub_bits   (pw_sub_bits),
      .out_sub_bits (out_sub_bits),
      .pre_shift    (pre_shift),
      .out_valid    (lane_v[c]),
      .code         (out_code[c])
    );
  end

  // All columns run in lockstep; a flag is high when every column is valid.
  assign act_valid = &act_v;
  assign out_valid = &lane_v;
endmodule
