// ausn_mac_array: ROWS x COLS array of shift-and-add multiply-accumulate cells
// for fixed-point inputs and AUSN weights (the paper's 64 x 64 array).
//
// Weight-stationary: each cell (r, c) holds one AUSN weight code, written a
// row at a time through w_we / w_row / w_data. Every cycle with in_valid high
// a vector x[0..ROWS-1] is applied; x[r] is broadcast along row r, each cell
// forms x[r] * w[r][c] with an ausn_shift_mult (no multiplier, no decoder),
// and column c sums its ROWS products with an adder tree into accumulator
// acc[c]. acc_clear together with in_valid starts a new sum with this
// vector's products instead of adding to the old one.
// Timing: acc and out_valid are registered; the sum of a vector applied in
// cycle t is visible after the clock edge ending cycle t (latency 1, one
// vector per cycle). A weight write takes effect for the next vector.
// Results carry FRAC fraction bits; the layer's PreConvert factor 2^power_j
// is applied downstream by the activation quantizer.
// The array size and the shift-and-add cells follow the paper; the
// dataflow, load port, widths and reset are this design's choices.
module ausn_mac_array
  import ausn_pkg::*;
#(
  parameter int unsigned ROWS  = 64,
  parameter int unsigned COLS  = 64,
  parameter int unsigned ACC_W = 48
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  subb_t                         sub_bits,
  input  logic                          w_we,
  input  logic [$clog2(ROWS)-1:0]       w_row,
  input  code_t                         w_data [COLS],
  input  logic                          in_valid,
  input  logic                          acc_clear,
  input  logic signed [X_W-1:0]         x      [ROWS],
  output logic                          out_valid,
  output logic signed [ACC_W-1:0]       acc    [COLS]
);
  code_t                     wreg [ROWS][COLS];
  logic signed [PROD_W-1:0]  prod [ROWS][COLS];
  logic signed [ACC_W-1:0]   colsum [COLS];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int r = 0; r < ROWS; r++)
        for (int c = 0; c < COLS; c++)
          wreg[r][c] <= '0;
    end else if (w_we) begin
      for (int c = 0; c < COLS; c++)
        wreg[w_row][c] <= w_data[c];
    end
  end

  for (genvar r = 0; r < ROWS; r++) begin : g_row
    for (genvar c = 0; c < COLS; c++) begin : g_col
      ausn_shift_mult u_mul (
        .x        (x[r]),
        .w        (wreg[r][c]),
        .sub_bits (sub_bits),
        .prod     (prod[r][c])
      );
    end
  end

  // Column adder trees.
  always_comb begin
    for (int c = 0; c < COLS; c++) begin
      colsum[c] = '0;
      for (int r = 0; r < ROWS; r++)
        colsum[c] += ACC_W'(prod[r][c]);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      for (int c = 0; c < COLS; c++) acc[c] <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid)
        for (int c = 0; c < COLS; c++)
          acc[c] <= (acc_clear ? '0 : acc[c]) + colsum[c];
    end
  end

  initial assert (ACC_W >= PROD_W) else $error("ausn_mac_array: ACC_W below PROD_W");
endmodule
