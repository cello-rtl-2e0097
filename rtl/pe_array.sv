// pe_array: the 16384-MAC datapath (ROWS x COLS, default 1024 x 16).
//
// Each row r keeps two stationary lines, a_line[r] and b_line[r], loaded one
// per cycle (ld_en/ld_row/ld_sel/ld_data), and COLS accumulators acc[r][0..15].
// The rank that dominates an operation is spread over the rows; the small ranks
// (N, J <= 16) are covered by the columns and by time. One step (step_en,
// step_k) does ROWS x COLS multiplications:
//  uncontracted mode (Z = C +- A*B, B small):
//      acc[r][n] += (+-) a_line[r][k] * b_row[n]     b_row = row k of B from the RF
//  contracted mode (P^T S, reduction over the dominant rank):
//      sacc[k][n] += sum over valid rows r of a_line[r][k] * b_line[r][n]
//      (a per-column adder tree over the rows; rows >= n_valid are ignored)
// acc_init copies (+-)b_line into acc (the addend C of X = X + P*Lambda etc.)
// or clears it; sacc_clr clears the small accumulator.
// out_data = acc[out_row] and red_data = sacc[out_k] are combinational.
// Arithmetic is 32-bit two's complement with wrap-around.
// The MAC count follows the evaluated configuration and the stationary-large /
// streamed-small mapping follows the design's tiling rule; the row/column
// split, the adder tree and the integer format are this design's choices.
module pe_array
  import cello_pkg::*;
#(
  parameter int unsigned ROWS = 1024,
  parameter int unsigned COLS = 16,
  localparam int unsigned RW  = $clog2(ROWS)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  mode_e         mode,
  input  logic          ld_en,
  input  logic [RW-1:0] ld_row,
  input  logic          ld_sel,       // 0: a_line, 1: b_line
  input  line_t         ld_data,
  input  logic          acc_init,
  input  logic          init_use_b,   // 1: acc = (+-)b_line, 0: acc = 0
  input  logic          init_neg,
  input  logic          sacc_clr,
  input  logic          step_en,
  input  logic [3:0]    step_k,
  input  logic          step_neg,
  input  line_t         b_row,
  input  logic [RW:0]   n_valid,
  input  logic [RW-1:0] out_row,
  output line_t         out_data,
  input  logic [3:0]    out_k,
  output line_t         red_data
);

  word_t a_line [ROWS][COLS];
  word_t b_line [ROWS][COLS];
  word_t acc    [ROWS][COLS];
  word_t sacc   [COLS][COLS];
  word_t colsum [COLS];

  // column sums of the contracted mode
  always_comb begin
    for (int n = 0; n < COLS; n++) begin
      colsum[n] = '0;
      for (int r = 0; r < ROWS; r++)
        if ((RW+1)'(r) < n_valid) colsum[n] = colsum[n] + a_line[r][step_k] * b_line[r][n];
    end
  end

  always_ff @(posedge clk) begin
    if (ld_en) begin
      for (int n = 0; n < COLS; n++) begin
        if (ld_sel) b_line[ld_row][n] <= ld_data[n*WORD_W +: WORD_W];
        else        a_line[ld_row][n] <= ld_data[n*WORD_W +: WORD_W];
      end
    end
    if (acc_init) begin
      for (int r = 0; r < ROWS; r++)
        for (int n = 0; n < COLS; n++)
          acc[r][n] <= !init_use_b ? '0 : (init_neg ? -b_line[r][n] : b_line[r][n]);
    end else if (step_en && mode == MODE_UNCONTRACTED) begin
      for (int r = 0; r < ROWS; r++)
        for (int n = 0; n < COLS; n++)
          acc[r][n] <= step_neg ? acc[r][n] - a_line[r][step_k] * b_row[n*WORD_W +: WORD_W]
                                : acc[r][n] + a_line[r][step_k] * b_row[n*WORD_W +: WORD_W];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < COLS; k++)
        for (int n = 0; n < COLS; n++) sacc[k][n] <= '0;
    end else if (sacc_clr) begin
      for (int k = 0; k < COLS; k++)
        for (int n = 0; n < COLS; n++) sacc[k][n] <= '0;
    end else if (step_en && mode == MODE_CONTRACTED) begin
      for (int n = 0; n < COLS; n++) sacc[step_k][n] <= sacc[step_k][n] + colsum[n];
    end
  end

  always_comb begin
    for (int n = 0; n < COLS; n++) begin
      out_data[n*WORD_W +: WORD_W] = acc[out_row][n];
      red_data[n*WORD_W +: WORD_W] = sacc[out_k][n];
    end
  end

  initial assert (COLS == LINE_WORDS) else $error("pe_array: COLS must equal LINE_WORDS");

endmodule
