// systolic_array: ROWS x COLS output-stationary systolic array of the
// combination engine (SGCN paper, Fig. 6, Fig. 14, Sec. V.E-F; 32x32 in
// Table III).
//
// PE(i,j) accumulates out[i][j] = S[i][j] + sum_k A[i][k] * W[k][j].
// Operation, driven by the combination engine:
//   1. `load` for one cycle presets every accumulator from `init` (the
//      residual S^l; the paper initialises the array registers with S^l
//      instead of zero).
//   2. `en` for K + ROWS + COLS - 2 cycles. In cycle k < K the caller offers
//      column k of A on `a_col` (one value per row) and row k of W on `w_row`
//      (one value per column); afterwards zeros. The array skews the inputs
//      itself: row i is delayed by i cycles, column j by j cycles, so PE(i,j)
//      meets A[i][k] and W[k][j] in the same cycle.
//   3. `shift` for COLS cycles moves every row one PE to the right per cycle;
//      `out_col[i]` shows the accumulator of PE(i, COLS-1), i.e. row i leaves
//      in the order j = COLS-1, COLS-2, ..., 0. Each row feeds one compressor
//      entry (Fig. 14).
// The input skewing registers and the drain by shifting are this design's
// choices; the paper fixes only the output-stationary dataflow and the size.
module systolic_array
  import sgcn_pkg::*;
#(
  parameter int unsigned ROWS = 32,
  parameter int unsigned COLS = 32
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   load,
  input  word_t  init    [ROWS][COLS],
  input  logic   en,
  input  word_t  a_col   [ROWS],
  input  word_t  w_row   [COLS],
  input  logic   shift,
  output word_t  out_col [ROWS]
);
  // skew lines: row i passes through i registers, column j through j
  word_t a_dly [ROWS][ROWS];
  word_t w_dly [COLS][COLS];
  word_t a_sk  [ROWS];
  word_t w_sk  [COLS];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < ROWS; i++) for (int d = 0; d < ROWS; d++) a_dly[i][d] <= '0;
      for (int j = 0; j < COLS; j++) for (int d = 0; d < COLS; d++) w_dly[j][d] <= '0;
    end else if (en) begin
      for (int i = 0; i < ROWS; i++) begin
        a_dly[i][0] <= a_col[i];
        for (int d = 1; d < ROWS; d++) a_dly[i][d] <= a_dly[i][d-1];
      end
      for (int j = 0; j < COLS; j++) begin
        w_dly[j][0] <= w_row[j];
        for (int d = 1; d < COLS; d++) w_dly[j][d] <= w_dly[j][d-1];
      end
    end
  end

  always_comb begin
    for (int i = 0; i < ROWS; i++) a_sk[i] = (i == 0) ? a_col[i] : a_dly[i][i-1];
    for (int j = 0; j < COLS; j++) w_sk[j] = (j == 0) ? w_row[j] : w_dly[j][j-1];
  end

  word_t a_link [ROWS][COLS];
  word_t w_link [ROWS][COLS];
  word_t acc    [ROWS][COLS];

  for (genvar i = 0; i < ROWS; i++) begin : g_row
    for (genvar j = 0; j < COLS; j++) begin : g_col
      systolic_pe u_pe (
        .clk      (clk),
        .rst_n    (rst_n),
        .load     (load),
        .load_val (init[i][j]),
        .en       (en),
        .shift    (shift),
        .a_in     ((j == 0) ? a_sk[i] : a_link[i][(j == 0) ? 0 : j-1]),
        .w_in     ((i == 0) ? w_sk[j] : w_link[(i == 0) ? 0 : i-1][j]),
        .acc_left ((j == 0) ? word_t'(0) : acc[i][(j == 0) ? 0 : j-1]),
        .a_out    (a_link[i][j]),
        .w_out    (w_link[i][j]),
        .acc      (acc[i][j])
      );
    end
    assign out_col[i] = acc[i][COLS-1];
  end
endmodule
