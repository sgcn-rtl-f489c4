// tb_systolic_array: a 4x6 array computes S + A.W for random A (4xK),
// W (Kx6) and S with K = 7, following the documented sequence: load S,
// K + ROWS + COLS - 2 cycles of `en` (inputs, then zeros), COLS cycles of
// `shift`. Checks every output against a reference product, the drain order
// j = COLS-1 ... 0, and that one fewer `en` cycle is not enough (latency).
module tb_systolic_array;
  import sgcn_pkg::*;
  localparam int R = 4, CC = 6, K = 7;
  logic clk = 0, rst_n = 0, load = 0, en = 0, shift = 0;
  word_t init [R][CC];
  word_t a_col [R];
  word_t w_row [CC];
  word_t out_col [R];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  systolic_array #(.ROWS(R), .COLS(CC)) dut (.clk(clk), .rst_n(rst_n), .load(load), .init(init),
    .en(en), .a_col(a_col), .w_row(w_row), .shift(shift), .out_col(out_col));

  function automatic word_t ref_mul(word_t a, word_t b);
    longint p;
    p = longint'($signed(a)) * longint'($signed(b));
    return word_t'(p >>> 16);
  endfunction

  word_t A [R][K];
  word_t Wm [K][CC];
  word_t S [R][CC];
  word_t ref_o [R][CC];

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input int en_cycles, input bit expect_ok);
    int bad;
    for (int i = 0; i < R; i++) for (int k = 0; k < K; k++) A[i][k] = $urandom_range(32'h4_0000) - 32'h2_0000;
    for (int k = 0; k < K; k++) for (int j = 0; j < CC; j++) Wm[k][j] = $urandom_range(32'h4_0000) - 32'h2_0000;
    for (int i = 0; i < R; i++) for (int j = 0; j < CC; j++) begin
      S[i][j] = $urandom_range(32'h10_0000) - 32'h8_0000;
      ref_o[i][j] = S[i][j];
      for (int k = 0; k < K; k++) ref_o[i][j] += ref_mul(A[i][k], Wm[k][j]);
    end
    @(negedge clk); init = S; load = 1; @(negedge clk); load = 0;
    for (int c = 0; c < en_cycles; c++) begin
      en = 1;
      for (int i = 0; i < R; i++) a_col[i] = (c < K) ? A[i][c] : '0;
      for (int j = 0; j < CC; j++) w_row[j] = (c < K) ? Wm[c][j] : '0;
      @(negedge clk);
    end
    en = 0;
    bad = 0;
    for (int d = 0; d < CC; d++) begin
      for (int i = 0; i < R; i++) if (out_col[i] != ref_o[i][CC-1-d]) bad++;
      shift = 1; @(negedge clk); shift = 0;
    end
    checks++;
    if (expect_ok && bad != 0) begin failures++; $display("%0d outputs wrong", bad); end
    if (!expect_ok && bad == 0) begin failures++; $display("finished too early"); end
  endtask

  initial begin
    for (int i = 0; i < R; i++) begin a_col[i] = '0; for (int j = 0; j < CC; j++) init[i][j] = '0; end
    for (int j = 0; j < CC; j++) w_row[j] = '0;
    repeat (3) @(posedge clk); rst_n = 1;
    repeat (10) run(K + R + CC - 2, 1'b1);
    run(K + R + CC - 3, 1'b0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
