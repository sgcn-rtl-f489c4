// tb_combination_engine: a reduced combination engine (4-row x 16-column
// array, 48 features, unit slice 20, so three column blocks and three slices
// of which the last is short) runs two strips against the behavioural DRAM:
// a full one of 4 vertices in bank 0 and a partial one of 3 vertices in bank
// 1, submitted while the first is still computing. W^l (48 x 48) and the
// residual S^l are preloaded in DRAM, A~.X^l is written straight into the
// input buffer. Afterwards S^{l+1} = S^l + (A~.X^l) W^l is compared word for
// word with a reference model and X^{l+1} is decoded from its BEICSR slices
// and compared with ReLU(S^{l+1}). The cycle check: the array must be
// enabled for exactly FEAT + ROWS + COLS - 2 cycles per column block.
module tb_combination_engine;
  import sgcn_pkg::*;
  localparam int R = 4, CO = 16, F = 48, C = 20, NSL = 3, NCB = 3, BM = 1, SL = 2;
  localparam addr_t WB = 32'h0100_0000, SIB = 32'h0200_0000, SOB = 32'h0300_0000, XOB = 32'h0400_0000;
  localparam int NV = 8;

  logic clk = 0, rst_n = 0;
  logic load_w = 0, w_loaded;
  logic ib_we = 0, ib_bank = 0; logic [1:0] ib_row = 0; logic [7:0] ib_slice = 0;
  word_t ib_data [C];
  logic sub_valid = 0, sub_bank = 0; logic [VID_W-1:0] sub_base = 0; logic [2:0] sub_rows = 0;
  logic [1:0] bank_free; logic busy;
  logic rv, rr, rsv, wv, wr; addr_t ra, wa; line_t rsd, wd; logic [7:0] rtag;
  logic [31:0] strips, xl, xnz;
  int checks = 0, failures = 0;
  int en_cycles = 0;

  always #5 clk = ~clk;

  combination_engine #(.ROWS(R), .COLS(CO), .FEAT(F), .C(C)) dut (
    .clk(clk), .rst_n(rst_n), .w_base(WB), .s_in_base(SIB), .s_out_base(SOB), .x_out_base(XOB),
    .load_w(load_w), .w_loaded(w_loaded), .ib_we(ib_we), .ib_bank(ib_bank), .ib_row(ib_row),
    .ib_slice(ib_slice), .ib_data(ib_data), .sub_valid(sub_valid), .sub_bank(sub_bank),
    .sub_base(sub_base), .sub_rows(sub_rows), .bank_free(bank_free), .busy(busy),
    .rd_req_valid(rv), .rd_req_ready(rr), .rd_req_addr(ra), .rd_resp_valid(rsv), .rd_resp_data(rsd),
    .wr_valid(wv), .wr_ready(wr), .wr_addr(wa), .wr_data(wd),
    .strips_done(strips), .x_lines_written(xl), .x_nonzeros(xnz));

  hbm_model #(.LATENCY(6), .STALL_PCT(20)) mem (.clk(clk), .rd_req_valid(rv), .rd_req_ready(rr),
    .rd_req_addr(ra), .rd_req_tag(8'd0), .rd_resp_valid(rsv), .rd_resp_data(rsd), .rd_resp_tag(rtag),
    .wr_valid(wv), .wr_ready(wr), .wr_addr(wa), .wr_data(wd));

  always @(posedge clk) if (dut.sa_en) en_cycles++;

  word_t W [F][F], S [NV][F], A [NV][F], Sn [NV][F];

  function automatic word_t rnd_fx();   // roughly +-2.0 in Q16.16
    return word_t'(int'($urandom_range(262143)) - 131072);
  endfunction

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic fill_strip(input int bank, input int base, input int rows);
    for (int r = 0; r < rows; r++)
      for (int s = 0; s < NSL; s++) begin
        @(negedge clk);
        ib_we = 1; ib_bank = bank[0]; ib_row = 2'(r); ib_slice = 8'(s);
        for (int p = 0; p < C; p++) ib_data[p] = (s * C + p < F) ? A[base + r][s * C + p] : $urandom();
      end
    @(negedge clk); ib_we = 0;
    sub_valid = 1; sub_bank = bank[0]; sub_base = VID_W'(base); sub_rows = 3'(rows);
    @(negedge clk); sub_valid = 0;
  endtask

  initial begin
    int exp_nz;
    for (int p = 0; p < C; p++) ib_data[p] = '0;
    for (int i = 0; i < F; i++) for (int j = 0; j < F; j++) begin
      W[i][j] = rnd_fx();
      mem.put_word(WB + addr_t'((i * F + j) * 4), W[i][j]);
    end
    for (int v = 0; v < NV; v++) for (int j = 0; j < F; j++) begin
      S[v][j] = rnd_fx();
      A[v][j] = ($urandom_range(3) == 0) ? '0 : rnd_fx();
      mem.put_word(SIB + addr_t'((v * F + j) * 4), S[v][j]);
    end
    for (int v = 0; v < NV; v++) for (int n = 0; n < F; n++) begin
      word_t acc;
      acc = S[v][n];
      for (int k = 0; k < F; k++) acc += fx_mul(A[v][k], W[k][n]);
      Sn[v][n] = acc;
    end
    repeat (3) @(posedge clk); rst_n = 1;
    @(negedge clk); load_w = 1; @(negedge clk); load_w = 0;
    while (!w_loaded) @(negedge clk);
    checks++;
    if (mem.reads != F * F / 16) begin failures++; $display("W load read %0d lines", mem.reads); end
    fill_strip(0, 0, 4);
    fill_strip(1, 4, 3);
    checks++;
    if (!busy || bank_free != 2'b00) begin failures++; $display("both banks should be taken"); end
    while (busy) @(negedge clk);
    repeat (5) @(negedge clk);
    checks++;
    if (strips != 2) begin failures++; $display("strips_done %0d", strips); end
    checks++;
    if (en_cycles != 2 * NCB * (F + R + CO - 2)) begin
      failures++; $display("array enabled %0d cycles, want %0d", en_cycles, 2 * NCB * (F + R + CO - 2));
    end
    exp_nz = 0;
    for (int v = 0; v < 7; v++) begin
      for (int n = 0; n < F; n++) begin
        checks++;
        if (mem.get_word(SOB + addr_t'((v * F + n) * 4)) != Sn[v][n]) begin
          failures++;
          if (failures < 10) $display("S v%0d n%0d got %h want %h", v, n, mem.get_word(SOB + addr_t'((v * F + n) * 4)), Sn[v][n]);
        end
      end
      for (int s = 0; s < NSL; s++) begin
        addr_t base;
        int cnt;
        base = XOB + addr_t'((v * NSL + s) * SL * 64);
        cnt = 0;
        for (int p = 0; p < C && s * C + p < F; p++) begin
          word_t x;
          x = Sn[v][s * C + p][31] ? '0 : Sn[v][s * C + p];
          checks++;
          if (mem.get_word(base)[p] != (x != 0)) begin failures++; $display("X bitmap v%0d s%0d p%0d", v, s, p); end
          if (x != 0) begin
            checks++;
            if (mem.get_word(base + 4 * (BM + cnt)) != x) begin failures++; $display("X value v%0d s%0d", v, s); end
            cnt++;
          end
        end
        exp_nz += cnt;
      end
    end
    checks++;
    if (mem.line_written(SOB + addr_t'(7 * F * 4)) || mem.line_written(XOB + addr_t'(7 * NSL * SL * 64))) begin
      failures++; $display("row beyond the partial strip written");
    end
    checks++;
    if (xnz != exp_nz) begin failures++; $display("x_nonzeros %0d want %0d", xnz, exp_nz); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
