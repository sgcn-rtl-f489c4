// tb_compressor: three compressor entries (nrows = 2, so the third row must
// not be written) with a unit slice of C = 40 elements (two bitmap words,
// three reserved lines) receive a 100-element row per entry: slices of 40,
// 40 and a short one of 20 closed by `in_last`. Values are random with about
// half negative (ReLU must zero them) and some exact zeros. The DRAM model
// is then decoded slice by slice and compared with ReLU of the input; lines
// past the used ones must never be written, and the line and non-zero
// counters must match.
module tb_compressor;
  import sgcn_pkg::*;
  localparam int R = 3, C = 40, F = 100, NSL = 3, BM = 2, SL = 3;
  localparam addr_t XB = 32'h0200_0000;
  localparam int SB = 5;                    // strip base vertex

  logic clk = 0, rst_n = 0, start = 0;
  logic in_valid = 0, in_ready, in_last = 0;
  word_t in_val [R];
  logic wv, wr; addr_t wa; line_t wd;
  logic [31:0] lines_w, nz;
  logic rrdy, rsv; line_t rsd; logic [7:0] rst_t;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  compressor #(.ROWS(R), .C(C)) dut (.clk(clk), .rst_n(rst_n), .start(start), .xout_base(XB),
    .strip_base(32'(SB)), .nslices(16'(NSL)), .nrows(2'd2), .in_valid(in_valid), .in_ready(in_ready),
    .in_val(in_val), .in_last(in_last), .wr_valid(wv), .wr_ready(wr), .wr_addr(wa), .wr_data(wd),
    .lines_written(lines_w), .nonzeros(nz));

  hbm_model #(.LATENCY(1), .STALL_PCT(30)) mem (.clk(clk), .rd_req_valid(1'b0), .rd_req_ready(rrdy),
    .rd_req_addr('0), .rd_req_tag(8'd0), .rd_resp_valid(rsv), .rd_resp_data(rsd), .rd_resp_tag(rst_t),
    .wr_valid(wv), .wr_ready(wr), .wr_addr(wa), .wr_data(wd));

  word_t X [R][F];

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int exp_lines, exp_nz;
    for (int r = 0; r < R; r++) for (int f = 0; f < F; f++) begin
      int u;
      u = $urandom_range(9);
      X[r][f] = (u < 2) ? '0 : $urandom();
    end
    for (int r = 0; r < R; r++) in_val[r] = '0;
    repeat (3) @(posedge clk); rst_n = 1;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    for (int f = 0; f < F; f++) begin
      while (!in_ready) @(negedge clk);
      in_valid = 1; in_last = (f == F - 1);
      for (int r = 0; r < R; r++) in_val[r] = X[r][f];
      @(negedge clk);
      in_valid = 0; in_last = 0;
    end
    repeat (5) @(negedge clk);
    while (!in_ready) @(negedge clk);
    exp_lines = 0; exp_nz = 0;
    for (int r = 0; r < 2; r++)
      for (int s = 0; s < NSL; s++) begin
        addr_t base;
        int cnt, nl, len;
        base = XB + addr_t'((((SB + r) * NSL) + s) * SL * 64);
        len = (s == NSL - 1) ? F - s * C : C;
        cnt = 0;
        for (int p = 0; p < len; p++) begin
          word_t x, bmw;
          x = X[r][s * C + p][31] ? '0 : X[r][s * C + p];
          bmw = mem.get_word(base + 4 * (p / 32));
          checks++;
          if (bmw[p % 32] != (x != 0)) begin failures++; $display("r%0d s%0d bit %0d wrong", r, s, p); end
          if (x != 0) begin
            checks++;
            if (mem.get_word(base + 4 * (BM + cnt)) != x) begin failures++; $display("r%0d s%0d value %0d wrong", r, s, cnt); end
            cnt++;
          end
        end
        nl = (BM + cnt + 15) / 16;
        exp_lines += nl; exp_nz += cnt;
        for (int l = 0; l < SL; l++) begin
          checks++;
          if (mem.line_written(base + 64 * l) != (l < nl)) begin failures++; $display("r%0d s%0d line %0d write state wrong", r, s, l); end
        end
      end
    for (int s = 0; s < NSL; s++) begin
      checks++;
      if (mem.line_written(XB + addr_t'((((SB + 2) * NSL) + s) * SL * 64))) begin failures++; $display("row beyond nrows written"); end
    end
    checks++;
    if (lines_w != exp_lines || nz != exp_nz) begin failures++; $display("counters %0d/%0d want %0d/%0d", lines_w, nz, exp_lines, exp_nz); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
