// tb_sparse_aggregator: feeds BEICSR slices of random sparsity (including
// empty and fully dense ones) with random edge weights and compares the
// accumulation register with an independently computed weighted sum. Also
// checks the one-line-per-cycle rate (result visible the cycle after the
// last line) and the non-zero count.
module tb_sparse_aggregator;
  import sgcn_pkg::*;
  localparam int C  = 96;
  localparam int BM = (C + 31) / 32;
  localparam int SL = (BM + C + 15) / 16;

  logic clk = 0, rst_n = 0, clear = 0, in_valid = 0;
  line_t in_line; logic [7:0] in_idx; word_t in_w;
  word_t acc [C];
  logic [$clog2(C+1)-1:0] nnz;
  int checks = 0, failures = 0;
  int cyc = 0;

  sparse_aggregator #(.C(C)) dut (.clk(clk), .rst_n(rst_n), .clear(clear), .in_valid(in_valid),
    .in_line(in_line), .in_line_idx(in_idx), .in_weight(in_w), .acc(acc), .nnz(nnz));

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic word_t ref_mul(word_t a, word_t b);
    longint p;
    p = longint'($signed(a)) * longint'($signed(b));
    return word_t'(p >>> 16);
  endfunction

  word_t dense [C];
  word_t expect_acc [C];
  word_t slice_words [SL*16];

  initial begin
    in_line = '0; in_idx = '0; in_w = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int vtx = 0; vtx < 30; vtx++) begin
      @(negedge clk); clear = 1; @(negedge clk); clear = 0;
      for (int p = 0; p < C; p++) expect_acc[p] = '0;
      for (int nb = 0; nb < 1 + (vtx % 4); nb++) begin
        int pct, cnt, nl, t0;
        word_t w;
        pct = (vtx == 0) ? 100 : (vtx == 1) ? 0 : $urandom_range(95);   // zero percentage
        w = word_t'($urandom_range(32'h3_0000)) - 32'h1_8000;
        cnt = 0;
        for (int i = 0; i < SL*16; i++) slice_words[i] = '0;
        for (int p = 0; p < C; p++) begin
          dense[p] = ($urandom_range(99) < pct) ? '0 : (word_t'($urandom()) | 1);
          if (dense[p] != 0) begin
            slice_words[p / 32][p % 32] = 1'b1;
            slice_words[BM + cnt] = dense[p];
            cnt++;
          end
          expect_acc[p] += ref_mul(dense[p], w);
        end
        nl = (BM + cnt + 15) / 16;
        t0 = cyc;
        for (int l = 0; l < nl; l++) begin
          @(negedge clk);
          in_valid = 1; in_idx = 8'(l); in_w = w;
          for (int q = 0; q < 16; q++) in_line[q*32 +: 32] = slice_words[l*16 + q];
          if (l == 0) begin
            #1; checks++;
            if (int'(nnz) != cnt) begin failures++; $display("nnz %0d want %0d", nnz, cnt); end
          end
        end
        @(negedge clk); in_valid = 0;
        // rate: nl lines in nl consecutive cycles (t0 is taken one
        // negedge before the first line, hence nl + 1 clock edges)
        checks++;
        if (cyc - t0 != nl + 1) begin failures++; $display("rate: %0d cycles for %0d lines", cyc - t0, nl); end
      end
      for (int p = 0; p < C; p++) begin
        checks++;
        if (acc[p] != expect_acc[p]) begin
          failures++;
          if (failures < 6) $display("vtx %0d acc[%0d]=%h want %h", vtx, p, acc[p], expect_acc[p]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
