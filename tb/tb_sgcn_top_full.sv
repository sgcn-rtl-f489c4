// tb_sgcn_top_full: end-to-end test of one residual GCN layer with the
// accelerator at its default, paper-sized configuration (8 engines, 32x32
// systolic arrays, 256 features, unit slice 96, 512 KB 16-way cache), no
// parameter overridden, on a 70-vertex graph in two row tiles of 64 rows.
// It is tb_sgcn_top with FULL = 1: the DRAM model is preloaded with the CSR
// topology, X^l in BEICSR, S^l and W^l; S^{l+1} and the decoded X^{l+1} are
// compared word for word with a reference model, and every mechanism (cache
// hit and miss, multi-line slice fetch, vertex without edges, bank stall,
// ReLU zero, partial strip, more than one row tile) must occur at least once.
module tb_sgcn_top_full;
  import sgcn_pkg::*;
  localparam bit FULL = 1'b1;
  localparam int NE   = FULL ? 8   : 2;
  localparam int R    = FULL ? 32  : 4;
  localparam int F    = FULL ? 256 : 32;
  localparam int C    = FULL ? 96  : 20;
  localparam int NV   = FULL ? 70  : 34;
  localparam int TILE = FULL ? 64  : 24;
  localparam int NSL  = (F + C - 1) / C;
  localparam int BM   = (C + 31) / 32;
  localparam int SL   = (BM + C + 15) / 16;
  localparam addr_t RPB = 32'h0001_0000, CIB = 32'h0002_0000, EVB = 32'h0003_0000;
  localparam addr_t XIB = 32'h0100_0000, XOB = 32'h0200_0000, SIB = 32'h0300_0000;
  localparam addr_t SOB = 32'h0400_0000, WB = 32'h0500_0000;

  logic clk = 0, rst_n = 0, start = 0, done;
  logic rqv, rqr, rsv, wv, wr; addr_t rqa, wa; logic [7:0] rqt, rst_t; line_t rsd, wd;
  logic [31:0] hits, misses, flines, edges, strips, xl, xnz, bstall;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  // The accelerator with every parameter at its default.
  if (FULL) begin : g_dut
    sgcn_top dut (
      .clk(clk), .rst_n(rst_n), .start(start), .done(done),
      .num_vertices(32'(NV)), .tile_rows(32'(TILE)),
      .rp_base(RPB), .ci_base(CIB), .ev_base(EVB), .x_in_base(XIB), .x_out_base(XOB),
      .s_in_base(SIB), .s_out_base(SOB), .w_base(WB),
      .dram_rd_req_valid(rqv), .dram_rd_req_ready(rqr), .dram_rd_req_addr(rqa), .dram_rd_req_tag(rqt),
      .dram_rd_resp_valid(rsv), .dram_rd_resp_data(rsd), .dram_rd_resp_tag(rst_t),
      .dram_wr_valid(wv), .dram_wr_ready(wr), .dram_wr_addr(wa), .dram_wr_data(wd),
      .stat_cache_hits(hits), .stat_cache_misses(misses), .stat_feature_lines(flines),
      .stat_edges(edges), .stat_strips(strips), .stat_x_lines_written(xl),
      .stat_x_nonzeros(xnz), .stat_bank_stalls(bstall));
  end

  hbm_model #(.LATENCY(20), .STALL_PCT(10)) mem (.clk(clk), .rd_req_valid(rqv), .rd_req_ready(rqr),
    .rd_req_addr(rqa), .rd_req_tag(rqt), .rd_resp_valid(rsv), .rd_resp_data(rsd), .rd_resp_tag(rst_t),
    .wr_valid(wv), .wr_ready(wr), .wr_addr(wa), .wr_data(wd));

  // mechanism counters
  int n_empty = 0, n_partial = 0, n_tiles = 0, n_relu0 = 0;
  always @(posedge clk) begin
    if (g_dut.dut.g_eng[0].u_agg.e_valid && g_dut.dut.g_eng[0].u_agg.e_ready &&
        g_dut.dut.g_eng[0].u_agg.e_none) n_empty++;
    if (g_dut.dut.g_eng[0].sub_valid && int'(g_dut.dut.g_eng[0].sub_rows) < R) n_partial++;
    if (g_dut.dut.agg_start) n_tiles++;
  end

  word_t X [NV][F], AG [NV][F], S [NV][F], Sn [NV][F];
  word_t W [F][F];

  function automatic word_t rnd_fx(input int range);
    return word_t'(int'($urandom_range(2 * range)) - range);
  endfunction

  initial begin
    repeat (FULL ? 3000000 : 400000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int e;
    // input features in BEICSR; density varies per vertex
    for (int u = 0; u < NV; u++) begin
      int dens;
      dens = $urandom_range(3);
      for (int f = 0; f < F; f++)
        X[u][f] = ($urandom_range(2) < dens) ? rnd_fx(65536) : '0;
      for (int s = 0; s < NSL; s++) begin
        addr_t base;
        word_t bmw [4];
        int cnt;
        base = XIB + addr_t'((u * NSL + s) * SL * 64);
        for (int b = 0; b < 4; b++) bmw[b] = '0;
        cnt = 0;
        for (int p = 0; p < C && s * C + p < F; p++)
          if (X[u][s * C + p] != 0) begin
            bmw[p / 32][p % 32] = 1'b1;
            mem.put_word(base + addr_t'(4 * (BM + cnt)), X[u][s * C + p]);
            cnt++;
          end
        for (int b = 0; b < BM; b++) mem.put_word(base + addr_t'(4 * b), bmw[b]);
      end
    end
    // topology: a few vertices without edges, a low-degree middle region
    e = 0;
    for (int v = 0; v < NV; v++) begin
      int deg;
      mem.put_word(RPB + addr_t'(4 * v), e);
      deg = (v % 11 == 3) ? 0 : (v >= R && v < 5 * R) ? $urandom_range(1) : 1 + $urandom_range(3);
      for (int f = 0; f < F; f++) AG[v][f] = '0;
      for (int d = 0; d < deg; d++) begin
        int u;
        word_t w;
        u = $urandom_range(NV - 1);
        w = rnd_fx(32768);
        mem.put_word(CIB + addr_t'(4 * e), u);
        mem.put_word(EVB + addr_t'(4 * e), w);
        for (int f = 0; f < F; f++) AG[v][f] += fx_mul(X[u][f], w);
        e++;
      end
    end
    mem.put_word(RPB + addr_t'(4 * NV), e);
    for (int i = 0; i < F; i++) for (int j = 0; j < F; j++) begin
      W[i][j] = rnd_fx(FULL ? 8192 : 32768);
      mem.put_word(WB + addr_t'((i * F + j) * 4), W[i][j]);
    end
    for (int v = 0; v < NV; v++) for (int j = 0; j < F; j++) begin
      S[v][j] = rnd_fx(65536);
      mem.put_word(SIB + addr_t'((v * F + j) * 4), S[v][j]);
    end
    for (int v = 0; v < NV; v++) for (int n = 0; n < F; n++) begin
      word_t acc;
      acc = S[v][n];
      for (int k = 0; k < F; k++) acc += fx_mul(AG[v][k], W[k][n]);
      Sn[v][n] = acc;
    end

    repeat (3) @(posedge clk); rst_n = 1;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    @(negedge clk);
    while (!done) @(negedge clk);
    repeat (3) @(negedge clk);

    for (int v = 0; v < NV; v++) begin
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
          word_t x, bmw;
          x = Sn[v][s * C + p][31] ? '0 : Sn[v][s * C + p];
          if (x == 0) n_relu0++;
          bmw = mem.get_word(base + addr_t'(4 * (p / 32)));
          checks++;
          if (bmw[p % 32] != (x != 0)) begin
            failures++; if (failures < 10) $display("X bitmap v%0d s%0d p%0d", v, s, p);
          end
          if (x != 0) begin
            checks++;
            if (mem.get_word(base + addr_t'(4 * (BM + cnt))) != x) begin
              failures++; if (failures < 10) $display("X value v%0d s%0d", v, s);
            end
            cnt++;
          end
        end
      end
    end

    $display("mechanisms: hits=%0d misses=%0d feature_lines=%0d edge_slices=%0d empty=%0d bank_stalls=%0d relu_zero=%0d partial_strips=%0d tiles=%0d strips=%0d",
             hits, misses, flines, edges, n_empty, bstall, n_relu0, n_partial, n_tiles, strips);
    checks++; if (hits == 0)      begin failures++; $display("no cache hit"); end
    checks++; if (misses == 0)    begin failures++; $display("no cache miss"); end
    checks++; if (flines <= edges) begin failures++; $display("no multi-line slice fetch"); end
    checks++; if (n_empty == 0)   begin failures++; $display("no vertex without edges"); end
    checks++; if (bstall == 0)    begin failures++; $display("no wait for a busy bank"); end
    checks++; if (n_relu0 == 0)   begin failures++; $display("ReLU never produced a zero"); end
    checks++; if (n_partial == 0) begin failures++; $display("no partial strip"); end
    checks++; if (n_tiles < 2)    begin failures++; $display("only one row tile"); end
    checks++; if (strips != (NV + R - 1) / R + (TILE % R != 0 ? 1 : 0)) begin
      failures++; $display("strips %0d", strips);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
