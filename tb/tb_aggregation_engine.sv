// tb_aggregation_engine: engine 0 of 2, strips of 4 vertices, 40 features in
// slices of 24 (two slices, the second padded), over a random 18-vertex graph
// in CSR with one vertex that has no edges and slices ranging from all-zero
// to dense (two lines). Topology comes from one behavioural memory, features
// (BEICSR) from another standing in for the global cache. A stub plays the
// combination engine: it records the input-buffer writes, checks every
// submitted strip against a reference aggregation sum_u A~vu * X[u], and
// holds the bank busy for a random time (the first one long enough that the
// engine must stall). Also checked: the strips handed out (0-3, 8-11, 16-17),
// edges and feature lines fetched (only the used lines of each slice).
module tb_aggregation_engine;
  import sgcn_pkg::*;
  localparam int NE = 2, SH = 4, F = 40, C = 24, NSL = 2, SL = 2, BM = 1, NV = 18;
  localparam addr_t RPB = 32'h0001_0000, CIB = 32'h0002_0000, EVB = 32'h0003_0000, XB = 32'h0010_0000;

  logic clk = 0, rst_n = 0, start = 0, done;
  logic gv, gr, grv, fv, fr, frv; addr_t ga, fa; line_t grd, frd; logic [7:0] gt, ft;
  logic ib_we, ib_bank, sub_valid, sub_bank; logic [1:0] ib_row; logic [7:0] ib_slice;
  word_t ib_data [C]; logic [VID_W-1:0] sub_base; logic [2:0] sub_rows;
  logic [1:0] bank_free = 2'b11;
  logic [31:0] edges, lines, stalls;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  aggregation_engine #(.NUM_ENGINES(NE), .STRIP_H(SH), .FEAT(F), .C(C)) dut (
    .clk(clk), .rst_n(rst_n), .engine_id(8'd0), .rp_base(RPB), .ci_base(CIB), .ev_base(EVB),
    .x_in_base(XB), .row_lo(32'd0), .row_hi(32'(NV)), .start(start), .done(done),
    .g_req_valid(gv), .g_req_ready(gr), .g_req_addr(ga), .g_resp_valid(grv), .g_resp_data(grd),
    .f_req_valid(fv), .f_req_ready(fr), .f_req_addr(fa), .f_resp_valid(frv), .f_resp_data(frd),
    .ib_we(ib_we), .ib_bank(ib_bank), .ib_row(ib_row), .ib_slice(ib_slice), .ib_data(ib_data),
    .sub_valid(sub_valid), .sub_bank(sub_bank), .sub_base(sub_base), .sub_rows(sub_rows),
    .bank_free(bank_free), .edges_done(edges), .lines_fetched(lines), .stall_cycles(stalls));

  hbm_model #(.LATENCY(8), .STALL_PCT(20)) gmem (.clk(clk), .rd_req_valid(gv), .rd_req_ready(gr),
    .rd_req_addr(ga), .rd_req_tag(8'd0), .rd_resp_valid(grv), .rd_resp_data(grd), .rd_resp_tag(gt),
    .wr_valid(1'b0), .wr_ready(), .wr_addr('0), .wr_data('0));
  hbm_model #(.LATENCY(2), .STALL_PCT(10)) fmem (.clk(clk), .rd_req_valid(fv), .rd_req_ready(fr),
    .rd_req_addr(fa), .rd_req_tag(8'd0), .rd_resp_valid(frv), .rd_resp_data(frd), .rd_resp_tag(ft),
    .wr_valid(1'b0), .wr_ready(), .wr_addr('0), .wr_data('0));

  word_t X [NV][F], AG [NV][F];
  word_t got [2][SH][NSL][C];
  int rp [NV+1];
  int exp_lines = 0, exp_edges = 0;
  int strips_seen = 0;
  int strip_bases [$];

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // combination-engine stand-in
  always @(posedge clk) begin
    if (ib_we)
      for (int p = 0; p < C; p++) got[ib_bank][ib_row][ib_slice][p] <= ib_data[p];
  end
  initial begin
    forever begin
      @(posedge clk);
      if (sub_valid) begin
        int b, base, rows, hold;
        b = sub_bank; base = sub_base; rows = sub_rows;
        bank_free[b] <= 1'b0;
        strip_bases.push_back(base);
        strips_seen++;
        for (int r = 0; r < rows; r++)
          for (int f = 0; f < F; f++) begin
            checks++;
            if (got[b][r][f / C][f % C] != AG[base + r][f]) begin
              failures++;
              if (failures < 10) $display("strip %0d row %0d f %0d got %h want %h", base, r, f, got[b][r][f / C][f % C], AG[base + r][f]);
            end
          end
        hold = (strips_seen == 1) ? 3000 : $urandom_range(200);
        fork
          automatic int bb = b, hh = hold;
          begin repeat (hh) @(posedge clk); bank_free[bb] <= 1'b1; end
        join_none
      end
    end
  end

  initial begin
    int e;
    // features, BEICSR
    for (int u = 0; u < NV; u++) begin
      int dens;
      dens = $urandom_range(3);            // 0: all zero .. 3: dense
      for (int f = 0; f < F; f++)
        X[u][f] = ($urandom_range(2) < dens) ? word_t'(int'($urandom_range(262143)) - 131072) : '0;
      for (int s = 0; s < NSL; s++) begin
        addr_t base;
        word_t bmw;
        int cnt;
        base = XB + addr_t'((u * NSL + s) * SL * 64);
        bmw = '0; cnt = 0;
        for (int p = 0; p < C && s * C + p < F; p++)
          if (X[u][s * C + p] != 0) begin
            bmw[p] = 1'b1;
            fmem.put_word(base + 4 * (BM + cnt), X[u][s * C + p]);
            cnt++;
          end
        fmem.put_word(base, bmw);
      end
    end
    // topology; vertex 9 has no edges
    e = 0;
    for (int v = 0; v < NV; v++) begin
      int deg;
      rp[v] = e;
      gmem.put_word(RPB + 4 * v, e);
      deg = (v == 9) ? 0 : 1 + $urandom_range(4);
      for (int f = 0; f < F; f++) AG[v][f] = '0;
      for (int d = 0; d < deg; d++) begin
        int u;
        word_t w;
        u = $urandom_range(NV - 1);
        w = word_t'($urandom_range(131071) - 65536);
        gmem.put_word(CIB + 4 * e, u);
        gmem.put_word(EVB + 4 * e, w);
        for (int f = 0; f < F; f++) AG[v][f] += fx_mul(X[u][f], w);
        if ((v / SH) % NE == 0) begin
          exp_edges += NSL;
          for (int s = 0; s < NSL; s++) begin
            int nz;
            nz = 0;
            for (int p = 0; p < C && s * C + p < F; p++) nz += (X[u][s * C + p] != 0);
            exp_lines += (BM + nz + 15) / 16;
          end
        end
        e++;
      end
    end
    rp[NV] = e;
    gmem.put_word(RPB + 4 * NV, e);

    repeat (3) @(posedge clk); rst_n = 1;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    @(negedge clk);
    while (!done) @(negedge clk);
    repeat (3) @(negedge clk);
    checks++;
    if (strip_bases.size() != 3 || strip_bases[0] != 0 || strip_bases[1] != 8 || strip_bases[2] != 16) begin
      failures++; $display("strips handed out: %p", strip_bases);
    end
    checks++;
    if (edges != exp_edges) begin failures++; $display("edges %0d want %0d", edges, exp_edges); end
    checks++;
    if (lines != exp_lines) begin failures++; $display("feature lines %0d want %0d", lines, exp_lines); end
    checks++;
    if (stalls == 0) begin failures++; $display("engine never waited for a busy bank"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
