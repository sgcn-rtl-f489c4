// tb_feature_reader: places BEICSR slices of varied density in the DRAM
// model and sends edges to the feature reader. Checks the in-place address
// arithmetic (line addresses and data), that exactly ceil((bitmap words +
// nnz) / 16) lines are fetched per edge (lines beyond that are never
// touched), the line indices, the weight and last markers, and the token for
// a vertex without edges.
module tb_feature_reader;
  import sgcn_pkg::*;
  localparam int C = 96, BM = 3, SL = 7, NSL = 3;
  localparam addr_t FB = 32'h0100_0000;

  logic clk = 0, rst_n = 0;
  logic e_valid = 0, e_ready, e_last = 0, e_none = 0; logic [31:0] e_src = 0; word_t e_w = 0;
  logic [15:0] slice = 0;
  logic ln_valid, ln_last, ln_none; line_t ln_data; logic [7:0] ln_idx; word_t ln_w;
  logic rq_v, rq_r, rs_v; addr_t rq_a; line_t rs_d; logic [7:0] rs_t;
  logic [31:0] fetched;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  feature_reader #(.C(C)) dut (.clk(clk), .rst_n(rst_n), .feat_base(FB), .nslices(16'(NSL)),
    .slice_idx(slice), .edge_valid(e_valid), .edge_ready(e_ready), .edge_src(e_src),
    .edge_weight(e_w), .edge_last(e_last), .edge_none(e_none),
    .ln_valid(ln_valid), .ln_data(ln_data), .ln_idx(ln_idx), .ln_weight(ln_w),
    .ln_edge_last(ln_last), .ln_none(ln_none),
    .rd_req_valid(rq_v), .rd_req_ready(rq_r), .rd_req_addr(rq_a),
    .rd_resp_valid(rs_v), .rd_resp_data(rs_d), .lines_fetched(fetched));

  hbm_model #(.LATENCY(5), .STALL_PCT(25)) mem (.clk(clk), .rd_req_valid(rq_v), .rd_req_ready(rq_r),
    .rd_req_addr(rq_a), .rd_req_tag(8'd0), .rd_resp_valid(rs_v), .rd_resp_data(rs_d),
    .rd_resp_tag(rs_t), .wr_valid(1'b0), .wr_ready(), .wr_addr('0), .wr_data('0));

  int nnz_of [int];
  addr_t max_addr_seen;

  always @(posedge clk) if (rq_v && rq_r) begin
    // every request must stay inside the used lines of its slice
    addr_t base; int u, s, l;
    base = rq_a - FB;
    u = int'(base / (NSL * SL * 64)); s = int'((base / (SL * 64)) % NSL); l = int'((base / 64) % SL);
    checks++;
    if (l >= (BM + nnz_of[u*NSL + s] + 15) / 16) begin
      failures++; $display("fetched unused line %0d of vertex %0d slice %0d", l, u, s);
    end
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic send_edge(input int u, input int s, input word_t w, input bit last, input bit none);
    int nl, got;
    @(negedge clk);
    e_valid = 1; e_src = u; slice = 16'(s); e_w = w; e_last = last; e_none = none;
    do @(posedge clk); while (!e_ready);
    @(negedge clk); e_valid = 0;
    nl = none ? 1 : (BM + nnz_of[u*NSL + s] + 15) / 16;
    got = 0;
    while (got < nl) begin
      @(posedge clk);
      if (ln_valid) begin
        addr_t a;
        a = FB + addr_t'(((u * NSL + s) * SL + got) * 64);
        checks++;
        if (none) begin
          if (!(ln_none && ln_last == last)) begin failures++; $display("none token wrong"); end
        end else if (ln_none || ln_idx != 8'(got) || ln_w != w || ln_data != mem.get_line(a) ||
                     ln_last != (last && got == nl - 1)) begin
          failures++; $display("u%0d s%0d line %0d wrong", u, s, got);
        end
        got++;
      end
    end
    // no extra line follows
    repeat (12) begin
      @(posedge clk);
      if (ln_valid) begin failures++; $display("extra line after u%0d s%0d", u, s); end
    end
  endtask

  initial begin
    for (int u = 0; u < 12; u++)
      for (int s = 0; s < NSL; s++) begin
        int pct, cnt;
        addr_t base;
        base = FB + addr_t'((u * NSL + s) * SL * 64);
        pct = (u == 0) ? 100 : (u == 1) ? 0 : $urandom_range(100);
        cnt = 0;
        for (int p = 0; p < C; p++)
          if ($urandom_range(99) >= pct) begin
            word_t bmw;
            bmw = mem.get_word(base + 4 * (p / 32));
            bmw[p % 32] = 1'b1;
            mem.put_word(base + 4 * (p / 32), bmw);
            mem.put_word(base + 4 * (BM + cnt), $urandom() | 1);
            cnt++;
          end
        if (cnt == 0) mem.put_word(base, 0);
        nnz_of[u*NSL + s] = cnt;
      end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int k = 0; k < 40; k++)
      send_edge($urandom_range(11), $urandom_range(NSL - 1), $urandom(), k % 3 == 2, 1'b0);
    send_edge(0, 0, 0, 1'b1, 1'b1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
