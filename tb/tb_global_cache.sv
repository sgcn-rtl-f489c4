// tb_global_cache: a 2 KB, 4-way instance (8 sets) is driven with random
// reads over a footprint a little larger than the cache. A reference LRU
// model in the testbench predicts hit or miss for every access; the test
// checks the data returned, the hit/miss decision (via the counters and the
// DRAM read count), the hit latency (response one clock edge after the request
// is taken), and that `invalidate` empties the cache.
module tb_global_cache;
  import sgcn_pkg::*;
  localparam int KB = 2, W = 4, SETS = KB * 1024 / 64 / W;
  logic clk = 0, rst_n = 0, inv = 0;
  logic rq_v = 0, rq_r, rs_v; addr_t rq_a = '0; logic [7:0] rq_t = '0, rs_t; line_t rs_d;
  logic m_v, m_r, m_rv; addr_t m_a; line_t m_d; logic [7:0] m_t;
  logic [31:0] hits, misses;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  global_cache #(.CAPACITY_KB(KB), .WAYS(W), .TAG_W(8)) dut (.clk(clk), .rst_n(rst_n),
    .invalidate(inv), .req_valid(rq_v), .req_ready(rq_r), .req_addr(rq_a), .req_tag(rq_t),
    .resp_valid(rs_v), .resp_data(rs_d), .resp_tag(rs_t),
    .mem_req_valid(m_v), .mem_req_ready(m_r), .mem_req_addr(m_a), .mem_resp_valid(m_rv),
    .mem_resp_data(m_d), .hits(hits), .misses(misses));

  hbm_model #(.LATENCY(12), .STALL_PCT(20)) mem (.clk(clk), .rd_req_valid(m_v), .rd_req_ready(m_r),
    .rd_req_addr(m_a), .rd_req_tag(8'd0), .rd_resp_valid(m_rv), .rd_resp_data(m_d), .rd_resp_tag(m_t),
    .wr_valid(1'b0), .wr_ready(), .wr_addr('0), .wr_data('0));

  // reference: per set, list of line addresses, most recent first
  int lru [SETS][$];

  function automatic bit ref_access(input int line);
    int s, idx;
    s = line % SETS;
    idx = -1;
    foreach (lru[s][k]) if (lru[s][k] == line) idx = k;
    if (idx >= 0) begin lru[s].delete(idx); lru[s].push_front(line); return 1; end
    if (lru[s].size() == W) void'(lru[s].pop_back());
    lru[s].push_front(line);
    return 0;
  endfunction

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic access(input int line);
    bit want_hit;
    int h0, t0, c;
    want_hit = ref_access(line);
    h0 = hits;
    @(negedge clk); rq_v = 1; rq_a = addr_t'(line * 64); rq_t = 8'(line);
    do @(posedge clk); while (!rq_r);
    @(negedge clk); rq_v = 0;
    c = 1;
    while (!rs_v) begin @(posedge clk); #1; if (!rs_v) c++; end
    checks++;
    if (rs_d != mem.get_line(addr_t'(line * 64)) || rs_t != 8'(line)) begin
      failures++; $display("line %0d: wrong data/tag", line);
    end
    @(posedge clk); #1;
    checks++;
    if ((int'(hits) - h0) != int'(want_hit)) begin
      failures++; $display("line %0d: hit=%0d expected %0d", line, int'(hits) - h0, want_hit);
    end
    if (want_hit) begin
      checks++;
      if (c != 1) begin failures++; $display("hit latency %0d", c); end
    end
  endtask

  initial begin
    int r0;
    for (int l = 0; l < 200; l++) mem.put_word(addr_t'(l * 64), word_t'(l * 7 + 1));
    repeat (3) @(posedge clk); rst_n = 1;
    repeat (600) access($urandom_range(3 * SETS * W / 2));
    // sweep that fits: second pass must hit entirely
    for (int s = 0; s < SETS; s++) lru[s].delete();
    @(negedge clk); inv = 1; @(negedge clk); inv = 0;
    for (int l = 100; l < 100 + SETS * W; l++) access(l);
    r0 = mem.reads;
    for (int l = 100; l < 100 + SETS * W; l++) access(l);
    checks++;
    if (mem.reads != r0) begin failures++; $display("fitting sweep missed"); end
    // invalidate: the same lines miss again
    @(negedge clk); inv = 1; @(negedge clk); inv = 0;
    for (int s = 0; s < SETS; s++) lru[s].delete();
    r0 = mem.reads;
    access(100);
    checks++;
    if (mem.reads != r0 + 1) begin failures++; $display("no miss after invalidate"); end
    $display("TB_RESULT checks=%0d failures=%0d hits=%0d misses=%0d", checks, failures, hits, misses);
    $finish;
  end
endmodule
