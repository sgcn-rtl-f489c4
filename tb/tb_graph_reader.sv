// tb_graph_reader: builds a random CSR graph (some vertices without edges)
// in the DRAM model, asks the graph reader for every vertex in a shuffled
// order and checks the emitted (source, weight, last, none) stream against
// the CSR arrays. Edge consumers stall randomly. Also checks that the line
// buffers save accesses: reading a vertex twice in a row costs no new fetch.
module tb_graph_reader;
  import sgcn_pkg::*;
  localparam int NV = 40;
  localparam addr_t RP = 32'h0001_0000, CI = 32'h0002_0000, EV = 32'h0003_0000;

  logic clk = 0, rst_n = 0;
  logic cmd_valid = 0, cmd_ready; logic [31:0] cmd_vertex = 0;
  logic e_valid, e_ready, e_last, e_none; logic [31:0] e_src; word_t e_w;
  logic rq_v, rq_r, rs_v; addr_t rq_a; line_t rs_d; logic [7:0] rs_t;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  graph_reader dut (.clk(clk), .rst_n(rst_n), .rp_base(RP), .ci_base(CI), .ev_base(EV),
    .cmd_valid(cmd_valid), .cmd_ready(cmd_ready), .cmd_vertex(cmd_vertex),
    .edge_valid(e_valid), .edge_ready(e_ready), .edge_src(e_src), .edge_weight(e_w),
    .edge_last(e_last), .edge_none(e_none),
    .rd_req_valid(rq_v), .rd_req_ready(rq_r), .rd_req_addr(rq_a),
    .rd_resp_valid(rs_v), .rd_resp_data(rs_d), .flush(1'b0));

  hbm_model #(.LATENCY(7), .STALL_PCT(20)) mem (.clk(clk), .rd_req_valid(rq_v), .rd_req_ready(rq_r),
    .rd_req_addr(rq_a), .rd_req_tag(8'd0), .rd_resp_valid(rs_v), .rd_resp_data(rs_d),
    .rd_resp_tag(rs_t), .wr_valid(1'b0), .wr_ready(), .wr_addr('0), .wr_data('0));

  always @(posedge clk) e_ready <= ($urandom_range(3) != 0);

  int rp [NV+1];
  int ci [$];
  int ev [$];

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_vertex(input int v);
    int e;
    @(negedge clk); cmd_valid = 1; cmd_vertex = v;
    do @(posedge clk); while (!cmd_ready);
    @(negedge clk); cmd_valid = 0;
    e = rp[v];
    forever begin
      @(posedge clk);
      if (e_valid && e_ready) begin
        checks++;
        if (rp[v] == rp[v+1]) begin
          if (!(e_none && e_last)) begin failures++; $display("v%0d: empty vertex not flagged", v); end
          break;
        end
        if (e_none || e_src != ci[e] || e_w != ev[e] || e_last != (e + 1 == rp[v+1])) begin
          failures++;
          $display("v%0d e%0d: got src %0d w %h last %0d", v, e, e_src, e_w, e_last);
        end
        if (e_last) break;
        e++;
      end
    end
    checks++;
    if (rp[v] != rp[v+1] && e + 1 != rp[v+1]) begin failures++; $display("v%0d: stopped early", v); end
  endtask

  initial begin
    int order [NV];
    int r0;
    rp[0] = 0;
    for (int v = 0; v < NV; v++) begin
      int d;
      d = (v % 7 == 3) ? 0 : $urandom_range(12);
      for (int k = 0; k < d; k++) begin ci.push_back($urandom_range(999)); ev.push_back($urandom()); end
      rp[v+1] = rp[v] + d;
    end
    for (int v = 0; v <= NV; v++) mem.put_word(RP + 4*v, rp[v]);
    foreach (ci[k]) begin mem.put_word(CI + 4*k, ci[k]); mem.put_word(EV + 4*k, ev[k]); end
    for (int v = 0; v < NV; v++) order[v] = v;
    order.shuffle();
    repeat (3) @(posedge clk);
    rst_n = 1;
    foreach (order[k]) run_vertex(order[k]);
    // buffered lines: the same vertex again needs no new memory read
    // (pick a vertex whose pointers and edges each sit in one cacheline)
    begin
      int vv;
      vv = 0;
      for (int v = NV - 1; v >= 0; v--)
        if (v / 16 == (v + 1) / 16 && rp[v+1] > rp[v] && rp[v] / 16 == (rp[v+1] - 1) / 16) vv = v;
      run_vertex(vv);
      r0 = mem.reads;
      run_vertex(vv);
    end
    checks++;
    if (mem.reads != r0) begin failures++; $display("re-read fetched %0d lines", mem.reads - r0); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
