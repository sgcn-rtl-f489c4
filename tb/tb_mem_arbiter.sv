// tb_mem_arbiter: five requesters with one outstanding read each share a
// DRAM model through the arbiter. Each checks that every response carries
// the line of its own request. Under full load the grants must rotate: no
// requester waits more than N grants.
module tb_mem_arbiter;
  import sgcn_pkg::*;
  localparam int N = 5;
  logic clk = 0, rst_n = 0;
  logic [N-1:0] rv, rr, rsp;
  addr_t ra [N];
  line_t rd;
  logic ov, ordy, orv; addr_t oa; logic [7:0] ot, ort; line_t ord;
  int checks = 0, failures = 0;
  int done_cnt [N];
  int wait_grants [N];

  always #5 clk = ~clk;

  mem_arbiter #(.N(N), .TAG_W(8)) dut (.clk(clk), .rst_n(rst_n), .req_valid(rv), .req_ready(rr),
    .req_addr(ra), .resp_valid(rsp), .resp_data(rd), .out_req_valid(ov), .out_req_ready(ordy),
    .out_req_addr(oa), .out_req_tag(ot), .out_resp_valid(orv), .out_resp_data(ord), .out_resp_tag(ort));

  hbm_model #(.LATENCY(9), .STALL_PCT(30)) mem (.clk(clk), .rd_req_valid(ov), .rd_req_ready(ordy),
    .rd_req_addr(oa), .rd_req_tag(ot), .rd_resp_valid(orv), .rd_resp_data(ord), .rd_resp_tag(ort),
    .wr_valid(1'b0), .wr_ready(), .wr_addr('0), .wr_data('0));

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  for (genvar i = 0; i < N; i++) begin : g_req
    initial begin
      rv[i] = 0; ra[i] = '0; done_cnt[i] = 0; wait_grants[i] = 0;
      @(posedge rst_n);
      repeat (60) begin
        addr_t a;
        a = addr_t'((i * 4096 + $urandom_range(63)) * 64);
        @(negedge clk); rv[i] = 1; ra[i] = a; wait_grants[i] = 0;
        do @(posedge clk); while (!rr[i]);
        @(negedge clk); rv[i] = 0;
        do @(posedge clk); while (!rsp[i]);
        checks++;
        if (rd != mem.get_line(a)) begin failures++; $display("req %0d got wrong line", i); end
        done_cnt[i]++;
      end
    end
  end

  // fairness: count grants to others while a requester waits
  always @(posedge clk) if (rst_n) begin
    for (int i = 0; i < N; i++) begin
      if (rv[i] && !rr[i] && ov && ordy) wait_grants[i]++;
      if (wait_grants[i] > N - 1) begin failures++; wait_grants[i] = 0; $display("req %0d starved", i); end
    end
  end

  initial begin
    for (int a = 0; a < 5 * 4096 * 64; a += 64) mem.put_word(addr_t'(a), word_t'(a ^ 32'h5a5a_0000));
    repeat (3) @(posedge clk); rst_n = 1;
    wait (done_cnt[0] == 60 && done_cnt[1] == 60 && done_cnt[2] == 60 && done_cnt[3] == 60 && done_cnt[4] == 60);
    checks++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
