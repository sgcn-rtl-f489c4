// mem_arbiter: shares one cacheline read port among N requesters.
//
// Requests are granted round-robin, starting after the last winner, so no
// requester starves. The winner's index travels with the request as its tag;
// the downstream side (global cache or DRAM) returns it with the response,
// and the response strobe is steered to that requester. Several requests may
// therefore be in flight at once downstream; each requester itself keeps at
// most one outstanding, which all the readers of this design do.
//
// Interface per requester: req_valid/req_ready/req_addr, resp_valid/
// resp_data. Downstream: the same plus out_req_tag and out_resp_tag.
// Combinational grant (no added latency). The paper shows the engines
// sharing the cache and DRAM (Fig. 6) but not how; the round-robin,
// tagged scheme is this design's.
module mem_arbiter
  import sgcn_pkg::*;
#(
  parameter int unsigned N     = 8,
  parameter int unsigned TAG_W = 8
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [N-1:0]      req_valid,
  output logic [N-1:0]      req_ready,
  input  addr_t             req_addr   [N],
  output logic [N-1:0]      resp_valid,
  output line_t             resp_data,
  output logic              out_req_valid,
  input  logic              out_req_ready,
  output addr_t             out_req_addr,
  output logic [TAG_W-1:0]  out_req_tag,
  input  logic              out_resp_valid,
  input  line_t             out_resp_data,
  input  logic [TAG_W-1:0]  out_resp_tag
);
  localparam int unsigned IW = (N > 1) ? $clog2(N) : 1;

  logic [IW-1:0] last_q, grant;
  logic          any;

  always_comb begin
    any   = 1'b0;
    grant = last_q;
    for (int k = 1; k <= N; k++) begin
      int unsigned c;
      c = (int'(last_q) + k) % N;
      if (!any && req_valid[c]) begin
        any   = 1'b1;
        grant = IW'(c);
      end
    end
  end

  assign out_req_valid = any;
  assign out_req_addr  = req_addr[grant];
  assign out_req_tag   = TAG_W'(grant);

  always_comb begin
    req_ready = '0;
    if (any) req_ready[grant] = out_req_ready;
    resp_valid = '0;
    if (out_resp_valid && int'(out_resp_tag) < N) resp_valid[out_resp_tag[IW-1:0]] = 1'b1;
  end
  assign resp_data = out_resp_data;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                         last_q <= IW'(N - 1);
    else if (any && out_req_ready)      last_q <= grant;
  end

  // A granted requester keeps its request until accepted (valid/ready rule).
  property p_hold;
    @(posedge clk) disable iff (!rst_n)
      (out_req_valid && !out_req_ready) |=> out_req_valid;
  endproperty
  a_hold: assert property (p_hold);
endmodule
