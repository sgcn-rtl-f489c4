// write_arbiter: round-robin merge of N cacheline write ports into one.
//
// Each requester presents valid/addr/data and holds them until it sees
// ready. The arbiter grants the first valid requester after the previous
// winner, combinationally, and passes the downstream ready back to the
// winner only. Used to merge the combination engines' DRAM writes; the paper
// does not describe this interconnect.
module write_arbiter
  import sgcn_pkg::*;
#(
  parameter int unsigned N = 8
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [N-1:0]  in_valid,
  output logic [N-1:0]  in_ready,
  input  addr_t         in_addr [N],
  input  line_t         in_data [N],
  output logic          out_valid,
  input  logic          out_ready,
  output addr_t         out_addr,
  output line_t         out_data
);
  localparam int unsigned IW = (N > 1) ? $clog2(N) : 1;
  logic [IW-1:0] last_q, grant;
  logic          any;

  always_comb begin
    any = 1'b0;
    grant = last_q;
    for (int k = 1; k <= N; k++) begin
      int unsigned c;
      c = (int'(last_q) + k) % N;
      if (!any && in_valid[c]) begin any = 1'b1; grant = IW'(c); end
    end
    in_ready = '0;
    if (any) in_ready[grant] = out_ready;
  end

  assign out_valid = any;
  assign out_addr  = in_addr[grant];
  assign out_data  = in_data[grant];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                    last_q <= IW'(N - 1);
    else if (any && out_ready)     last_q <= grant;
  end
endmodule
