// hbm_model: behavioural model of the off-chip DRAM (HBM2 in the SGCN
// configuration) for simulation only; not synthesizable and not part of the
// design.
//
// Sparse cacheline storage (associative array indexed by line address).
// Reads: a request is accepted in any cycle where `rd_req_ready` is high
// (ready is withheld pseudo-randomly when STALL_PCT > 0); its line returns
// LATENCY cycles later with the request's tag, in request order, one
// response per cycle. Writes: accepted in the cycle they are presented (or
// withheld like reads). Lines never written read as zero. Counters of reads
// and writes serve the traffic checks. Testbenches preload and inspect the
// contents with the word/line tasks and functions.
module hbm_model
  import sgcn_pkg::*;
#(
  parameter int unsigned LATENCY   = 20,
  parameter int unsigned STALL_PCT = 0,
  parameter int unsigned TAG_W     = 8
) (
  input  logic              clk,
  input  logic              rd_req_valid,
  output logic              rd_req_ready,
  input  addr_t             rd_req_addr,
  input  logic [TAG_W-1:0]  rd_req_tag,
  output logic              rd_resp_valid,
  output line_t             rd_resp_data,
  output logic [TAG_W-1:0]  rd_resp_tag,
  input  logic              wr_valid,
  output logic              wr_ready,
  input  addr_t             wr_addr,
  input  line_t             wr_data
);
  line_t mem [addr_t];
  int unsigned reads = 0, writes = 0;
  longint unsigned cycle = 0;

  typedef struct { longint unsigned due; addr_t addr; logic [TAG_W-1:0] tag; } rd_t;
  rd_t q [$];

  function automatic line_t get_line(input addr_t a);
    addr_t k;
    k = a >> 6;
    return mem.exists(k) ? mem[k] : '0;
  endfunction

  task automatic put_word(input addr_t a, input word_t w);
    line_t l;
    l = get_line(a);
    l[a[5:2]*DATA_W +: DATA_W] = w;
    mem[a >> 6] = l;
  endtask

  function automatic word_t get_word(input addr_t a);
    line_t l;
    l = get_line(a);
    return l[a[5:2]*DATA_W +: DATA_W];
  endfunction

  function automatic bit line_written(input addr_t a);
    return mem.exists(a >> 6);
  endfunction

  initial begin
    rd_req_ready = 1'b1; wr_ready = 1'b1;
    rd_resp_valid = 1'b0; rd_resp_data = '0; rd_resp_tag = '0;
  end

  always @(posedge clk) begin
    cycle <= cycle + 1;
    // response for this cycle
    rd_resp_valid <= 1'b0;
    if (q.size() > 0 && q[0].due <= cycle) begin
      rd_resp_valid <= 1'b1;
      rd_resp_data  <= get_line(q[0].addr);
      rd_resp_tag   <= q[0].tag;
      void'(q.pop_front());
    end
    if (rd_req_valid && rd_req_ready) begin
      rd_t r;
      r.due = cycle + LATENCY; r.addr = rd_req_addr; r.tag = rd_req_tag;
      q.push_back(r);
      reads++;
    end
    if (wr_valid && wr_ready) begin
      mem[wr_addr >> 6] = wr_data;
      writes++;
    end
    rd_req_ready <= (STALL_PCT == 0) || ($urandom_range(99) >= STALL_PCT);
    wr_ready     <= (STALL_PCT == 0) || ($urandom_range(99) >= STALL_PCT);
  end
endmodule
