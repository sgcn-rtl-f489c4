// global_cache: the accelerator's shared on-chip cache for feature lines
// (SGCN paper, Fig. 6 and Table III: 512 KB, 16 ways, LRU replacement).
//
// A set-associative, read-allocate cache of 64-byte lines. A request is
// taken when the cache is idle; the next cycle compares the tags of all ways
// of its set. On a hit the line is read from the data array and returned one
// cycle later. On a miss a victim is chosen (an invalid way if there is one,
// else the least recently used), the line is fetched from DRAM, written into
// the victim way and returned. LRU is kept exactly with one age counter per
// way (see `touched`). Tags and ages of a set are stored as one RAM word each,
// so lookup and update are one read and one write of that word.
//
// Only the aggregation engines' feature reads use the cache. The feature
// rows of the next layer are written straight to DRAM by the compressors, so
// `invalidate` must be pulsed between layers; it clears every valid bit.
//
// Interface: request valid/ready with address and tag, response strobe with
// data and the request's tag (tags come from mem_arbiter); a DRAM read port of
// the same kind without tag. Blocking: one request at a time. Hit and miss
// counters for statistics. The blocking organisation and the exact-LRU ages
// are this design's choices; the paper gives only size, ways and policy.
module global_cache
  import sgcn_pkg::*;
#(
  parameter int unsigned CAPACITY_KB = 512,
  parameter int unsigned WAYS        = 16,
  parameter int unsigned TAG_W       = 8
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              invalidate,
  input  logic              req_valid,
  output logic              req_ready,
  input  addr_t             req_addr,
  input  logic [TAG_W-1:0]  req_tag,
  output logic              resp_valid,
  output line_t             resp_data,
  output logic [TAG_W-1:0]  resp_tag,
  output logic              mem_req_valid,
  input  logic              mem_req_ready,
  output addr_t             mem_req_addr,
  input  logic              mem_resp_valid,
  input  line_t             mem_resp_data,
  output logic [31:0]       hits,
  output logic [31:0]       misses
);
  localparam int unsigned LINES  = CAPACITY_KB * 1024 / LINE_BYTES;
  localparam int unsigned SETS   = LINES / WAYS;
  localparam int unsigned SET_W  = $clog2(SETS);
  localparam int unsigned WAY_W  = $clog2(WAYS);
  localparam int unsigned CTAG_W = ADDR_W - 6 - SET_W;

  typedef enum logic [1:0] {S_IDLE, S_LOOKUP, S_MISS, S_WAIT} state_e;
  state_e state;

  line_t                     data_mem [LINES];
  logic [WAYS*CTAG_W-1:0]    tag_mem  [SETS];     // all tags of a set in one entry
  logic [WAYS*WAY_W-1:0]     age_mem  [SETS];     // all LRU ages of a set
  logic [SETS*WAYS-1:0]      vld;                 // valid bit of every line

  addr_t              addr_q;
  logic [TAG_W-1:0]   tag_q;
  logic [WAY_W-1:0]   way_q;
  logic [SET_W-1:0]   set_idx;
  logic [CTAG_W-1:0]  ctag;

  assign set_idx = addr_q[6 +: SET_W];
  assign ctag    = addr_q[ADDR_W-1 -: CTAG_W];

  logic [WAYS*CTAG_W-1:0] tags_rd;
  logic [WAYS*WAY_W-1:0]  ages_rd;
  logic [WAYS-1:0]        vld_rd;
  assign tags_rd = tag_mem[set_idx];
  assign ages_rd = age_mem[set_idx];
  assign vld_rd  = vld[set_idx*WAYS +: WAYS];

  // tag compare and victim choice for the set of the held request
  logic              hit;
  logic [WAY_W-1:0]  hit_way, victim;
  always_comb begin
    logic found_inv;
    hit = 1'b0; hit_way = '0; victim = '0; found_inv = 1'b0;
    for (int w = 0; w < WAYS; w++) begin
      if (vld_rd[w] && tags_rd[w*CTAG_W +: CTAG_W] == ctag) begin
        hit = 1'b1; hit_way = WAY_W'(w);
      end
    end
    for (int w = 0; w < WAYS; w++) begin
      if (!found_inv && !vld_rd[w]) begin found_inv = 1'b1; victim = WAY_W'(w); end
    end
    if (!found_inv)
      for (int w = 0; w < WAYS; w++)
        if (ages_rd[w*WAY_W +: WAY_W] == WAY_W'(WAYS - 1)) victim = WAY_W'(w);
  end

  assign req_ready     = (state == S_IDLE) && !invalidate;
  assign mem_req_valid = (state == S_MISS);
  assign mem_req_addr  = {addr_q[ADDR_W-1:6], 6'b0};

  // New ages of the set after way `w` is used: `w` becomes 0 (most recent).
  // On a hit the valid ways younger than `w` age by one; on a fill (w was
  // invalid) every valid way ages by one. Ways are filled lowest-invalid
  // first, so the ages of the valid ways are always 0..n-1 and invalid ways'
  // ages are never looked at; no reset of the age array is needed.
  function automatic logic [WAYS*WAY_W-1:0] touched(input logic [WAYS*WAY_W-1:0] ag,
                                                     input logic [WAYS-1:0] v,
                                                     input logic [WAY_W-1:0] w);
    logic [WAYS*WAY_W-1:0] r;
    r = ag;
    for (int k = 0; k < WAYS; k++) begin
      if (WAY_W'(k) == w) r[k*WAY_W +: WAY_W] = '0;
      else if (v[k] && (!v[w] || ag[k*WAY_W +: WAY_W] < ag[w*WAY_W +: WAY_W]))
        r[k*WAY_W +: WAY_W] = ag[k*WAY_W +: WAY_W] + 1'b1;
    end
    return r;
  endfunction

  // set-organised tag/age arrays and the line store (no reset: RAMs)
  always_ff @(posedge clk) begin
    if (state == S_LOOKUP && hit) begin
      resp_data <= data_mem[{set_idx, hit_way}];
      age_mem[set_idx] <= touched(ages_rd, vld_rd, hit_way);
    end else if (state == S_WAIT && mem_resp_valid) begin
      data_mem[{set_idx, way_q}] <= mem_resp_data;
      resp_data <= mem_resp_data;
      tag_mem[set_idx] <= tags_rd & ~({{(WAYS-1)*CTAG_W{1'b0}}, {CTAG_W{1'b1}}} << (way_q * CTAG_W))
                                  | ({{(WAYS-1)*CTAG_W{1'b0}}, ctag} << (way_q * CTAG_W));
      age_mem[set_idx] <= touched(ages_rd, vld_rd, way_q);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; addr_q <= '0; tag_q <= '0; way_q <= '0;
      resp_valid <= 1'b0; resp_tag <= '0; hits <= '0; misses <= '0;
      vld <= '0;
    end else begin
      resp_valid <= 1'b0;
      if (invalidate) begin
        vld <= '0;
      end
      unique case (state)
        S_IDLE: if (req_valid && !invalidate) begin
          addr_q <= req_addr; tag_q <= req_tag; state <= S_LOOKUP;
        end
        S_LOOKUP: begin
          if (hit) begin
            resp_valid <= 1'b1; resp_tag <= tag_q;
            hits  <= hits + 1;
            state <= S_IDLE;
          end else begin
            misses <= misses + 1;
            way_q  <= victim;
            state  <= S_MISS;
          end
        end
        S_MISS: if (mem_req_ready) state <= S_WAIT;
        S_WAIT: if (mem_resp_valid) begin
          vld[{set_idx, way_q}] <= 1'b1;
          resp_valid <= 1'b1; resp_tag <= tag_q;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
