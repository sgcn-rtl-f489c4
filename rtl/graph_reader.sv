// graph_reader: streams the edges of a vertex from the CSR topology
// (SGCN paper, Sec. IV and Fig. 6: "a graph reader reads the vertex indices
// and the corresponding edges").
//
// The topology A~ is held in memory as CSR: a row-pointer array, a column
// index array and an edge-weight array, each of 32-bit words at its own base
// address. For a command `cmd_vertex` = v the reader fetches row_ptr[v] and
// row_ptr[v+1], then for every edge e in between emits (col_idx[e], val[e]).
// The last edge of the vertex carries `edge_last`; a vertex without edges
// produces one token with `edge_none` (and `edge_last`) set so that the
// consumer still sees the vertex finish.
//
// Each of the three arrays has a one-cacheline buffer; a word whose line is
// already buffered costs no memory access ("each module has a small buffer
// to temporarily store prefetched values"). Memory is read one cacheline at a
// time over a valid/ready request and a response strobe, one request in
// flight. Edges leave over valid/ready. The buffer depth and the fetch
// protocol are this design's choices.
module graph_reader
  import sgcn_pkg::*;
(
  input  logic          clk,
  input  logic          rst_n,
  // configuration (stable while busy)
  input  addr_t         rp_base,
  input  addr_t         ci_base,
  input  addr_t         ev_base,
  // command
  input  logic          cmd_valid,
  output logic          cmd_ready,
  input  logic [VID_W-1:0] cmd_vertex,
  // edge stream
  output logic          edge_valid,
  input  logic          edge_ready,
  output logic [VID_W-1:0] edge_src,
  output word_t         edge_weight,
  output logic          edge_last,
  output logic          edge_none,
  // cacheline read port
  output logic          rd_req_valid,
  input  logic          rd_req_ready,
  output addr_t         rd_req_addr,
  input  logic          rd_resp_valid,
  input  line_t         rd_resp_data,
  // invalidate the line buffers (new layer / new topology)
  input  logic          flush
);
  typedef enum logic [2:0] {S_IDLE, S_RP0, S_RP1, S_CI, S_EV, S_EMIT} state_e;
  state_e state;

  line_t              buf_data [3];
  logic [ADDR_W-7:0]  buf_tag  [3];
  logic [2:0]         buf_vld;
  logic               pending;   // request issued, response awaited
  logic               req_out;   // request being presented

  logic [VID_W-1:0]   v_q, e_q, e_end;
  logic [VID_W-1:0]   src_q;
  word_t              w_q;
  logic               none_q;

  // Which word the current state needs.
  logic [1:0]  need_arr;
  addr_t       need_addr;
  logic        need;
  always_comb begin
    need = 1'b1;
    need_arr = 2'd0;
    need_addr = '0;
    unique case (state)
      S_RP0: begin need_arr = 2'd0; need_addr = rp_base + addr_t'(v_q) * 4; end
      S_RP1: begin need_arr = 2'd0; need_addr = rp_base + addr_t'(v_q + 1) * 4; end
      S_CI:  begin need_arr = 2'd1; need_addr = ci_base + addr_t'(e_q) * 4; end
      S_EV:  begin need_arr = 2'd2; need_addr = ev_base + addr_t'(e_q) * 4; end
      default: need = 1'b0;
    endcase
  end

  logic  hit;
  word_t hit_word;
  assign hit = need && buf_vld[need_arr] && buf_tag[need_arr] == need_addr[ADDR_W-1:6];
  assign hit_word = buf_data[need_arr][need_addr[5:2]*DATA_W +: DATA_W];

  assign rd_req_valid = req_out;
  assign rd_req_addr  = {need_addr[ADDR_W-1:6], 6'b0};
  assign cmd_ready    = (state == S_IDLE);

  assign edge_valid  = (state == S_EMIT);
  assign edge_src    = src_q;
  assign edge_weight = w_q;
  assign edge_none   = none_q;
  assign edge_last   = edge_none || (e_q + 1 == e_end);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      buf_vld <= '0;
      pending <= 1'b0;
      req_out <= 1'b0;
      v_q <= '0; e_q <= '0; e_end <= '0; src_q <= '0; w_q <= '0; none_q <= 1'b0;
      for (int k = 0; k < 3; k++) begin buf_data[k] <= '0; buf_tag[k] <= '0; end
    end else begin
      if (flush) buf_vld <= '0;
      // line fetch machinery shared by all fetch states
      if (need && !hit && !pending && !req_out) req_out <= 1'b1;
      if (req_out && rd_req_ready) begin req_out <= 1'b0; pending <= 1'b1; end
      if (pending && rd_resp_valid) begin
        pending <= 1'b0;
        buf_data[need_arr] <= rd_resp_data;
        buf_tag[need_arr]  <= need_addr[ADDR_W-1:6];
        buf_vld[need_arr]  <= 1'b1;
      end
      unique case (state)
        S_IDLE: if (cmd_valid) begin v_q <= cmd_vertex; state <= S_RP0; end
        S_RP0:  if (hit) begin e_q <= hit_word; state <= S_RP1; end
        S_RP1:  if (hit) begin
                  e_end <= hit_word;
                  none_q <= (hit_word == e_q);
                  if (hit_word == e_q) begin src_q <= '0; w_q <= '0; state <= S_EMIT; end
                  else state <= S_CI;
                end
        S_CI:   if (hit) begin src_q <= hit_word; state <= S_EV; end
        S_EV:   if (hit) begin w_q <= hit_word; state <= S_EMIT; end
        S_EMIT: if (edge_ready) begin
                  if (edge_last) state <= S_IDLE;
                  else begin e_q <= e_q + 1; state <= S_CI; end
                end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
