// aggregation_engine: one SGCN aggregation engine (paper Fig. 6 and Sec.
// V.C-D): graph reader, feature reader and sparse aggregator, fed with
// strips of vertices by the sparsity-aware cooperation scheduler.
//
// For each strip (up to STRIP_H consecutive vertices, strips interleaved
// across engines) and for each unit slice s of the feature row, the engine
// walks the vertices of the strip: it clears the accumulation register,
// lets the graph reader stream the vertex's CSR edges, lets the feature
// reader fetch every neighbour's compressed slice s through the global cache,
// and lets the sparse aggregator accumulate weight * features. The finished
// dense slice of (A~ . X^l) is written into the paired combination engine's
// input feature buffer (row = position in strip, slice = s). Once every slice
// of every row of the strip is written, the strip is handed over on the
// current buffer bank and the engine moves to the other bank, so aggregation
// of the next strip overlaps combination of this one. The engine waits when
// the bank it needs is still in use (back-pressure from combination).
//
// Interfaces: configuration and `start` pulse; `done` level when the
// scheduler has no strip left; a DRAM read port (topology) and a cache read
// port (features); the input-buffer write and strip-submit signals of
// combination_engine. Slice-outer/vertex-inner order and the bank protocol
// are this design's choices; the paper fixes row-product dataflow, the strip
// height 32 and the unit slice C = 96.
module aggregation_engine
  import sgcn_pkg::*;
#(
  parameter int unsigned NUM_ENGINES = 8,
  parameter int unsigned STRIP_H     = 32,
  parameter int unsigned FEAT        = 256,
  parameter int unsigned C           = 96
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [7:0]        engine_id,
  input  addr_t             rp_base,
  input  addr_t             ci_base,
  input  addr_t             ev_base,
  input  addr_t             x_in_base,
  input  logic [VID_W-1:0]  row_lo,
  input  logic [VID_W-1:0]  row_hi,
  input  logic              start,
  output logic              done,
  // topology reads (DRAM)
  output logic              g_req_valid,
  input  logic              g_req_ready,
  output addr_t             g_req_addr,
  input  logic              g_resp_valid,
  input  line_t             g_resp_data,
  // feature reads (global cache)
  output logic              f_req_valid,
  input  logic              f_req_ready,
  output addr_t             f_req_addr,
  input  logic              f_resp_valid,
  input  line_t             f_resp_data,
  // to the combination engine
  output logic              ib_we,
  output logic              ib_bank,
  output logic [$clog2(STRIP_H)-1:0] ib_row,
  output logic [7:0]        ib_slice,
  output word_t             ib_data [C],
  output logic              sub_valid,
  output logic              sub_bank,
  output logic [VID_W-1:0]  sub_base,
  output logic [$clog2(STRIP_H+1)-1:0] sub_rows,
  input  logic [1:0]        bank_free,
  // statistics
  output logic [31:0]       edges_done,
  output logic [31:0]       lines_fetched,
  output logic [31:0]       stall_cycles
);
  localparam int unsigned NSL = (FEAT + C - 1) / C;
  localparam int unsigned RW  = $clog2(STRIP_H + 1);

  typedef enum logic [2:0] {S_IDLE, S_STRIP, S_VERTEX, S_STREAM, S_WRITE} state_e;
  state_e state;

  // scheduler
  logic              st_valid, st_ready, st_done;
  logic [VID_W-1:0]  st_base;
  logic [RW-1:0]     st_rows;

  sac_scheduler #(.NUM_ENGINES(NUM_ENGINES), .STRIP_H(STRIP_H)) u_sac (
    .clk(clk), .rst_n(rst_n), .engine_id(engine_id), .start(start),
    .row_lo(row_lo), .row_hi(row_hi), .strip_valid(st_valid), .strip_ready(st_ready),
    .strip_base(st_base), .strip_rows(st_rows), .done(st_done));

  // graph reader
  logic              cmd_valid, cmd_ready;
  logic [VID_W-1:0]  cmd_vertex;
  logic              e_valid, e_ready, e_last, e_none;
  logic [VID_W-1:0]  e_src;
  word_t             e_w;

  graph_reader u_gr (
    .clk(clk), .rst_n(rst_n), .rp_base(rp_base), .ci_base(ci_base), .ev_base(ev_base),
    .cmd_valid(cmd_valid), .cmd_ready(cmd_ready), .cmd_vertex(cmd_vertex),
    .edge_valid(e_valid), .edge_ready(e_ready), .edge_src(e_src), .edge_weight(e_w),
    .edge_last(e_last), .edge_none(e_none),
    .rd_req_valid(g_req_valid), .rd_req_ready(g_req_ready), .rd_req_addr(g_req_addr),
    .rd_resp_valid(g_resp_valid), .rd_resp_data(g_resp_data), .flush(start));

  // feature reader
  logic        ln_valid, ln_last, ln_none;
  line_t       ln_data;
  logic [7:0]  ln_idx;
  word_t       ln_w;
  logic [15:0] slice_q;

  feature_reader #(.C(C)) u_fr (
    .clk(clk), .rst_n(rst_n), .feat_base(x_in_base), .nslices(16'(NSL)), .slice_idx(slice_q),
    .edge_valid(e_valid), .edge_ready(e_ready), .edge_src(e_src), .edge_weight(e_w),
    .edge_last(e_last), .edge_none(e_none),
    .ln_valid(ln_valid), .ln_data(ln_data), .ln_idx(ln_idx), .ln_weight(ln_w),
    .ln_edge_last(ln_last), .ln_none(ln_none),
    .rd_req_valid(f_req_valid), .rd_req_ready(f_req_ready), .rd_req_addr(f_req_addr),
    .rd_resp_valid(f_resp_valid), .rd_resp_data(f_resp_data), .lines_fetched(lines_fetched));

  // sparse aggregator
  logic  ag_clear;
  word_t ag_acc [C];

  sparse_aggregator #(.C(C)) u_agg (
    .clk(clk), .rst_n(rst_n), .clear(ag_clear), .in_valid(ln_valid && !ln_none),
    .in_line(ln_data), .in_line_idx(ln_idx), .in_weight(ln_w), .acc(ag_acc), .nnz());

  // control
  logic [VID_W-1:0] base_q;
  logic [RW-1:0]    rows_q, v_q;
  logic             bank_q;

  assign st_ready   = (state == S_STRIP) && bank_free[bank_q];
  assign cmd_valid  = (state == S_VERTEX);
  assign cmd_vertex = base_q + VID_W'(v_q);
  assign ag_clear   = (state == S_VERTEX);
  assign done       = (state == S_STRIP) && st_done;

  assign ib_we    = (state == S_WRITE);
  assign ib_bank  = bank_q;
  assign ib_row   = v_q[$clog2(STRIP_H)-1:0];
  assign ib_slice = slice_q[7:0];
  assign ib_data  = ag_acc;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; base_q <= '0; rows_q <= '0; v_q <= '0; bank_q <= 1'b0; slice_q <= '0;
      sub_valid <= 1'b0; sub_bank <= 1'b0; sub_base <= '0; sub_rows <= '0;
      edges_done <= '0; stall_cycles <= '0;
    end else begin
      sub_valid <= 1'b0;
      if (e_valid && e_ready && !e_none) edges_done <= edges_done + 1;
      unique case (state)
        S_IDLE: if (start) state <= S_STRIP;
        S_STRIP: begin
          if (st_valid && !bank_free[bank_q]) stall_cycles <= stall_cycles + 1;
          if (st_valid && bank_free[bank_q]) begin
            base_q <= st_base; rows_q <= st_rows; v_q <= '0; slice_q <= '0;
            state <= S_VERTEX;
          end
        end
        S_VERTEX: if (cmd_ready) state <= S_STREAM;
        S_STREAM: if (ln_valid && ln_last) state <= S_WRITE;
        S_WRITE: begin
          if (v_q + 1 == rows_q) begin
            v_q <= '0;
            if (int'(slice_q) == NSL - 1) begin
              sub_valid <= 1'b1; sub_bank <= bank_q; sub_base <= base_q; sub_rows <= rows_q;
              bank_q <= ~bank_q;
              state  <= S_STRIP;
            end else begin
              slice_q <= slice_q + 1;
              state   <= S_VERTEX;
            end
          end else begin
            v_q   <= v_q + 1;
            state <= S_VERTEX;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
