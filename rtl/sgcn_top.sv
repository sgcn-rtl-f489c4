// sgcn_top: the SGCN accelerator, running one residual GCN layer
//   S^{l+1} = A~ . X^l . W^l + S^l,   X^{l+1} = ReLU(S^{l+1})
// with X^l and X^{l+1} held in sliced BEICSR format (paper Fig. 6, Fig. 15).
//
// NUM_ENGINES aggregation engines share one global cache for their feature
// reads; each feeds its own combination engine (32x32 systolic array, ReLU,
// compressor). Topology reads, weight and residual loads and the cache's
// misses share one tagged DRAM read port; the combination engines' writes
// (dense S^{l+1}, compressed X^{l+1}) share one DRAM write port.
//
// Layer sequence after a `start` pulse: the cache is invalidated (the
// previous layer's output was written around it) and every combination
// engine loads W^l; then the vertex range [0, num_vertices) is processed as
// row tiles of `tile_rows` vertices, one after the other. Inside a tile the
// engines take 32-row strips interleaved (sparsity-aware cooperation). A tile
// is finished when every aggregation engine has run out of strips and every
// combination engine is idle; after the last tile `done` rises and stays
// until the next `start`.
//
// Memory map, all byte addresses set by the host: CSR row pointers, column
// indices and edge weights (32-bit words), X^l and X^{l+1} (BEICSR, fixed
// SLICE_LINES cachelines per vertex and slice), S^l and S^{l+1} (dense,
// FEAT words per vertex), W^l (dense, row-major FEAT x FEAT).
// DRAM itself (HBM2 in the paper) is outside: its ports are this module's.
// Defaults are the paper's configuration (Table III, Sec. V.B/C).
module sgcn_top
  import sgcn_pkg::*;
#(
  parameter int unsigned NUM_ENGINES = 8,
  parameter int unsigned ROWS        = 32,   // systolic array and strip height
  parameter int unsigned COLS        = 32,
  parameter int unsigned FEAT        = 256,
  parameter int unsigned C           = 96,
  parameter int unsigned CACHE_KB    = 512,
  parameter int unsigned CACHE_WAYS  = 16,
  parameter int unsigned TAG_W       = 8
) (
  input  logic              clk,
  input  logic              rst_n,
  // layer configuration
  input  logic              start,
  output logic              done,
  input  logic [VID_W-1:0]  num_vertices,
  input  logic [VID_W-1:0]  tile_rows,
  input  addr_t             rp_base,
  input  addr_t             ci_base,
  input  addr_t             ev_base,
  input  addr_t             x_in_base,
  input  addr_t             x_out_base,
  input  addr_t             s_in_base,
  input  addr_t             s_out_base,
  input  addr_t             w_base,
  // DRAM read port (tagged, responses may return out of order)
  output logic              dram_rd_req_valid,
  input  logic              dram_rd_req_ready,
  output addr_t             dram_rd_req_addr,
  output logic [TAG_W-1:0]  dram_rd_req_tag,
  input  logic              dram_rd_resp_valid,
  input  line_t             dram_rd_resp_data,
  input  logic [TAG_W-1:0]  dram_rd_resp_tag,
  // DRAM write port
  output logic              dram_wr_valid,
  input  logic              dram_wr_ready,
  output addr_t             dram_wr_addr,
  output line_t             dram_wr_data,
  // statistics
  output logic [31:0]       stat_cache_hits,
  output logic [31:0]       stat_cache_misses,
  output logic [31:0]       stat_feature_lines,
  output logic [31:0]       stat_edges,
  output logic [31:0]       stat_strips,
  output logic [31:0]       stat_x_lines_written,
  output logic [31:0]       stat_x_nonzeros,
  output logic [31:0]       stat_bank_stalls
);
  localparam int unsigned NE  = NUM_ENGINES;
  localparam int unsigned NRD = 1 + 2 * NE;       // cache, graph readers, comb engines

  // ---------------- layer controller ----------------
  typedef enum logic [2:0] {L_IDLE, L_WLOAD, L_TILE, L_RUN, L_DONE} lstate_e;
  lstate_e lstate;

  logic [VID_W-1:0] tile_lo, tile_hi;
  logic             agg_start, load_w, cache_inv;
  logic [NE-1:0]    agg_done, comb_busy, w_loaded;
  logic             run_wait;   // one cycle for the engines to leave their done state

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      lstate <= L_IDLE; tile_lo <= '0; tile_hi <= '0;
      agg_start <= 1'b0; load_w <= 1'b0; cache_inv <= 1'b0; run_wait <= 1'b0;
    end else begin
      agg_start <= 1'b0; load_w <= 1'b0; cache_inv <= 1'b0; run_wait <= 1'b0;
      unique case (lstate)
        L_IDLE, L_DONE: if (start) begin
          cache_inv <= 1'b1; load_w <= 1'b1; tile_lo <= '0; run_wait <= 1'b1;
          lstate <= L_WLOAD;
        end
        L_WLOAD: if (!run_wait && !load_w && &w_loaded) lstate <= L_TILE;
        L_TILE: begin
          tile_hi   <= (num_vertices - tile_lo > tile_rows) ? tile_lo + tile_rows : num_vertices;
          agg_start <= 1'b1;
          run_wait  <= 1'b1;
          lstate    <= L_RUN;
        end
        L_RUN: if (!run_wait && !agg_start && &agg_done && !(|comb_busy)) begin
          if (tile_hi >= num_vertices) lstate <= L_DONE;
          else begin tile_lo <= tile_hi; lstate <= L_TILE; end
        end
        default: lstate <= L_IDLE;
      endcase
    end
  end
  assign done = (lstate == L_DONE);

  // ---------------- engines ----------------
  logic  g_req_valid [NE], g_req_ready [NE], g_resp_valid [NE];
  addr_t g_req_addr  [NE];
  logic  f_req_valid [NE], f_req_ready [NE], f_resp_valid [NE];
  addr_t f_req_addr  [NE];
  logic  c_rd_valid  [NE], c_rd_ready [NE], c_rd_resp_valid [NE];
  addr_t c_rd_addr   [NE];
  logic  c_wr_valid  [NE], c_wr_ready [NE];
  addr_t c_wr_addr   [NE];
  line_t c_wr_data   [NE];
  line_t dram_line, cache_line, cache_resp_data;

  logic [31:0] st_edges [NE], st_lines [NE], st_stalls [NE];
  logic [31:0] st_strips [NE], st_xl [NE], st_xnz [NE];

  for (genvar e = 0; e < NE; e++) begin : g_eng
    logic                         ib_we, ib_bank, sub_valid, sub_bank;
    logic [$clog2(ROWS)-1:0]      ib_row;
    logic [7:0]                   ib_slice;
    word_t                        ib_data [C];
    logic [VID_W-1:0]             sub_base;
    logic [$clog2(ROWS+1)-1:0]    sub_rows;
    logic [1:0]                   bank_free;

    aggregation_engine #(.NUM_ENGINES(NE), .STRIP_H(ROWS), .FEAT(FEAT), .C(C)) u_agg (
      .clk(clk), .rst_n(rst_n), .engine_id(8'(e)),
      .rp_base(rp_base), .ci_base(ci_base), .ev_base(ev_base), .x_in_base(x_in_base),
      .row_lo(tile_lo), .row_hi(tile_hi), .start(agg_start), .done(agg_done[e]),
      .g_req_valid(g_req_valid[e]), .g_req_ready(g_req_ready[e]), .g_req_addr(g_req_addr[e]),
      .g_resp_valid(g_resp_valid[e]), .g_resp_data(dram_line),
      .f_req_valid(f_req_valid[e]), .f_req_ready(f_req_ready[e]), .f_req_addr(f_req_addr[e]),
      .f_resp_valid(f_resp_valid[e]), .f_resp_data(cache_line),
      .ib_we(ib_we), .ib_bank(ib_bank), .ib_row(ib_row), .ib_slice(ib_slice), .ib_data(ib_data),
      .sub_valid(sub_valid), .sub_bank(sub_bank), .sub_base(sub_base), .sub_rows(sub_rows),
      .bank_free(bank_free),
      .edges_done(st_edges[e]), .lines_fetched(st_lines[e]), .stall_cycles(st_stalls[e]));

    combination_engine #(.ROWS(ROWS), .COLS(COLS), .FEAT(FEAT), .C(C)) u_comb (
      .clk(clk), .rst_n(rst_n),
      .w_base(w_base), .s_in_base(s_in_base), .s_out_base(s_out_base), .x_out_base(x_out_base),
      .load_w(load_w), .w_loaded(w_loaded[e]),
      .ib_we(ib_we), .ib_bank(ib_bank), .ib_row(ib_row), .ib_slice(ib_slice), .ib_data(ib_data),
      .sub_valid(sub_valid), .sub_bank(sub_bank), .sub_base(sub_base), .sub_rows(sub_rows),
      .bank_free(bank_free), .busy(comb_busy[e]),
      .rd_req_valid(c_rd_valid[e]), .rd_req_ready(c_rd_ready[e]), .rd_req_addr(c_rd_addr[e]),
      .rd_resp_valid(c_rd_resp_valid[e]), .rd_resp_data(dram_line),
      .wr_valid(c_wr_valid[e]), .wr_ready(c_wr_ready[e]), .wr_addr(c_wr_addr[e]),
      .wr_data(c_wr_data[e]),
      .strips_done(st_strips[e]), .x_lines_written(st_xl[e]), .x_nonzeros(st_xnz[e]));
  end

  // ---------------- global cache and its arbiter ----------------
  logic [NE-1:0]     fa_valid, fa_ready, fa_resp;
  addr_t             fa_addr [NE];
  logic              ca_req_valid, ca_req_ready, ca_resp_valid;
  addr_t             ca_req_addr;
  logic [TAG_W-1:0]  ca_req_tag, ca_resp_tag;
  logic              cm_req_valid, cm_req_ready, cm_resp_valid;
  addr_t             cm_req_addr;

  for (genvar e = 0; e < NE; e++) begin : g_fa
    assign fa_valid[e]     = f_req_valid[e];
    assign fa_addr[e]      = f_req_addr[e];
    assign f_req_ready[e]  = fa_ready[e];
    assign f_resp_valid[e] = fa_resp[e];
  end

  mem_arbiter #(.N(NE), .TAG_W(TAG_W)) u_farb (
    .clk(clk), .rst_n(rst_n), .req_valid(fa_valid), .req_ready(fa_ready), .req_addr(fa_addr),
    .resp_valid(fa_resp), .resp_data(cache_line),
    .out_req_valid(ca_req_valid), .out_req_ready(ca_req_ready), .out_req_addr(ca_req_addr),
    .out_req_tag(ca_req_tag), .out_resp_valid(ca_resp_valid), .out_resp_data(cache_resp_data),
    .out_resp_tag(ca_resp_tag));

  global_cache #(.CAPACITY_KB(CACHE_KB), .WAYS(CACHE_WAYS), .TAG_W(TAG_W)) u_cache (
    .clk(clk), .rst_n(rst_n), .invalidate(cache_inv),
    .req_valid(ca_req_valid), .req_ready(ca_req_ready), .req_addr(ca_req_addr), .req_tag(ca_req_tag),
    .resp_valid(ca_resp_valid), .resp_data(cache_resp_data), .resp_tag(ca_resp_tag),
    .mem_req_valid(cm_req_valid), .mem_req_ready(cm_req_ready), .mem_req_addr(cm_req_addr),
    .mem_resp_valid(cm_resp_valid), .mem_resp_data(dram_line),
    .hits(stat_cache_hits), .misses(stat_cache_misses));

  // ---------------- DRAM read arbitration ----------------
  // requester 0: cache misses; 1..NE: graph readers; NE+1..2NE: combination engines
  logic [NRD-1:0] da_valid, da_ready, da_resp;
  addr_t          da_addr [NRD];

  always_comb begin
    da_valid[0] = cm_req_valid;
    da_addr[0]  = cm_req_addr;
    for (int e = 0; e < NE; e++) begin
      da_valid[1 + e]      = g_req_valid[e];
      da_addr[1 + e]       = g_req_addr[e];
      da_valid[1 + NE + e] = c_rd_valid[e];
      da_addr[1 + NE + e]  = c_rd_addr[e];
    end
  end
  assign cm_req_ready  = da_ready[0];
  assign cm_resp_valid = da_resp[0];
  for (genvar e = 0; e < NE; e++) begin : g_da
    assign g_req_ready[e]     = da_ready[1 + e];
    assign g_resp_valid[e]    = da_resp[1 + e];
    assign c_rd_ready[e]      = da_ready[1 + NE + e];
    assign c_rd_resp_valid[e] = da_resp[1 + NE + e];
  end

  mem_arbiter #(.N(NRD), .TAG_W(TAG_W)) u_darb (
    .clk(clk), .rst_n(rst_n), .req_valid(da_valid), .req_ready(da_ready), .req_addr(da_addr),
    .resp_valid(da_resp), .resp_data(dram_line),
    .out_req_valid(dram_rd_req_valid), .out_req_ready(dram_rd_req_ready),
    .out_req_addr(dram_rd_req_addr), .out_req_tag(dram_rd_req_tag),
    .out_resp_valid(dram_rd_resp_valid), .out_resp_data(dram_rd_resp_data),
    .out_resp_tag(dram_rd_resp_tag));

  // ---------------- DRAM write arbitration ----------------
  logic [NE-1:0] wa_valid, wa_ready;
  for (genvar e = 0; e < NE; e++) begin : g_wa
    assign wa_valid[e]   = c_wr_valid[e];
    assign c_wr_ready[e] = wa_ready[e];
  end

  write_arbiter #(.N(NE)) u_warb (
    .clk(clk), .rst_n(rst_n), .in_valid(wa_valid), .in_ready(wa_ready),
    .in_addr(c_wr_addr), .in_data(c_wr_data),
    .out_valid(dram_wr_valid), .out_ready(dram_wr_ready),
    .out_addr(dram_wr_addr), .out_data(dram_wr_data));

  // ---------------- statistics ----------------
  always_comb begin
    stat_feature_lines = '0; stat_edges = '0; stat_strips = '0;
    stat_x_lines_written = '0; stat_x_nonzeros = '0; stat_bank_stalls = '0;
    for (int e = 0; e < NE; e++) begin
      stat_feature_lines   += st_lines[e];
      stat_edges           += st_edges[e];
      stat_strips          += st_strips[e];
      stat_x_lines_written += st_xl[e];
      stat_x_nonzeros      += st_xnz[e];
      stat_bank_stalls     += st_stalls[e];
    end
  end
endmodule
