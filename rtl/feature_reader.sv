// feature_reader: fetches one neighbour's BEICSR unit slice and streams it
// line by line to the sparse aggregator (SGCN paper, Fig. 6 and Fig. 13,
// steps 1 and 5; Sec. V.A-B).
//
// Thanks to in-place compression every (vertex, slice) pair has a fixed,
// cacheline-aligned home: address = feat_base + ((u * nslices) + s) *
// SLICE_LINES * 64, so no row-pointer array is read. The reader first fetches
// the slice's first cacheline, whose head is the bitmap index; the bitmap's
// population count tells how many further lines hold non-zeros, and only
// those are fetched (step 5, "when there are still non-zeros remaining in the
// next cacheline"). Every fetched line is passed on with its index in the
// slice and the edge weight. Edge tokens with `edge_none` (vertex without
// neighbours) cost no access and only pass the `last` marker on.
//
// Interface: edges in over valid/ready; lines out as a one-cycle strobe
// `ln_valid` (the aggregator never stalls); `ln_edge_last` marks the final
// line of the final edge of the vertex, `ln_none` a marker without data.
// Memory: one cacheline request in flight, valid/ready request, response
// strobe. Counts the lines it fetches, for traffic statistics.
module feature_reader
  import sgcn_pkg::*;
#(
  parameter int unsigned C = 96
) (
  input  logic              clk,
  input  logic              rst_n,
  input  addr_t             feat_base,
  input  logic [15:0]       nslices,
  input  logic [15:0]       slice_idx,
  // edge stream from the graph reader
  input  logic              edge_valid,
  output logic              edge_ready,
  input  logic [VID_W-1:0]  edge_src,
  input  word_t             edge_weight,
  input  logic              edge_last,
  input  logic              edge_none,
  // lines to the aggregator
  output logic              ln_valid,
  output line_t             ln_data,
  output logic [7:0]        ln_idx,
  output word_t             ln_weight,
  output logic              ln_edge_last,
  output logic              ln_none,
  // cacheline read port (to the global cache)
  output logic              rd_req_valid,
  input  logic              rd_req_ready,
  output addr_t             rd_req_addr,
  input  logic              rd_resp_valid,
  input  line_t             rd_resp_data,
  // statistics
  output logic [31:0]       lines_fetched
);
  localparam int unsigned SL = slice_lines(C);

  typedef enum logic [1:0] {S_IDLE, S_REQ, S_WAIT, S_NONE} state_e;
  state_e state;

  addr_t       slice_addr;
  logic [7:0]  idx_q, nlines_q;
  word_t       w_q;
  logic        last_q;
  logic [$clog2(C+1)-1:0] pop;

  logic [7:0] nl;                 // lines of the slice being fetched
  assign pop = $countones(rd_resp_data[C-1:0]);
  assign nl  = (idx_q == 0) ? 8'(used_lines(C, int'(pop))) : nlines_q;

  assign edge_ready   = (state == S_IDLE);
  assign rd_req_valid = (state == S_REQ);
  assign rd_req_addr  = slice_addr + addr_t'(idx_q) * LINE_BYTES;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      slice_addr <= '0; idx_q <= '0; nlines_q <= '0; w_q <= '0; last_q <= 1'b0;
      ln_valid <= 1'b0; ln_data <= '0; ln_idx <= '0; ln_weight <= '0;
      ln_edge_last <= 1'b0; ln_none <= 1'b0;
      lines_fetched <= '0;
    end else begin
      ln_valid <= 1'b0;
      ln_none  <= 1'b0;
      unique case (state)
        S_IDLE: if (edge_valid) begin
          slice_addr <= feat_base +
                        addr_t'((edge_src * nslices + VID_W'(slice_idx)) * SL) * LINE_BYTES;
          idx_q   <= '0;
          w_q     <= edge_weight;
          last_q  <= edge_last;
          state   <= edge_none ? S_NONE : S_REQ;
        end
        S_NONE: begin
          ln_valid <= 1'b1; ln_none <= 1'b1; ln_edge_last <= last_q; ln_idx <= '0;
          ln_weight <= '0;
          state <= S_IDLE;
        end
        S_REQ: if (rd_req_ready) state <= S_WAIT;
        S_WAIT: if (rd_resp_valid) begin
          nlines_q      <= nl;
          lines_fetched <= lines_fetched + 1;
          ln_valid      <= 1'b1;
          ln_data       <= rd_resp_data;
          ln_idx        <= idx_q;
          ln_weight     <= w_q;
          ln_edge_last  <= last_q && (idx_q + 1 == nl);
          if (idx_q + 1 == nl) state <= S_IDLE;
          else begin idx_q <= idx_q + 1; state <= S_REQ; end
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
