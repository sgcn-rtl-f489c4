// compressor: ReLU and post-combination BEICSR compression (SGCN paper,
// Sec. V.E, Fig. 14).
//
// One compressor entry per systolic-array row. Each cycle the array delivers
// one pre-activation value S^{l+1} per row, all rows at the same feature
// position; a global counter (the paper's "Global Cnt++") holds that position
// inside the current unit slice. Per entry: ReLU (negative -> 0); the
// non-zero test (step 2); on zero the bitmap records a 0 (step 3); on
// non-zero it records a 1 (step 3') and the value is written to the entry's
// buffer at the place of its counter, which then increments (step 4).
// When the global counter has covered a unit slice (C positions), or the row
// ends (`in_last`, last slice of a row may be short), the entries are
// flushed (step 5): entry by entry, only the cachelines that hold bitmap or
// values are written, to the slice's in-place address
//   xout_base + ((strip_base + r) * nslices + slice) * SLICE_LINES * 64,
// then all entries restart empty. Rows r >= nrows are not written.
//
// Interface: `start` (one cycle) begins a strip: slice counter 0. Values in
// with valid/ready; `in_ready` is low while flushing. Cacheline writes out
// over valid/ready. Counters of written lines and non-zeros for statistics.
// Word layout of a slice: bitmap words first (bit i = element i), then the
// values in element order (sgcn_pkg). The buffers and counters follow the
// figure; the entry-by-entry flush order is this design's choice.
module compressor
  import sgcn_pkg::*;
#(
  parameter int unsigned ROWS = 32,
  parameter int unsigned C    = 96
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  addr_t             xout_base,
  input  logic [VID_W-1:0]  strip_base,
  input  logic [15:0]       nslices,
  input  logic [$clog2(ROWS+1)-1:0] nrows,
  // values from the systolic array
  input  logic              in_valid,
  output logic              in_ready,
  input  word_t             in_val [ROWS],
  input  logic              in_last,
  // cacheline writes
  output logic              wr_valid,
  input  logic              wr_ready,
  output addr_t             wr_addr,
  output line_t             wr_data,
  // statistics
  output logic [31:0]       lines_written,
  output logic [31:0]       nonzeros
);
  localparam int unsigned BM  = bm_words(C);
  localparam int unsigned SL  = slice_lines(C);
  localparam int unsigned PW  = $clog2(C + 1);
  localparam int unsigned RW  = $clog2(ROWS + 1);

  logic [ROWS-1:0][C-1:0]             bitmap;
  logic [ROWS-1:0][C-1:0][DATA_W-1:0] vals;
  logic [ROWS-1:0][PW-1:0]            cnt;
  logic [PW-1:0]  gpos;                 // global counter
  logic [15:0]    slice_q;
  logic           flushing;
  logic [RW-1:0]  fl_row;
  logic [7:0]     fl_line;

  assign in_ready = !flushing;

  // line fl_line of entry fl_row. The entry's values are shifted down as
  // lines leave, so the next values to write always sit at the bottom.
  logic [7:0]                  fl_nlines;
  logic [C-1:0][DATA_W-1:0]    fl_vals;
  logic [C-1:0]                fl_bm;
  logic [PW-1:0]               fl_cnt;
  assign fl_vals   = vals[fl_row[RW-2:0]];
  assign fl_bm     = bitmap[fl_row[RW-2:0]];
  assign fl_cnt    = cnt[fl_row[RW-2:0]];
  assign fl_nlines = 8'(used_lines(C, int'(fl_cnt)));
  always_comb begin
    for (int q = 0; q < LINE_WORDS; q++) begin
      int unsigned rank;                  // rank of the value in word q
      rank = int'(fl_line) * LINE_WORDS + q - BM;
      if (fl_line == 0 && q < BM)
        wr_data[q*DATA_W +: DATA_W] = word_t'(fl_bm >> (q * DATA_W));
      else if (rank < int'(fl_cnt))
        wr_data[q*DATA_W +: DATA_W] = (fl_line == 0) ? fl_vals[q - BM] : fl_vals[q];
      else
        wr_data[q*DATA_W +: DATA_W] = '0;
    end
  end

  assign wr_valid = flushing && (fl_row < nrows);
  assign wr_addr  = xout_base +
                    addr_t'(((strip_base + VID_W'(fl_row)) * nslices + VID_W'(slice_q)) * SL
                            + VID_W'(fl_line)) * LINE_BYTES;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      gpos <= '0; slice_q <= '0; flushing <= 1'b0; fl_row <= '0; fl_line <= '0;
      lines_written <= '0; nonzeros <= '0;
      bitmap <= '0; cnt <= '0; vals <= '0;
    end else if (start) begin
      gpos <= '0; slice_q <= '0; flushing <= 1'b0;
      for (int r = 0; r < ROWS; r++) begin bitmap[r] <= '0; cnt[r] <= '0; end
    end else if (flushing) begin
      if (fl_row >= nrows) begin
        // all rows written: restart the entries for the next slice
        flushing <= 1'b0;
        gpos     <= '0;
        slice_q  <= slice_q + 1;
        for (int r = 0; r < ROWS; r++) begin bitmap[r] <= '0; cnt[r] <= '0; end
      end else if (wr_ready) begin
        lines_written <= lines_written + 1;
        vals[fl_row[RW-2:0]] <= (fl_line == 0) ? fl_vals >> ((LINE_WORDS - BM) * DATA_W)
                                               : fl_vals >> (LINE_WORDS * DATA_W);
        if (fl_line + 1 == fl_nlines) begin
          fl_line <= '0;
          fl_row  <= fl_row + 1;
        end else fl_line <= fl_line + 1;
      end
    end else if (in_valid) begin
      logic [31:0] nz;
      nz = nonzeros;
      for (int r = 0; r < ROWS; r++) begin
        word_t x;
        x = in_val[r][DATA_W-1] ? word_t'(0) : in_val[r];        // ReLU
        if (x != '0) begin                                       // non-zero?
          for (int k = 0; k < C; k++) begin          // demux by position / count
            if (PW'(k) == gpos)   bitmap[r][k] <= 1'b1;
            if (PW'(k) == cnt[r]) vals[r][k]   <= x;
          end
          cnt[r]          <= cnt[r] + 1'b1;
          if (RW'(r) < nrows) nz = nz + 1;
        end
      end
      nonzeros <= nz;
      if (gpos + 1 == PW'(C) || in_last) begin
        flushing <= 1'b1;
        fl_row   <= '0;
        fl_line  <= '0;
      end else gpos <= gpos + 1'b1;
    end
  end

  // a flush never starts while a write is outstanding
  a_no_input_in_flush: assert property (@(posedge clk) disable iff (!rst_n)
    flushing |-> !in_ready);
endmodule
