// sparse_aggregator: SIMD multiply and shuffle-accumulate over BEICSR
// cachelines (SGCN paper, Sec. V.D, Fig. 13).
//
// One cacheline of a neighbour's compressed unit slice arrives per cycle
// together with the edge weight A~ij and the line's index inside the slice.
// Sixteen multipliers (one per 32-bit word of the line) scale every word by
// the weight (step 2). The slice's bitmap, taken from the head of line 0 and
// held in a register for the later lines, goes through a parallel prefix sum
// (step 2'), which gives each set bit the rank of its value in the packed
// array. The shuffle stage then lets accumulator p take product
// (BM_WORDS + rank(p)) mod 16 when bit p is set and that value lies in the
// current line (step 3). Accumulators for zero elements are left alone, so a
// sparse slice costs only the lines that hold its non-zeros (step 5).
// The C accumulators form the "Accumulation Reg." whose content is the dense
// slice of (A~ . X) for the current vertex (step 4).
//
// Interface: `clear` zeroes the accumulators (start of a vertex/slice). A
// line is consumed in the cycle `in_valid` is high; the accumulators show its
// contribution from the next cycle on. No back-pressure: one line per cycle.
//
// From the paper: 16 multipliers, prefix sum, shuffle, accumulation register,
// bitmap at the head of the entry. Own choices: the one-cycle combinational
// multiply-shuffle-add, the registered bitmap, Q16.16 arithmetic.
module sparse_aggregator
  import sgcn_pkg::*;
#(
  parameter int unsigned C = 96                  // unit slice size
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      clear,
  input  logic                      in_valid,
  input  line_t                     in_line,
  input  logic [7:0]                in_line_idx,
  input  word_t                     in_weight,
  output word_t                     acc [C],
  output logic [$clog2(C+1)-1:0]    nnz          // non-zeros of the current slice
);
  localparam int unsigned BM  = bm_words(C);
  localparam int unsigned CW  = $clog2(C + 1);
  localparam int unsigned POS = $clog2(BM + C + 1);

  logic [C-1:0]          bm_q, bm_now;
  logic [C-1:0][CW-1:0]  psum;
  word_t                 prod [LINE_WORDS];

  // Bitmap: straight from line 0 while it is on the bus, else the held copy.
  always_comb begin
    bm_now = bm_q;
    if (in_valid && in_line_idx == 8'd0) bm_now = in_line[C-1:0];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                                   bm_q <= '0;
    else if (in_valid && in_line_idx == 8'd0)     bm_q <= in_line[C-1:0];
  end

  prefix_sum #(.N(C)) u_psum (.bitmap(bm_now), .sum(psum));

  assign nnz = psum[C-1];

  always_comb begin
    for (int q = 0; q < LINE_WORDS; q++)
      prod[q] = fx_mul(in_line[q*DATA_W +: DATA_W], in_weight);
  end

  // shuffle: accumulator p takes product (BM + rank(p)) mod 16 when its
  // value lies in the current line
  logic [POS-1:0] wpos [C];
  logic [C-1:0]   take;
  always_comb begin
    for (int p = 0; p < C; p++) begin
      wpos[p] = POS'(BM) + POS'(psum[p]) - POS'(1);
      take[p] = bm_now[p] && (wpos[p] / POS'(LINE_WORDS)) == POS'(in_line_idx);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int p = 0; p < C; p++) acc[p] <= '0;
    end else if (clear) begin
      for (int p = 0; p < C; p++) acc[p] <= '0;
    end else if (in_valid) begin
      for (int p = 0; p < C; p++)
        if (take[p]) acc[p] <= acc[p] + prod[$clog2(LINE_WORDS)'(wpos[p] % POS'(LINE_WORDS))];
    end
  end
endmodule
