// prefix_sum: parallel inclusive prefix sum of a bitmap index.
//
// For every position i the output sum[i] is the number of ones in
// bitmap[i:0]. For a set bit, sum[i]-1 is therefore the rank of that
// element among the slice's non-zeros, i.e. where its value sits in the
// compressed array (Fig. 13 of the SGCN paper shows 1 0 1 1 0 -> 1 1 2 3 3).
// The sparse aggregator uses it to route each product to its accumulator.
//
// Structure: a Hillis-Steele (Kogge-Stone style) scan of log2(N) levels of
// adders, purely combinational. The paper names a "parallel prefix sum unit";
// the choice of scan network is this design's.
module prefix_sum #(
  parameter int unsigned N  = 96,                 // bitmap width = unit slice C
  parameter int unsigned CW = $clog2(N + 1)       // width of one count
) (
  input  logic [N-1:0]          bitmap,
  output logic [N-1:0][CW-1:0]  sum
);
  localparam int unsigned LEVELS = $clog2(N);

  logic [LEVELS:0][N-1:0][CW-1:0] lvl;

  always_comb begin
    for (int i = 0; i < N; i++) lvl[0][i] = CW'(bitmap[i]);
    for (int l = 0; l < LEVELS; l++) begin
      for (int i = 0; i < N; i++) begin
        if (i >= (1 << l)) lvl[l+1][i] = lvl[l][i] + lvl[l][i - (1 << l)];
        else               lvl[l+1][i] = lvl[l][i];
      end
    end
    sum = lvl[LEVELS];
  end
endmodule
