// sac_scheduler: sparsity-aware cooperation strip order for one engine
// (SGCN paper, Sec. V.C, Fig. 11c).
//
// Instead of giving each engine one contiguous block of the rows of a
// topology tile, the engines take narrow strips of STRIP_H rows in turn:
// engine e works on strips e, e+E, e+2E, ... of the row range [row_lo,
// row_hi). All engines thus sweep the tile together, so the features they
// fetch overlap, and the shared cache sees nested working sets of several
// sizes ("small window" and "large window" in Fig. 11c) rather than one
// fixed-size window that either fits or thrashes.
//
// Interface: `start` (one cycle) loads the row range; the module then offers
// strips over valid/ready (`strip_base`, `strip_rows` <= STRIP_H, the last
// strip of a range may be shorter) and raises `done` when the range holds no
// further strip for this engine. The strip height 32 is the paper's; it also
// equals the systolic-array height, so one strip fills the combination
// engine once.
module sac_scheduler
  import sgcn_pkg::*;
#(
  parameter int unsigned NUM_ENGINES = 8,
  parameter int unsigned STRIP_H     = 32
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [7:0]        engine_id,
  input  logic              start,
  input  logic [VID_W-1:0]  row_lo,
  input  logic [VID_W-1:0]  row_hi,
  output logic              strip_valid,
  input  logic              strip_ready,
  output logic [VID_W-1:0]  strip_base,
  output logic [$clog2(STRIP_H+1)-1:0] strip_rows,
  output logic              done
);
  logic              active;
  logic [VID_W-1:0]  next_q, hi_q;
  logic [VID_W-1:0]  left;

  assign left        = hi_q - next_q;
  assign strip_valid = active && (next_q < hi_q);
  assign strip_base  = next_q;
  assign strip_rows  = (left >= STRIP_H) ? ($clog2(STRIP_H+1))'(STRIP_H)
                                         : ($clog2(STRIP_H+1))'(left);
  assign done        = active && !(next_q < hi_q);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active <= 1'b0; next_q <= '0; hi_q <= '0;
    end else if (start) begin
      active <= 1'b1;
      hi_q   <= row_hi;
      next_q <= row_lo + VID_W'(engine_id) * STRIP_H;
    end else if (strip_valid && strip_ready) begin
      // saturate instead of wrapping past the end of the range
      if (hi_q - next_q <= VID_W'(NUM_ENGINES * STRIP_H)) next_q <= hi_q;
      else next_q <= next_q + VID_W'(NUM_ENGINES * STRIP_H);
    end
  end
endmodule
