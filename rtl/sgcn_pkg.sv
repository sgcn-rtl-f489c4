// sgcn_pkg: shared constants, types and address arithmetic of the SGCN
// accelerator.
//
// Data are 32-bit two's-complement fixed point (features and weights alike);
// the binary point sits FRAC_BITS bits from the right. Memory is moved in
// 64-byte cachelines of sixteen 32-bit words; word 0 is bits [31:0].
//
// A feature row is stored as "sliced BEICSR" (bitmap-index embedded in-place
// CSR): the row is cut into unit slices of SLICE_C elements; each slice owns a
// fixed, cacheline-aligned region big enough for the dense slice plus its
// bitmap, so the address of (vertex, slice) is a multiplication and no row
// pointer is needed. Inside the region the first BM_WORDS words hold the
// bitmap (bit i of the bitmap <=> element i of the slice is non-zero, element
// 0 in bit 0 of word 0) and the non-zero values follow in element order.
// Only the lines that hold bitmap or values are read or written.
//
// Slice size (96), SIMD width (16), array size (32x32), engine counts (8),
// feature width (256) and cache geometry come from the paper; the fixed-point
// split and the memory map are this design's own choices.
package sgcn_pkg;

  localparam int unsigned DATA_W      = 32;   // fixed-point word
  localparam int unsigned FRAC_BITS   = 16;   // Q16.16, assumed
  localparam int unsigned LINE_BYTES  = 64;   // cacheline
  localparam int unsigned LINE_WORDS  = LINE_BYTES / 4;
  localparam int unsigned LINE_W      = LINE_BYTES * 8;
  localparam int unsigned ADDR_W      = 32;   // byte address
  localparam int unsigned VID_W       = 32;   // vertex id / CSR index

  typedef logic [DATA_W-1:0] word_t;
  typedef logic [LINE_W-1:0] line_t;
  typedef logic [ADDR_W-1:0] addr_t;

  // Fixed-point multiply: full product, arithmetic shift, keep the low word.
  function automatic word_t fx_mul(input word_t a, input word_t b);
    logic signed [2*DATA_W-1:0] p;
    p = $signed(a) * $signed(b);
    return word_t'(p >>> FRAC_BITS);
  endfunction

  // Words of bitmap at the head of a slice of c elements.
  function automatic int unsigned bm_words(input int unsigned c);
    return (c + DATA_W - 1) / DATA_W;
  endfunction

  // Cachelines reserved per slice (bitmap plus a dense slice, rounded up).
  function automatic int unsigned slice_lines(input int unsigned c);
    return (bm_words(c) + c + LINE_WORDS - 1) / LINE_WORDS;
  endfunction

  // Cachelines that actually hold data for a slice with nnz non-zeros.
  function automatic int unsigned used_lines(input int unsigned c, input int unsigned nnz);
    return (bm_words(c) + nnz + LINE_WORDS - 1) / LINE_WORDS;
  endfunction

endpackage
