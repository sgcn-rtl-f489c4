// systolic_pe: one processing element of the output-stationary systolic
// array of the combination engine.
//
// The PE keeps one output value in `acc`. `load` presets it (the array loads
// the residual S^l here, so the residual addition costs nothing); while `en`
// is high it adds a_in * w_in (Q16.16) and passes a_in to the right and w_in
// downwards with one cycle of delay; while `shift` is high it takes the
// accumulator of its left neighbour, which moves the finished row out to the
// right edge one value per cycle. Priority: load, then shift, then en.
module systolic_pe
  import sgcn_pkg::*;
(
  input  logic   clk,
  input  logic   rst_n,
  input  logic   load,
  input  word_t  load_val,
  input  logic   en,
  input  logic   shift,
  input  word_t  a_in,
  input  word_t  w_in,
  input  word_t  acc_left,
  output word_t  a_out,
  output word_t  w_out,
  output word_t  acc
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc <= '0; a_out <= '0; w_out <= '0;
    end else begin
      if (load)       acc <= load_val;
      else if (shift) acc <= acc_left;
      else if (en)    acc <= acc + fx_mul(a_in, w_in);
      if (en) begin
        a_out <= a_in;
        w_out <= w_in;
      end
    end
  end
endmodule
