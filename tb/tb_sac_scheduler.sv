// tb_sac_scheduler: instantiates the scheduler for all 8 engines over a row
// range that ends in a partial strip, and checks that engine e receives the
// strips e, e+8, e+16, ... of 32 rows (the last one shortened), that the
// strips of all engines tile the range exactly once, and that `done` rises
// when an engine has none left. A second range checks the restart.
module tb_sac_scheduler;
  import sgcn_pkg::*;
  localparam int E = 8, H = 32;
  logic clk = 0, rst_n = 0, start = 0;
  logic [31:0] lo, hi;
  logic [E-1:0] sv, sr, dn;
  logic [31:0] sb [E];
  logic [5:0]  rows [E];
  int checks = 0, failures = 0;
  int covered [int];

  always #5 clk = ~clk;

  for (genvar e = 0; e < E; e++) begin : g
    sac_scheduler #(.NUM_ENGINES(E), .STRIP_H(H)) dut (.clk(clk), .rst_n(rst_n),
      .engine_id(8'(e)), .start(start), .row_lo(lo), .row_hi(hi), .strip_valid(sv[e]),
      .strip_ready(sr[e]), .strip_base(sb[e]), .strip_rows(rows[e]), .done(dn[e]));
  end

  always @(posedge clk) sr <= E'($urandom());

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_range(input int l, input int h);
    int k [E];
    covered.delete();
    @(negedge clk); lo = l; hi = h; start = 1; @(negedge clk); start = 0;
    foreach (k[e]) k[e] = 0;
    while (dn != '1) begin
      @(posedge clk);
      for (int e = 0; e < E; e++) if (sv[e] && sr[e]) begin
        int want_base, want_rows;
        want_base = l + (e + k[e] * E) * H;
        want_rows = (h - want_base < H) ? h - want_base : H;
        checks++;
        if (sb[e] != want_base || rows[e] != want_rows) begin
          failures++; $display("engine %0d strip %0d: base %0d rows %0d", e, k[e], sb[e], rows[e]);
        end
        for (int r = 0; r < rows[e]; r++) covered[sb[e] + r]++;
        k[e]++;
      end
    end
    checks++;
    if (covered.num() != h - l) begin failures++; $display("covered %0d of %0d rows", covered.num(), h - l); end
    foreach (covered[r]) if (covered[r] != 1) begin failures++; $display("row %0d twice", r); break; end
  endtask

  initial begin
    lo = 0; hi = 0; start = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    run_range(0, 1000);
    run_range(4096, 4096 + 700);
    run_range(10, 40);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
