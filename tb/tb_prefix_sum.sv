// tb_prefix_sum: checks the parallel prefix sum against a serial count for
// the paper's example (1 0 1 1 0 -> 1 1 2 3 3), corner cases and random
// 96-bit bitmaps.
module tb_prefix_sum;
  localparam int N = 96;
  localparam int CW = $clog2(N + 1);
  logic [N-1:0] bm;
  logic [N-1:0][CW-1:0] sum;
  int checks = 0, failures = 0;

  prefix_sum #(.N(N)) dut (.bitmap(bm), .sum(sum));

  task automatic check_one();
    int run;
    #1;
    run = 0;
    for (int i = 0; i < N; i++) begin
      run += bm[i];
      checks++;
      if (int'(sum[i]) != run) begin
        failures++;
        if (failures < 5) $display("mismatch bit %0d: got %0d want %0d", i, sum[i], run);
      end
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bm = '0; bm[0] = 1; bm[2] = 1; bm[3] = 1;         // 1 0 1 1 0 ...
    #1;
    checks++; if (!(sum[0] == 1 && sum[1] == 1 && sum[2] == 2 && sum[3] == 3 && sum[4] == 3)) failures++;
    bm = '0;  check_one();
    bm = '1;  check_one();
    for (int t = 0; t < 200; t++) begin
      for (int w = 0; w < N; w += 32) bm[w +: 32] = $urandom();
      check_one();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
