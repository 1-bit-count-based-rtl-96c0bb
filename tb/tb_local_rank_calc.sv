// Testbench for local_rank_calc: the architecture example (buckets
// 1 0 3 2 1 2 -> ranks 0 0 0 0 1 1) and random 25-element bucket vectors;
// the expected rank of element i counts earlier elements with the same
// bucket.
module tb_local_rank_calc;
  localparam int N = 25;
  int checks = 0, failures = 0;
  logic [N-1:0][1:0] bucket;
  logic [N-1:0][4:0] rank;

  local_rank_calc dut (.bucket(bucket), .rank(rank));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int ex_b[6] = '{1, 0, 3, 2, 1, 2};
    int ex_r[6] = '{0, 0, 0, 0, 1, 1};
    for (int t = 0; t < 400; t++) begin
      automatic int seen[4] = '{0, 0, 0, 0};
      for (int i = 0; i < N; i++)
        bucket[i] = (t == 0 && i < 6) ? 2'(ex_b[i]) : 2'($urandom_range(0, 3));
      #1;
      for (int i = 0; i < N; i++) begin
        checks++;
        if (int'(rank[i]) != seen[bucket[i]]) begin
          failures++;
          $display("FAIL t=%0d i=%0d rank=%0d exp=%0d", t, i, rank[i], seen[bucket[i]]);
        end
        if (t == 0 && i < 6) begin
          checks++;
          if (int'(rank[i]) != ex_r[i]) failures++;
        end
        seen[bucket[i]]++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
