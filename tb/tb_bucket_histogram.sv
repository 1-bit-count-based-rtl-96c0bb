// Testbench for bucket_histogram: random bucket vectors (25 elements,
// 4 buckets) plus the all-same corner cases; the expected histogram is
// counted element by element in the testbench.
module tb_bucket_histogram;
  localparam int N = 25, K = 4;
  int checks = 0, failures = 0;
  logic [N-1:0][1:0] bucket;
  logic [K-1:0][4:0] count;

  bucket_histogram dut (.bucket(bucket), .count(count));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 500; t++) begin
      int exp_cnt[K];
      for (int b = 0; b < K; b++) exp_cnt[b] = 0;
      for (int i = 0; i < N; i++) begin
        if (t < K) bucket[i] = 2'(t);
        else       bucket[i] = 2'($urandom_range(0, K - 1));
        exp_cnt[bucket[i]]++;
      end
      #1;
      for (int b = 0; b < K; b++) begin
        checks++;
        if (int'(count[b]) != exp_cnt[b]) begin
          failures++;
          $display("FAIL t=%0d bucket %0d count=%0d exp=%0d", t, b, count[b], exp_cnt[b]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
