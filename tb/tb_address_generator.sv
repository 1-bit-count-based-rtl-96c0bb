// Testbench for address_generator: the architecture example (buckets
// 1 0 3 2 1 2, starts 0 1 3 5, ranks 0 0 0 0 1 1 -> addresses 1 0 5 3 2 4)
// and random inputs, expected address = start[bucket] + rank.
module tb_address_generator;
  localparam int N = 25;
  int checks = 0, failures = 0;
  logic [N-1:0][1:0] bucket;
  logic [3:0][4:0]   start;
  logic [N-1:0][4:0] rank, addr;

  address_generator dut (.bucket(bucket), .start(start), .rank(rank), .addr(addr));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int ex_b[6] = '{1, 0, 3, 2, 1, 2};
    int ex_r[6] = '{0, 0, 0, 0, 1, 1};
    int ex_a[6] = '{1, 0, 5, 3, 2, 4};
    bucket = '0; rank = '0;
    start = {5'd5, 5'd3, 5'd1, 5'd0};
    for (int i = 0; i < 6; i++) begin
      bucket[i] = 2'(ex_b[i]);
      rank[i]   = 5'(ex_r[i]);
    end
    #1;
    for (int i = 0; i < 6; i++) begin
      checks++;
      if (int'(addr[i]) != ex_a[i]) begin
        failures++;
        $display("FAIL example i=%0d addr=%0d exp=%0d", i, addr[i], ex_a[i]);
      end
    end
    for (int t = 0; t < 400; t++) begin
      for (int b = 0; b < 4; b++) start[b] = 5'($urandom_range(0, 12));
      for (int i = 0; i < N; i++) begin
        bucket[i] = 2'($urandom_range(0, 3));
        rank[i]   = 5'($urandom_range(0, 12));
      end
      #1;
      for (int i = 0; i < N; i++) begin
        checks++;
        if (int'(addr[i]) != int'(start[bucket[i]]) + int'(rank[i])) begin
          failures++;
          $display("FAIL t=%0d i=%0d addr=%0d", t, i, addr[i]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
