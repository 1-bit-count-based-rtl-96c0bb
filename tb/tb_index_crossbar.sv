// Testbench for index_crossbar: the architecture example (addresses
// 1 0 5 3 2 4 ... -> sorted indices 1 0 4 3 5 2 ...) and random
// permutations of 0..24; expected sorted_idx[addr[i]] = i.
module tb_index_crossbar;
  localparam int N = 25;
  int checks = 0, failures = 0;
  logic [N-1:0][4:0] addr, sorted_idx;

  index_crossbar dut (.addr(addr), .sorted_idx(sorted_idx));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int perm[N];
    int ex_a[6] = '{1, 0, 5, 3, 2, 4};
    int ex_s[6] = '{1, 0, 4, 3, 5, 2};
    for (int t = 0; t < 400; t++) begin
      for (int i = 0; i < N; i++) perm[i] = i;
      if (t == 0) for (int i = 0; i < 6; i++) perm[i] = ex_a[i];
      else perm.shuffle();
      for (int i = 0; i < N; i++) addr[i] = 5'(perm[i]);
      #1;
      for (int i = 0; i < N; i++) begin
        checks++;
        if (int'(sorted_idx[perm[i]]) != i) begin
          failures++;
          $display("FAIL t=%0d pos %0d holds %0d exp %0d", t, perm[i], sorted_idx[perm[i]], i);
        end
      end
      if (t == 0) for (int p = 0; p < 6; p++) begin
        checks++;
        if (int'(sorted_idx[p]) != ex_s[p]) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
