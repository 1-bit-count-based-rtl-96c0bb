// Testbench for prefix_sum: the architecture example (counts 1 2 2 1 ->
// starts 0 1 3 5), the all-zero window of the waveform example (counts
// 25 0 0 0 -> starts 0 25 25 25), and random histograms summing to at most
// 25, against a running sum in the testbench. An 8-bucket instance checks
// the deeper scan.
module tb_prefix_sum;
  int checks = 0, failures = 0;
  logic [3:0][4:0] count, start;
  logic [7:0][5:0] count8, start8;

  prefix_sum dut (.count(count), .start(start));
  prefix_sum #(.K(8), .CNT_W(6)) dut8 (.count(count8), .start(start8));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check4();
    automatic int run = 0;
    #1;
    for (int b = 0; b < 4; b++) begin
      checks++;
      if (int'(start[b]) != run) begin
        failures++;
        $display("FAIL bucket %0d start=%0d exp=%0d", b, start[b], run);
      end
      run += count[b];
    end
  endtask

  initial begin
    count = {5'd1, 5'd2, 5'd2, 5'd1};
    check4();
    checks++;
    if (start != {5'd5, 5'd3, 5'd1, 5'd0}) begin
      failures++;
      $display("FAIL example starts %p", start);
    end
    count = {5'd0, 5'd0, 5'd0, 5'd25};
    check4();
    for (int t = 0; t < 500; t++) begin
      automatic int left = 25, run = 0;
      for (int b = 0; b < 4; b++) begin
        count[b] = 5'($urandom_range(0, left));
        left -= count[b];
      end
      check4();
      left = 49;
      for (int b = 0; b < 8; b++) begin
        count8[b] = 6'($urandom_range(0, left));
        left -= count8[b];
      end
      #1;
      for (int b = 0; b < 8; b++) begin
        checks++;
        if (int'(start8[b]) != run) begin
          failures++;
          $display("FAIL k=8 bucket %0d start=%0d exp=%0d", b, start8[b], run);
        end
        run += count8[b];
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
