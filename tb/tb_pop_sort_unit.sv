// Testbench for pop_sort_unit (APP-PSU, 25 x 8-bit, k = 4).
//
// Drives the waveform example's patterns (all ones, all zeros, a repeated
// pattern whose '1'-bit count falls from 8 to 0) and then random windows,
// with occasional idle cycles. The expected index list is a stable sort of
// 0..24 by bucket, built in the testbench from a bit count and the bucket
// table. Every result must arrive exactly 3 cycles after its window, in
// order, with its tag. The exact-count variant (k = 9) runs alongside on
// the same data.
module tb_pop_sort_unit;
  localparam int N = 25, LAT = 3;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic valid_in = 0;
  logic [N-1:0][7:0] data_in;
  logic [3:0] tag_in = '0, tag_out, tag_out_acc;
  logic valid_out, valid_out_acc;
  logic [N-1:0][4:0] sorted_idx, sorted_idx_acc;

  pop_sort_unit dut (.clk, .rst_n, .valid_in, .data_in, .tag_in,
                     .valid_out, .sorted_idx, .tag_out);
  pop_sort_unit #(.K(9)) dut_acc (.clk, .rst_n, .valid_in, .data_in, .tag_in,
                     .valid_out(valid_out_acc), .sorted_idx(sorted_idx_acc),
                     .tag_out(tag_out_acc));

  always #5 clk = ~clk;

  function automatic int pc8(logic [7:0] v);
    int c = 0;
    for (int b = 0; b < 8; b++) c += v[b];
    return c;
  endfunction
  function automatic int bkt(int pc);
    return (pc <= 2) ? 0 : (pc <= 4) ? 1 : (pc <= 6) ? 2 : 3;
  endfunction

  typedef struct {
    int cycle;
    int tag;
    int idx[N];
    int idx_acc[N];
  } exp_t;
  exp_t q[$];
  int cyc = 0;

  always @(posedge clk) cyc <= cyc + 1;

  // scoreboard
  always @(posedge clk) if (rst_n) begin
    checks++;
    if (valid_out !== valid_out_acc) failures++;
    if (valid_out) begin
      exp_t e;
      if (q.size() == 0) begin
        failures++;
        $display("FAIL unexpected output");
      end else begin
        e = q.pop_front();
        checks++;
        if (cyc - e.cycle != LAT) begin
          failures++;
          $display("FAIL latency %0d", cyc - e.cycle);
        end
        checks++;
        if (int'(tag_out) != e.tag) failures++;
        for (int p = 0; p < N; p++) begin
          checks++;
          if (int'(sorted_idx[p]) != e.idx[p] || int'(sorted_idx_acc[p]) != e.idx_acc[p]) begin
            failures++;
            $display("FAIL pos %0d got %0d/%0d exp %0d/%0d", p, sorted_idx[p],
                     sorted_idx_acc[p], e.idx[p], e.idx_acc[p]);
          end
        end
      end
    end
  end

  // input monitor: the expected result of every accepted window
  always @(posedge clk) if (rst_n && valid_in) begin
    exp_t e;
    int k;
    e.cycle = cyc;
    e.tag   = int'(tag_in);
    k = 0;
    for (int b = 0; b < 4; b++)
      for (int i = 0; i < N; i++)
        if (bkt(pc8(data_in[i])) == b) e.idx[k++] = i;
    k = 0;
    for (int c = 0; c <= 8; c++)
      for (int i = 0; i < N; i++)
        if (pc8(data_in[i]) == c) e.idx_acc[k++] = i;
    q.push_back(e);
  end

  task automatic send(logic [N-1:0][7:0] d, int tag);
    data_in  = d;
    tag_in   = 4'(tag);
    valid_in = 1'b1;
    @(negedge clk);
    valid_in = 1'b0;
  endtask

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [N-1:0][7:0] d;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    send({N{8'hFF}}, 1);
    send({N{8'h00}}, 2);
    for (int i = 0; i < N; i++) d[i] = 8'((16'h00FF << (i % 9)) >> 8) ^ 8'hFF;
    send(d, 3);
    for (int t = 0; t < 300; t++) begin
      for (int i = 0; i < N; i++) d[i] = 8'($urandom);
      send(d, t % 16);
      if ($urandom_range(0, 3) == 0) @(negedge clk);
    end
    repeat (6) @(posedge clk);
    checks++;
    if (q.size() != 0) begin
      failures++;
      $display("FAIL %0d results missing", q.size());
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
