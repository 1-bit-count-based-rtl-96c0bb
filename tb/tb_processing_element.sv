// Testbench for processing_element (25-element windows, 4 flits each).
//
// Each job is four random windows (signed Q0.7 inputs, weights, bias);
// every window is sent in a random order of its element pairs, packed the
// way the transmitting unit packs them (position p at flit p mod 4, slot
// p div 4, bias in the top byte of flit 0). The expected pooled value is
// worked out in the testbench: conv = clamp((sum x*w + bias*128) >>> 7)
// to [-128,127], pool = (c0+c1+c2+c3) >>> 2. The latency from the last
// flit of the fourth window to pool_valid (4 clock edges as seen by the
// monitor) is checked as well.
module tb_processing_element;
  localparam int N = 25, F = 4, LW = 128;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic link_valid = 0;
  logic [LW-1:0] link_flit = '0;
  logic pool_valid;
  logic [7:0] pool_data;

  processing_element dut (.clk, .rst_n, .link_valid, .link_flit, .pool_valid, .pool_data);

  always #5 clk = ~clk;

  int cyc = 0, exp_q[$], outs = 0;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (pool_valid) begin
      outs++;
      checks++;
      if (exp_q.size() == 0) begin
        failures++;
        $display("FAIL unexpected pool output");
      end else begin
        automatic int e = exp_q.pop_front();
        if ($signed(pool_data) != e) begin
          failures++;
          $display("FAIL pool %0d exp %0d", $signed(pool_data), e);
        end
      end
      checks++;
      if (last_q.size() == 0 || cyc - last_q[0] != 4) begin
        failures++;
        $display("FAIL pool latency");
      end
      if (last_q.size() != 0) void'(last_q.pop_front());
    end
  end

  initial begin
    #500000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic send_window(output int conv);
    int x[N], w[N], perm[N], b, sum;
    logic [LW-1:0] fl;
    sum = 0;
    for (int i = 0; i < N; i++) begin
      x[i] = $signed(8'($urandom));
      w[i] = $signed(8'($urandom));
      sum += x[i] * w[i];
      perm[i] = i;
    end
    b = $signed(8'($urandom));
    perm.shuffle();
    conv = (sum + b * 128) >>> 7;
    if (conv > 127) conv = 127;
    if (conv < -128) conv = -128;
    for (int f = 0; f < F; f++) begin
      fl = '0;
      for (int s = 0; s < 8; s++)
        if (s * F + f < N) begin
          fl[s*8 +: 8]      = 8'(x[perm[s*F+f]]);
          fl[64 + s*8 +: 8] = 8'(w[perm[s*F+f]]);
        end
      if (f == 0) fl[127:120] = 8'(b);
      link_flit  = fl;
      link_valid = 1'b1;
      @(negedge clk);
    end
    link_valid = 1'b0;
    link_flit  = {8{16'hA5A5}};   // idle garbage must be ignored
  endtask

  // cycle of the last flit of every fourth window
  int nflit = 0, last_q[$];
  always @(posedge clk) if (link_valid) begin
    nflit++;
    if (nflit % (4 * F) == 0) last_q.push_back(cyc);
  end

  initial begin
    int c, acc;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int j = 0; j < 100; j++) begin
      acc = 0;
      for (int q = 0; q < 4; q++) begin
        send_window(c);
        acc += c;
        repeat ($urandom_range(0, 2)) @(negedge clk);
      end
      exp_q.push_back(acc >>> 2);
    end
    repeat (10) @(negedge clk);
    checks++;
    if (outs != 100) begin
      failures++;
      $display("FAIL %0d outputs", outs);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
