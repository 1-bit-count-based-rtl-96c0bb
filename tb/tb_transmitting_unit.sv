// Testbench for transmitting_unit (25 elements, 4 flits of 128 bits).
//
// Each round loads a random window (inputs, weights, bias) and, in sort
// mode, a random permutation as sorted indices a few cycles later; bypass
// rounds send no indices. The testbench packs the expected flits itself:
// sorted position p at flit p mod 4, slot p div 4, inputs in bits [63:0],
// weights in [127:64], bias in the top byte of flit 0, zero elsewhere.
// It checks the four flits, that they come on consecutive cycles, the
// start latency (first flit seen 3 clock edges after the edge that
// completes the load), and the ready flag.
module tb_transmitting_unit;
  localparam int N = 25, F = 4, LW = 128;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic bypass = 0, data_load = 0, idx_load = 0;
  logic [N-1:0][7:0] in_data, wgt_data;
  logic [7:0] bias;
  logic [N-1:0][4:0] sorted_idx;
  logic ready, link_valid;
  logic [LW-1:0] link_flit;

  transmitting_unit dut (.clk, .rst_n, .bypass, .data_load, .in_data, .wgt_data,
                         .bias, .idx_load, .sorted_idx, .ready, .link_valid, .link_flit);

  always #5 clk = ~clk;

  int cyc = 0, last_load = 0;
  logic [LW-1:0] got[$];
  int got_cyc[$];
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n && (idx_load || (data_load && bypass))) last_load <= cyc;
    if (rst_n && link_valid) begin
      got.push_back(link_flit);
      got_cyc.push_back(cyc);
    end
  end

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int perm[N];
    logic [LW-1:0] exp_flit;
    logic [N-1:0][7:0] sv_in, sv_w;
    logic [7:0] sv_b;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 200; t++) begin
      bypass = (t % 3 == 2);
      for (int i = 0; i < N; i++) begin
        in_data[i]  = 8'($urandom);
        wgt_data[i] = 8'($urandom);
        perm[i]     = i;
      end
      bias = 8'($urandom);
      perm.shuffle();
      checks++;
      if (!ready) begin failures++; $display("FAIL not ready at round %0d", t); end
      sv_in = in_data; sv_w = wgt_data; sv_b = bias;
      data_load = 1'b1;
      @(negedge clk);
      data_load = 1'b0;
      in_data = '0; wgt_data = '0; bias = '0;   // buffer must hold the data
      checks++;
      if (ready) begin failures++; $display("FAIL ready while holding data"); end
      if (!bypass) begin
        repeat ($urandom_range(0, 3)) @(negedge clk);
        for (int p = 0; p < N; p++) sorted_idx[p] = 5'(perm[p]);
        idx_load = 1'b1;
        @(negedge clk);
        idx_load = 1'b0;
        sorted_idx = '0;
      end
      repeat (F + 4) @(negedge clk);
      checks++;
      if (got.size() != F) begin
        failures++;
        $display("FAIL round %0d: %0d flits", t, got.size());
      end else begin
        checks++;
        if (got_cyc[0] - last_load != 3) begin
          failures++;
          $display("FAIL start latency %0d", got_cyc[0] - last_load);
        end
        checks++;
        if (got_cyc[F-1] - got_cyc[0] != F - 1) begin
          failures++;
          $display("FAIL flits not consecutive");
        end
        for (int f = 0; f < F; f++) begin
          exp_flit = '0;
          for (int sl = 0; sl < 8; sl++) begin
            automatic int p = sl * F + f;
            if (p < N) begin
              automatic int src = bypass ? p : perm[p];
              exp_flit[sl*8 +: 8]      = sv_in[src];
              exp_flit[64 + sl*8 +: 8] = sv_w[src];
            end
          end
          if (f == 0) exp_flit[127:120] = sv_b;
          checks++;
          if (got[f] !== exp_flit) begin
            failures++;
            $display("FAIL round %0d flit %0d\n got %h\n exp %h", t, f, got[f], exp_flit);
          end
        end
      end
      got.delete();
      got_cyc.delete();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
