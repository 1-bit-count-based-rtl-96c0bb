// Link bit-transition workload: random packets over one 128-bit link.
//
// Each packet is a 5x5 window of 8-bit inputs with random weights and
// bias, sent as 4 flits. Two input sets are run: uniformly random bytes,
// and small signed values (-16..16), whose '1'-bit counts cluster near 0
// and 8 because of the two's-complement sign bits. The same packet stream goes through three
// sorting-unit + transmitting-unit chains: bypass (original order),
// approximate ordering (k = 4 buckets) and accurate ordering (k = 9, the
// exact '1'-bit count). For each chain the testbench counts the bit
// transitions between consecutive flits, input half and weight half
// separately, and prints them per flit for each input set. Checks: every
// chain sends 4 flits
// per packet, the input/weight pairing survives the reordering (the sum of
// input*weight over each chain equals that of the packets), and both
// orderings send fewer input-side transitions than the bypass chain.
module tb_bt_workload;
  localparam int N = 25, F = 4, LW = 128, PACKETS = 10000;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic load = 0;
  logic [N-1:0][7:0] in_data, wgt_data;
  logic [7:0] bias;

  logic [2:0]            v_psu;
  logic [2:0][N-1:0][4:0] idx;
  logic [2:0][3:0]       tag_unused;
  logic [2:0]            ready, link_valid;
  logic [2:0][LW-1:0]    link_flit;

  pop_sort_unit #(.K(4)) u_app (.clk, .rst_n, .valid_in(load), .data_in(in_data), .tag_in(4'd0),
                                .valid_out(v_psu[1]), .sorted_idx(idx[1]), .tag_out(tag_unused[1]));
  pop_sort_unit #(.K(9)) u_acc (.clk, .rst_n, .valid_in(load), .data_in(in_data), .tag_in(4'd0),
                                .valid_out(v_psu[2]), .sorted_idx(idx[2]), .tag_out(tag_unused[2]));
  assign v_psu[0] = 1'b0;
  assign idx[0] = '0;
  assign tag_unused[0] = '0;

  for (genvar c = 0; c < 3; c++) begin : g_chain
    transmitting_unit u_tu (.clk, .rst_n, .bypass(c == 0), .data_load(load),
                            .in_data, .wgt_data, .bias, .idx_load(v_psu[c]),
                            .sorted_idx(idx[c]), .ready(ready[c]),
                            .link_valid(link_valid[c]), .link_flit(link_flit[c]));
  end

  always #5 clk = ~clk;

  logic [LW-1:0] prev[3];
  longint bt_in[3], bt_w[3], flits[3], dot[3], dot_ref = 0;
  always @(posedge clk) if (rst_n)
    for (int c = 0; c < 3; c++)
      if (link_valid[c]) begin
        bt_in[c] += $countones(link_flit[c][63:0] ^ prev[c][63:0]);
        bt_w[c]  += $countones(link_flit[c][127:64] ^ prev[c][127:64]);
        flits[c] += 1;
        for (int s = 0; s < 8; s++)
          dot[c] += longint'($signed(link_flit[c][s*8 +: 8])) *
                    longint'($signed(link_flit[c][64 + s*8 +: 8]));
        prev[c] = link_flit[c];
      end

  initial begin
    #50000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  string name[3] = '{"bypass", "APP k=4", "ACC k=9"};

  task automatic run(input bit small_vals, input string label);
    for (int c = 0; c < 3; c++) begin
      bt_in[c] = 0; bt_w[c] = 0; flits[c] = 0; dot[c] = 0;
    end
    dot_ref = 0;
    for (int t = 0; t < PACKETS; t++) begin
      for (int i = 0; i < N; i++) begin
        in_data[i]  = small_vals ? 8'(int'($urandom_range(0, 32)) - 16) : 8'($urandom);
        wgt_data[i] = 8'($urandom);
        dot_ref += longint'($signed(in_data[i])) * longint'($signed(wgt_data[i]));
      end
      bias = 8'($urandom);
      load = 1'b1;
      @(negedge clk);
      load = 1'b0;
      repeat (F + 4) @(negedge clk);
    end
    repeat (10) @(negedge clk);
    $display("%s inputs:", label);
    for (int c = 0; c < 3; c++) begin
      $display("  %-8s BT per flit: input %.3f weight %.3f overall %.3f (reduction %.2f%%)",
               name[c], real'(bt_in[c]) / flits[c], real'(bt_w[c]) / flits[c],
               real'(bt_in[c] + bt_w[c]) / flits[c],
               100.0 * (1.0 - real'(bt_in[c] + bt_w[c]) / real'(bt_in[0] + bt_w[0])));
      checks++;
      if (flits[c] != longint'(F) * PACKETS) begin
        failures++;
        $display("FAIL chain %0d sent %0d flits", c, flits[c]);
      end
      checks++;
      if (dot[c] != dot_ref) begin
        failures++;
        $display("FAIL chain %0d broke input/weight pairing", c);
      end
    end
    checks++;
    if (!(bt_in[1] < bt_in[0] && bt_in[2] < bt_in[0])) begin
      failures++;
      $display("FAIL ordering did not reduce input-side transitions");
    end
  endtask

  initial begin
    for (int c = 0; c < 3; c++) prev[c] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    run(1'b0, "uniform random");
    run(1'b1, "small signed (-16..16)");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
