// 7x7-kernel configuration: a popcount-sorting unit and a transmitting
// unit sized for 49-element windows (7 flits of 128 bits per window).
//
// Random windows go into the PSU; its result, 3 cycles later, is loaded
// into the transmitting unit together with the window. The testbench
// orders each window itself (stable sort by the 4-bucket map of the
// '1'-bit count), packs the expected flits (position p at flit p mod 7,
// slot p div 7, bias in the top byte of flit 0) and compares all seven.
module tb_psu_7x7;
  localparam int N = 49, F = 7, LW = 128;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic valid_in = 0;
  logic [N-1:0][7:0] data_in, wgt_data;
  logic [7:0] bias;
  logic psu_valid, ready, link_valid;
  logic [N-1:0][5:0] sorted_idx;
  logic [3:0] tag_out;
  logic [LW-1:0] link_flit;

  pop_sort_unit #(.N(N)) u_psu (.clk, .rst_n, .valid_in, .data_in, .tag_in(4'd0),
                                .valid_out(psu_valid), .sorted_idx, .tag_out);
  transmitting_unit #(.N(N)) u_tu (.clk, .rst_n, .bypass(1'b0), .data_load(valid_in),
                                   .in_data(data_in), .wgt_data, .bias,
                                   .idx_load(psu_valid), .sorted_idx, .ready,
                                   .link_valid, .link_flit);

  always #5 clk = ~clk;

  function automatic int bkt(logic [7:0] v);
    int c = 0;
    for (int b = 0; b < 8; b++) c += v[b];
    return (c <= 2) ? 0 : (c <= 4) ? 1 : (c <= 6) ? 2 : 3;
  endfunction

  logic [LW-1:0] got[$];
  always @(posedge clk) if (rst_n && link_valid) got.push_back(link_flit);

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int ord[N], k;
    logic [LW-1:0] e;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 300; t++) begin
      for (int i = 0; i < N; i++) begin
        data_in[i]  = (t < 2) ? {8{t[0]}} : 8'($urandom);
        wgt_data[i] = 8'($urandom);
      end
      bias = 8'($urandom);
      k = 0;
      for (int b = 0; b < 4; b++)
        for (int i = 0; i < N; i++) if (bkt(data_in[i]) == b) ord[k++] = i;
      valid_in = 1'b1;
      @(negedge clk);
      valid_in = 1'b0;
      repeat (F + 6) @(negedge clk);
      checks++;
      if (got.size() != F) begin
        failures++;
        $display("FAIL window %0d: %0d flits", t, got.size());
      end else
        for (int f = 0; f < F; f++) begin
          e = '0;
          for (int s = 0; s < 8; s++)
            if (s * F + f < N) begin
              e[s*8 +: 8]      = data_in[ord[s*F + f]];
              e[64 + s*8 +: 8] = wgt_data[ord[s*F + f]];
            end
          if (f == 0) e[127:120] = bias;
          checks++;
          if (got[f] !== e) begin
            failures++;
            $display("FAIL window %0d flit %0d", t, f);
          end
        end
      got.delete();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
