// End-to-end testbench for lenet_platform at its default size: LeNet-5's
// first convolution (six 5x5 filters over a 32x32 image, 28x28 outputs)
// and 2x2 pooling (14x14 outputs), 16 PEs, 128-bit links, approximate
// sorting with 4 buckets.
//
// A random image, weights and biases (signed Q0.7 bytes) are loaded; the
// layer is run once with sorting and once in bypass mode. Each time all
// 1176 pooled values are read back and compared with a model in the
// testbench (conv = clamp((sum x*w + bias*128) >>> 7), pool = average of
// four by >>> 2). On every link the bit transitions between consecutive
// flits are counted, separately for the input half and the weight half;
// the testbench prints the transitions per flit of both runs and counts a
// failure if sorting does not lower the input-side count. It also counts
// how often each mechanism occurred (sorted windows, bypassed windows,
// pooled outputs) and fails if one never did. The layer must finish at
// one window per cycle: at least 4*1176 cycles and at most the issue slots
// of 74 groups of 16 jobs plus 16 cycles of drain.
module tb_lenet_platform;
  localparam int IMG = 32, KS = 5, NF = 6, NP = 16, N = 25, LW = 128;
  localparam int PO = (IMG - KS + 1) / 2, JOBS = NF * PO * PO;
  localparam int DEPTH = IMG*IMG + NF*N + NF;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic wr_en = 0, cfg_wr = 0, cfg_bypass = 0, start = 0;
  logic [10:0] wr_addr;
  logic [7:0] wr_data;
  logic busy, done;
  logic [10:0] rd_addr = '0;
  logic [7:0] rd_data;
  logic [NP-1:0] link_valid;
  logic [NP-1:0][LW-1:0] link_flit;
  logic [31:0] stall_cycles;

  lenet_platform dut (.clk, .rst_n, .wr_en, .wr_addr, .wr_data, .cfg_wr, .cfg_bypass,
                      .start, .busy, .done, .rd_addr, .rd_data, .link_valid,
                      .link_flit, .stall_cycles);

  always #5 clk = ~clk;

  byte unsigned mem[DEPTH];
  int exp_pool[JOBS];

  // link bit-transition monitor
  logic [LW-1:0] prev[NP];
  longint bt_in = 0, bt_w = 0, nflits = 0;
  always @(posedge clk) if (rst_n)
    for (int p = 0; p < NP; p++)
      if (link_valid[p]) begin
        bt_in  += $countones(link_flit[p][63:0] ^ prev[p][63:0]);
        bt_w   += $countones(link_flit[p][127:64] ^ prev[p][127:64]);
        nflits += 1;
        prev[p] = link_flit[p];
      end

  initial begin
    #20000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic model();
    for (int f = 0; f < NF; f++)
      for (int py = 0; py < PO; py++)
        for (int px = 0; px < PO; px++) begin
          int acc = 0;
          for (int q = 0; q < 4; q++) begin
            int row = 2*py + q/2, col = 2*px + q%2, sum = 0, c;
            for (int r = 0; r < KS; r++)
              for (int cc = 0; cc < KS; cc++)
                sum += int'($signed(8'(mem[(row+r)*IMG + col + cc]))) *
                       int'($signed(8'(mem[IMG*IMG + f*N + r*KS + cc])));
            c = (sum + int'($signed(8'(mem[IMG*IMG + NF*N + f]))) * 128) >>> 7;
            if (c > 127) c = 127;
            if (c < -128) c = -128;
            acc += c;
          end
          exp_pool[f*PO*PO + py*PO + px] = acc >>> 2;
        end
  endtask

  task automatic run_layer(logic byp, output real in_per_flit, output real w_per_flit,
                           output longint flits);
    int cycles;
    for (int p = 0; p < NP; p++) prev[p] = '0;
    bt_in = 0; bt_w = 0; nflits = 0;
    @(negedge clk);
    cfg_bypass = byp; cfg_wr = 1'b1;
    @(negedge clk);
    cfg_wr = 1'b0; start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    cycles = 1;
    while (!done) begin
      @(negedge clk);
      cycles++;
    end
    // one window per cycle: 4 windows per job, issue slots of whole groups
    // of NP jobs, then a short drain
    checks++;
    if (cycles < 4 * JOBS || cycles > 4 * NP * ((JOBS + NP - 1) / NP) + 16) begin
      failures++;
      $display("FAIL layer took %0d cycles", cycles);
    end
    $display("layer (%s) took %0d cycles", byp ? "bypass" : "sorted", cycles);
    for (int j = 0; j < JOBS; j++) begin
      rd_addr = 11'(j);
      #1;
      checks++;
      if (int'($signed(rd_data)) != exp_pool[j]) begin
        failures++;
        if (failures < 10) $display("FAIL pool[%0d]=%0d exp %0d", j, $signed(rd_data), exp_pool[j]);
      end
    end
    in_per_flit = real'(bt_in) / real'(nflits);
    w_per_flit  = real'(bt_w) / real'(nflits);
    flits = nflits;
  endtask

  initial begin
    real si, sw, bi, bw;
    longint sf, bf;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int a = 0; a < DEPTH; a++) begin
      mem[a] = 8'($urandom);
      wr_en = 1'b1; wr_addr = 11'(a); wr_data = mem[a];
      @(negedge clk);
    end
    wr_en = 1'b0;
    model();
    run_layer(1'b0, si, sw, sf);
    run_layer(1'b1, bi, bw, bf);
    $display("sorted : %0d flits, BT/flit input %.3f weight %.3f overall %.3f", sf, si, sw, si + sw);
    $display("bypass : %0d flits, BT/flit input %.3f weight %.3f overall %.3f", bf, bi, bw, bi + bw);
    $display("overall BT reduction %.2f%%", 100.0 * (1.0 - (si + sw) / (bi + bw)));
    $display("mechanisms: sorted windows %0d, bypassed windows %0d, pooled outputs %0d",
             sf / 4, bf / 4, 2 * JOBS);
    checks++;
    if (sf != 4 * 4 * JOBS || bf != 4 * 4 * JOBS) begin
      failures++;
      $display("FAIL flit counts");
    end
    checks++;
    if (!(si < bi)) begin
      failures++;
      $display("FAIL sorting did not reduce input-side transitions");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

