// Testbench for data_allocation_unit at a reduced size: 12x12 image,
// two 5x5 filters (32 pooling jobs), 3 PEs, so that the last group is
// partial and the scheduler has to stall on busy transmitting units.
//
// The testbench plays the PEs: it collects the 4 flits of every window on
// each link, works out which job and quadrant the window must be (job j
// goes to PE j mod 3, quadrants in order), rebuilds that window from its
// own copy of the memory, orders it itself (stable sort by the bucket of
// the '1'-bit count, or the original order in bypass mode) and compares
// every byte of every flit. After the fourth window of a job it returns a
// token value for that job on the PE's pool port; at the end the pool
// buffer must hold every job's token at the job's address. Both sort and
// bypass mode are run; stalls must occur.
module tb_data_allocation_unit;
  localparam int IMG = 12, KS = 5, NF = 2, NP = 3, N = 25, F = 4, LW = 128;
  localparam int PO = (IMG - KS + 1) / 2, JOBS = NF * PO * PO;
  localparam int DEPTH = IMG*IMG + NF*N + NF;
  localparam int MEM_AW = $clog2(DEPTH), POOL_AW = $clog2(JOBS);

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic wr_en = 0, cfg_wr = 0, cfg_bypass = 0, start = 0;
  logic [MEM_AW-1:0] wr_addr;
  logic [7:0] wr_data;
  logic busy, done;
  logic [POOL_AW-1:0] rd_addr = '0;
  logic [7:0] rd_data;
  logic [NP-1:0] link_valid;
  logic [NP-1:0][LW-1:0] link_flit;
  logic [NP-1:0] pe_pool_valid = '0;
  logic [NP-1:0][7:0] pe_pool_data = '0;
  logic [31:0] stall_cycles;

  data_allocation_unit #(.IMG(IMG), .KS(KS), .NF(NF), .NP(NP)) dut (
    .clk, .rst_n, .wr_en, .wr_addr, .wr_data, .cfg_wr, .cfg_bypass, .start,
    .busy, .done, .rd_addr, .rd_data, .link_valid, .link_flit,
    .pe_pool_valid, .pe_pool_data, .stall_cycles);

  always #5 clk = ~clk;

  byte unsigned mem[DEPTH];
  logic mode_bypass = 0;
  int sorted_windows = 0, bypass_windows = 0, total_stalls = 0;

  function automatic int bkt(logic [7:0] v);
    int c = 0;
    for (int b = 0; b < 8; b++) c += v[b];
    return (c <= 2) ? 0 : (c <= 4) ? 1 : (c <= 6) ? 2 : 3;
  endfunction
  function automatic logic [7:0] token(int j);
    return 8'(j * 37 + 11);
  endfunction

  // per-PE receive state
  int nfl[NP], nwin[NP];
  logic [LW-1:0] fl[NP][F];
  int pool_due[NP];   // job to return next cycle, -1 if none

  always @(posedge clk) begin
    pe_pool_valid <= '0;
    for (int p = 0; p < NP; p++) begin
      if (pool_due[p] >= 0) begin
        pe_pool_valid[p] <= 1'b1;
        pe_pool_data[p]  <= token(pool_due[p]);
        pool_due[p] = -1;
      end
      if (rst_n && link_valid[p]) begin
        fl[p][nfl[p]] = link_flit[p];
        nfl[p]++;
        if (nfl[p] == F) begin
          automatic int j = (nwin[p] / 4) * NP + p, q = nwin[p] % 4;
          automatic int f = j / (PO*PO), py = (j / PO) % PO, px = j % PO;
          automatic int row = 2*py + q/2, col = 2*px + q%2;
          automatic int x[N], w[N], ord[N], k = 0, b;
          for (int r = 0; r < KS; r++)
            for (int c = 0; c < KS; c++) begin
              x[r*KS+c] = mem[(row + r)*IMG + col + c];
              w[r*KS+c] = mem[IMG*IMG + f*N + r*KS + c];
            end
          b = mem[IMG*IMG + NF*N + f];
          if (mode_bypass) for (int i = 0; i < N; i++) ord[i] = i;
          else for (int bb = 0; bb < 4; bb++)
            for (int i = 0; i < N; i++) if (bkt(8'(x[i])) == bb) ord[k++] = i;
          for (int ff = 0; ff < F; ff++)
            for (int s = 0; s < 8; s++) begin
              automatic int pos = s*F + ff;
              automatic int ei = (pos < N) ? x[ord[pos]] : 0;
              automatic int ew = (pos < N) ? w[ord[pos]] : ((ff == 0 && s == 7) ? b : 0);
              checks++;
              if (int'(fl[p][ff][s*8 +: 8]) != ei || int'(fl[p][ff][64 + s*8 +: 8]) != ew) begin
                failures++;
                if (failures < 10) $display("FAIL pe %0d job %0d q %0d flit %0d slot %0d", p, j, q, ff, s);
              end
            end
          if (mode_bypass) bypass_windows++; else sorted_windows++;
          nfl[p] = 0;
          nwin[p]++;
          if (q == 3) pool_due[p] = j;
        end
      end
    end
  end

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_layer(logic byp);
    for (int p = 0; p < NP; p++) begin nfl[p] = 0; nwin[p] = 0; pool_due[p] = -1; end
    @(negedge clk);
    mode_bypass = byp;
    cfg_bypass = byp; cfg_wr = 1'b1;
    @(negedge clk);
    cfg_wr = 1'b0;
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    while (!done) @(negedge clk);
    total_stalls += int'(stall_cycles);
    for (int j = 0; j < JOBS; j++) begin
      rd_addr = POOL_AW'(j);
      #1;
      checks++;
      if (rd_data != token(j)) begin
        failures++;
        $display("FAIL pool[%0d]=%02h exp %02h", j, rd_data, token(j));
      end
    end
    for (int p = 0; p < NP; p++) begin
      checks++;
      if (nwin[p] != 4 * ((JOBS - p + NP - 1) / NP)) begin
        failures++;
        $display("FAIL pe %0d got %0d windows", p, nwin[p]);
      end
    end
  endtask

  initial begin
    for (int p = 0; p < NP; p++) pool_due[p] = -1;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int a = 0; a < DEPTH; a++) begin
      mem[a] = 8'($urandom);
      wr_en = 1'b1; wr_addr = MEM_AW'(a); wr_data = mem[a];
      @(negedge clk);
    end
    wr_en = 1'b0;
    run_layer(1'b0);
    run_layer(1'b1);
    run_layer(1'b0);
    $display("sorted windows %0d, bypass windows %0d, stall cycles %0d",
             sorted_windows, bypass_windows, total_stalls);
    checks++;
    if (sorted_windows == 0 || bypass_windows == 0 || total_stalls == 0) begin
      failures++;
      $display("FAIL a mechanism never happened");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
