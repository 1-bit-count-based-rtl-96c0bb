// Testbench for pool_buffer (16 write ports, 1176 entries): in each cycle
// a random subset of the ports writes random data to distinct random
// addresses; a model array in the testbench follows the writes, and the
// whole buffer is then read back through the read port and compared.
module tb_pool_buffer;
  localparam int NP = 16, DEPTH = 1176;
  int checks = 0, failures = 0;
  logic clk = 0;
  logic [NP-1:0] wr_valid = '0;
  logic [NP-1:0][10:0] wr_addr;
  logic [NP-1:0][7:0] wr_data;
  logic [10:0] rd_addr;
  logic [7:0] rd_data;
  byte unsigned model[DEPTH];

  pool_buffer dut (.clk, .wr_valid, .wr_addr, .wr_data, .rd_addr, .rd_data);

  always #5 clk = ~clk;

  initial begin
    #500000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int addrs[DEPTH];
    @(negedge clk);
    // first give every address a value, 16 at a time
    for (int a = 0; a < DEPTH; a += NP) begin
      for (int p = 0; p < NP; p++) begin
        wr_valid[p] = (a + p < DEPTH);
        wr_addr[p]  = 11'(a + p);
        wr_data[p]  = 8'($urandom);
        if (a + p < DEPTH) model[a + p] = wr_data[p];
      end
      @(negedge clk);
    end
    for (int i = 0; i < DEPTH; i++) addrs[i] = i;
    for (int t = 0; t < 300; t++) begin
      addrs.shuffle();
      for (int p = 0; p < NP; p++) begin
        wr_valid[p] = ($urandom_range(0, 1) == 1);
        wr_addr[p]  = 11'(addrs[p]);
        wr_data[p]  = 8'($urandom);
        if (wr_valid[p]) model[addrs[p]] = wr_data[p];
      end
      @(negedge clk);
    end
    wr_valid = '0;
    for (int a = 0; a < DEPTH; a++) begin
      rd_addr = 11'(a);
      #1;
      checks++;
      if (rd_data != model[a]) begin
        failures++;
        $display("FAIL addr %0d got %02h exp %02h", a, rd_data, model[a]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
