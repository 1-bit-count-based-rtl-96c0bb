// Testbench for data_memory (32x32 image, six 5x5 filters): fills the
// whole address space with random bytes through the write port, keeping a
// copy, then reads random windows and filters and compares every element,
// weight and bias with the copy (element i = row*5 + col of the window).
module tb_data_memory;
  localparam int IMG = 32, KS = 5, NF = 6, N = 25;
  localparam int DEPTH = IMG*IMG + NF*N + NF;
  int checks = 0, failures = 0;
  logic clk = 0;
  logic wr_en = 0;
  logic [10:0] wr_addr;
  logic [7:0] wr_data;
  logic [4:0] win_row, win_col;
  logic [2:0] filt;
  logic [N-1:0][7:0] win_data, wgt_data;
  logic [7:0] bias;
  byte unsigned model[DEPTH];

  data_memory dut (.clk, .wr_en, .wr_addr, .wr_data, .win_row, .win_col, .filt,
                   .win_data, .wgt_data, .bias);

  always #5 clk = ~clk;

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    @(negedge clk);
    for (int a = 0; a < DEPTH; a++) begin
      model[a] = 8'($urandom);
      wr_en = 1'b1; wr_addr = 11'(a); wr_data = model[a];
      @(negedge clk);
    end
    wr_en = 1'b0;
    for (int t = 0; t < 300; t++) begin
      automatic int r = $urandom_range(0, IMG - KS), c = $urandom_range(0, IMG - KS);
      automatic int f = $urandom_range(0, NF - 1);
      win_row = 5'(r); win_col = 5'(c); filt = 3'(f);
      #1;
      for (int i = 0; i < KS; i++)
        for (int j = 0; j < KS; j++) begin
          checks++;
          if (win_data[i*KS+j] != model[(r+i)*IMG + c + j]) failures++;
          checks++;
          if (wgt_data[i*KS+j] != model[IMG*IMG + f*N + i*KS + j]) failures++;
        end
      checks++;
      if (bias != model[IMG*IMG + NF*N + f]) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
