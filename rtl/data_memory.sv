// data_memory: the allocation unit's store for the input feature map and
// the convolution weights.
//
// One write port (the "Data Input" of the platform) fills a single address
// space: addresses 0 .. IMG*IMG-1 hold the input image row by row, the
// next NF*KS*KS addresses hold the weights of filter f, row by row, at
// IMG*IMG + f*KS*KS, and the last NF addresses hold the biases. A window
// port returns, in one cycle and without a clock (combinational read of
// the register array), the KS x KS inputs whose top-left corner is
// (win_row, win_col), element i = r*KS + c, together with the weights and
// bias of filter filt.
//
// The paper shows a "Data Memory" feeding the sorting unit and the
// transmitting units; its organisation, ports and address map are our own.
module data_memory #(
  parameter int unsigned W      = psu_pkg::DATA_W,
  parameter int unsigned IMG    = psu_pkg::IMG_SIZE,
  parameter int unsigned KS     = psu_pkg::KERNEL_SIZE,
  parameter int unsigned NF     = psu_pkg::NUM_FILTERS,
  parameter int unsigned N      = KS * KS,
  parameter int unsigned DEPTH  = IMG * IMG + NF * N + NF,
  parameter int unsigned ADDR_W = $clog2(DEPTH),
  parameter int unsigned POS_W  = $clog2(IMG),
  parameter int unsigned FLT_W  = (NF > 1) ? $clog2(NF) : 1
) (
  input  logic                clk,
  input  logic                wr_en,
  input  logic [ADDR_W-1:0]   wr_addr,
  input  logic [W-1:0]        wr_data,
  input  logic [POS_W-1:0]    win_row,
  input  logic [POS_W-1:0]    win_col,
  input  logic [FLT_W-1:0]    filt,
  output logic [N-1:0][W-1:0] win_data,
  output logic [N-1:0][W-1:0] wgt_data,
  output logic [W-1:0]        bias
);
  localparam int unsigned WGT_BASE  = IMG * IMG;
  localparam int unsigned BIAS_BASE = IMG * IMG + NF * N;

  logic [W-1:0] img_mem [IMG*IMG];
  logic [W-1:0] wgt_mem [NF*N];
  logic [W-1:0] bias_mem[NF];

  always_ff @(posedge clk) begin
    if (wr_en) begin
      if (int'(wr_addr) < WGT_BASE)
        img_mem[int'(wr_addr)] <= wr_data;
      else if (int'(wr_addr) < BIAS_BASE)
        wgt_mem[int'(wr_addr) - WGT_BASE] <= wr_data;
      else if (int'(wr_addr) < DEPTH)
        bias_mem[int'(wr_addr) - BIAS_BASE] <= wr_data;
    end
  end

  always_comb begin
    for (int r = 0; r < KS; r++)
      for (int c = 0; c < KS; c++) begin
        win_data[r*KS + c] = img_mem[((int'(win_row) + r) % IMG) * IMG +
                                     ((int'(win_col) + c) % IMG)];
        wgt_data[r*KS + c] = wgt_mem[(int'(filt) % NF) * N + r*KS + c];
      end
    bias = bias_mem[int'(filt) % NF];
  end

endmodule
