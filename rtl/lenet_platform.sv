// lenet_platform: the evaluation platform of the popcount-sorting unit -
// a data allocation unit and NP processing elements computing the first
// convolution layer (6 filters of 5x5 over a 32x32 image) and the 2x2
// pooling layer of LeNet-5.
//
// The allocation unit sorts every 5x5 window by the approximate '1'-bit
// count of its inputs, permutes inputs and weights accordingly and sends
// each window over its own 128-bit link to a PE; the PEs accumulate,
// convolve and pool, and their results collect in the pool buffer. With
// the bypass configuration the windows travel unsorted, which is the
// non-optimised baseline; the pooled results are the same either way, only
// the bit transitions on the links differ.
//
// Interface: wr_* loads image, weights and biases (address map in
// data_memory); cfg_wr/cfg_bypass set the mode; a start pulse runs the
// layer; done rises when all NF*14*14 pooled values are stored; rd_addr /
// rd_data read them (index f*14*14 + row*14 + col). The links are
// brought out so their switching activity can be observed.
module lenet_platform #(
  parameter int unsigned W      = psu_pkg::DATA_W,
  parameter int unsigned IMG    = psu_pkg::IMG_SIZE,
  parameter int unsigned KS     = psu_pkg::KERNEL_SIZE,
  parameter int unsigned NF     = psu_pkg::NUM_FILTERS,
  parameter int unsigned NP     = psu_pkg::NUM_PES,
  parameter int unsigned K      = psu_pkg::NUM_BUCKETS,
  parameter int unsigned LINK_W = psu_pkg::LINK_W,
  parameter int unsigned N      = KS * KS,
  parameter int unsigned PO     = (IMG - KS + 1) / 2,
  parameter int unsigned JOBS   = NF * PO * PO,
  parameter int unsigned MEM_AW = $clog2(IMG * IMG + NF * N + NF),
  parameter int unsigned POOL_AW = $clog2(JOBS)
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      wr_en,
  input  logic [MEM_AW-1:0]         wr_addr,
  input  logic [W-1:0]              wr_data,
  input  logic                      cfg_wr,
  input  logic                      cfg_bypass,
  input  logic                      start,
  output logic                      busy,
  output logic                      done,
  input  logic [POOL_AW-1:0]        rd_addr,
  output logic [W-1:0]              rd_data,
  output logic [NP-1:0]             link_valid,
  output logic [NP-1:0][LINK_W-1:0] link_flit,
  output logic [31:0]               stall_cycles
);
  logic [NP-1:0]        pool_valid;
  logic [NP-1:0][W-1:0] pool_data;

  data_allocation_unit #(
    .W(W), .IMG(IMG), .KS(KS), .NF(NF), .NP(NP), .K(K), .LINK_W(LINK_W)
  ) u_dau (
    .clk          (clk),
    .rst_n        (rst_n),
    .wr_en        (wr_en),
    .wr_addr      (wr_addr),
    .wr_data      (wr_data),
    .cfg_wr       (cfg_wr),
    .cfg_bypass   (cfg_bypass),
    .start        (start),
    .busy         (busy),
    .done         (done),
    .rd_addr      (rd_addr),
    .rd_data      (rd_data),
    .link_valid   (link_valid),
    .link_flit    (link_flit),
    .pe_pool_valid(pool_valid),
    .pe_pool_data (pool_data),
    .stall_cycles (stall_cycles)
  );

  for (genvar p = 0; p < NP; p++) begin : g_pe
    processing_element #(.N(N), .W(W), .LINK_W(LINK_W)) u_pe (
      .clk       (clk),
      .rst_n     (rst_n),
      .link_valid(link_valid[p]),
      .link_flit (link_flit[p]),
      .pool_valid(pool_valid[p]),
      .pool_data (pool_data[p])
    );
  end

endmodule
