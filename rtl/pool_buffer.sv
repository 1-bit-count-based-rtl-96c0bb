// pool_buffer: collects the pooled outputs of all PEs ("Pool Buffer" in the
// paper's platform figure) and serves them on the "Data Output" port.
//
// Every PE has its own write port (valid, address, data); the allocation
// unit supplies the address, which it recorded when it gave the PE its
// pooling job, so two PEs never write one address. Read is a
// combinational look-up of rd_addr. The port structure is our own choice;
// the paper only names the buffer.
module pool_buffer #(
  parameter int unsigned W      = psu_pkg::DATA_W,
  parameter int unsigned NP     = psu_pkg::NUM_PES,
  parameter int unsigned DEPTH  = psu_pkg::NUM_FILTERS *
                                  ((psu_pkg::IMG_SIZE - psu_pkg::KERNEL_SIZE + 1) / 2) *
                                  ((psu_pkg::IMG_SIZE - psu_pkg::KERNEL_SIZE + 1) / 2),
  parameter int unsigned ADDR_W = $clog2(DEPTH)
) (
  input  logic                     clk,
  input  logic [NP-1:0]            wr_valid,
  input  logic [NP-1:0][ADDR_W-1:0] wr_addr,
  input  logic [NP-1:0][W-1:0]     wr_data,
  input  logic [ADDR_W-1:0]        rd_addr,
  output logic [W-1:0]             rd_data
);
  logic [W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    for (int p = 0; p < NP; p++)
      if (wr_valid[p] && int'(wr_addr[p]) < DEPTH) mem[wr_addr[p]] <= wr_data[p];
  end

  assign rd_data = (int'(rd_addr) < DEPTH) ? mem[rd_addr] : '0;

endmodule
