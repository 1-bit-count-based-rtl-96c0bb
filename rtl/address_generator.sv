// address_generator: output position of every element (index mapping
// stage of the PSU).
//
// Each element looks up the start address of its own bucket ("mapping
// prefix sum" in the paper's figure) and adds its in-bucket local rank
// ("adding local rank"). With buckets 1 0 3 2 1 2, starts 0 1 3 5 and
// ranks 0 0 0 0 1 1 the addresses are 1 0 5 3 2 4.
//
// Interface: bucket[N], start[K], rank[N] in; addr[N] out. Combinational.
module address_generator #(
  parameter int unsigned N     = psu_pkg::KERNEL_ELEMS,
  parameter int unsigned K     = psu_pkg::NUM_BUCKETS,
  parameter int unsigned BKT_W = (K > 1) ? $clog2(K) : 1,
  parameter int unsigned IDX_W = (N > 1) ? $clog2(N) : 1,
  parameter int unsigned CNT_W = $clog2(N + 1)
) (
  input  logic [N-1:0][BKT_W-1:0] bucket,
  input  logic [K-1:0][CNT_W-1:0] start,
  input  logic [N-1:0][IDX_W-1:0] rank,
  output logic [N-1:0][IDX_W-1:0] addr
);
  always_comb begin
    for (int i = 0; i < N; i++)
      addr[i] = IDX_W'(start[bucket[i]]) + rank[i];
  end
endmodule
