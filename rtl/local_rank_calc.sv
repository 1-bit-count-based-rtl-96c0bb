// local_rank_calc: in-bucket local rank of every element (index mapping
// stage of the PSU).
//
// The local rank of element i is the number of elements j < i that share
// its bucket. Adding it to the bucket's start address gives a unique
// output position and keeps elements of one bucket in their input order
// (a stable sort), which is what the paper's waveform shows: equal
// '1'-bit counts leave in ascending index order. The paper names this
// calculator; the equality-and-count structure here is our own.
//
// Interface: bucket[N] in, rank[N] out (clog2(N) bits). Combinational.
// rank[0] is always zero and rank[i] can never exceed i, so the upper
// bits of the first few ranks are constant zero by construction.
module local_rank_calc #(
  parameter int unsigned N     = psu_pkg::KERNEL_ELEMS,
  parameter int unsigned K     = psu_pkg::NUM_BUCKETS,
  parameter int unsigned BKT_W = (K > 1) ? $clog2(K) : 1,
  parameter int unsigned IDX_W = (N > 1) ? $clog2(N) : 1
) (
  input  logic [N-1:0][BKT_W-1:0] bucket,
  output logic [N-1:0][IDX_W-1:0] rank
);
  always_comb begin
    for (int i = 0; i < N; i++) begin
      rank[i] = '0;
      for (int j = 0; j < i; j++)
        rank[i] = rank[i] + IDX_W'(bucket[j] == bucket[i]);
    end
  end
endmodule
