// bucket_histogram: one-hot encoders and column popcounts of the PSU's
// prefix-sum stage.
//
// Every element's bucket index is turned into a K-bit one-hot row; column b
// of the resulting N x K bit matrix is then counted, which gives how many
// elements fall into bucket b (the frequency histogram). This is the
// structure drawn in the paper's architecture figure.
//
// Interface: bucket[N] indices in, count[K] histogram out, each count
// clog2(N+1) bits wide. Timing: combinational.
module bucket_histogram #(
  parameter int unsigned N     = psu_pkg::KERNEL_ELEMS,
  parameter int unsigned K     = psu_pkg::NUM_BUCKETS,
  parameter int unsigned BKT_W = (K > 1) ? $clog2(K) : 1,
  parameter int unsigned CNT_W = $clog2(N + 1)
) (
  input  logic [N-1:0][BKT_W-1:0] bucket,
  output logic [K-1:0][CNT_W-1:0] count
);
  logic [N-1:0][K-1:0] onehot;

  always_comb begin
    for (int i = 0; i < N; i++)
      for (int b = 0; b < K; b++)
        onehot[i][b] = (bucket[i] == BKT_W'(b));
  end

  always_comb begin
    for (int b = 0; b < K; b++) begin
      count[b] = '0;
      for (int i = 0; i < N; i++)
        count[b] = count[b] + CNT_W'(onehot[i][b]);
    end
  end

endmodule
