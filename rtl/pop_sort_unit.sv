// pop_sort_unit: comparison-free popcount-sorting unit (PSU).
//
// Sorts the N words of one convolution window by their (approximate)
// '1'-bit count and returns the permutation as a list of element indices,
// lowest bucket first; elements of one bucket keep their input order.
// It is a three-stage pipeline, as in the paper:
//   1. popcount stage   - N popcount bucket encoders; bucket ids registered.
//   2. prefix-sum stage - one-hot encoders and column popcounts build the
//      histogram, a parallel scan gives each bucket's start address; the
//      start addresses and the bucket ids (the "bucket buffer") are
//      registered.
//   3. index mapping stage - in-bucket local ranks plus start addresses
//      give each element's output position; a crossbar scatters the
//      indices; sorted_idx is registered.
// With K = 4 this is the approximate PSU (APP-PSU) of the paper; K = W+1
// gives the accurate PSU.
//
// Interface: valid_in with data_in[N] (and a free tag_in that travels with
// the window, our own addition so the caller can tell results apart);
// valid_out with sorted_idx[N] and tag_out. Active-low asynchronous reset
// clears the valid bits only (reset style is our choice).
// Timing: one window per clock, results exactly 3 cycles after valid_in,
// matching the 3-cycle latency in the paper's waveform. No back-pressure.
module pop_sort_unit #(
  parameter int unsigned N     = psu_pkg::KERNEL_ELEMS,
  parameter int unsigned W     = psu_pkg::DATA_W,
  parameter int unsigned K     = psu_pkg::NUM_BUCKETS,
  parameter int unsigned TAG_W = 4,
  parameter int unsigned BKT_W = (K > 1) ? $clog2(K) : 1,
  parameter int unsigned IDX_W = (N > 1) ? $clog2(N) : 1,
  parameter int unsigned CNT_W = $clog2(N + 1)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    valid_in,
  input  logic [N-1:0][W-1:0]     data_in,
  input  logic [TAG_W-1:0]        tag_in,
  output logic                    valid_out,
  output logic [N-1:0][IDX_W-1:0] sorted_idx,
  output logic [TAG_W-1:0]        tag_out
);
  // ---- stage 1: popcount bucket encoders ----
  logic [N-1:0][BKT_W-1:0] bucket_d, bucket_q;
  logic                    v1_q;
  logic [TAG_W-1:0]        tag1_q;

  for (genvar i = 0; i < N; i++) begin : g_enc
    popcount_bucket_encoder #(.W(W), .K(K), .BKT_W(BKT_W)) u_enc (
      .value (data_in[i]),
      .bucket(bucket_d[i])
    );
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) v1_q <= 1'b0;
    else        v1_q <= valid_in;

  always_ff @(posedge clk) begin
    bucket_q <= bucket_d;
    tag1_q   <= tag_in;
  end

  // ---- stage 2: histogram and prefix sum ----
  logic [K-1:0][CNT_W-1:0] count, start_d, start_q;
  logic [N-1:0][BKT_W-1:0] bucket_buf_q;
  logic                    v2_q;
  logic [TAG_W-1:0]        tag2_q;

  bucket_histogram #(.N(N), .K(K), .BKT_W(BKT_W), .CNT_W(CNT_W)) u_hist (
    .bucket(bucket_q),
    .count (count)
  );

  prefix_sum #(.K(K), .CNT_W(CNT_W)) u_psum (
    .count(count),
    .start(start_d)
  );

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) v2_q <= 1'b0;
    else        v2_q <= v1_q;

  always_ff @(posedge clk) begin
    start_q      <= start_d;
    bucket_buf_q <= bucket_q;
    tag2_q       <= tag1_q;
  end

  // ---- stage 3: index mapping ----
  logic [N-1:0][IDX_W-1:0] rank, addr, sorted_d;

  local_rank_calc #(.N(N), .K(K), .BKT_W(BKT_W), .IDX_W(IDX_W)) u_rank (
    .bucket(bucket_buf_q),
    .rank  (rank)
  );

  address_generator #(.N(N), .K(K), .BKT_W(BKT_W), .IDX_W(IDX_W),
                      .CNT_W(CNT_W)) u_addr (
    .bucket(bucket_buf_q),
    .start (start_q),
    .rank  (rank),
    .addr  (addr)
  );

  index_crossbar #(.N(N), .IDX_W(IDX_W)) u_xbar (
    .addr      (addr),
    .sorted_idx(sorted_d)
  );

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) valid_out <= 1'b0;
    else        valid_out <= v2_q;

  always_ff @(posedge clk) begin
    sorted_idx <= sorted_d;
    tag_out    <= tag2_q;
  end

endmodule
