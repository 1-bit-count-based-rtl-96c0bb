// prefix_sum: starting address of each bucket in the sorted output.
//
// A log-depth parallel scan (each level adds the value 2^l positions to the
// left, as in the adder network of the paper's architecture figure: with
// counts 1 2 2 1 the levels give 1 3 4 3 and then 1 3 5 6) computes the
// inclusive prefix sum of the histogram. The start address of bucket b is
// the inclusive sum of buckets below it (exclusive scan): 0 1 3 5 in that
// example.
//
// Interface: count[K] in, start[K] out, CNT_W bits each. start[0] is
// always zero and start[1] is count[0] unchanged; they are kept as ports
// so that every bucket has a start address.
// Timing: combinational; the PSU registers start[] at the end of its
// second stage.
module prefix_sum #(
  parameter int unsigned K     = psu_pkg::NUM_BUCKETS,
  parameter int unsigned CNT_W = $clog2(psu_pkg::KERNEL_ELEMS + 1)
) (
  input  logic [K-1:0][CNT_W-1:0] count,
  output logic [K-1:0][CNT_W-1:0] start
);
  localparam int unsigned LEVELS = (K > 1) ? $clog2(K) : 1;

  logic [LEVELS:0][K-1:0][CNT_W-1:0] lvl;

  assign lvl[0] = count;

  for (genvar l = 0; l < LEVELS; l++) begin : g_lvl
    for (genvar b = 0; b < K; b++) begin : g_b
      if (b >= (1 << l)) begin : g_add
        assign lvl[l+1][b] = lvl[l][b] + lvl[l][b - (1 << l)];
      end else begin : g_pass
        assign lvl[l+1][b] = lvl[l][b];
      end
    end
  end

  always_comb begin
    start[0] = '0;
    for (int b = 1; b < K; b++) start[b] = lvl[LEVELS][b-1];
  end

endmodule
