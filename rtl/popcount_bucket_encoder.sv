// popcount_bucket_encoder: '1'-bit count of one input word, mapped to a
// coarse bucket index (popcount stage of the PSU).
//
// The word is cut into 4-bit nibbles; each nibble goes through a 4-bit
// lookup table giving its '1'-bit count, and the nibble counts are added.
// A mapping LUT (psu_pkg::bucket_of) then turns the exact count into the
// bucket index. With k = 4 and W = 8 the map is {0,1,2}->0, {3,4}->1,
// {5,6}->2, {7,8}->3, as the paper gives; with k = W+1 the exact count
// passes through (accurate PSU). The nibble LUTs, the adder and the
// mapping LUT follow the paper; they are written as one combinational
// block and left to synthesis to simplify, as the paper describes.
//
// Interface: value (W bits) in, bucket (clog2(K) bits) out.
// Timing: purely combinational; the PSU registers the result.
module popcount_bucket_encoder #(
  parameter int unsigned W     = psu_pkg::DATA_W,
  parameter int unsigned K     = psu_pkg::NUM_BUCKETS,
  parameter int unsigned BKT_W = (K > 1) ? $clog2(K) : 1
) (
  input  logic [W-1:0]     value,
  output logic [BKT_W-1:0] bucket
);
  localparam int unsigned NIB   = (W + 3) / 4;
  localparam int unsigned PC_W  = $clog2(W + 1);

  // 4-bit '1'-bit count lookup table.
  function automatic logic [2:0] nibble_lut(logic [3:0] n);
    case (n)
      4'h0:                            return 3'd0;
      4'h1, 4'h2, 4'h4, 4'h8:          return 3'd1;
      4'h3, 4'h5, 4'h6, 4'h9, 4'hA, 4'hC: return 3'd2;
      4'h7, 4'hB, 4'hD, 4'hE:          return 3'd3;
      default:                         return 3'd4;
    endcase
  endfunction

  logic [NIB*4-1:0] padded;
  logic [PC_W-1:0]  count;

  always_comb begin
    padded = '0;
    padded[W-1:0] = value;
    count = '0;
    for (int i = 0; i < NIB; i++)
      count = count + PC_W'(nibble_lut(padded[i*4 +: 4]));
  end

  // Mapping LUT: exact count -> bucket index.
  always_comb begin
    bucket = '0;
    for (int c = 0; c <= W; c++)
      if (count == PC_W'(c)) bucket = BKT_W'(psu_pkg::bucket_of(c, W, K));
  end

endmodule
