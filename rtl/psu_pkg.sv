// psu_pkg: constants and helper functions shared by the popcount-sorting
// unit (PSU), the transmitting units and the LeNet-5 evaluation platform.
//
// The defaults are the configuration presented as the main one: 8-bit
// fixed-point data, a 5x5 convolution kernel (25 elements sorted per
// window), k = 4 approximate buckets, a 128-bit link split into a 64-bit
// input half and a 64-bit weight half, and 16 processing elements.
// bucket_of() is the mapping LUT of the approximate popcount: for W = 8 and
// k = 4 it gives {0,1,2}->0, {3,4}->1, {5,6}->2, {7,8}->3 as in the paper.
// For other (W, k) pairs the same rule is extended (our own choice): count 0
// joins bucket 0, the counts 1..W are split evenly over the k buckets, and
// k = W+1 degenerates to the exact (accurate) popcount.
package psu_pkg;

  localparam int unsigned DATA_W       = 8;    // fixed-point word width
  localparam int unsigned KERNEL_SIZE  = 5;    // 5x5 convolution kernel
  localparam int unsigned KERNEL_ELEMS = KERNEL_SIZE * KERNEL_SIZE;
  localparam int unsigned NUM_BUCKETS  = 4;    // approximate buckets (k)
  localparam int unsigned LINK_W       = 128;  // link width in bits
  localparam int unsigned NUM_PES      = 16;   // processing elements
  localparam int unsigned IMG_SIZE     = 32;   // LeNet-5 input is 32x32
  localparam int unsigned NUM_FILTERS  = 6;    // LeNet-5 C1 has 6 maps

  // Bucket index for an exact '1'-bit count pc of a w-bit word, k buckets.
  function automatic int unsigned bucket_of(int unsigned pc, int unsigned w,
                                            int unsigned k);
    int unsigned b;
    if (k >= w + 1) return pc;
    if (pc == 0) return 0;
    b = ((pc - 1) * k) / w;
    return (b > k - 1) ? k - 1 : b;
  endfunction

  // Number of flits for one window. Each half of the link carries
  // link_w/2/w elements per flit; the last weight slot of flit 0 holds the
  // bias, so the elements must fit in the remaining slots.
  function automatic int unsigned flits_per_window(int unsigned n,
                                                   int unsigned w,
                                                   int unsigned link_w);
    int unsigned slots, f_a, f_b;
    slots = link_w / 2 / w;
    f_a   = (n + 1 + slots - 1) / slots;
    f_b   = (n + slots - 2) / (slots - 1);
    return (f_a > f_b) ? f_a : f_b;
  endfunction

endpackage
