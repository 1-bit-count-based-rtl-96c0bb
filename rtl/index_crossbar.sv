// index_crossbar: scatters element indices into sorted order (index mapping
// stage of the PSU).
//
// Element i carries its own index i to output position addr[i]:
// sorted_idx[addr[i]] = i. Each output port compares its position with
// all N addresses and ORs in the index of the one that matches; since the
// addresses are a permutation exactly one matches. With addresses
// 1 0 5 3 2 4 the sorted indices are 1 0 4 3 5 2, as in the paper's figure.
//
// Interface: addr[N] in, sorted_idx[N] out. Combinational.
module index_crossbar #(
  parameter int unsigned N     = psu_pkg::KERNEL_ELEMS,
  parameter int unsigned IDX_W = (N > 1) ? $clog2(N) : 1
) (
  input  logic [N-1:0][IDX_W-1:0] addr,
  output logic [N-1:0][IDX_W-1:0] sorted_idx
);
  always_comb begin
    for (int p = 0; p < N; p++) begin
      sorted_idx[p] = '0;
      for (int i = 0; i < N; i++)
        if (addr[i] == IDX_W'(p)) sorted_idx[p] = sorted_idx[p] | IDX_W'(i);
    end
  end
endmodule
