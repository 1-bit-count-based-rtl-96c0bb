// transmitting_unit: reorders one window of inputs and weights by the
// PSU's sorted indices and sends it over a 128-bit link.
//
// Blocks, after the paper's transmitting-unit figure: a data buffer (the
// window's N inputs, N weights and the bias), an index buffer (the sorted
// indices from the PSU), a crossbar that permutes inputs and weights
// together by those indices, a mux that chooses the crossbar output or,
// in bypass mode, the data in its original order (the non-optimised
// baseline), a control unit, and the transmission register that drives
// the link.
//
// Flit format (taken from the paper's flit example, 25 elements in four
// flits): bits [63:0] carry W-bit inputs, bits [127:64] the matching
// weights, element slot s of the half at bits [s*W +: W]. Sorted position
// p goes to flit p mod F, slot p div F (column-major), so the first
// (lowest-bucket) elements open every flit. The last weight slot of flit 0
// holds the bias; unused slots are zero. The column-major distribution and
// the bias slot follow the paper's example; the rule for other sizes and
// everything else here is our own.
//
// Interface: data_load captures in_data/wgt_data/bias and the bypass
// setting; idx_load captures sorted_idx (ignored in bypass mode). ready is
// high while the data buffer is empty. Timing: once the data (and, unless
// bypassed, the indices) are held, F flits leave on F consecutive cycles,
// link_valid high with each; between windows the link holds its last
// value so that idle cycles cause no bit transitions. An assertion flags
// a window loaded while the previous one is still held; it is disabled
// during reset, which is why lint sees rst_n used both as an asynchronous
// reset and as a synchronous signal.
module transmitting_unit #(
  parameter int unsigned N      = psu_pkg::KERNEL_ELEMS,
  parameter int unsigned W      = psu_pkg::DATA_W,
  parameter int unsigned LINK_W = psu_pkg::LINK_W,
  parameter int unsigned IDX_W  = (N > 1) ? $clog2(N) : 1,
  parameter int unsigned F      = psu_pkg::flits_per_window(N, W, LINK_W)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    bypass,
  input  logic                    data_load,
  input  logic [N-1:0][W-1:0]     in_data,
  input  logic [N-1:0][W-1:0]     wgt_data,
  input  logic [W-1:0]            bias,
  input  logic                    idx_load,
  input  logic [N-1:0][IDX_W-1:0] sorted_idx,
  output logic                    ready,
  output logic                    link_valid,
  output logic [LINK_W-1:0]       link_flit
);
  localparam int unsigned SLOTS = LINK_W / 2 / W;
  localparam int unsigned FC_W  = (F > 1) ? $clog2(F) : 1;

  // data buffer, index buffer and control state
  logic [N-1:0][W-1:0]     in_buf, wgt_buf;
  logic [W-1:0]            bias_buf;
  logic [N-1:0][IDX_W-1:0] idx_buf;
  logic                    have_data, have_idx, bypass_q, sending;
  logic [FC_W-1:0]         flit_cnt;

  // crossbar followed by the bypass mux
  logic [N-1:0][W-1:0]     in_perm, wgt_perm;
  always_comb begin
    for (int p = 0; p < N; p++) begin
      in_perm[p]  = '0;
      wgt_perm[p] = '0;
      if (bypass_q) begin
        in_perm[p]  = in_buf[p];
        wgt_perm[p] = wgt_buf[p];
      end else begin
        for (int i = 0; i < N; i++)
          if (idx_buf[p] == IDX_W'(i)) begin
            in_perm[p]  = in_buf[i];
            wgt_perm[p] = wgt_buf[i];
          end
      end
    end
  end

  // flit packing (column-major over the F flits of a window)
  logic [LINK_W-1:0] flit_d;
  always_comb begin
    flit_d = '0;
    for (int s = 0; s < SLOTS; s++)
      for (int p = 0; p < N; p++)
        if (p == s * F + int'(flit_cnt)) begin
          flit_d[s*W +: W]            = in_perm[p];
          flit_d[LINK_W/2 + s*W +: W] = wgt_perm[p];
        end
    if (flit_cnt == '0) flit_d[LINK_W-1 -: W] = bias_buf;
  end

  wire start_send = have_data && (bypass_q || have_idx) && !sending;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      have_data  <= 1'b0;
      have_idx   <= 1'b0;
      sending    <= 1'b0;
      flit_cnt   <= '0;
      link_valid <= 1'b0;
      bypass_q   <= 1'b0;
      link_flit  <= '0;
    end else begin
      link_valid <= 1'b0;
      if (data_load) begin
        have_data <= 1'b1;
        bypass_q  <= bypass;
      end
      if (idx_load) have_idx <= 1'b1;
      if (start_send) sending <= 1'b1;
      if (sending) begin
        link_flit  <= flit_d;
        link_valid <= 1'b1;
        if (flit_cnt == FC_W'(F - 1)) begin
          flit_cnt  <= '0;
          sending   <= 1'b0;
          have_data <= 1'b0;
          have_idx  <= 1'b0;
        end else begin
          flit_cnt <= flit_cnt + 1'b1;
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    if (data_load) begin
      in_buf   <= in_data;
      wgt_buf  <= wgt_data;
      bias_buf <= bias;
    end
    if (idx_load) idx_buf <= sorted_idx;
  end

  assign ready = !have_data;

  // A window must not be loaded while the previous one is still held.
  a_no_overrun: assert property (@(posedge clk) disable iff (!rst_n)
                                 data_load |-> !have_data);

endmodule
