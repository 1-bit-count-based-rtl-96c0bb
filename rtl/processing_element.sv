// processing_element: one PE of the LeNet-5 convolution-and-pooling
// platform.
//
// Stages, named after the paper's platform figure: an input Buffer
// (register on the link), PSUM (multiplies the input/weight byte pairs of
// each flit and accumulates the partial sums over the window's F flits),
// CONV (adds the bias and rounds the dot product back to W bits) and POOL
// (2x2 pooling over four consecutive convolution results), under a small
// control (flit and quadrant counters). Because the accumulation does not
// depend on the order of the pairs, a sorted window and an unsorted one
// give the same result.
//
// The paper gives only the PE's stages and the layer it computes; the
// arithmetic is our own choice: inputs, weights and bias are signed Q0.7
// (the format shown in the paper's flit example), the product sum is kept
// in ACC_W bits, CONV = sat_W((sum + bias<<(W-1)) >>> (W-1)) without an
// activation function, and POOL is the 2x2 average (sum of four >>> 2),
// after LeNet-5's subsampling layer.
//
// Interface: link_valid/link_flit in (flit layout as in
// transmitting_unit); pool_valid/pool_data out, one pooled value per four
// windows. Timing: pool_valid is high for one cycle, the fourth cycle
// after the one in which the fourth window's last flit is on the link.
module processing_element #(
  parameter int unsigned N      = psu_pkg::KERNEL_ELEMS,
  parameter int unsigned W      = psu_pkg::DATA_W,
  parameter int unsigned LINK_W = psu_pkg::LINK_W,
  parameter int unsigned F      = psu_pkg::flits_per_window(N, W, LINK_W),
  parameter int unsigned ACC_W  = 2 * W + $clog2(N + 1) + 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              link_valid,
  input  logic [LINK_W-1:0] link_flit,
  output logic              pool_valid,
  output logic [W-1:0]      pool_data
);
  localparam int unsigned SLOTS = LINK_W / 2 / W;
  localparam int unsigned FC_W  = (F > 1) ? $clog2(F) : 1;

  // ---- Buffer ----
  logic              fv_q;
  logic [LINK_W-1:0] flit_q;
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) fv_q <= 1'b0;
    else        fv_q <= link_valid;
  always_ff @(posedge clk)
    if (link_valid) flit_q <= link_flit;

  // ---- PSUM ----
  logic signed [ACC_W-1:0] flit_sum, acc;
  logic signed [W-1:0]     bias_q;
  logic [FC_W-1:0]         fcnt;
  logic                    conv_go;

  always_comb begin
    flit_sum = '0;
    for (int s = 0; s < SLOTS; s++)
      flit_sum = flit_sum + ACC_W'($signed(flit_q[s*W +: W]) *
                                  $signed(flit_q[LINK_W/2 + s*W +: W]));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      fcnt    <= '0;
      conv_go <= 1'b0;
    end else begin
      conv_go <= 1'b0;
      if (fv_q) begin
        if (fcnt == FC_W'(F - 1)) begin
          fcnt    <= '0;
          conv_go <= 1'b1;
        end else begin
          fcnt <= fcnt + 1'b1;
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    if (fv_q) begin
      if (fcnt == '0) begin
        acc    <= flit_sum;
        bias_q <= $signed(flit_q[LINK_W-1 -: W]);
      end else begin
        acc <= acc + flit_sum;
      end
    end
  end

  // ---- CONV ----
  localparam logic signed [ACC_W-1:0] MAXV = ACC_W'((1 << (W - 1)) - 1);
  localparam logic signed [ACC_W-1:0] MINV = -ACC_W'(1 << (W - 1));
  logic signed [ACC_W-1:0] conv_full;
  logic signed [W-1:0]     conv_q;
  logic                    conv_v;

  always_comb begin
    conv_full = (acc + (ACC_W'(bias_q) <<< (W - 1))) >>> (W - 1);
    if (conv_full > MAXV)      conv_full = MAXV;
    else if (conv_full < MINV) conv_full = MINV;
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) conv_v <= 1'b0;
    else        conv_v <= conv_go;
  always_ff @(posedge clk)
    if (conv_go) conv_q <= W'(conv_full);

  // ---- POOL ----
  logic signed [W+1:0] pool_acc, pool_sum;
  logic [1:0]          qcnt;

  assign pool_sum = pool_acc + (W+2)'(conv_q);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      qcnt       <= '0;
      pool_acc   <= '0;
      pool_valid <= 1'b0;
      pool_data  <= '0;
    end else begin
      pool_valid <= 1'b0;
      if (conv_v) begin
        qcnt <= qcnt + 1'b1;
        if (qcnt == 2'd3) begin
          pool_acc   <= '0;
          pool_valid <= 1'b1;
          pool_data  <= W'(pool_sum >>> 2);
        end else begin
          pool_acc <= pool_sum;
        end
      end
    end
  end

endmodule
