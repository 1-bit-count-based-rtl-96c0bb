// data_allocation_unit: feeds the PEs with reordered convolution windows
// and gathers their pooled results.
//
// Contents, after the paper's platform figure: the data memory (input
// image, weights, biases), a Config register holding the bypass setting,
// the popcount-sorting unit, one transmitting unit per PE (the
// transmitting-unit array, each driving one 128-bit link) and the pool
// buffer; plus a scheduler of our own.
//
// Scheduling (our own choice; the paper does not describe one): the
// layer's pooled outputs (filter, pool row, pool column, in that nesting)
// are numbered as jobs and handed out in groups of NP, job g*NP+p to PE p.
// A job is four convolution windows, the 2x2 quadrant of its pooling
// window. Within a group the scheduler issues quadrant 0 to PEs 0..NP-1,
// then quadrant 1, and so on, one window per cycle. Issuing a window
// loads its inputs, weights and bias into the PE's transmitting unit and,
// unless bypassed, sends the inputs to the PSU tagged with the PE number;
// three cycles later the sorted indices go to that transmitting unit. If
// the transmitting unit is still busy, the scheduler stalls. The pool
// address of a returned value follows from the schedule: PE p's k-th
// result belongs to job k*NP + p.
//
// Interface: wr_* writes the data memory; cfg_wr latches cfg_bypass
// (1 = send windows in their original order); start begins one pass over
// the layer, done is high from its end until the next start; rd_addr /
// rd_data read the pool buffer. link_* go to the PEs, pe_pool_* come back.
module data_allocation_unit #(
  parameter int unsigned W      = psu_pkg::DATA_W,
  parameter int unsigned IMG    = psu_pkg::IMG_SIZE,
  parameter int unsigned KS     = psu_pkg::KERNEL_SIZE,
  parameter int unsigned NF     = psu_pkg::NUM_FILTERS,
  parameter int unsigned NP     = psu_pkg::NUM_PES,
  parameter int unsigned K      = psu_pkg::NUM_BUCKETS,
  parameter int unsigned LINK_W = psu_pkg::LINK_W,
  parameter int unsigned N      = KS * KS,
  parameter int unsigned PO     = (IMG - KS + 1) / 2,
  parameter int unsigned JOBS   = NF * PO * PO,
  parameter int unsigned MEM_AW = $clog2(IMG * IMG + NF * N + NF),
  parameter int unsigned POOL_AW = $clog2(JOBS)
) (
  input  logic                        clk,
  input  logic                        rst_n,
  // Data Input
  input  logic                        wr_en,
  input  logic [MEM_AW-1:0]           wr_addr,
  input  logic [W-1:0]                wr_data,
  // Config
  input  logic                        cfg_wr,
  input  logic                        cfg_bypass,
  // control
  input  logic                        start,
  output logic                        busy,
  output logic                        done,
  // Data Output
  input  logic [POOL_AW-1:0]          rd_addr,
  output logic [W-1:0]                rd_data,
  // links to the PEs and pooled results back
  output logic [NP-1:0]               link_valid,
  output logic [NP-1:0][LINK_W-1:0]   link_flit,
  input  logic [NP-1:0]               pe_pool_valid,
  input  logic [NP-1:0][W-1:0]        pe_pool_data,
  // event counters for observation
  output logic [31:0]                 stall_cycles
);
  localparam int unsigned IDX_W = (N > 1) ? $clog2(N) : 1;
  localparam int unsigned POS_W = $clog2(IMG);
  localparam int unsigned FLT_W = (NF > 1) ? $clog2(NF) : 1;
  localparam int unsigned PE_W  = (NP > 1) ? $clog2(NP) : 1;
  localparam int unsigned PP_W  = $clog2(PO + 1);
  localparam int unsigned JOB_W = $clog2(JOBS + NP + 1);

  typedef enum logic [1:0] {S_IDLE, S_RUN, S_DRAIN} state_t;
  typedef struct packed {
    logic [FLT_W-1:0] f;
    logic [PP_W-1:0]  prow;
    logic [PP_W-1:0]  pcol;
    logic [JOB_W-1:0] job;
  } pos_t;

  state_t state;
  pos_t   grp, cur;
  logic [1:0]      quad;
  logic [PE_W-1:0] pe;
  logic            bypass_q;
  logic [JOB_W-1:0] pool_cnt;
  logic [NP-1:0][POOL_AW-1:0] pe_job;

  function automatic pos_t next_pos(pos_t p);
    pos_t n = p;
    n.job = p.job + 1'b1;
    if (p.pcol == PP_W'(PO - 1)) begin
      n.pcol = '0;
      if (p.prow == PP_W'(PO - 1)) begin
        n.prow = '0;
        n.f  = p.f + 1'b1;
      end else n.prow = p.prow + 1'b1;
    end else n.pcol = p.pcol + 1'b1;
    return n;
  endfunction

  // ---- Config ----
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n)      bypass_q <= 1'b0;
    else if (cfg_wr) bypass_q <= cfg_bypass;

  // ---- Data Memory ----
  logic [POS_W-1:0]    win_row, win_col;
  logic [N-1:0][W-1:0] win_data, wgt_data;
  logic [W-1:0]        bias;

  assign win_row = POS_W'({cur.prow, 1'b0} + PP_W'(quad[1]));
  assign win_col = POS_W'({cur.pcol, 1'b0} + PP_W'(quad[0]));

  data_memory #(.W(W), .IMG(IMG), .KS(KS), .NF(NF)) u_mem (
    .clk     (clk),
    .wr_en   (wr_en),
    .wr_addr (wr_addr),
    .wr_data (wr_data),
    .win_row (win_row),
    .win_col (win_col),
    .filt    (cur.f),
    .win_data(win_data),
    .wgt_data(wgt_data),
    .bias    (bias)
  );

  // ---- scheduler ----
  logic [NP-1:0] tu_ready;
  logic          job_live, issue, advance;

  assign job_live = (state == S_RUN) && (int'(cur.job) < JOBS);
  assign issue    = job_live && tu_ready[pe];
  assign advance  = (state == S_RUN) && (issue || !job_live);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state        <= S_IDLE;
      grp          <= '0;
      cur          <= '0;
      quad         <= '0;
      pe           <= '0;
      done         <= 1'b0;
      stall_cycles <= '0;
    end else begin
      case (state)
        S_IDLE: if (start) begin
          state        <= S_RUN;
          grp          <= '0;
          cur          <= '0;
          quad         <= '0;
          pe           <= '0;
          done         <= 1'b0;
          stall_cycles <= '0;
        end
        S_RUN: begin
          if (job_live && !tu_ready[pe]) stall_cycles <= stall_cycles + 1;
          if (advance) begin
            if (pe == PE_W'(NP - 1)) begin
              pe <= '0;
              if (quad == 2'd3) begin
                quad <= '0;
                grp  <= next_pos(cur);
                cur  <= next_pos(cur);
                if (int'(cur.job) + 1 >= JOBS) state <= S_DRAIN;
              end else begin
                quad <= quad + 1'b1;
                cur  <= grp;
              end
            end else begin
              pe  <= pe + 1'b1;
              cur <= next_pos(cur);
            end
          end
        end
        S_DRAIN: if (int'(pool_cnt) == JOBS) begin
          state <= S_IDLE;
          done  <= 1'b1;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy = (state != S_IDLE);

  // Pool address of each PE's next result. PE p serves jobs p, p+NP,
  // p+2NP, ... in order, so its k-th result belongs to job k*NP + p.
  logic [NP-1:0][POOL_AW-1:0] pe_res_cnt;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) pe_res_cnt <= '0;
    else if (state == S_IDLE && start) pe_res_cnt <= '0;
    else
      for (int p = 0; p < NP; p++)
        if (pe_pool_valid[p]) pe_res_cnt[p] <= pe_res_cnt[p] + 1'b1;
  end
  always_comb
    for (int p = 0; p < NP; p++)
      pe_job[p] = POOL_AW'(int'(pe_res_cnt[p]) * NP + p);

  // ---- Popcount Sorting Unit ----
  logic                    psu_valid;
  logic [N-1:0][IDX_W-1:0] sorted_idx;
  logic [PE_W-1:0]         psu_tag;

  pop_sort_unit #(.N(N), .W(W), .K(K), .TAG_W(PE_W)) u_psu (
    .clk       (clk),
    .rst_n     (rst_n),
    .valid_in  (issue && !bypass_q),
    .data_in   (win_data),
    .tag_in    (pe),
    .valid_out (psu_valid),
    .sorted_idx(sorted_idx),
    .tag_out   (psu_tag)
  );

  // ---- Transmitting unit array ----
  for (genvar p = 0; p < NP; p++) begin : g_tu
    transmitting_unit #(.N(N), .W(W), .LINK_W(LINK_W)) u_tu (
      .clk       (clk),
      .rst_n     (rst_n),
      .bypass    (bypass_q),
      .data_load (issue && pe == PE_W'(p)),
      .in_data   (win_data),
      .wgt_data  (wgt_data),
      .bias      (bias),
      .idx_load  (psu_valid && psu_tag == PE_W'(p)),
      .sorted_idx(sorted_idx),
      .ready     (tu_ready[p]),
      .link_valid(link_valid[p]),
      .link_flit (link_flit[p])
    );
  end

  // ---- Pool Buffer ----
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) pool_cnt <= '0;
    else if (state == S_IDLE && start) pool_cnt <= '0;
    else pool_cnt <= pool_cnt + JOB_W'($countones(pe_pool_valid));
  end

  pool_buffer #(.W(W), .NP(NP), .DEPTH(JOBS), .ADDR_W(POOL_AW)) u_pool (
    .clk     (clk),
    .wr_valid(pe_pool_valid),
    .wr_addr (pe_job),
    .wr_data (pe_pool_data),
    .rd_addr (rd_addr),
    .rd_data (rd_data)
  );

endmodule
