// neuromorphic_accelerator: top level of the event-driven SNN accelerator
// with on-chip STDP learning and connection pruning.
//
// Blocks and their links:
//   io_handler        host command FIFO and response register
//   controller        sequencing of time steps, samples and pruning
//   presynaptic_mem   spike time of every presynaptic input of the sample
//   weight_mem        all weights, N_PE lanes per word; zero = pruned
//   pe + potential_mem  N_PE integrate-and-fire lanes, NPP neurons each
//   spike_mem         list of the neurons that fired in the sample
//   stdp_unit         weight updates; counts LTD in decrement_track_mem
//   decrement_track_mem  d per connection and t_post per neuron
//   prune_unit        dynamic (d/w*t_post > alpha) and post-learning (w < beta)
// The weight memory has one read and one write port shared by the
// controller (spike forwarding, host access), the STDP unit and the prune
// unit. The controller starts the STDP or prune unit and waits for it, so at
// most one of them is busy; the busy one owns the ports, otherwise the
// controller does. The decrement track memory's read port is shared the same
// way by the STDP and prune units.
//
// Lint note: rst_ni is both the asynchronous reset of the flops and the
// 'disable iff' condition of the a_one_learning_unit assertion, which the
// linter reports as a net used synchronously and asynchronously. The
// assertion is not hardware; the reset tree itself is purely asynchronous.
//
// Interface: cmd_valid_i/cmd_ready_o/cmd_i from the host (snn_pkg::cmd_t),
// rsp_valid_o/rsp_o to the host (snn_pkg::rsp_t, no back-pressure), stats_o
// event counters. Parameters default to the evaluated network: 4 PEs of 5
// neurons (20 kernels), 1156 presynaptic inputs (17x17x4 window), and a
// weight memory holding all three layers.
module neuromorphic_accelerator
  import snn_pkg::*;
#(
  parameter int unsigned N_PE       = DEF_N_PE,
  parameter int unsigned NPP        = DEF_NPP,
  parameter int unsigned WORDS      = DEF_WORDS,
  parameter int unsigned MAX_PRE    = DEF_MAX_PRE,
  parameter int unsigned FIFO_DEPTH = 4
) (
  input  logic   clk_i,
  input  logic   rst_ni,
  input  logic   cmd_valid_i,
  output logic   cmd_ready_o,
  input  cmd_t   cmd_i,
  output logic   rsp_valid_o,
  output rsp_t   rsp_o,
  output stats_t stats_o
);
  localparam int unsigned MAX_POST = N_PE * NPP;
  localparam int unsigned AW  = $clog2(WORDS);
  localparam int unsigned PW  = $clog2(MAX_PRE);
  localparam int unsigned NW  = $clog2(MAX_POST);
  localparam int unsigned SCW = $clog2(MAX_POST + 1);
  localparam int unsigned LW  = (NPP > 1) ? $clog2(NPP) : 1;
  localparam int unsigned PCW = $clog2(N_PE + 1);

  typedef logic [N_PE-1:0][W_BITS-1:0] wword_t;
  typedef logic [N_PE-1:0][D_BITS-1:0] dword_t;

  // I/O handler <-> controller
  logic ctl_valid, ctl_ready, ctl_rsp_valid;
  cmd_t ctl_cmd;
  rsp_t ctl_rsp;

  // weight memory masters
  logic            c_w_rd_en, c_w_wr_en, s_w_rd_en, s_w_wr_en, p_w_rd_en, p_w_wr_en;
  logic [AW-1:0]   c_w_rd_addr, c_w_wr_addr, s_w_rd_addr, s_w_wr_addr, p_w_rd_addr, p_w_wr_addr;
  logic [N_PE-1:0] c_w_wr_mask, s_w_wr_mask, p_w_wr_mask;
  wword_t          c_w_wr_data, s_w_wr_data, p_w_wr_data;
  logic            w_rd_en, w_wr_en;
  logic [AW-1:0]   w_rd_addr, w_wr_addr;
  logic [N_PE-1:0] w_wr_mask;
  wword_t          w_wr_data, w_rd_data;

  // PEs
  logic                     acc_valid;
  logic [N_PE-1:0]          acc_lane_en;
  logic [LW-1:0]            acc_local, cmp_local;
  logic [V_BITS-1:0]        vth;
  logic [N_PE-1:0]          pe_over, pe_op, pe_skip;
  logic                     pot_clear;

  // presynaptic memory
  logic                     pre_clear, pre_wr_en, pre_rd_en, pre_rd_valid;
  logic [PW-1:0]            pre_wr_addr, pre_rd_addr;
  logic [T_BITS-1:0]        pre_wr_time, pre_rd_time;

  // spike memory
  logic                     sm_clear, sm_push;
  logic [NW-1:0]            sm_push_id, sm_rd_idx, sm_rd_id;
  logic [T_BITS-1:0]        sm_push_time, sm_rd_time;
  logic [SCW-1:0]           sm_count;
  logic [MAX_POST-1:0]      sm_fired;

  // STDP unit
  logic                     stdp_start, stdp_busy, stdp_done, stdp_ltp, stdp_ltd, stdp_skip;
  logic [NW-1:0]            stdp_post;
  logic [T_BITS-1:0]        stdp_tpost;
  logic [W_BITS-1:0]        a_plus, a_minus;
  logic [PRE_BITS-1:0]      n_pre;
  logic [AW-1:0]            base;

  // prune unit and decrement track memory
  logic                     prune_start, prune_busy, prune_done;
  prune_mode_e              prune_mode;
  logic [AW:0]              n_words;
  logic [POST_BITS-1:0]     n_post;
  logic [15:0]              alpha;
  logic [W_BITS-1:0]        beta;
  logic [PCW-1:0]           prune_pruned;
  logic [31:0]              prune_count;
  logic                     dtm_clear;
  logic                     s_d_rd_en, p_d_rd_en, d_rd_en, d_wr_en, tpost_wr;
  logic [AW-1:0]            s_d_rd_addr, p_d_rd_addr, d_rd_addr, d_wr_addr;
  dword_t                   d_rd_data, d_wr_data;
  logic [NW-1:0]            tpost_idx;
  logic [T_BITS-1:0]        tpost_val;
  logic [MAX_POST-1:0][T_BITS-1:0] tpost;

  io_handler #(.DEPTH(FIFO_DEPTH)) u_io (
    .clk_i, .rst_ni,
    .cmd_valid_i, .cmd_ready_o, .cmd_i, .rsp_valid_o, .rsp_o,
    .ctl_valid_o(ctl_valid), .ctl_ready_i(ctl_ready), .ctl_cmd_o(ctl_cmd),
    .ctl_rsp_valid_i(ctl_rsp_valid), .ctl_rsp_i(ctl_rsp)
  );

  controller #(.N_PE(N_PE), .NPP(NPP), .WORDS(WORDS), .MAX_PRE(MAX_PRE)) u_ctrl (
    .clk_i, .rst_ni,
    .cmd_valid_i(ctl_valid), .cmd_ready_o(ctl_ready), .cmd_i(ctl_cmd),
    .rsp_valid_o(ctl_rsp_valid), .rsp_o(ctl_rsp),
    .w_rd_en_o(c_w_rd_en), .w_rd_addr_o(c_w_rd_addr), .w_rd_data_i(w_rd_data),
    .w_wr_en_o(c_w_wr_en), .w_wr_addr_o(c_w_wr_addr), .w_wr_mask_o(c_w_wr_mask),
    .w_wr_data_o(c_w_wr_data),
    .acc_valid_o(acc_valid), .acc_lane_en_o(acc_lane_en), .acc_local_o(acc_local), .cmp_local_o(cmp_local),
    .vth_o(vth), .pe_over_i(pe_over), .pe_op_i(pe_op), .pe_skip_i(pe_skip),
    .pot_clear_o(pot_clear),
    .pre_clear_o(pre_clear), .pre_wr_en_o(pre_wr_en), .pre_wr_addr_o(pre_wr_addr),
    .pre_wr_time_o(pre_wr_time),
    .sm_clear_o(sm_clear), .sm_push_o(sm_push), .sm_push_id_o(sm_push_id),
    .sm_push_time_o(sm_push_time), .sm_rd_idx_o(sm_rd_idx), .sm_rd_id_i(sm_rd_id),
    .sm_rd_time_i(sm_rd_time), .sm_count_i(sm_count), .sm_fired_i(sm_fired),
    .stdp_start_o(stdp_start), .stdp_post_o(stdp_post), .stdp_tpost_o(stdp_tpost),
    .stdp_done_i(stdp_done), .stdp_ltp_i(stdp_ltp), .stdp_ltd_i(stdp_ltd),
    .stdp_skip_i(stdp_skip), .a_plus_o(a_plus), .a_minus_o(a_minus),
    .n_pre_o(n_pre), .base_o(base),
    .prune_start_o(prune_start), .prune_mode_o(prune_mode), .n_words_o(n_words),
    .n_post_o(n_post), .alpha_o(alpha), .beta_o(beta), .prune_done_i(prune_done),
    .prune_pruned_i(prune_pruned), .prune_count_i(prune_count),
    .dtm_clear_o(dtm_clear), .stats_o
  );

  // Weight-memory port ownership.
  always_comb begin
    if (stdp_busy) begin
      w_rd_en = s_w_rd_en; w_rd_addr = s_w_rd_addr;
      w_wr_en = s_w_wr_en; w_wr_addr = s_w_wr_addr; w_wr_mask = s_w_wr_mask; w_wr_data = s_w_wr_data;
    end else if (prune_busy) begin
      w_rd_en = p_w_rd_en; w_rd_addr = p_w_rd_addr;
      w_wr_en = p_w_wr_en; w_wr_addr = p_w_wr_addr; w_wr_mask = p_w_wr_mask; w_wr_data = p_w_wr_data;
    end else begin
      w_rd_en = c_w_rd_en; w_rd_addr = c_w_rd_addr;
      w_wr_en = c_w_wr_en; w_wr_addr = c_w_wr_addr; w_wr_mask = c_w_wr_mask; w_wr_data = c_w_wr_data;
    end
    d_rd_en   = stdp_busy ? s_d_rd_en   : p_d_rd_en;
    d_rd_addr = stdp_busy ? s_d_rd_addr : p_d_rd_addr;
  end

  weight_mem #(.N_LANE(N_PE), .WIDTH(W_BITS), .DEPTH(WORDS)) u_wmem (
    .clk_i, .rd_en_i(w_rd_en), .rd_addr_i(w_rd_addr), .rd_data_o(w_rd_data),
    .wr_en_i(w_wr_en), .wr_addr_i(w_wr_addr), .wr_mask_i(w_wr_mask), .wr_data_i(w_wr_data)
  );

  presynaptic_mem #(.DEPTH(MAX_PRE)) u_pmem (
    .clk_i, .rst_ni, .clear_i(pre_clear),
    .wr_en_i(pre_wr_en), .wr_addr_i(pre_wr_addr), .wr_time_i(pre_wr_time),
    .rd_en_i(pre_rd_en), .rd_addr_i(pre_rd_addr),
    .rd_valid_o(pre_rd_valid), .rd_time_o(pre_rd_time)
  );

  for (genvar g = 0; g < int'(N_PE); g++) begin : g_pe
    logic [LW-1:0]     pm_raddr, pm_waddr;
    logic [V_BITS-1:0] pm_rdata, pm_wdata;
    logic              pm_we;

    pe #(.NPP(NPP)) u_pe (
      .acc_valid_i(acc_valid && acc_lane_en[g]), .acc_local_i(acc_local), .acc_weight_i(w_rd_data[g]),
      .cmp_local_i(cmp_local), .vth_i(vth), .over_o(pe_over[g]),
      .op_o(pe_op[g]), .skip_o(pe_skip[g]),
      .pm_raddr_o(pm_raddr), .pm_rdata_i(pm_rdata), .pm_we_o(pm_we),
      .pm_waddr_o(pm_waddr), .pm_wdata_o(pm_wdata)
    );

    potential_mem #(.NPP(NPP)) u_potmem (
      .clk_i, .rst_ni, .clear_i(pot_clear),
      .rd_addr_i(pm_raddr), .rd_data_o(pm_rdata),
      .wr_en_i(pm_we), .wr_addr_i(pm_waddr), .wr_data_i(pm_wdata)
    );
  end

  spike_mem #(.MAX_POST(MAX_POST)) u_smem (
    .clk_i, .rst_ni, .clear_i(sm_clear),
    .push_i(sm_push), .push_id_i(sm_push_id), .push_time_i(sm_push_time),
    .rd_idx_i(sm_rd_idx), .rd_id_o(sm_rd_id), .rd_time_o(sm_rd_time),
    .count_o(sm_count), .fired_o(sm_fired)
  );

  stdp_unit #(.N_PE(N_PE), .NPP(NPP), .WORDS(WORDS), .MAX_PRE(MAX_PRE)) u_stdp (
    .clk_i, .rst_ni, .start_i(stdp_start), .post_i(stdp_post), .t_post_i(stdp_tpost),
    .n_pre_i(n_pre), .base_i(base), .a_plus_i(a_plus), .a_minus_i(a_minus),
    .busy_o(stdp_busy), .done_o(stdp_done),
    .w_rd_en_o(s_w_rd_en), .w_rd_addr_o(s_w_rd_addr), .w_rd_data_i(w_rd_data),
    .w_wr_en_o(s_w_wr_en), .w_wr_addr_o(s_w_wr_addr), .w_wr_mask_o(s_w_wr_mask),
    .w_wr_data_o(s_w_wr_data),
    .pre_rd_en_o(pre_rd_en), .pre_rd_addr_o(pre_rd_addr),
    .pre_rd_valid_i(pre_rd_valid), .pre_rd_time_i(pre_rd_time),
    .d_rd_en_o(s_d_rd_en), .d_rd_addr_o(s_d_rd_addr), .d_rd_data_i(d_rd_data),
    .d_wr_en_o(d_wr_en), .d_wr_addr_o(d_wr_addr), .d_wr_data_o(d_wr_data),
    .tpost_wr_o(tpost_wr), .tpost_idx_o(tpost_idx), .tpost_val_o(tpost_val),
    .ltp_o(stdp_ltp), .ltd_o(stdp_ltd), .skip_o(stdp_skip)
  );

  decrement_track_mem #(.N_LANE(N_PE), .DEPTH(WORDS), .MAX_POST(MAX_POST)) u_dtm (
    .clk_i, .rst_ni, .clear_i(dtm_clear),
    .rd_en_i(d_rd_en), .rd_addr_i(d_rd_addr), .rd_data_o(d_rd_data),
    .wr_en_i(d_wr_en), .wr_addr_i(d_wr_addr), .wr_data_i(d_wr_data),
    .tpost_wr_i(tpost_wr), .tpost_idx_i(tpost_idx), .tpost_val_i(tpost_val),
    .tpost_o(tpost)
  );

  prune_unit #(.N_PE(N_PE), .NPP(NPP), .WORDS(WORDS)) u_prune (
    .clk_i, .rst_ni, .start_i(prune_start), .mode_i(prune_mode), .base_i(base),
    .n_words_i(n_words), .n_post_i(n_post), .alpha_i(alpha), .beta_i(beta),
    .tpost_i(tpost), .busy_o(prune_busy), .done_o(prune_done),
    .pruned_o(prune_pruned), .count_o(prune_count),
    .w_rd_en_o(p_w_rd_en), .w_rd_addr_o(p_w_rd_addr), .w_rd_data_i(w_rd_data),
    .w_wr_en_o(p_w_wr_en), .w_wr_addr_o(p_w_wr_addr), .w_wr_mask_o(p_w_wr_mask),
    .w_wr_data_o(p_w_wr_data),
    .d_rd_en_o(p_d_rd_en), .d_rd_addr_o(p_d_rd_addr), .d_rd_data_i(d_rd_data)
  );

  a_one_learning_unit: assert property (@(posedge clk_i) disable iff (!rst_ni)
    !(stdp_busy && prune_busy));
endmodule
