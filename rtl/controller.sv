// controller: the Controller, which sequences the accelerator.
//
// It takes commands from the I/O handler one at a time (ready only when
// idle) and runs the flow of a learning sample:
//   OP_START_SAMPLE  clears potentials, presynaptic spike times and the
//                    spike list; the time step counter restarts at 1.
//   OP_SPIKE         records the input's spike time in the Presynaptic
//                    Memory and forwards the event to all PEs: it reads the
//                    weight words (pre, local) for every local neuron slot in
//                    use, one per cycle, and each PE adds its lane of the word
//                    to the potential of that neuron (lanes beyond n_post
//                    are disabled). NL+1 cycles, NL = ceil(n_post / N_PE).
//   OP_END_STEP      end of a time step. Threshold phase: neurons 0..n_post-1
//                    are checked one per cycle; a neuron above the threshold
//                    that has not fired in this sample and is not inhibited
//                    fires: its ID and time go into the Spike Memory and out to
//                    the host. With the wta flag set, the first neuron to
//                    fire inhibits all others for the rest of the sample
//                    (lateral inhibition). Then, when learning, the STDP unit
//                    is started once for each neuron that fired in this step.
//                    The time step counter then advances.
//   OP_END_SAMPLE    counts a learning iteration; every k iterations (with
//                    dynamic pruning enabled) the prune unit runs in dynamic
//                    mode, after which the decrement counters are cleared.
//                    Answers RSP_DONE with the number of connections pruned.
//   OP_LAYER_DONE    runs the prune unit in post-learning mode on the layer.
//                    Answers RSP_DONE with the number pruned.
//   OP_SET_PARAM, OP_WRITE_W, OP_READ_W  configuration and host access.
// While the STDP or prune unit runs it owns the weight-memory port; the
// controller waits for its done pulse.
//
// The order spikes -> threshold -> STDP -> pruning follows the published
// architecture; the command set, the one-neuron-per-cycle threshold scan and
// the lowest-index-wins inhibition are this design's choices.
module controller
  import snn_pkg::*;
#(
  parameter int unsigned N_PE    = DEF_N_PE,
  parameter int unsigned NPP     = DEF_NPP,
  parameter int unsigned WORDS   = DEF_WORDS,
  parameter int unsigned MAX_PRE = DEF_MAX_PRE,
  localparam int unsigned MAX_POST = N_PE * NPP,
  localparam int unsigned AW     = $clog2(WORDS),
  localparam int unsigned PW     = $clog2(MAX_PRE),
  localparam int unsigned NW     = $clog2(MAX_POST),
  localparam int unsigned SCW    = $clog2(MAX_POST + 1),
  localparam int unsigned LW     = (NPP > 1) ? $clog2(NPP) : 1,
  localparam int unsigned LN     = (N_PE > 1) ? $clog2(N_PE) : 1,
  localparam int unsigned PCW    = $clog2(N_PE + 1)
) (
  input  logic                         clk_i,
  input  logic                         rst_ni,
  // commands and responses
  input  logic                         cmd_valid_i,
  output logic                         cmd_ready_o,
  input  cmd_t                         cmd_i,
  output logic                         rsp_valid_o,
  output rsp_t                         rsp_o,
  // weight memory (controller's own port)
  output logic                         w_rd_en_o,
  output logic [AW-1:0]                w_rd_addr_o,
  input  logic [N_PE-1:0][W_BITS-1:0]  w_rd_data_i,
  output logic                         w_wr_en_o,
  output logic [AW-1:0]                w_wr_addr_o,
  output logic [N_PE-1:0]              w_wr_mask_o,
  output logic [N_PE-1:0][W_BITS-1:0]  w_wr_data_o,
  // processing elements
  output logic                         acc_valid_o,
  output logic [N_PE-1:0]              acc_lane_en_o,
  output logic [LW-1:0]                acc_local_o,
  output logic [LW-1:0]                cmp_local_o,
  output logic [V_BITS-1:0]            vth_o,
  input  logic [N_PE-1:0]              pe_over_i,
  input  logic [N_PE-1:0]              pe_op_i,
  input  logic [N_PE-1:0]              pe_skip_i,
  output logic                         pot_clear_o,
  // presynaptic memory
  output logic                         pre_clear_o,
  output logic                         pre_wr_en_o,
  output logic [PW-1:0]                pre_wr_addr_o,
  output logic [T_BITS-1:0]            pre_wr_time_o,
  // spike memory
  output logic                         sm_clear_o,
  output logic                         sm_push_o,
  output logic [NW-1:0]                sm_push_id_o,
  output logic [T_BITS-1:0]            sm_push_time_o,
  output logic [NW-1:0]                sm_rd_idx_o,
  input  logic [NW-1:0]                sm_rd_id_i,
  input  logic [T_BITS-1:0]            sm_rd_time_i,
  input  logic [SCW-1:0]               sm_count_i,
  input  logic [MAX_POST-1:0]          sm_fired_i,
  // STDP unit
  output logic                         stdp_start_o,
  output logic [NW-1:0]                stdp_post_o,
  output logic [T_BITS-1:0]            stdp_tpost_o,
  input  logic                         stdp_done_i,
  input  logic                         stdp_ltp_i,
  input  logic                         stdp_ltd_i,
  input  logic                         stdp_skip_i,
  output logic [W_BITS-1:0]            a_plus_o,
  output logic [W_BITS-1:0]            a_minus_o,
  output logic [PRE_BITS-1:0]          n_pre_o,
  output logic [AW-1:0]                base_o,
  // prune unit and decrement track memory
  output logic                         prune_start_o,
  output prune_mode_e                  prune_mode_o,
  output logic [AW:0]                  n_words_o,
  output logic [POST_BITS-1:0]         n_post_o,
  output logic [15:0]                  alpha_o,
  output logic [W_BITS-1:0]            beta_o,
  input  logic                         prune_done_i,
  input  logic [PCW-1:0]               prune_pruned_i,
  input  logic [31:0]                  prune_count_i,
  output logic                         dtm_clear_o,
  // event counters
  output stats_t                       stats_o
);
  typedef enum logic [3:0] {
    S_IDLE, S_READW, S_EVENT, S_THRESH, S_STDP_START, S_STDP_WAIT,
    S_PRUNE_DYN, S_PRUNE_POST
  } state_e;

  state_e               state_q;
  // parameters written by the host
  logic [V_BITS-1:0]    vth_q;
  logic [W_BITS-1:0]    a_plus_q, a_minus_q, beta_q;
  logic [15:0]          alpha_q, k_q, iter_q;
  logic                 learn_q, dyn_en_q, wta_q;
  logic [AW-1:0]        base_q;
  logic [PRE_BITS-1:0]  n_pre_q;
  logic [POST_BITS-1:0] n_post_q;
  logic [AW:0]          n_words_q;
  logic [LW:0]          n_local_q;
  // sample state
  logic [T_BITS-1:0]    t_q;
  logic                 inhibit_q;
  logic [SCW-1:0]       step_first_q, sidx_q;
  // event forwarding
  logic [LW:0]          j_q;
  logic [AW-1:0]        ev_addr_q;
  logic                 pend_q;
  logic [LW-1:0]        pend_local_q;
  // threshold scan
  logic [POST_BITS-1:0] n_q;
  logic [LW-1:0]        scan_local_q;
  logic [LN-1:0]        scan_lane_q;
  // READ_W
  logic [LN-1:0]        rd_lane_q;
  stats_t               stats_q;

  // Word address and lane of connection (pre, post) in the current layer.
  logic [AW-1:0]        cmd_addr;
  logic [LN-1:0]        cmd_lane;
  logic                 cmd_take;
  logic                 fire;

  always_comb begin
    cmd_addr = base_q + AW'(cmd_i.pre) * AW'(NPP) + AW'(cmd_i.post / POST_BITS'(N_PE));
    cmd_lane = LN'(cmd_i.post % POST_BITS'(N_PE));
    cmd_ready_o = (state_q == S_IDLE);
    cmd_take = cmd_valid_i && cmd_ready_o;
    fire = (state_q == S_THRESH) && pe_over_i[scan_lane_q] &&
           !sm_fired_i[NW'(n_q)] && !inhibit_q;
  end

  always_comb begin
    // weight memory
    w_rd_en_o   = 1'b0;
    w_rd_addr_o = ev_addr_q;
    w_wr_en_o   = 1'b0;
    w_wr_addr_o = cmd_addr;
    w_wr_mask_o = '0;
    w_wr_mask_o[cmd_lane] = 1'b1;
    w_wr_data_o = '0;
    w_wr_data_o[cmd_lane] = cmd_i.data[W_BITS-1:0];
    if (cmd_take && cmd_i.op == OP_WRITE_W) w_wr_en_o = 1'b1;
    if (cmd_take && cmd_i.op == OP_READ_W) begin
      w_rd_en_o   = 1'b1;
      w_rd_addr_o = cmd_addr;
    end
    if (state_q == S_EVENT && j_q < n_local_q) w_rd_en_o = 1'b1;
    // PEs
    acc_valid_o = (state_q == S_EVENT) && pend_q;
    acc_local_o = pend_local_q;
    // only lanes that hold a neuron of the layer take part
    for (int l = 0; l < int'(N_PE); l++)
      acc_lane_en_o[l] = (int'(pend_local_q) * int'(N_PE) + l) < int'(n_post_q);
    cmp_local_o = scan_local_q;
    vth_o       = vth_q;
    // clears at the start of a sample
    pot_clear_o = cmd_take && cmd_i.op == OP_START_SAMPLE;
    pre_clear_o = pot_clear_o;
    sm_clear_o  = pot_clear_o;
    // presynaptic memory
    pre_wr_en_o   = cmd_take && cmd_i.op == OP_SPIKE && int'(cmd_i.pre) < int'(MAX_PRE);
    pre_wr_addr_o = PW'(cmd_i.pre);
    pre_wr_time_o = t_q;
    // spike memory
    sm_push_o      = fire;
    sm_push_id_o   = NW'(n_q);
    sm_push_time_o = t_q;
    sm_rd_idx_o    = NW'(sidx_q);
    // STDP unit
    stdp_start_o = (state_q == S_STDP_START) && learn_q && (sidx_q < sm_count_i);
    stdp_post_o  = sm_rd_id_i;
    stdp_tpost_o = sm_rd_time_i;
    a_plus_o     = a_plus_q;
    a_minus_o    = a_minus_q;
    n_pre_o      = n_pre_q;
    base_o       = base_q;
    // prune unit
    prune_start_o = 1'b0;
    prune_mode_o  = PRUNE_DYNAMIC;
    if (cmd_take && cmd_i.op == OP_END_SAMPLE && learn_q && dyn_en_q &&
        k_q != '0 && iter_q + 16'd1 >= k_q) prune_start_o = 1'b1;
    if (cmd_take && cmd_i.op == OP_LAYER_DONE) begin
      prune_start_o = 1'b1;
      prune_mode_o  = PRUNE_POST;
    end
    n_words_o   = n_words_q;
    n_post_o    = n_post_q;
    alpha_o     = alpha_q;
    beta_o      = beta_q;
    dtm_clear_o = ((state_q == S_PRUNE_DYN) && prune_done_i) ||
                  (cmd_take && cmd_i.op == OP_SET_PARAM && param_e'(cmd_i.pre[3:0]) == P_BASE);
    stats_o     = stats_q;
  end

  function automatic logic [31:0] popcount(logic [N_PE-1:0] v);
    logic [31:0] c = '0;
    for (int i = 0; i < int'(N_PE); i++) c += 32'(v[i]);
    return c;
  endfunction

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q      <= S_IDLE;
      vth_q        <= '0;
      a_plus_q     <= W_BITS'(262);   // 0.004 in Q0.16
      a_minus_q    <= W_BITS'(197);   // 0.003 in Q0.16
      alpha_q      <= '1;
      beta_q       <= '0;
      k_q          <= 16'd500;
      iter_q       <= '0;
      learn_q      <= 1'b0;
      dyn_en_q     <= 1'b0;
      wta_q        <= 1'b0;
      base_q       <= '0;
      n_pre_q      <= '0;
      n_post_q     <= '0;
      n_words_q    <= '0;
      n_local_q    <= '0;
      t_q          <= T_BITS'(1);
      inhibit_q    <= 1'b0;
      step_first_q <= '0;
      sidx_q       <= '0;
      j_q          <= '0;
      ev_addr_q    <= '0;
      pend_q       <= 1'b0;
      pend_local_q <= '0;
      n_q          <= '0;
      scan_local_q <= '0;
      scan_lane_q  <= '0;
      rd_lane_q    <= '0;
      rsp_valid_o  <= 1'b0;
      rsp_o        <= '0;
      stats_q      <= '0;
    end else begin
      rsp_valid_o <= 1'b0;

      // event counters
      stats_q.syn_ops    <= stats_q.syn_ops + popcount(pe_op_i);
      stats_q.syn_skips  <= stats_q.syn_skips + popcount(pe_skip_i);
      stats_q.stdp_ltp   <= stats_q.stdp_ltp + 32'(stdp_ltp_i);
      stats_q.stdp_ltd   <= stats_q.stdp_ltd + 32'(stdp_ltd_i);
      stats_q.stdp_skips <= stats_q.stdp_skips + 32'(stdp_skip_i);
      if (state_q == S_PRUNE_DYN)
        stats_q.pruned_dyn  <= stats_q.pruned_dyn + 32'(prune_pruned_i);
      if (state_q == S_PRUNE_POST)
        stats_q.pruned_post <= stats_q.pruned_post + 32'(prune_pruned_i);
      if (state_q == S_PRUNE_DYN && prune_done_i)
        stats_q.prune_runs  <= stats_q.prune_runs + 32'd1;

      unique case (state_q)
        S_IDLE: if (cmd_take) begin
          unique case (cmd_i.op)
            OP_SET_PARAM: begin
              unique case (param_e'(cmd_i.pre[3:0]))
                P_VTH:    vth_q     <= cmd_i.data;
                P_APLUS:  a_plus_q  <= cmd_i.data[W_BITS-1:0];
                P_AMINUS: a_minus_q <= cmd_i.data[W_BITS-1:0];
                P_ALPHA:  alpha_q   <= cmd_i.data[15:0];
                P_BETA:   beta_q    <= cmd_i.data[W_BITS-1:0];
                P_K:      k_q       <= cmd_i.data[15:0];
                P_FLAGS:  {wta_q, dyn_en_q, learn_q} <= cmd_i.data[2:0];
                P_BASE: begin
                  base_q <= AW'(cmd_i.data);
                  iter_q <= '0;
                end
                P_NPRE: begin
                  n_pre_q   <= PRE_BITS'(cmd_i.data);
                  n_words_q <= (AW+1)'(cmd_i.data[PRE_BITS-1:0] * NPP);
                end
                P_NPOST: begin
                  n_post_q  <= POST_BITS'(cmd_i.data);
                  n_local_q <= (LW+1)'((cmd_i.data[POST_BITS-1:0] + POST_BITS'(N_PE - 1)) /
                                       POST_BITS'(N_PE));
                end
                default: ;
              endcase
            end
            OP_WRITE_W: ;
            OP_READ_W: begin
              rd_lane_q <= cmd_lane;
              state_q   <= S_READW;
            end
            OP_START_SAMPLE: begin
              t_q          <= T_BITS'(1);
              inhibit_q    <= 1'b0;
              step_first_q <= '0;
            end
            OP_SPIKE: begin
              j_q       <= '0;
              pend_q    <= 1'b0;
              ev_addr_q <= base_q + AW'(cmd_i.pre) * AW'(NPP);
              state_q   <= S_EVENT;
            end
            OP_END_STEP: begin
              n_q          <= '0;
              scan_local_q <= '0;
              scan_lane_q  <= '0;
              state_q      <= (n_post_q == '0) ? S_STDP_START : S_THRESH;
              sidx_q       <= step_first_q;
            end
            OP_END_SAMPLE: begin
              if (prune_start_o) begin
                iter_q  <= '0;
                state_q <= S_PRUNE_DYN;
              end else begin
                if (learn_q) iter_q <= iter_q + 16'd1;
                rsp_valid_o <= 1'b1;
                rsp_o       <= '{kind: RSP_DONE, post: '0, time_step: t_q, data: '0};
              end
            end
            OP_LAYER_DONE: state_q <= S_PRUNE_POST;
            default: ;
          endcase
        end

        S_READW: begin
          rsp_valid_o <= 1'b1;
          rsp_o <= '{kind: RSP_WEIGHT, post: '0, time_step: '0,
                     data: DATA_BITS'(w_rd_data_i[rd_lane_q])};
          state_q <= S_IDLE;
        end

        S_EVENT: begin
          pend_q       <= (j_q < n_local_q);
          pend_local_q <= LW'(j_q);
          j_q          <= j_q + 1'b1;
          ev_addr_q    <= ev_addr_q + 1'b1;
          if (j_q >= n_local_q) state_q <= S_IDLE;
        end

        S_THRESH: begin
          if (fire) begin
            rsp_valid_o <= 1'b1;
            rsp_o <= '{kind: RSP_SPIKE, post: n_q, time_step: t_q, data: '0};
            if (wta_q) inhibit_q <= 1'b1;
          end
          n_q <= n_q + 1'b1;
          if (int'(scan_lane_q) == int'(N_PE) - 1) begin
            scan_lane_q  <= '0;
            scan_local_q <= scan_local_q + 1'b1;
          end else begin
            scan_lane_q <= scan_lane_q + 1'b1;
          end
          if (n_q + 1'b1 >= n_post_q) state_q <= S_STDP_START;
        end

        S_STDP_START: begin
          if (learn_q && sidx_q < sm_count_i) begin
            state_q <= S_STDP_WAIT;
          end else begin
            step_first_q <= sm_count_i;
            if (t_q != T_MAX) t_q <= t_q + 1'b1;
            state_q <= S_IDLE;
          end
        end

        S_STDP_WAIT: if (stdp_done_i) begin
          sidx_q  <= sidx_q + 1'b1;
          state_q <= S_STDP_START;
        end

        S_PRUNE_DYN, S_PRUNE_POST: if (prune_done_i) begin
          rsp_valid_o <= 1'b1;
          rsp_o <= '{kind: RSP_DONE, post: '0, time_step: t_q, data: prune_count_i};
          state_q <= S_IDLE;
        end

        default: state_q <= S_IDLE;
      endcase
    end
  end
endmodule
