// accel_tb_body.svh: end-to-end test body shared by the accelerator
// testbenches. The including module declares the localparams
//   TB_N_PE, TB_NPP, TB_MAX_PRE, NUM_LAYERS, LBASE[], LNPRE[], LNPOST[],
//   T_STEPS, N_SAMPLES, K_ITER, WATCHDOG_CYCLES
// and the DUT signals clk, rst_n, cmd_valid, cmd_ready, cmd, rsp_valid, rsp,
// stats, with the accelerator instantiated on them.
//
// The test keeps its own model of the network: weights, potentials,
// presynaptic spike times, decrement counts and spike times, and replays
// every command on it with the arithmetic of the fixed-point formats written
// out directly. For every layer it writes random weights, runs N_SAMPLES
// learning samples (half with winner-take-all inhibition, half without),
// checks each postsynaptic spike (neuron and time step) and each pruning
// count returned by the accelerator, runs post-learning pruning, then reads
// every weight back and compares it with the model. Finally it checks the
// event counters and that each mechanism happened at least once.

int checks = 0, failures = 0;
longint unsigned cycle = 0;

localparam int MP   = TB_N_PE * TB_NPP;
localparam int MPRE = TB_MAX_PRE;

// model state
int unsigned m_w   [MP][MPRE];
int unsigned m_d   [MP][MPRE];
int unsigned m_tp  [MP];
longint unsigned m_pot [MP];
int unsigned m_tpre [MPRE];
bit          m_spk  [MPRE];
bit          m_fired [MP];
bit          m_inhibit;
int unsigned m_iter;

// model parameters
longint unsigned p_vth;
int unsigned p_aplus, p_aminus, p_alpha, p_beta, p_k;
bit p_learn, p_dyn, p_wta;

// mechanism counters
int unsigned n_fire, n_inhibited, n_ltp, n_ltd, n_skip_stdp, n_skip_pe, n_ops_pe;
int unsigned n_dyn_pruned, n_post_pruned, n_dyn_runs, n_multi_fire, n_dsat;

rsp_t rq[$];

always @(posedge clk) begin
  cycle <= cycle + 1;
  if (rst_n && rsp_valid) rq.push_back(rsp);
end

initial begin
  #(WATCHDOG_CYCLES * 10);
  failures++;
  $display("watchdog expired at cycle %0d", cycle);
  $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
  $finish;
end

task automatic check(bit ok, string what);
  checks++;
  if (!ok) begin
    failures++;
    if (failures < 20) $display("FAIL [%0d]: %s", cycle, what);
  end
endtask

task automatic send(op_e op, int unsigned pre, int unsigned post, int unsigned data);
  @(negedge clk);
  cmd_valid = 1'b1;
  cmd = '{op: op, post: POST_BITS'(post), pre: PRE_BITS'(pre), data: DATA_BITS'(data)};
  while (!cmd_ready) @(negedge clk);
  @(negedge clk);
  cmd_valid = 1'b0;
endtask

task automatic set_param(param_e p, int unsigned v);
  send(OP_SET_PARAM, int'(p), 0, v);
endtask

task automatic wait_rsp(rsp_e kind, output rsp_t r);
  forever begin
    while (rq.size() == 0) @(posedge clk);
    r = rq.pop_front();
    if (r.kind == kind) return;
    check(0, $sformatf("unexpected response kind %0d post %0d", r.kind, r.post));
  end
endtask

function automatic int unsigned stdp_new(int unsigned w, bit ltp);
  longint unsigned x, dw;
  x  = (longint'(w) * (65536 - longint'(w))) / 65536;
  dw = (x * (ltp ? p_aplus : p_aminus)) / 65536;
  if (ltp) return (w + dw > 65535) ? 65535 : int'(w + dw);
  return int'(w - dw);
endfunction

// End of a time step in the model: fire, then STDP for the neurons fired now.
task automatic model_end_step(int unsigned t, int unsigned npre, int unsigned npost,
                              ref int unsigned exp_ids[$], ref int unsigned exp_t[$]);
  int unsigned now[$];
  int unsigned n_over_now = 0;
  for (int unsigned n = 0; n < npost; n++) begin
    if (m_pot[n] > p_vth && !m_fired[n]) begin
      if (m_inhibit) n_inhibited++;
      else begin
        m_fired[n] = 1;
        now.push_back(n);
        exp_ids.push_back(n);
        exp_t.push_back(t);
        n_fire++;
        if (p_wta) m_inhibit = 1;
      end
    end
  end
  if (now.size() > 1) n_multi_fire++;
  if (!p_learn) return;
  foreach (now[i]) begin
    int unsigned n = now[i];
    m_tp[n] = t;
    for (int unsigned j = 0; j < npre; j++) begin
      bit ltp = m_spk[j] && (m_tpre[j] <= t);
      if (m_w[n][j] == 0) begin n_skip_stdp++; continue; end
      m_w[n][j] = stdp_new(m_w[n][j], ltp);
      if (ltp) n_ltp++;
      else begin
        n_ltd++;
        if (m_d[n][j] == 1023) n_dsat++;
        else m_d[n][j]++;
      end
    end
  end
endtask

function automatic int unsigned model_prune(bit post_mode, int unsigned npre, int unsigned npost);
  int unsigned c = 0;
  for (int unsigned n = 0; n < npost; n++)
    for (int unsigned j = 0; j < npre; j++) begin
      longint unsigned lhs = longint'(m_d[n][j]) * m_tp[n] * 65536;
      longint unsigned rhs = longint'(p_alpha) * m_w[n][j];
      if (m_w[n][j] != 0 && (post_mode ? (m_w[n][j] < p_beta) : (lhs > rhs))) begin
        m_w[n][j] = 0;
        c++;
      end
    end
  return c;
endfunction

task automatic clear_track();
  foreach (m_d[n, j]) m_d[n][j] = 0;
  foreach (m_tp[n]) m_tp[n] = 0;
endtask

task automatic run_layer(int l);
  int unsigned npre = LNPRE[l], npost = LNPOST[l];
  rsp_t r;
  set_param(P_BASE, LBASE[l]);
  set_param(P_NPRE, npre);
  set_param(P_NPOST, npost);
  // threshold: about a quarter of the inputs at a typical weight
  p_vth = longint'(npre) * 65536 / 4;
  set_param(P_VTH, 32'(p_vth));
  clear_track();
  m_iter = 0;

  // weights: mostly around 0.8, some small ones
  for (int unsigned n = 0; n < npost; n++)
    for (int unsigned j = 0; j < npre; j++) begin
      int unsigned w;
      if ($urandom_range(9) == 0) w = $urandom_range(40000, 600);
      else w = $urandom_range(62000, 42000);
      m_w[n][j] = w;
      send(OP_WRITE_W, j, n, w);
    end

  // a spot check of read-back before learning
  for (int i = 0; i < 4; i++) begin
    int unsigned j = $urandom_range(npre - 1), n = $urandom_range(npost - 1);
    send(OP_READ_W, j, n, 0);
    wait_rsp(RSP_WEIGHT, r);
    check(r.data == m_w[n][j], $sformatf("read-back w[%0d][%0d] %0d vs %0d", n, j, r.data, m_w[n][j]));
  end

  for (int s = 0; s < N_SAMPLES; s++) begin
    int unsigned exp_ids[$], exp_t[$];
    int unsigned got = 0;
    int unsigned exp_pruned;
    p_wta = (s % 2 == 0);
    set_param(P_FLAGS, {29'd0, p_wta, p_dyn, p_learn});
    send(OP_START_SAMPLE, 0, 0, 0);
    foreach (m_pot[n]) m_pot[n] = 0;
    foreach (m_fired[n]) m_fired[n] = 0;
    foreach (m_spk[j]) m_spk[j] = 0;
    m_inhibit = 0;
    // time-to-first-spike input: each input spikes once, at a random step, or never
    for (int unsigned j = 0; j < npre; j++)
      if ($urandom_range(7) != 0) begin
        m_spk[j] = 1;
        m_tpre[j] = $urandom_range(T_STEPS, 1);
      end
    for (int unsigned t = 1; t <= T_STEPS; t++) begin
      for (int unsigned j = 0; j < npre; j++)
        if (m_spk[j] && m_tpre[j] == t) begin
          send(OP_SPIKE, j, 0, 0);
          for (int unsigned n = 0; n < npost; n++)
            if (m_w[n][j] != 0) begin m_pot[n] += m_w[n][j]; n_ops_pe++; end
            else n_skip_pe++;
        end
      send(OP_END_STEP, 0, 0, 0);
      model_end_step(t, npre, npost, exp_ids, exp_t);
    end
    send(OP_END_SAMPLE, 0, 0, 0);
    exp_pruned = 0;
    if (p_learn) begin
      if (p_dyn && p_k != 0 && m_iter + 1 >= p_k) begin
        exp_pruned = model_prune(0, npre, npost);
        n_dyn_pruned += exp_pruned;
        n_dyn_runs++;
        clear_track();
        m_iter = 0;
      end else m_iter++;
    end
    // collect the spikes reported during the sample, then the completion word
    forever begin
      while (rq.size() == 0) @(posedge clk);
      r = rq.pop_front();
      if (r.kind == RSP_DONE) break;
      check(r.kind == RSP_SPIKE, "spike response expected");
      check(got < exp_ids.size(), "more spikes than the model");
      if (got < exp_ids.size())
        check(r.post == POST_BITS'(exp_ids[got]) && r.time_step == T_BITS'(exp_t[got]),
              $sformatf("layer %0d sample %0d spike %0d: got n%0d t%0d, want n%0d t%0d",
                        l, s, got, r.post, r.time_step, exp_ids[got], exp_t[got]));
      got++;
    end
    check(got == exp_ids.size(), $sformatf("spike count %0d vs %0d", got, exp_ids.size()));
    check(r.data == exp_pruned, $sformatf("dynamic pruning count %0d vs %0d", r.data, exp_pruned));
  end

  // post-learning pruning
  send(OP_LAYER_DONE, 0, 0, 0);
  begin
    int unsigned e;
    e = model_prune(1, npre, npost);
    n_post_pruned += e;
    wait_rsp(RSP_DONE, r);
    check(r.data == e, $sformatf("post-learning pruning count %0d vs %0d", r.data, e));
  end

  // every weight of the layer against the model
  for (int unsigned n = 0; n < npost; n++)
    for (int unsigned j = 0; j < npre; j++) begin
      send(OP_READ_W, j, n, 0);
      wait_rsp(RSP_WEIGHT, r);
      check(r.data == m_w[n][j], $sformatf("layer %0d final w[%0d][%0d] %0d vs %0d",
                                           l, n, j, r.data, m_w[n][j]));
    end
endtask

initial begin
  cmd_valid = 0;
  cmd = '0;
  rst_n = 0;
  repeat (3) @(posedge clk);
  rst_n = 1;

  p_aplus = 3277; p_aminus = 2621;   // a+ 0.05, a- 0.04
  p_alpha = 30; p_beta = 32768; p_k = K_ITER;                // beta 0.5
  p_learn = 1; p_dyn = 1; p_wta = 1;
  set_param(P_APLUS, p_aplus);
  set_param(P_AMINUS, p_aminus);
  set_param(P_ALPHA, p_alpha);
  set_param(P_BETA, p_beta);
  set_param(P_K, p_k);

  for (int l = 0; l < NUM_LAYERS; l++) run_layer(l);

  // event counters of the accelerator against the model
  repeat (4) @(posedge clk);
  check(stats.syn_ops == n_ops_pe, $sformatf("syn_ops %0d vs %0d", stats.syn_ops, n_ops_pe));
  check(stats.stdp_ltp == n_ltp, $sformatf("ltp %0d vs %0d", stats.stdp_ltp, n_ltp));
  check(stats.stdp_ltd == n_ltd, $sformatf("ltd %0d vs %0d", stats.stdp_ltd, n_ltd));
  check(stats.stdp_skips == n_skip_stdp, $sformatf("stdp skips %0d vs %0d", stats.stdp_skips, n_skip_stdp));
  check(stats.pruned_dyn == n_dyn_pruned, $sformatf("pruned_dyn %0d vs %0d", stats.pruned_dyn, n_dyn_pruned));
  check(stats.pruned_post == n_post_pruned, $sformatf("pruned_post %0d vs %0d", stats.pruned_post, n_post_pruned));
  check(stats.prune_runs == n_dyn_runs, "prune_runs");

  $display("mechanisms: fires=%0d inhibited=%0d multi_fire_steps=%0d ltp=%0d ltd=%0d stdp_skips=%0d",
           n_fire, n_inhibited, n_multi_fire, n_ltp, n_ltd, n_skip_stdp);
  $display("            pe_ops=%0d pe_skips=%0d (hw %0d) dyn_runs=%0d dyn_pruned=%0d post_pruned=%0d cycles=%0d",
           n_ops_pe, n_skip_pe, stats.syn_skips, n_dyn_runs, n_dyn_pruned, n_post_pruned, cycle);
  check(n_fire > 0, "no neuron fired");
  check(n_inhibited > 0, "lateral inhibition never happened");
  check(n_multi_fire > 0, "no step with several spikes (inhibition off)");
  check(n_ltp > 0 && n_ltd > 0, "LTP and LTD both needed");
  check(n_skip_stdp > 0, "STDP never skipped a pruned connection");
  check(stats.syn_skips > 0, "PE never skipped a pruned connection");
  check(n_dyn_runs > 0 && n_dyn_pruned > 0, "dynamic pruning never removed a connection");
  check(n_post_pruned > 0, "post-learning pruning never removed a connection");
  $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
  $finish;
end
