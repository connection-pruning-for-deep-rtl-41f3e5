// tb_controller: checks the controller's sequencing inside a small
// accelerator (2 PEs of 3 neurons, 10 inputs, 5 neurons). With learning off
// it checks the spikes produced by known weights and inputs, that inference
// leaves the weights unchanged, and the busy time of each command:
//   OP_SPIKE     ceil(n_post/N_PE) + 1 cycles
//   OP_END_STEP  n_post + 1 cycles without learning,
//                n_post + 2*n_pre - z + 3 cycles when one neuron fires and
//                learns (z: pruned weights among its first n_pre-1 inputs)
// With learning on it checks that the firing neuron's weights move (LTP for
// inputs that spiked in time, LTD for the rest).
module tb_controller;
  import snn_pkg::*;
  localparam int NPE = 2, NPP = 3, MPRE = 16, WORDS = 48, NPRE = 10, NPOST = 5;

  logic   clk = 0, rst_n;
  logic   cmd_valid, cmd_ready, rsp_valid;
  cmd_t   cmd;
  rsp_t   rsp;
  stats_t stats;
  int checks = 0, failures = 0;
  int unsigned w [NPOST][NPRE];
  rsp_t rq[$];
  int busy_len[$];
  op_e busy_op[$];
  int run_len = 0;
  op_e last_op;

  always #5 clk = ~clk;

  neuromorphic_accelerator #(.N_PE(NPE), .NPP(NPP), .WORDS(WORDS), .MAX_PRE(MPRE)) dut (
    .clk_i(clk), .rst_ni(rst_n), .cmd_valid_i(cmd_valid), .cmd_ready_o(cmd_ready),
    .cmd_i(cmd), .rsp_valid_o(rsp_valid), .rsp_o(rsp), .stats_o(stats));

  // busy-time monitor on the controller's ready output
  always @(posedge clk) begin
    if (rst_n && rsp_valid) rq.push_back(rsp);
    if (rst_n && dut.u_ctrl.cmd_valid_i && dut.u_ctrl.cmd_ready_o) last_op = dut.u_ctrl.cmd_i.op;
    if (rst_n && !dut.u_ctrl.cmd_ready_o) run_len++;
    else if (run_len != 0) begin
      busy_len.push_back(run_len);
      busy_op.push_back(last_op);
      run_len = 0;
    end
  end

  task automatic chk(bit ok, string s);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", s); end
  endtask

  task automatic send(op_e op, int unsigned pre, int unsigned post, int unsigned data);
    @(negedge clk);
    cmd_valid = 1'b1;
    cmd = '{op: op, post: POST_BITS'(post), pre: PRE_BITS'(pre), data: DATA_BITS'(data)};
    while (!cmd_ready) @(negedge clk);
    @(negedge clk);
    cmd_valid = 1'b0;
  endtask

  task automatic idle(int n = 40);
    repeat (n) @(negedge clk);
  endtask

  task automatic expect_busy(op_e op, int len);
    idle();
    chk(busy_len.size() == 1, $sformatf("op %0d: %0d busy periods", op, busy_len.size()));
    if (busy_len.size() > 0)
      chk(busy_op[0] == op && busy_len[0] == len,
          $sformatf("op %0d busy %0d cycles, want %0d", busy_op[0], busy_len[0], len));
    busy_len.delete(); busy_op.delete();
  endtask

  function automatic int unsigned read_rsp_data();
    rsp_t r = rq.pop_front();
    return r.data;
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rsp_t r;
    longint unsigned pot [NPOST];
    bit fired [NPOST];
    int unsigned spk_t [NPRE];
    longint unsigned vth = 100000;
    cmd_valid = 0; cmd = '0; rst_n = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    send(OP_SET_PARAM, P_BASE, 0, 0);
    send(OP_SET_PARAM, P_NPRE, 0, NPRE);
    send(OP_SET_PARAM, P_NPOST, 0, NPOST);
    send(OP_SET_PARAM, P_VTH, 0, 32'(vth));
    send(OP_SET_PARAM, P_FLAGS, 0, 0);     // inference, no pruning, no inhibition
    for (int n = 0; n < NPOST; n++)
      for (int j = 0; j < NPRE; j++) begin
        w[n][j] = ((n + j) % 7 == 0) ? 0 : 3000 * (n + 1) + 500 * j;
        send(OP_WRITE_W, j, n, w[n][j]);
      end
    idle();
    busy_len.delete(); busy_op.delete();

    // inference sample: inputs j spike at step 1 + j / 4
    foreach (pot[n]) begin pot[n] = 0; fired[n] = 0; end
    send(OP_START_SAMPLE, 0, 0, 0);
    idle(); busy_len.delete(); busy_op.delete();
    for (int t = 1; t <= 3; t++) begin
      automatic int unsigned exp_fire[$];
      for (int j = 0; j < NPRE; j++) begin
        spk_t[j] = 1 + j / 4;
        if (spk_t[j] == t) begin
          send(OP_SPIKE, j, 0, 0);
          expect_busy(OP_SPIKE, (NPOST + NPE - 1) / NPE + 1);
          for (int n = 0; n < NPOST; n++) pot[n] += w[n][j];
        end
      end
      for (int n = 0; n < NPOST; n++)
        if (!fired[n] && pot[n] > vth) begin fired[n] = 1; exp_fire.push_back(n); end
      send(OP_END_STEP, 0, 0, 0);
      expect_busy(OP_END_STEP, NPOST + 1);
      chk(rq.size() == exp_fire.size(), $sformatf("step %0d: %0d spikes, want %0d", t, rq.size(), exp_fire.size()));
      foreach (exp_fire[i])
        if (rq.size() > 0) begin
          r = rq.pop_front();
          chk(r.kind == RSP_SPIKE && r.post == POST_BITS'(exp_fire[i]) && r.time_step == T_BITS'(t),
              $sformatf("step %0d spike %0d: n%0d t%0d", t, i, r.post, r.time_step));
        end
      rq.delete();
    end
    send(OP_END_SAMPLE, 0, 0, 0);
    idle();
    chk(rq.size() == 1 && rq[0].kind == RSP_DONE && rq[0].data == 0, "done word after inference sample");
    rq.delete();
    // inference must not change weights
    for (int n = 0; n < NPOST; n++)
      for (int j = 0; j < NPRE; j++) begin
        send(OP_READ_W, j, n, 0);
        idle(4);
        chk(rq.size() == 1 && rq[0].data == w[n][j], $sformatf("w[%0d][%0d] changed", n, j));
        rq.delete();
      end
    busy_len.delete(); busy_op.delete();

    // learning: only neuron 4 (largest weights) crosses the threshold
    send(OP_SET_PARAM, P_FLAGS, 0, 3'b101);
    send(OP_SET_PARAM, P_APLUS, 0, 3277);
    send(OP_SET_PARAM, P_AMINUS, 0, 2621);
    send(OP_SET_PARAM, P_VTH, 0, 32'd40000);
    send(OP_START_SAMPLE, 0, 0, 0);
    send(OP_SPIKE, 0, 0, 0);
    send(OP_SPIKE, 1, 0, 0);
    send(OP_SPIKE, 2, 0, 0);
    idle(); busy_len.delete(); busy_op.delete();
    send(OP_END_STEP, 0, 0, 0);
    begin
      automatic longint unsigned p4 = 0;
      automatic int nf = 0;
      for (int j = 0; j < 3; j++) p4 += w[4][j];
      for (int n = 0; n < NPOST; n++) begin
        automatic longint unsigned p = 0;
        for (int j = 0; j < 3; j++) p += w[n][j];
        if (p > 40000) nf++;
      end
      chk(p4 > 40000 && nf == 1, "test setup: only neuron 4 above threshold");
    end
    begin
      automatic int z = 0;
      for (int j = 0; j < NPRE - 1; j++) if (w[4][j] == 0) z++;
      chk(z > 0, "test setup: a pruned input shortens learning");
      expect_busy(OP_END_STEP, NPOST + 2 * NPRE - z + 3);
    end
    chk(rq.size() == 1 && rq[0].post == 4, "learning spike from neuron 4");
    rq.delete();
    for (int j = 0; j < NPRE; j++) begin
      send(OP_READ_W, j, 4, 0);
      idle(4);
      if (w[4][j] == 0) chk(rq[0].data == 0, "pruned weight stays zero");
      else if (j < 3) chk(rq[0].data > w[4][j], $sformatf("LTP on input %0d", j));
      else chk(rq[0].data < w[4][j], $sformatf("LTD on input %0d", j));
      rq.delete();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
