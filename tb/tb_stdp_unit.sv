// tb_stdp_unit: the STDP unit with a weight memory, a presynaptic memory and
// a decrement track memory around it. Random weights (some zero) and random
// presynaptic spike times are loaded; the unit is started for several
// postsynaptic neurons and spike times. Every weight, decrement counter and
// t_post value is compared with a model of the rule written from the
// equation, and the run time must be exactly 2 cycles per input, 1 for a pruned input
// that is not the last.
module tb_stdp_unit;
  import snn_pkg::*;
  localparam int NPE = 2, NPP = 3, WORDS = 48, MPRE = 16, NPRE = 12, BASE = 6;
  localparam int MP = NPE * NPP;

  logic clk = 0, rst_n;
  logic start, busy, done;
  logic [2:0] post;
  logic [7:0] tpost;
  logic [15:0] ap = 16'd3277, am = 16'd2621;
  // memory wiring
  logic s_w_rd, s_w_wr, s_d_rd, s_d_wr, pre_rd, pre_valid, tp_wr, ltp, ltd, skip;
  logic [5:0] s_w_rd_a, s_w_wr_a, s_d_rd_a, s_d_wr_a;
  logic [1:0] s_w_mask;
  logic [NPE-1:0][15:0] w_rd, s_w_wd;
  logic [NPE-1:0][9:0] d_rd, s_d_wd;
  logic [3:0] pre_a;
  logic [7:0] pre_t;
  logic [2:0] tp_idx;
  logic [7:0] tp_val;
  logic [MP-1:0][7:0] tp_all;
  // testbench access
  logic t_w_wr, t_w_rd, t_p_wr, pclear, dclear;
  logic [5:0] t_w_a;
  logic [1:0] t_mask;
  logic [NPE-1:0][15:0] t_wd;
  logic [3:0] t_p_a;
  logic [7:0] t_p_t;

  int unsigned mw [MP][NPRE];
  int unsigned md [MP][NPRE];
  int unsigned mtp [MP];
  bit mspk [NPRE];
  int unsigned mt [NPRE];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  stdp_unit #(.N_PE(NPE), .NPP(NPP), .WORDS(WORDS), .MAX_PRE(MPRE)) dut (
    .clk_i(clk), .rst_ni(rst_n), .start_i(start), .post_i(post), .t_post_i(tpost),
    .n_pre_i(PRE_BITS'(NPRE)), .base_i(6'(BASE)), .a_plus_i(ap), .a_minus_i(am),
    .busy_o(busy), .done_o(done),
    .w_rd_en_o(s_w_rd), .w_rd_addr_o(s_w_rd_a), .w_rd_data_i(w_rd),
    .w_wr_en_o(s_w_wr), .w_wr_addr_o(s_w_wr_a), .w_wr_mask_o(s_w_mask), .w_wr_data_o(s_w_wd),
    .pre_rd_en_o(pre_rd), .pre_rd_addr_o(pre_a), .pre_rd_valid_i(pre_valid), .pre_rd_time_i(pre_t),
    .d_rd_en_o(s_d_rd), .d_rd_addr_o(s_d_rd_a), .d_rd_data_i(d_rd),
    .d_wr_en_o(s_d_wr), .d_wr_addr_o(s_d_wr_a), .d_wr_data_o(s_d_wd),
    .tpost_wr_o(tp_wr), .tpost_idx_o(tp_idx), .tpost_val_o(tp_val),
    .ltp_o(ltp), .ltd_o(ltd), .skip_o(skip));

  weight_mem #(.N_LANE(NPE), .WIDTH(16), .DEPTH(WORDS)) wm (.clk_i(clk),
    .rd_en_i(busy ? s_w_rd : t_w_rd), .rd_addr_i(busy ? s_w_rd_a : t_w_a), .rd_data_o(w_rd),
    .wr_en_i(busy ? s_w_wr : t_w_wr), .wr_addr_i(busy ? s_w_wr_a : t_w_a),
    .wr_mask_i(busy ? s_w_mask : t_mask), .wr_data_i(busy ? s_w_wd : t_wd));
  presynaptic_mem #(.DEPTH(MPRE)) pm (.clk_i(clk), .rst_ni(rst_n), .clear_i(pclear),
    .wr_en_i(t_p_wr), .wr_addr_i(t_p_a), .wr_time_i(t_p_t),
    .rd_en_i(pre_rd), .rd_addr_i(pre_a), .rd_valid_o(pre_valid), .rd_time_o(pre_t));
  decrement_track_mem #(.N_LANE(NPE), .DEPTH(WORDS), .MAX_POST(MP)) dm (.clk_i(clk),
    .rst_ni(rst_n), .clear_i(dclear), .rd_en_i(s_d_rd), .rd_addr_i(s_d_rd_a), .rd_data_o(d_rd),
    .wr_en_i(s_d_wr), .wr_addr_i(s_d_wr_a), .wr_data_i(s_d_wd),
    .tpost_wr_i(tp_wr), .tpost_idx_i(tp_idx), .tpost_val_i(tp_val), .tpost_o(tp_all));

  task automatic chk(bit ok, string s);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", s); end
  endtask

  function automatic int unsigned rule(int unsigned w, bit up);
    longint unsigned x = (longint'(w) * (65536 - longint'(w))) >> 16;
    longint unsigned dw = (x * (up ? ap : am)) >> 16;
    if (up) return (w + dw > 65535) ? 65535 : int'(w + dw);
    return int'(w - dw);
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 0; start = 0; post = 0; tpost = 0;
    t_w_wr = 0; t_w_rd = 0; t_p_wr = 0; pclear = 0; dclear = 0;
    t_w_a = 0; t_mask = 0; t_wd = '0; t_p_a = 0; t_p_t = 0;
    @(negedge clk); rst_n = 1;
    dclear = 1; pclear = 1;
    @(negedge clk); dclear = 0; pclear = 0;
    foreach (md[n, j]) md[n][j] = 0;
    foreach (mtp[n]) mtp[n] = 0;
    // weights
    for (int n = 0; n < MP; n++)
      for (int j = 0; j < NPRE; j++) begin
        mw[n][j] = ($urandom_range(5) == 0) ? 0 : $urandom_range(65535, 1);
        if (j == 3) mw[n][j] = 65535;
        @(negedge clk);
        t_w_wr = 1; t_w_a = 6'(BASE + j * NPP + n / NPE);
        t_mask = '0; t_mask[n % NPE] = 1'b1;
        t_wd = '0; t_wd[n % NPE] = 16'(mw[n][j]);
      end
    @(negedge clk); t_w_wr = 0;
    // presynaptic spikes
    for (int j = 0; j < NPRE; j++) begin
      mspk[j] = ($urandom_range(3) != 0);
      mt[j] = $urandom_range(10, 1);
      if (mspk[j]) begin
        @(negedge clk); t_p_wr = 1; t_p_a = 4'(j); t_p_t = 8'(mt[j]);
      end
    end
    @(negedge clk); t_p_wr = 0;

    for (int r = 0; r < 10; r++) begin
      automatic int n = (r < MP) ? r : $urandom_range(MP-1);
      automatic int unsigned tp = $urandom_range(10, 1);
      automatic int cyc = 0;
      automatic int nz = 0;
      @(negedge clk); start = 1; post = 3'(n); tpost = 8'(tp);
      @(negedge clk); start = 0;
      cyc = 1;
      while (!done) begin @(negedge clk); cyc++; end
      nz = 0;
      for (int j = 0; j < NPRE - 1; j++) if (mw[n][j] == 0) nz++;
      chk(cyc == 2 * NPRE - nz + 1, $sformatf("run time %0d cycles, want %0d", cyc, 2 * NPRE - nz + 1));
      mtp[n] = tp;
      for (int j = 0; j < NPRE; j++)
        if (mw[n][j] != 0) begin
          automatic bit up = mspk[j] && mt[j] <= tp;
          mw[n][j] = rule(mw[n][j], up);
          if (!up) md[n][j]++;
        end
    end
    // read everything back through the memories
    for (int n = 0; n < MP; n++)
      for (int j = 0; j < NPRE; j++) begin
        @(negedge clk); t_w_rd = 1; t_w_a = 6'(BASE + j * NPP + n / NPE);
        @(negedge clk); t_w_rd = 0;
        chk(w_rd[n % NPE] == 16'(mw[n][j]), $sformatf("w[%0d][%0d] %0d vs %0d", n, j, w_rd[n % NPE], mw[n][j]));
        chk(dm.valid_q[BASE + j * NPP + n / NPE] ? dm.mem[BASE + j * NPP + n / NPE][n % NPE] == 10'(md[n][j]) : md[n][j] == 0,
            $sformatf("d[%0d][%0d] vs %0d", n, j, md[n][j]));
      end
    for (int n = 0; n < MP; n++) chk(tp_all[n] == 8'(mtp[n]), $sformatf("t_post[%0d]", n));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
