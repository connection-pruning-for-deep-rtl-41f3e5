// tb_prune_unit: the prune unit with a weight memory and a decrement track
// memory. Random weights, decrement counts and postsynaptic spike times are
// loaded; a dynamic pass (d * t_post / w > alpha) and a post-learning pass
// (w < beta) are run and every weight and both counts are compared with a
// model. Lanes that hold no neuron of the layer must stay untouched, and a
// pass must take exactly 2 cycles per word.
module tb_prune_unit;
  import snn_pkg::*;
  localparam int NPE = 2, NPP = 3, WORDS = 48, NPRE = 10, BASE = 3, NPOST = 5;
  localparam int MP = NPE * NPP;

  logic clk = 0, rst_n;
  logic start, busy, done;
  prune_mode_e mode;
  logic [15:0] alpha, beta;
  logic [1:0] pruned;
  logic [31:0] count;
  logic p_w_rd, p_w_wr, p_d_rd;
  logic [5:0] p_w_rd_a, p_w_wr_a, p_d_rd_a;
  logic [1:0] p_mask;
  logic [NPE-1:0][15:0] w_rd, p_wd;
  logic [NPE-1:0][9:0] d_rd;
  logic [MP-1:0][7:0] tp_all;
  logic t_w_wr, t_w_rd, t_d_wr, t_tp_wr, dclear;
  logic [5:0] t_a;
  logic [NPE-1:0][15:0] t_wd;
  logic [NPE-1:0][9:0] t_dd;
  logic [2:0] t_tp_i;
  logic [7:0] t_tp_v;

  int unsigned mw [MP][NPRE];
  int unsigned md [MP][NPRE];
  int unsigned mtp [MP];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  prune_unit #(.N_PE(NPE), .NPP(NPP), .WORDS(WORDS)) dut (
    .clk_i(clk), .rst_ni(rst_n), .start_i(start), .mode_i(mode), .base_i(6'(BASE)),
    .n_words_i(7'(NPRE * NPP)), .n_post_i(POST_BITS'(NPOST)), .alpha_i(alpha), .beta_i(beta),
    .tpost_i(tp_all), .busy_o(busy), .done_o(done), .pruned_o(pruned), .count_o(count),
    .w_rd_en_o(p_w_rd), .w_rd_addr_o(p_w_rd_a), .w_rd_data_i(w_rd),
    .w_wr_en_o(p_w_wr), .w_wr_addr_o(p_w_wr_a), .w_wr_mask_o(p_mask), .w_wr_data_o(p_wd),
    .d_rd_en_o(p_d_rd), .d_rd_addr_o(p_d_rd_a), .d_rd_data_i(d_rd));

  weight_mem #(.N_LANE(NPE), .WIDTH(16), .DEPTH(WORDS)) wm (.clk_i(clk),
    .rd_en_i(busy ? p_w_rd : t_w_rd), .rd_addr_i(busy ? p_w_rd_a : t_a), .rd_data_o(w_rd),
    .wr_en_i(busy ? p_w_wr : t_w_wr), .wr_addr_i(busy ? p_w_wr_a : t_a),
    .wr_mask_i(busy ? p_mask : 2'b11), .wr_data_i(busy ? p_wd : t_wd));
  decrement_track_mem #(.N_LANE(NPE), .DEPTH(WORDS), .MAX_POST(MP)) dm (.clk_i(clk),
    .rst_ni(rst_n), .clear_i(dclear), .rd_en_i(p_d_rd), .rd_addr_i(p_d_rd_a), .rd_data_o(d_rd),
    .wr_en_i(t_d_wr), .wr_addr_i(t_a), .wr_data_i(t_dd),
    .tpost_wr_i(t_tp_wr), .tpost_idx_i(t_tp_i), .tpost_val_i(t_tp_v), .tpost_o(tp_all));

  task automatic chk(bit ok, string s);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", s); end
  endtask

  task automatic run(prune_mode_e m, int unsigned expect_n);
    automatic int cyc = 0;
    @(negedge clk); start = 1; mode = m;
    @(negedge clk); start = 0; cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    chk(cyc == 2 * NPRE * NPP + 1, $sformatf("pass took %0d cycles", cyc));
    chk(count == expect_n, $sformatf("mode %0d count %0d vs %0d", m, count, expect_n));
  endtask

  task automatic check_weights();
    for (int n = 0; n < MP; n++)
      for (int j = 0; j < NPRE; j++) begin
        @(negedge clk); t_w_rd = 1; t_a = 6'(BASE + j * NPP + n / NPE);
        @(negedge clk); t_w_rd = 0;
        chk(w_rd[n % NPE] == 16'(mw[n][j]), $sformatf("w[%0d][%0d] %0d vs %0d", n, j, w_rd[n % NPE], mw[n][j]));
      end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int unsigned e;
    rst_n = 0; start = 0; mode = PRUNE_DYNAMIC; alpha = 16'd20; beta = 16'd30000;
    t_w_wr = 0; t_w_rd = 0; t_d_wr = 0; t_tp_wr = 0; dclear = 0; t_a = 0; t_wd = '0; t_dd = '0;
    t_tp_i = 0; t_tp_v = 0;
    @(negedge clk); rst_n = 1;
    for (int n = 0; n < MP; n++) begin
      mtp[n] = $urandom_range(12, 1);
      @(negedge clk); t_tp_wr = 1; t_tp_i = 3'(n); t_tp_v = 8'(mtp[n]);
    end
    @(negedge clk); t_tp_wr = 0;
    for (int j = 0; j < NPRE; j++)
      for (int loc = 0; loc < NPP; loc++) begin
        @(negedge clk);
        for (int l = 0; l < NPE; l++) begin
          automatic int n = loc * NPE + l;
          mw[n][j] = ($urandom_range(6) == 0) ? 0 : $urandom_range(65535, 1000);
          md[n][j] = $urandom_range(6);
          t_wd[l] = 16'(mw[n][j]);
          t_dd[l] = 10'(md[n][j]);
        end
        t_w_wr = 1; t_d_wr = 1; t_a = 6'(BASE + j * NPP + loc);
      end
    @(negedge clk); t_w_wr = 0; t_d_wr = 0;

    // dynamic pruning
    e = 0;
    for (int n = 0; n < NPOST; n++)
      for (int j = 0; j < NPRE; j++)
        if (mw[n][j] != 0 && longint'(md[n][j]) * mtp[n] * 65536 > longint'(alpha) * mw[n][j]) begin
          mw[n][j] = 0; e++;
        end
    run(PRUNE_DYNAMIC, e);
    chk(e > 0, "dynamic pass should prune something");
    check_weights();
    // post-learning pruning
    e = 0;
    for (int n = 0; n < NPOST; n++)
      for (int j = 0; j < NPRE; j++)
        if (mw[n][j] != 0 && mw[n][j] < beta) begin mw[n][j] = 0; e++; end
    run(PRUNE_POST, e);
    chk(e > 0, "post pass should prune something");
    check_weights();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
