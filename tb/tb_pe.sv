// tb_pe: one PE on one Potential Memory. Random weight streams (some zero,
// i.e. pruned) are accumulated; potentials, op/skip pulses and threshold
// comparisons are checked against a model, including saturation.
module tb_pe;
  localparam int N = 5;
  logic clk = 0, rst_n, clear;
  logic acc_valid, over, op, skip, we;
  logic [2:0] acc_local, cmp_local, raddr, waddr;
  logic [15:0] weight;
  logic [31:0] vth, rdata, wdata;
  longint unsigned model [N];
  int checks = 0, failures = 0, nops = 0, nskips = 0;

  always #5 clk = ~clk;
  pe #(.NPP(N)) dut (.acc_valid_i(acc_valid), .acc_local_i(acc_local), .acc_weight_i(weight),
    .cmp_local_i(cmp_local), .vth_i(vth), .over_o(over), .op_o(op), .skip_o(skip),
    .pm_raddr_o(raddr), .pm_rdata_i(rdata), .pm_we_o(we), .pm_waddr_o(waddr), .pm_wdata_o(wdata));
  potential_mem #(.NPP(N)) pm (.clk_i(clk), .rst_ni(rst_n), .clear_i(clear),
    .rd_addr_i(raddr), .rd_data_o(rdata), .wr_en_i(we), .wr_addr_i(waddr), .wr_data_i(wdata));

  task automatic chk(bit ok, string s);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", s); end
  endtask

  initial begin
    repeat (80000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 0; clear = 0; acc_valid = 0; acc_local = 0; cmp_local = 0; weight = 0;
    vth = 32'd200000;
    foreach (model[i]) model[i] = 0;
    @(negedge clk); rst_n = 1;
    for (int i = 0; i < 300; i++) begin
      @(negedge clk);
      acc_valid = 1; acc_local = 3'($urandom_range(N-1));
      weight = ($urandom_range(4) == 0) ? 16'd0 : 16'($urandom);
      #1;
      chk(op == (weight != 0) && skip == (weight == 0), "op/skip");
      if (weight != 0) begin model[acc_local] += weight; nops++; end else nskips++;
      @(negedge clk); acc_valid = 0;
      for (int n = 0; n < N; n++) begin
        cmp_local = 3'(n); #1;
        chk(over == (model[n] > vth), $sformatf("over n%0d pot %0d", n, model[n]));
        chk(rdata == 32'(model[n]), $sformatf("pot n%0d %0d vs %0d", n, rdata, model[n]));
      end
    end
    // saturation
    @(negedge clk); clear = 1;
    @(negedge clk); clear = 0;
    acc_valid = 1; acc_local = 2; weight = 16'hFFFF;
    repeat (65540) @(negedge clk);
    acc_valid = 0; cmp_local = 2; #1;
    chk(rdata == 32'hFFFF_FFFF, "saturation");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
