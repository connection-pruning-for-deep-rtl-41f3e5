// tb_io_handler: streams random commands through the I/O handler while the
// controller side accepts them at random, and checks order, loss-free
// delivery, back-pressure when the FIFO is full, and the one-cycle response
// register.
module tb_io_handler;
  import snn_pkg::*;
  localparam int DEPTH = 4, N = 300;
  logic clk = 0, rst_n;
  logic cmd_valid, cmd_ready, rsp_valid, ctl_valid, ctl_ready, ctl_rsp_valid;
  cmd_t cmd, ctl_cmd;
  rsp_t rsp, ctl_rsp;
  cmd_t sent[$];
  int checks = 0, failures = 0, got = 0, full_seen = 0;

  always #5 clk = ~clk;
  io_handler #(.DEPTH(DEPTH)) dut (.clk_i(clk), .rst_ni(rst_n),
    .cmd_valid_i(cmd_valid), .cmd_ready_o(cmd_ready), .cmd_i(cmd),
    .rsp_valid_o(rsp_valid), .rsp_o(rsp),
    .ctl_valid_o(ctl_valid), .ctl_ready_i(ctl_ready), .ctl_cmd_o(ctl_cmd),
    .ctl_rsp_valid_i(ctl_rsp_valid), .ctl_rsp_i(ctl_rsp));

  task automatic chk(bit ok, string s);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", s); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // host side: keeps a command valid until accepted
  initial begin
    rst_n = 0; cmd_valid = 0; cmd = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int i = 0; i < N; i++) begin
      @(negedge clk);
      cmd_valid = 1;
      cmd = '{op: op_e'($urandom_range(8)), post: POST_BITS'($urandom), pre: PRE_BITS'($urandom), data: $urandom};
      while (!cmd_ready) begin full_seen++; @(negedge clk); end
      sent.push_back(cmd);
      @(posedge clk); #1;
      if ($urandom_range(2) == 0) cmd_valid = 0;
    end
    @(negedge clk); cmd_valid = 0;
  end

  // controller side: random ready, order check; response loop-back check
  always @(negedge clk) begin
    if (rst_n) begin
      ctl_ready = ($urandom_range(2) == 0);
      ctl_rsp_valid = ($urandom_range(1) == 0);
      ctl_rsp = '{kind: rsp_e'($urandom_range(2)), post: POST_BITS'($urandom),
                  time_step: T_BITS'($urandom), data: $urandom};
    end else begin
      ctl_ready = 0; ctl_rsp_valid = 0; ctl_rsp = '0;
    end
  end

  rsp_t exp_rsp;
  logic exp_valid = 0;
  always @(posedge clk) begin
    exp_valid <= rst_n && ctl_rsp_valid;
    exp_rsp   <= ctl_rsp;
  end
  always @(posedge clk) begin
    if (rst_n) begin
      if (ctl_valid && ctl_ready) begin
        chk(sent.size() > 0 && ctl_cmd == sent[0], $sformatf("command %0d out of order", got));
        if (sent.size() > 0) void'(sent.pop_front());
        got++;
      end
      #1;
      chk(rsp_valid == exp_valid && (!exp_valid || rsp == exp_rsp), "response register");
    end
    if (got == N) begin
      chk(full_seen > 0, "FIFO never filled");
      $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
      $finish;
    end
  end
endmodule
