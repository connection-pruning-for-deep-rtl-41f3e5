// tb_presynaptic_mem: records spike times of random inputs, checks the
// synchronous read of valid bit and time, and the one-cycle clear.
module tb_presynaptic_mem;
  localparam int D = 40;
  logic clk = 0, rst_n, clear, we, re, rvalid;
  logic [5:0] waddr, raddr;
  logic [7:0] wtime, rtime;
  bit   sv [D];
  logic [7:0] st [D];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  presynaptic_mem #(.DEPTH(D)) dut (.clk_i(clk), .rst_ni(rst_n), .clear_i(clear),
    .wr_en_i(we), .wr_addr_i(waddr), .wr_time_i(wtime),
    .rd_en_i(re), .rd_addr_i(raddr), .rd_valid_o(rvalid), .rd_time_o(rtime));

  task automatic chk_all();
    for (int a = 0; a < D; a++) begin
      @(negedge clk); re = 1; raddr = 6'(a);
      @(negedge clk); re = 0;
      checks++;
      if (rvalid !== sv[a] || (sv[a] && rtime !== st[a])) begin
        failures++;
        $display("FAIL pre %0d: v%0d t%0d vs v%0d t%0d", a, rvalid, rtime, sv[a], st[a]);
      end
    end
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 0; clear = 0; we = 0; re = 0; waddr = 0; raddr = 0; wtime = 0;
    @(negedge clk); rst_n = 1;
    for (int r = 0; r < 2; r++) begin
      @(negedge clk); clear = 1;
      @(negedge clk); clear = 0;
      foreach (sv[a]) sv[a] = 0;
      for (int i = 0; i < 25; i++) begin
        @(negedge clk);
        we = 1; waddr = 6'($urandom_range(D-1)); wtime = 8'($urandom_range(30, 1));
        sv[waddr] = 1; st[waddr] = wtime;
        @(negedge clk); we = 0;
      end
      chk_all();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
