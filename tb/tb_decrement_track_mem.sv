// tb_decrement_track_mem: whole-word writes and synchronous reads against a
// shadow copy, words never written reading as zero, t_post writes, and the
// one-cycle clear of counters and t_post values.
module tb_decrement_track_mem;
  localparam int L = 2, D = 32, MP = 6;
  logic clk = 0, rst_n, clear, re, we, tw;
  logic [4:0] ra, wa;
  logic [L-1:0][9:0] rd, wd;
  logic [2:0] ti;
  logic [7:0] tv;
  logic [MP-1:0][7:0] tp;
  logic [L-1:0][9:0] shadow [D];
  logic [MP-1:0][7:0] tshadow;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  decrement_track_mem #(.N_LANE(L), .DEPTH(D), .MAX_POST(MP)) dut (.clk_i(clk), .rst_ni(rst_n),
    .clear_i(clear), .rd_en_i(re), .rd_addr_i(ra), .rd_data_o(rd), .wr_en_i(we), .wr_addr_i(wa),
    .wr_data_i(wd), .tpost_wr_i(tw), .tpost_idx_i(ti), .tpost_val_i(tv), .tpost_o(tp));

  task automatic chk(bit ok, string s);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", s); end
  endtask

  task automatic check_all();
    for (int a = 0; a < D; a++) begin
      @(negedge clk); re = 1; ra = 5'(a);
      @(negedge clk); re = 0;
      chk(rd == shadow[a], $sformatf("word %0d: %h vs %h", a, rd, shadow[a]));
    end
    chk(tp == tshadow, "t_post values");
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 0; clear = 0; re = 0; we = 0; tw = 0; ra = 0; wa = 0; wd = '0; ti = 0; tv = 0;
    @(negedge clk); rst_n = 1;
    for (int r = 0; r < 3; r++) begin
      @(negedge clk); clear = 1;
      @(negedge clk); clear = 0;
      foreach (shadow[a]) shadow[a] = '0;
      tshadow = '0;
      check_all();
      for (int i = 0; i < 20; i++) begin
        @(negedge clk);
        we = 1; wa = 5'($urandom_range(D-1));
        wd[0] = 10'($urandom); wd[1] = 10'($urandom);
        tw = 1; ti = 3'($urandom_range(MP-1)); tv = 8'($urandom_range(255, 1));
        shadow[wa] = wd; tshadow[ti] = tv;
        @(negedge clk); we = 0; tw = 0;
      end
      check_all();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
