// tb_spike_mem: appends spike records, reads them back in order, checks the
// count, the fired bits and the clear.
module tb_spike_mem;
  localparam int N = 20;
  logic clk = 0, rst_n, clear, push;
  logic [4:0] pid, ridx, rid;
  logic [7:0] ptime, rtime;
  logic [5:0] count;
  logic [N-1:0] fired;
  int ids[$], times[$];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  spike_mem #(.MAX_POST(N)) dut (.clk_i(clk), .rst_ni(rst_n), .clear_i(clear),
    .push_i(push), .push_id_i(pid), .push_time_i(ptime), .rd_idx_i(ridx),
    .rd_id_o(rid), .rd_time_o(rtime), .count_o(count), .fired_o(fired));

  task automatic chk(bit ok, string s);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", s); end
  endtask

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 0; clear = 0; push = 0; pid = 0; ptime = 0; ridx = 0;
    @(negedge clk); rst_n = 1;
    for (int r = 0; r < 3; r++) begin
      automatic logic [N-1:0] exp_f = '0;
      @(negedge clk); clear = 1;
      @(negedge clk); clear = 0;
      ids.delete(); times.delete();
      chk(count == 0 && fired == 0, "clear");
      for (int i = 0; i < 8 + r * 4; i++) begin
        int id;
        do id = $urandom_range(N-1); while (exp_f[id]);
        exp_f[id] = 1;
        @(negedge clk); push = 1; pid = 5'(id); ptime = 8'(i + 1);
        ids.push_back(id); times.push_back(i + 1);
        @(negedge clk); push = 0;
      end
      chk(int'(count) == ids.size(), $sformatf("count %0d vs %0d", count, ids.size()));
      chk(fired == exp_f, "fired bits");
      foreach (ids[i]) begin
        ridx = 5'(i); #1;
        chk(int'(rid) == ids[i] && int'(rtime) == times[i], $sformatf("entry %0d", i));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
