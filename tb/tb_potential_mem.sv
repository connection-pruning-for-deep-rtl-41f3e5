// tb_potential_mem: random writes against a shadow copy, combinational reads,
// and the one-cycle clear.
module tb_potential_mem;
  localparam int N = 5;
  logic clk = 0, rst_n, clear, we;
  logic [2:0] raddr, waddr;
  logic [31:0] rdata, wdata;
  logic [31:0] shadow [N];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  potential_mem #(.NPP(N)) dut (.clk_i(clk), .rst_ni(rst_n), .clear_i(clear),
    .rd_addr_i(raddr), .rd_data_o(rdata), .wr_en_i(we), .wr_addr_i(waddr), .wr_data_i(wdata));

  task automatic chk(int a, logic [31:0] e);
    raddr = 3'(a); #1;
    checks++;
    if (rdata !== e) begin failures++; $display("FAIL pot[%0d] %0d vs %0d", a, rdata, e); end
  endtask

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 0; clear = 0; we = 0; raddr = 0; waddr = 0; wdata = 0;
    @(negedge clk); rst_n = 1;
    for (int a = 0; a < N; a++) begin shadow[a] = 0; chk(a, 0); end
    for (int i = 0; i < 200; i++) begin
      @(negedge clk);
      we = 1; waddr = 3'($urandom_range(N-1)); wdata = $urandom;
      shadow[waddr] = wdata;
      @(negedge clk); we = 0;
      for (int a = 0; a < N; a++) chk(a, shadow[a]);
    end
    @(negedge clk); clear = 1; we = 1; waddr = 0; wdata = 32'h1234;
    @(negedge clk); clear = 0; we = 0;
    for (int a = 0; a < N; a++) chk(a, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
