// tb_weight_mem: writes random words with random lane masks into a small
// weight memory, keeps a shadow copy, and checks every read (one-cycle read
// latency, masked lanes unchanged).
module tb_weight_mem;
  localparam int L = 4, W = 16, D = 64;
  logic clk = 0;
  logic rd_en, wr_en;
  logic [5:0] rd_addr, wr_addr;
  logic [L-1:0] wr_mask;
  logic [L-1:0][W-1:0] wr_data, rd_data;
  logic [L-1:0][W-1:0] shadow [D];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  weight_mem #(.N_LANE(L), .WIDTH(W), .DEPTH(D)) dut (
    .clk_i(clk), .rd_en_i(rd_en), .rd_addr_i(rd_addr), .rd_data_o(rd_data),
    .wr_en_i(wr_en), .wr_addr_i(wr_addr), .wr_mask_i(wr_mask), .wr_data_i(wr_data));

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rd_en = 0; wr_en = 0; rd_addr = 0; wr_addr = 0; wr_mask = '1; wr_data = '0;
    // fill
    for (int a = 0; a < D; a++) begin
      @(negedge clk);
      wr_en = 1; wr_addr = 6'(a); wr_mask = '1;
      for (int l = 0; l < L; l++) wr_data[l] = 16'($urandom);
      shadow[a] = wr_data;
    end
    // random masked writes and reads
    for (int i = 0; i < 400; i++) begin
      @(negedge clk);
      wr_en = ($urandom_range(1) == 1);
      wr_addr = 6'($urandom_range(D-1));
      wr_mask = L'($urandom);
      for (int l = 0; l < L; l++) wr_data[l] = 16'($urandom);
      rd_en = 1; rd_addr = 6'($urandom_range(D-1));
      if (rd_addr == wr_addr) rd_addr = rd_addr + 1'b1;
      begin
        automatic logic [L-1:0][W-1:0] expect_rd = shadow[rd_addr];
        if (wr_en) for (int l = 0; l < L; l++) if (wr_mask[l]) shadow[wr_addr][l] = wr_data[l];
        @(negedge clk);
        wr_en = 0; rd_en = 0;
        checks++;
        if (rd_data !== expect_rd) begin
          failures++;
          $display("FAIL read %0d: %h vs %h", rd_addr, rd_data, expect_rd);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
