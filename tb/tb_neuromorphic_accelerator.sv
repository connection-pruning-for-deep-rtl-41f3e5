// tb_neuromorphic_accelerator: end-to-end test of the accelerator at a
// reduced size (2 PEs of 3 neurons, 16 presynaptic inputs, two layers), so
// that every weight can be checked against the test's own model. The test
// body is in accel_tb_body.svh.
module tb_neuromorphic_accelerator;
  import snn_pkg::*;

  localparam int TB_N_PE = 2;
  localparam int TB_NPP = 3;
  localparam int TB_MAX_PRE = 16;
  localparam int TB_WORDS = 2 * TB_MAX_PRE * TB_NPP;
  localparam int NUM_LAYERS = 2;
  localparam int unsigned LBASE  [NUM_LAYERS] = '{0, TB_MAX_PRE * TB_NPP};
  localparam int unsigned LNPRE  [NUM_LAYERS] = '{12, 16};
  localparam int unsigned LNPOST [NUM_LAYERS] = '{5, 6};
  localparam int unsigned T_STEPS = 8;
  localparam int N_SAMPLES = 12;
  localparam int unsigned K_ITER = 3;
  localparam longint WATCHDOG_CYCLES = 400000;

  logic   clk = 0, rst_n;
  logic   cmd_valid, cmd_ready, rsp_valid;
  cmd_t   cmd;
  rsp_t   rsp;
  stats_t stats;

  always #5 clk = ~clk;

  neuromorphic_accelerator #(
    .N_PE(TB_N_PE), .NPP(TB_NPP), .WORDS(TB_WORDS), .MAX_PRE(TB_MAX_PRE)
  ) dut (
    .clk_i(clk), .rst_ni(rst_n), .cmd_valid_i(cmd_valid), .cmd_ready_o(cmd_ready),
    .cmd_i(cmd), .rsp_valid_o(rsp_valid), .rsp_o(rsp), .stats_o(stats)
  );

  `include "accel_tb_body.svh"
endmodule
