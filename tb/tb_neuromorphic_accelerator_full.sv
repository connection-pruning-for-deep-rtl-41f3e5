// tb_neuromorphic_accelerator_full: the end-to-end test of
// accel_tb_body.svh on the accelerator at its default size (4 PEs of 5
// neurons, 1156-input windows, weight memory for all three layers), run on
// the geometry of each of the three convolutional layers of the evaluated
// network in turn: 50 inputs x 4 kernels, 1156 x 20 and 500 x 20.
module tb_neuromorphic_accelerator_full;
  import snn_pkg::*;

  localparam int TB_N_PE = DEF_N_PE;
  localparam int TB_NPP = DEF_NPP;
  localparam int TB_MAX_PRE = DEF_MAX_PRE;
  localparam int NUM_LAYERS = 3;
  localparam int unsigned LBASE  [NUM_LAYERS] = '{layer_base(0, DEF_NPP), layer_base(1, DEF_NPP),
                                                  layer_base(2, DEF_NPP)};
  localparam int unsigned LNPRE  [NUM_LAYERS] = LAYER_PRE;
  localparam int unsigned LNPOST [NUM_LAYERS] = LAYER_POST;
  localparam int unsigned T_STEPS = 8;
  localparam int N_SAMPLES = 4;
  localparam int unsigned K_ITER = 2;
  localparam longint WATCHDOG_CYCLES = 3000000;

  logic   clk = 0, rst_n;
  logic   cmd_valid, cmd_ready, rsp_valid;
  cmd_t   cmd;
  rsp_t   rsp;
  stats_t stats;

  always #5 clk = ~clk;

  neuromorphic_accelerator dut (
    .clk_i(clk), .rst_ni(rst_n), .cmd_valid_i(cmd_valid), .cmd_ready_o(cmd_ready),
    .cmd_i(cmd), .rsp_valid_o(rsp_valid), .rsp_o(rsp), .stats_o(stats)
  );

  `include "accel_tb_body.svh"
endmodule
