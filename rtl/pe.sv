// pe: processing element, integrate-and-fire.
//
// Accumulate: when acc_valid_i is high, the PE adds the weight it receives
// for local neuron acc_local_i to that neuron's membrane potential,
// v(t) = v(t-1) + w, reading and writing its Potential Memory in the same
// cycle. A zero weight is a pruned connection: the update is skipped and
// reported on skip_o, which is where pruning saves work during inference and
// learning. The sum saturates instead of wrapping.
//
// Compare: when acc_valid_i is low, the PE reads the potential of neuron
// cmp_local_i and over_o tells whether it exceeds the firing threshold
// (strictly greater, following "exceeds"). The result is combinational.
module pe #(
  parameter int unsigned NPP = snn_pkg::DEF_NPP,
  localparam int unsigned VW = snn_pkg::V_BITS,
  localparam int unsigned WW = snn_pkg::W_BITS,
  localparam int unsigned AW = (NPP > 1) ? $clog2(NPP) : 1
) (
  input  logic          acc_valid_i,
  input  logic [AW-1:0] acc_local_i,
  input  logic [WW-1:0] acc_weight_i,
  input  logic [AW-1:0] cmp_local_i,
  input  logic [VW-1:0] vth_i,
  output logic          over_o,
  output logic          op_o,
  output logic          skip_o,
  // Potential Memory port
  output logic [AW-1:0] pm_raddr_o,
  input  logic [VW-1:0] pm_rdata_i,
  output logic          pm_we_o,
  output logic [AW-1:0] pm_waddr_o,
  output logic [VW-1:0] pm_wdata_o
);
  logic [VW:0] sum;

  always_comb begin
    pm_raddr_o = acc_valid_i ? acc_local_i : cmp_local_i;
    sum        = {1'b0, pm_rdata_i} + {{(VW+1-WW){1'b0}}, acc_weight_i};
    op_o       = acc_valid_i && (acc_weight_i != '0);
    skip_o     = acc_valid_i && (acc_weight_i == '0);
    pm_we_o    = op_o;
    pm_waddr_o = acc_local_i;
    pm_wdata_o = sum[VW] ? '1 : sum[VW-1:0];
    over_o     = !acc_valid_i && (pm_rdata_i > vth_i);
  end
endmodule
