// potential_mem: one Potential Memory, private to one processing element.
//
// Holds the membrane potentials of the NPP postsynaptic neurons that its PE
// owns. It is small, so it is built from registers with a combinational read
// port, which lets the PE read, add and write back a potential in one cycle.
// clear_i zeroes all potentials (start of a sample); a write in the same
// cycle is ignored.
module potential_mem #(
  parameter int unsigned NPP = snn_pkg::DEF_NPP,
  localparam int unsigned VW = snn_pkg::V_BITS,
  localparam int unsigned AW = (NPP > 1) ? $clog2(NPP) : 1
) (
  input  logic          clk_i,
  input  logic          rst_ni,
  input  logic          clear_i,
  input  logic [AW-1:0] rd_addr_i,
  output logic [VW-1:0] rd_data_o,
  input  logic          wr_en_i,
  input  logic [AW-1:0] wr_addr_i,
  input  logic [VW-1:0] wr_data_i
);
  logic [VW-1:0] pot_q [NPP];

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      for (int i = 0; i < int'(NPP); i++) pot_q[i] <= '0;
    end else if (clear_i) begin
      for (int i = 0; i < int'(NPP); i++) pot_q[i] <= '0;
    end else if (wr_en_i && int'(wr_addr_i) < int'(NPP)) begin
      pot_q[wr_addr_i] <= wr_data_i;
    end
  end

  assign rd_data_o = (int'(rd_addr_i) < int'(NPP)) ? pot_q[rd_addr_i] : '0;
endmodule
