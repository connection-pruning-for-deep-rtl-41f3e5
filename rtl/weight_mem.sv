// weight_mem: the Weight Memory. Holds every connection weight of all layers.
//
// Organisation (this design's choice): one word per (presynaptic input, local
// neuron slot); a word carries N_LANE weights, one for each processing
// element, so a single read feeds all PEs at once. A weight of zero marks a
// pruned connection; the prune unit sets weights to zero here, as the published design
// describes.
//
// Ports: one synchronous read port (data one cycle after rd_en) and one write
// port with a per-lane write mask. A read and a write to the same word in the
// same cycle return the old word. The contents are not reset: the host writes
// the weights before learning starts.
module weight_mem #(
  parameter int unsigned N_LANE = snn_pkg::DEF_N_PE,
  parameter int unsigned WIDTH  = snn_pkg::W_BITS,
  parameter int unsigned DEPTH  = snn_pkg::DEF_WORDS,
  localparam int unsigned AW    = $clog2(DEPTH)
) (
  input  logic                          clk_i,
  input  logic                          rd_en_i,
  input  logic [AW-1:0]                 rd_addr_i,
  output logic [N_LANE-1:0][WIDTH-1:0]  rd_data_o,
  input  logic                          wr_en_i,
  input  logic [AW-1:0]                 wr_addr_i,
  input  logic [N_LANE-1:0]             wr_mask_i,
  input  logic [N_LANE-1:0][WIDTH-1:0]  wr_data_i
);
  logic [N_LANE-1:0][WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk_i) begin
    if (wr_en_i)
      for (int l = 0; l < int'(N_LANE); l++)
        if (wr_mask_i[l]) mem[wr_addr_i][l] <= wr_data_i[l];
    if (rd_en_i) rd_data_o <= mem[rd_addr_i];
  end
endmodule
