// decrement_track_mem: the Decrement Track Memory.
//
// For every connection it holds d, the number of LTD updates the STDP unit has
// applied to it since the last dynamic pruning pass (the numerator of the
// weight-update history h = d / w). It uses the same word layout as the weight
// memory: word (pre, local neuron slot), one D_BITS counter per PE lane. It
// also keeps, for every postsynaptic neuron, the time step of its latest
// spike, t_post, which the STDP unit writes and the prune unit reads.
//
// clear_i empties everything in one cycle: a valid bit per word makes an
// unwritten word read as zero, and the t_post registers are reset. The
// controller clears the memory at a layer change and after each dynamic
// pruning pass, so that d counts the decrements of the last k iterations.
//
// Ports: synchronous read (data one cycle after rd_en), whole-word write (the
// STDP unit writes back the word it read with one lane changed), t_post write
// port and all t_post values as a flat output.
module decrement_track_mem #(
  parameter int unsigned N_LANE   = snn_pkg::DEF_N_PE,
  parameter int unsigned DEPTH    = snn_pkg::DEF_WORDS,
  parameter int unsigned MAX_POST = snn_pkg::DEF_N_PE * snn_pkg::DEF_NPP,
  localparam int unsigned DW      = snn_pkg::D_BITS,
  localparam int unsigned TW      = snn_pkg::T_BITS,
  localparam int unsigned AW      = $clog2(DEPTH),
  localparam int unsigned NW      = $clog2(MAX_POST)
) (
  input  logic                          clk_i,
  input  logic                          rst_ni,
  input  logic                          clear_i,
  input  logic                          rd_en_i,
  input  logic [AW-1:0]                 rd_addr_i,
  output logic [N_LANE-1:0][DW-1:0]     rd_data_o,
  input  logic                          wr_en_i,
  input  logic [AW-1:0]                 wr_addr_i,
  input  logic [N_LANE-1:0][DW-1:0]     wr_data_i,
  input  logic                          tpost_wr_i,
  input  logic [NW-1:0]                 tpost_idx_i,
  input  logic [TW-1:0]                 tpost_val_i,
  output logic [MAX_POST-1:0][TW-1:0]   tpost_o
);
  logic [N_LANE-1:0][DW-1:0] mem [DEPTH];
  logic [DEPTH-1:0]          valid_q;
  logic [N_LANE-1:0][DW-1:0] rd_q;
  logic                      rd_valid_q;

  always_ff @(posedge clk_i) begin
    if (wr_en_i) mem[wr_addr_i] <= wr_data_i;
    if (rd_en_i) rd_q <= mem[rd_addr_i];
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      valid_q <= DEPTH'(0);
      rd_valid_q <= 1'b0;
      tpost_o    <= '0;
    end else begin
      if (rd_en_i) rd_valid_q <= valid_q[rd_addr_i] && !clear_i;
      if (clear_i) begin
        valid_q <= DEPTH'(0);
        tpost_o <= '0;
      end else begin
        if (wr_en_i) valid_q[wr_addr_i] <= 1'b1;
        if (tpost_wr_i) tpost_o[tpost_idx_i] <= tpost_val_i;
      end
    end
  end

  assign rd_data_o = rd_valid_q ? rd_q : '0;
endmodule
