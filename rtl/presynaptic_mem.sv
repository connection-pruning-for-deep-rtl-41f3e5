// presynaptic_mem: the Presynaptic Memory.
//
// Records, for each presynaptic input of the layer being processed, the time
// step at which it spiked in the current sample. With time-to-first-spike
// coding an input spikes at most once per sample, so one time value per input
// suffices. The STDP unit reads it to decide between LTP (input spiked at or
// before the postsynaptic spike) and LTD (input spiked later or not at all).
//
// A valid bit per input, cleared in one cycle by clear_i at the start of a
// sample, tells a spiked input from one that has not spiked yet. The read
// port is synchronous: valid and time appear one cycle after rd_en.
module presynaptic_mem #(
  parameter int unsigned DEPTH = snn_pkg::DEF_MAX_PRE,
  localparam int unsigned TW   = snn_pkg::T_BITS,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic          clk_i,
  input  logic          rst_ni,
  input  logic          clear_i,
  input  logic          wr_en_i,
  input  logic [AW-1:0] wr_addr_i,
  input  logic [TW-1:0] wr_time_i,
  input  logic          rd_en_i,
  input  logic [AW-1:0] rd_addr_i,
  output logic          rd_valid_o,
  output logic [TW-1:0] rd_time_o
);
  logic [TW-1:0]    times [DEPTH];
  logic [DEPTH-1:0] valid_q;

  always_ff @(posedge clk_i) begin
    if (wr_en_i) times[wr_addr_i] <= wr_time_i;
    if (rd_en_i) rd_time_o <= times[rd_addr_i];
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      valid_q    <= '0;
      rd_valid_o <= 1'b0;
    end else begin
      if (rd_en_i) rd_valid_o <= valid_q[rd_addr_i] && !clear_i;
      if (clear_i) valid_q <= '0;
      else if (wr_en_i) valid_q[wr_addr_i] <= 1'b1;
    end
  end
endmodule
