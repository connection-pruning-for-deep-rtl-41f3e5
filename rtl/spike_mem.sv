// spike_mem: the Spike Memory.
//
// A list of the postsynaptic spikes of the current sample: each entry is the
// ID of the neuron that fired and the time step it fired in. With
// time-to-first-spike coding a neuron fires at most once per sample, so
// MAX_POST entries suffice; a fired bit per neuron lets the controller refuse
// a second spike. The controller appends entries during the threshold phase
// and reads them back (combinational read) to start the STDP unit.
// clear_i empties the list at the start of a sample.
module spike_mem #(
  parameter int unsigned MAX_POST = snn_pkg::DEF_N_PE * snn_pkg::DEF_NPP,
  localparam int unsigned TW      = snn_pkg::T_BITS,
  localparam int unsigned NW      = $clog2(MAX_POST),
  localparam int unsigned CW      = $clog2(MAX_POST + 1)
) (
  input  logic                clk_i,
  input  logic                rst_ni,
  input  logic                clear_i,
  input  logic                push_i,
  input  logic [NW-1:0]       push_id_i,
  input  logic [TW-1:0]       push_time_i,
  input  logic [NW-1:0]       rd_idx_i,
  output logic [NW-1:0]       rd_id_o,
  output logic [TW-1:0]       rd_time_o,
  output logic [CW-1:0]       count_o,
  output logic [MAX_POST-1:0] fired_o
);
  logic [NW-1:0] id_q   [MAX_POST];
  logic [TW-1:0] time_q [MAX_POST];

  always_ff @(posedge clk_i) begin
    if (push_i && !clear_i && count_o < CW'(MAX_POST)) begin
      id_q[count_o[NW-1:0]]   <= push_id_i;
      time_q[count_o[NW-1:0]] <= push_time_i;
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      count_o <= '0;
      fired_o <= '0;
    end else if (clear_i) begin
      count_o <= '0;
      fired_o <= '0;
    end else if (push_i && count_o < CW'(MAX_POST)) begin
      count_o            <= count_o + 1'b1;
      fired_o[push_id_i] <= 1'b1;
    end
  end

  assign rd_id_o   = id_q[rd_idx_i];
  assign rd_time_o = time_q[rd_idx_i];
endmodule
