// prune_unit: the Prune Unit, both pruning stages.
//
// Dynamic pruning (mode PRUNE_DYNAMIC), run every k learning iterations:
// a connection is pruned when P = (d / w) * t_post > alpha, where d is its
// LTD count over the last k iterations, w its weight and t_post the latest
// spike time of its postsynaptic neuron. With w in Q0.16 the test is made
// without a divider as   d * t_post * 2^16 > alpha * w.
// Post-learning pruning (mode PRUNE_POST), run once when a layer has finished
// learning: a connection is pruned when w < beta.
// Pruning writes zero into the Weight Memory. Connections that are already
// zero are left alone and not counted again.
//
// Sequencing: after start_i the unit walks the n_words weight words of the
// layer from base_i, two cycles per word (read weight and decrement words;
// then write back the word with its pruned lanes zeroed). All N_PE lanes of a
// word are tested in parallel, one multiplier pair per lane. Lanes whose
// neuron index local*N_PE + lane is not below n_post_i do not exist in the
// layer and are never touched. done_o pulses at the end; pruned_o pulses with
// the number of connections removed in each word, and count_o holds the total
// of the last run.
// The write data is always zero: pruning only ever clears lanes, and the lane
// mask selects which. The unpruned lanes of the word are not rewritten.
module prune_unit
  import snn_pkg::*;
#(
  parameter int unsigned N_PE  = DEF_N_PE,
  parameter int unsigned NPP   = DEF_NPP,
  parameter int unsigned WORDS = DEF_WORDS,
  localparam int unsigned MAX_POST = N_PE * NPP,
  localparam int unsigned AW    = $clog2(WORDS),
  localparam int unsigned CW    = $clog2(N_PE + 1)
) (
  input  logic                            clk_i,
  input  logic                            rst_ni,
  input  logic                            start_i,
  input  prune_mode_e                     mode_i,
  input  logic [AW-1:0]                   base_i,
  input  logic [AW:0]                     n_words_i,
  input  logic [POST_BITS-1:0]            n_post_i,
  input  logic [15:0]                     alpha_i,
  input  logic [W_BITS-1:0]               beta_i,
  input  logic [MAX_POST-1:0][T_BITS-1:0] tpost_i,
  output logic                            busy_o,
  output logic                            done_o,
  output logic [CW-1:0]                   pruned_o,
  output logic [31:0]                     count_o,
  // weight memory
  output logic                            w_rd_en_o,
  output logic [AW-1:0]                   w_rd_addr_o,
  input  logic [N_PE-1:0][W_BITS-1:0]     w_rd_data_i,
  output logic                            w_wr_en_o,
  output logic [AW-1:0]                   w_wr_addr_o,
  output logic [N_PE-1:0]                 w_wr_mask_o,
  output logic [N_PE-1:0][W_BITS-1:0]     w_wr_data_o,
  // decrement track memory
  output logic                            d_rd_en_o,
  output logic [AW-1:0]                   d_rd_addr_o,
  input  logic [N_PE-1:0][D_BITS-1:0]     d_rd_data_i
);
  typedef enum logic [1:0] {S_IDLE, S_READ, S_WRITE} state_e;
  localparam int unsigned LW = (NPP > 1) ? $clog2(NPP) : 1;
  // Both sides of d*t_post*2^16 > alpha*w fit in CMP_W bits.
  localparam int unsigned CMP_W = D_BITS + T_BITS + W_BITS + 1;

  state_e            state_q;
  prune_mode_e       mode_q;
  logic [AW-1:0]     addr_q;
  logic [AW:0]       left_q;
  logic [LW-1:0]     local_q;
  logic [POST_BITS-1:0] n_post_q;
  logic [15:0]       alpha_q;
  logic [W_BITS-1:0] beta_q;

  logic [N_PE-1:0]   prune;
  logic [CW-1:0]     n_pruned;

  always_comb begin
    n_pruned = '0;
    for (int l = 0; l < int'(N_PE); l++) begin
      automatic int unsigned  post = int'(local_q) * N_PE + l;
      automatic logic [W_BITS-1:0] w = w_rd_data_i[l];
      automatic logic [T_BITS-1:0] t = (post < MAX_POST) ? tpost_i[post] : '0;
      automatic logic [CMP_W-1:0] lhs =
          (CMP_W'(d_rd_data_i[l]) * CMP_W'(t)) << W_BITS;
      automatic logic [CMP_W-1:0] rhs = CMP_W'(alpha_q) * CMP_W'(w);
      prune[l] = (state_q == S_WRITE) && (post < int'(n_post_q)) && (w != '0) &&
                 ((mode_q == PRUNE_POST) ? (w < beta_q) : (lhs > rhs));
      n_pruned += CW'(prune[l]);
    end
  end

  always_comb begin
    w_rd_en_o   = (state_q == S_READ);
    w_rd_addr_o = addr_q;
    d_rd_en_o   = (state_q == S_READ);
    d_rd_addr_o = addr_q;
    w_wr_en_o   = (prune != '0);
    w_wr_addr_o = addr_q;
    w_wr_mask_o = prune;
    w_wr_data_o = '0;
    pruned_o    = n_pruned;
    busy_o      = (state_q != S_IDLE);
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q  <= S_IDLE;
      mode_q   <= PRUNE_DYNAMIC;
      addr_q   <= '0;
      left_q   <= '0;
      local_q  <= '0;
      n_post_q <= '0;
      alpha_q  <= '0;
      beta_q   <= '0;
      done_o   <= 1'b0;
      count_o  <= '0;
    end else begin
      done_o <= 1'b0;
      unique case (state_q)
        S_IDLE: if (start_i) begin
          mode_q   <= mode_i;
          addr_q   <= base_i;
          left_q   <= n_words_i;
          local_q  <= '0;
          n_post_q <= n_post_i;
          alpha_q  <= alpha_i;
          beta_q   <= beta_i;
          count_o  <= '0;
          if (n_words_i == '0) done_o <= 1'b1;
          else                 state_q <= S_READ;
        end
        S_READ: state_q <= S_WRITE;
        S_WRITE: begin
          count_o <= count_o + 32'(n_pruned);
          addr_q  <= addr_q + 1'b1;
          left_q  <= left_q - 1'b1;
          local_q <= (int'(local_q) == int'(NPP) - 1) ? '0 : local_q + 1'b1;
          if (left_q == (AW+1)'(1)) begin
            state_q <= S_IDLE;
            done_o  <= 1'b1;
          end else begin
            state_q <= S_READ;
          end
        end
        default: state_q <= S_IDLE;
      endcase
    end
  end
endmodule
