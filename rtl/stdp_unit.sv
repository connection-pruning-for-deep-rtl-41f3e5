// stdp_unit: the STDP Unit.
//
// Applies the multiplicative STDP rule to every connection of one
// postsynaptic neuron that has just fired:
//   dw = +a+ * w * (1 - w)   if the input spiked at or before t_post (LTP)
//   dw = -a- * w * (1 - w)   otherwise, including inputs that never spiked (LTD)
// with w in [0, 1]. Each LTD is recorded in the Decrement Track Memory by
// incrementing the connection's counter d (saturating), and the neuron's
// spike time t_post is stored there too, for the prune unit.
//
// A connection whose weight is zero has been pruned: it is skipped, with no
// weight or counter write. Because w(1-w) is zero at w = 0, this is also what
// the rule itself would do. A pruned connection also costs one cycle less:
// the cycle in which its zero weight is seen already issues the read of the
// next input, so learning time shrinks as connections are pruned.
//
// Arithmetic (this design's choice): w, a+ and a- are Q0.16. w(1-w) is
// formed exactly as w*(65536-w) >> 16, then multiplied by the rate and
// shifted by 16 (truncation). LTP saturates at 65535. LTD cannot reach zero,
// since dw < w, so only the prune unit removes connections.
//
// Sequencing: after start_i the unit walks the inputs 0..n_pre-1 of the
// neuron, two cycles each (read weight word, presynaptic time and counter
// word; then write back), one cycle for a pruned input that is not the last,
// and pulses done_o. A pass therefore takes 2*n_pre - z cycles after the
// start cycle, z being the number of zero weights among inputs 0..n_pre-2. The neuron's weights sit in lane
// post % N_PE of words base + pre*NPP + post / N_PE.
module stdp_unit
  import snn_pkg::*;
#(
  parameter int unsigned N_PE     = DEF_N_PE,
  parameter int unsigned NPP      = DEF_NPP,
  parameter int unsigned WORDS    = DEF_WORDS,
  parameter int unsigned MAX_PRE  = DEF_MAX_PRE,
  localparam int unsigned MAX_POST = N_PE * NPP,
  localparam int unsigned AW      = $clog2(WORDS),
  localparam int unsigned PW      = $clog2(MAX_PRE),
  localparam int unsigned NW      = $clog2(MAX_POST)
) (
  input  logic                         clk_i,
  input  logic                         rst_ni,
  input  logic                         start_i,
  input  logic [NW-1:0]                post_i,
  input  logic [T_BITS-1:0]            t_post_i,
  input  logic [PRE_BITS-1:0]          n_pre_i,
  input  logic [AW-1:0]                base_i,
  input  logic [W_BITS-1:0]            a_plus_i,
  input  logic [W_BITS-1:0]            a_minus_i,
  output logic                         busy_o,
  output logic                         done_o,
  // weight memory
  output logic                         w_rd_en_o,
  output logic [AW-1:0]                w_rd_addr_o,
  input  logic [N_PE-1:0][W_BITS-1:0]  w_rd_data_i,
  output logic                         w_wr_en_o,
  output logic [AW-1:0]                w_wr_addr_o,
  output logic [N_PE-1:0]              w_wr_mask_o,
  output logic [N_PE-1:0][W_BITS-1:0]  w_wr_data_o,
  // presynaptic memory
  output logic                         pre_rd_en_o,
  output logic [PW-1:0]                pre_rd_addr_o,
  input  logic                         pre_rd_valid_i,
  input  logic [T_BITS-1:0]            pre_rd_time_i,
  // decrement track memory
  output logic                         d_rd_en_o,
  output logic [AW-1:0]                d_rd_addr_o,
  input  logic [N_PE-1:0][D_BITS-1:0]  d_rd_data_i,
  output logic                         d_wr_en_o,
  output logic [AW-1:0]                d_wr_addr_o,
  output logic [N_PE-1:0][D_BITS-1:0]  d_wr_data_o,
  output logic                         tpost_wr_o,
  output logic [NW-1:0]                tpost_idx_o,
  output logic [T_BITS-1:0]            tpost_val_o,
  // event pulses
  output logic                         ltp_o,
  output logic                         ltd_o,
  output logic                         skip_o
);
  typedef enum logic [1:0] {S_IDLE, S_READ, S_WRITE} state_e;

  localparam int unsigned LN = (N_PE > 1) ? $clog2(N_PE) : 1;

  state_e              state_q;
  logic [PRE_BITS-1:0] pre_q, n_pre_q;
  logic [AW-1:0]       addr_q;
  logic [LN-1:0]       lane_q;
  logic [T_BITS-1:0]   t_post_q;
  logic [W_BITS-1:0]   a_plus_q, a_minus_q;

  // Rule evaluation for the word just read.
  logic [W_BITS-1:0]   w_old, w_new;
  logic                ltp;
  logic [W_BITS:0]     one_minus_w;
  logic [2*W_BITS:0]   wprod;
  logic [W_BITS-1:0]   w_1mw;   // w(1-w) <= 2^14, fits
  logic [2*W_BITS:0]   dprod;
  logic [W_BITS-1:0]   dw;
  logic [W_BITS:0]     w_up;
  logic [D_BITS-1:0]   d_old;
  // Fraction bits dropped by the two truncating Q0.16 multiplies, and the
  // product MSB that is always zero because w(1-w) and dw stay below 2^16.
  logic                unused_prod_bits;
  assign unused_prod_bits = ^{wprod[2*W_BITS], wprod[W_BITS-1:0],
                              dprod[2*W_BITS], dprod[W_BITS-1:0]};

  always_comb begin
    w_old       = w_rd_data_i[lane_q];
    d_old       = d_rd_data_i[lane_q];
    ltp         = pre_rd_valid_i && (pre_rd_time_i <= t_post_q);
    one_minus_w = (W_BITS+1)'(1) << W_BITS;
    one_minus_w = one_minus_w - {1'b0, w_old};
    wprod       = {{W_BITS{1'b0}}, w_old} * {{W_BITS{1'b0}}, one_minus_w};
    w_1mw       = wprod[2*W_BITS-1:W_BITS];
    dprod       = {{(W_BITS+1){1'b0}}, w_1mw} * {{(W_BITS+1){1'b0}}, (ltp ? a_plus_q : a_minus_q)};
    dw          = dprod[2*W_BITS-1:W_BITS];
    w_up        = {1'b0, w_old} + {1'b0, dw};
    if (ltp) w_new = w_up[W_BITS] ? '1 : w_up[W_BITS-1:0];
    else     w_new = w_old - dw;
  end

  logic active_write;
  assign active_write = (state_q == S_WRITE) && (w_old != '0);

  // A pruned input that is not the last: read the next input right away.
  logic last_in, fast_next;
  assign last_in   = (pre_q + 1'b1 == n_pre_q);
  assign fast_next = (state_q == S_WRITE) && (w_old == '0) && !last_in;

  always_comb begin
    w_rd_en_o     = (state_q == S_READ) || fast_next;
    w_rd_addr_o   = fast_next ? addr_q + AW'(NPP) : addr_q;
    pre_rd_en_o   = w_rd_en_o;
    pre_rd_addr_o = fast_next ? PW'(pre_q + 1'b1) : PW'(pre_q);
    d_rd_en_o     = w_rd_en_o;
    d_rd_addr_o   = w_rd_addr_o;

    w_wr_en_o     = active_write;
    w_wr_addr_o   = addr_q;
    w_wr_mask_o   = '0;
    w_wr_mask_o[lane_q] = 1'b1;
    w_wr_data_o   = '0;
    w_wr_data_o[lane_q] = w_new;

    d_wr_en_o     = active_write && !ltp;
    d_wr_addr_o   = addr_q;
    d_wr_data_o   = d_rd_data_i;
    d_wr_data_o[lane_q] = (d_old == D_MAX) ? d_old : d_old + 1'b1;

    ltp_o  = active_write && ltp;
    ltd_o  = active_write && !ltp;
    skip_o = (state_q == S_WRITE) && (w_old == '0);
    busy_o = (state_q != S_IDLE);
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q     <= S_IDLE;
      pre_q       <= '0;
      n_pre_q     <= '0;
      addr_q      <= '0;
      lane_q      <= '0;
      t_post_q    <= '0;
      a_plus_q    <= '0;
      a_minus_q   <= '0;
      done_o      <= 1'b0;
      tpost_wr_o  <= 1'b0;
      tpost_idx_o <= '0;
      tpost_val_o <= '0;
    end else begin
      done_o     <= 1'b0;
      tpost_wr_o <= 1'b0;
      unique case (state_q)
        S_IDLE: if (start_i) begin
          pre_q       <= '0;
          n_pre_q     <= n_pre_i;
          lane_q      <= LN'(post_i % NW'(N_PE));
          addr_q      <= base_i + AW'(post_i / NW'(N_PE));
          t_post_q    <= t_post_i;
          a_plus_q    <= a_plus_i;
          a_minus_q   <= a_minus_i;
          tpost_wr_o  <= 1'b1;
          tpost_idx_o <= post_i;
          tpost_val_o <= t_post_i;
          if (n_pre_i == '0) done_o <= 1'b1;
          else               state_q <= S_READ;
        end
        S_READ: state_q <= S_WRITE;
        S_WRITE: begin
          pre_q  <= pre_q + 1'b1;
          addr_q <= addr_q + AW'(NPP);
          if (last_in) begin
            state_q <= S_IDLE;
            done_o  <= 1'b1;
          end else if (!fast_next) begin
            state_q <= S_READ;
          end
        end
        default: state_q <= S_IDLE;
      endcase
    end
  end

endmodule
