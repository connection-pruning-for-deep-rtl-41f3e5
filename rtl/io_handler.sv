// io_handler: the I/O Handler between the host CPU and the controller.
//
// Inbound, it is a FIFO of DEPTH command words (spike events and control
// commands, see snn_pkg::cmd_t) with a valid/ready handshake on both sides,
// so that the host can keep streaming spike events while the controller is
// busy with a time step. Outbound, it registers the controller's responses
// (postsynaptic spikes, read-back weights, completion words) for one cycle
// before they leave on rsp_valid_o/rsp_o; the host must accept a response in
// the cycle it is valid.
//
// The published architecture only names this block and shows spike events
// flowing into it; the FIFO, its depth and the response path are this
// design's choices.
// Rule checked by assertion: once the host raises cmd_valid_i it keeps the
// word stable until it is accepted. Because that assertion is disabled
// during reset, the linter sees rst_ni used both as the flops' asynchronous
// reset and synchronously; the assertion is not hardware, and the reset of
// the logic itself is purely asynchronous.
module io_handler
  import snn_pkg::*;
#(
  parameter int unsigned DEPTH = 4
) (
  input  logic clk_i,
  input  logic rst_ni,
  // host side
  input  logic cmd_valid_i,
  output logic cmd_ready_o,
  input  cmd_t cmd_i,
  output logic rsp_valid_o,
  output rsp_t rsp_o,
  // controller side
  output logic ctl_valid_o,
  input  logic ctl_ready_i,
  output cmd_t ctl_cmd_o,
  input  logic ctl_rsp_valid_i,
  input  rsp_t ctl_rsp_i
);
  localparam int unsigned PW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  cmd_t            fifo_q [DEPTH];
  logic [PW-1:0]   rd_ptr_q, wr_ptr_q;
  logic [PW:0]     count_q;
  logic            push, pop;

  assign cmd_ready_o = (count_q < (PW+1)'(DEPTH));
  assign ctl_valid_o = (count_q != '0);
  assign ctl_cmd_o   = fifo_q[rd_ptr_q];
  assign push        = cmd_valid_i && cmd_ready_o;
  assign pop         = ctl_valid_o && ctl_ready_i;

  function automatic logic [PW-1:0] next_ptr(logic [PW-1:0] p);
    return (int'(p) == int'(DEPTH) - 1) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk_i) begin
    if (push) fifo_q[wr_ptr_q] <= cmd_i;
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      rd_ptr_q    <= '0;
      wr_ptr_q    <= '0;
      count_q     <= '0;
      rsp_valid_o <= 1'b0;
      rsp_o       <= '0;
    end else begin
      if (push) wr_ptr_q <= next_ptr(wr_ptr_q);
      if (pop)  rd_ptr_q <= next_ptr(rd_ptr_q);
      count_q     <= count_q + (PW+1)'(push) - (PW+1)'(pop);
      rsp_valid_o <= ctl_rsp_valid_i;
      if (ctl_rsp_valid_i) rsp_o <= ctl_rsp_i;
    end
  end

  a_cmd_stable: assert property (@(posedge clk_i) disable iff (!rst_ni)
    cmd_valid_i && !cmd_ready_o |=> cmd_valid_i && $stable(cmd_i));
endmodule
