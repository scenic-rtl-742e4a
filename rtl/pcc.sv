// pcc: programmable congestion control with two regions (dual-CC).
//
// The RDMA command flow from the host passes through one of two congestion-
// control regions before it reaches the RoCE stack. Region #0 holds the
// ACK-clocked window controller, region #1 holds DCQCN (Fig. 2). Both regions
// always receive the congestion signals from the stack (QP info with ACK,
// ECN and RTT), so the region that is not steering commands keeps its state
// warm. The reconfiguration signal hands command steering to the other
// region at once; the idle region can then be replaced by partial
// reconfiguration without a gap in congestion control.
//
// Switching rule (this design's choice): a `reconfig` pulse toggles the
// active region in the next cycle; command handshakes are single-cycle, so no
// command is ever split between regions. The active region index and the
// number of switches are outputs. Region contents follow the paper's two
// reference algorithms; the region interface (rdma_cmd_t in/out plus
// cc_signal_t) is this design's.
module pcc
  import scenic_pkg::*;
#(
  parameter int N_QP        = 256,
  parameter int WINDOW      = 16,
  parameter int DCQCN_PERIOD = 21505
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        reconfig,
  output logic        active,        // 0: region #0 (window), 1: region #1 (DCQCN)
  output logic [31:0] switch_count,
  input  rdma_cmd_t   cmd_in,
  input  logic        cmd_in_valid,
  output logic        cmd_in_ready,
  output rdma_cmd_t   cmd_out,
  output logic        cmd_out_valid,
  input  logic        cmd_out_ready,
  input  cc_signal_t  sig,
  input  logic        sig_valid,
  output logic [31:0] window_blocked_cycles,
  output logic [31:0] dcqcn_cnp_count
);
  rdma_cmd_t r_out [2];
  logic      r_out_valid [2], r_in_ready [2];

  cc_window #(.N_QP(N_QP), .WINDOW(WINDOW)) u_region0 (
    .clk, .rst_n,
    .cmd_in, .cmd_in_valid(cmd_in_valid && !active), .cmd_in_ready(r_in_ready[0]),
    .cmd_out(r_out[0]), .cmd_out_valid(r_out_valid[0]), .cmd_out_ready(cmd_out_ready && !active),
    .sig, .sig_valid, .blocked_cycles(window_blocked_cycles));

  cc_dcqcn #(.N_QP(N_QP), .PERIOD(DCQCN_PERIOD)) u_region1 (
    .clk, .rst_n,
    .cmd_in, .cmd_in_valid(cmd_in_valid && active), .cmd_in_ready(r_in_ready[1]),
    .cmd_out(r_out[1]), .cmd_out_valid(r_out_valid[1]), .cmd_out_ready(cmd_out_ready && active),
    .sig, .sig_valid,
    .obs_qpn('0), .obs_rc(), .obs_rt(), .obs_alpha(), .cnp_count(dcqcn_cnp_count));

  assign cmd_out       = r_out[active];
  assign cmd_out_valid = r_out_valid[active];
  assign cmd_in_ready  = r_in_ready[active];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active <= 1'b0; switch_count <= '0;
    end else if (reconfig) begin
      active       <= !active;
      switch_count <= switch_count + 1;
    end
  end
endmodule
