// cc_window: ACK-clocked window flow control (congestion-control region #0).
//
// Each RDMA command is split by the RoCE stack into packets of at most PMTU
// bytes. This controller keeps, per queue pair, the number of packets sent
// but not yet acknowledged. A command of QP q is let through only while
// outstanding[q] < WINDOW; it then adds ceil(len / PMTU) packets. Every ACK
// signal for q removes one packet. New packets are therefore clocked by
// returning ACKs. ECN marks and RTT samples reach this region too (both
// regions always see the congestion signals) but the window algorithm does
// not use them.
//
// The paper names the algorithm ("simple ACK-clocked window-based flow
// controller"); the window size, the packet accounting and the head-of-line
// behaviour (a blocked command stalls the command stream) are this design's
// choices. PMTU = 4096 bytes matches the 4178-byte RoCE frames of the paper
// (4096 payload + headers). Decision is combinational; the counter update
// takes effect next cycle. A command and an ACK in the same cycle are both
// applied.
module cc_window
  import scenic_pkg::*;
#(
  parameter int N_QP   = 256,
  parameter int WINDOW = 16,
  parameter int PMTU   = 4096
) (
  input  logic        clk,
  input  logic        rst_n,
  input  rdma_cmd_t   cmd_in,
  input  logic        cmd_in_valid,
  output logic        cmd_in_ready,
  output rdma_cmd_t   cmd_out,
  output logic        cmd_out_valid,
  input  logic        cmd_out_ready,
  input  cc_signal_t  sig,
  input  logic        sig_valid,
  output logic [31:0] blocked_cycles
);
  localparam int QW = $clog2(N_QP);
  localparam int PB = $clog2(PMTU);

  // per-QP outstanding packets: a memory plus one valid bit per QP, so that
  // reset only clears the valid bits (an invalid entry reads as 0)
  logic [15:0]     outstanding [N_QP];
  logic [N_QP-1:0] live;

  wire [QW-1:0] q      = QW'(cmd_in.qpn);
  wire [15:0]   npkts  = 16'((cmd_in.len + 32'(PMTU - 1)) >> PB);
  wire [15:0]   out_q  = live[q] ? outstanding[q] : 16'd0;
  wire          open_w = out_q < 16'(WINDOW);

  assign cmd_out       = cmd_in;
  assign cmd_out_valid = cmd_in_valid && open_w;
  assign cmd_in_ready  = cmd_out_ready && open_w;

  wire          send  = cmd_in_valid && cmd_in_ready;
  wire          ack   = sig_valid && sig.ack;
  wire [QW-1:0] aq    = QW'(sig.qpn);
  wire [15:0]   out_a = live[aq] ? outstanding[aq] : 16'd0;
  wire          same  = send && ack && (aq == q);

  always_ff @(posedge clk) begin
    if (send) outstanding[q] <= out_q + npkts - (same ? 16'd1 : 16'd0);
    if (ack && !same) outstanding[aq] <= (out_a != 0) ? out_a - 16'd1 : 16'd0;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      live <= '0;
      blocked_cycles <= '0;
    end else begin
      if (cmd_in_valid && !open_w) blocked_cycles <= blocked_cycles + 1;
      if (send) live[q]  <= 1'b1;
      if (ack)  live[aq] <= 1'b1;
    end
  end
endmodule
