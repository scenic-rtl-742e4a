// flow_steering: steers payload packets from a transport stack to SCUs.
//
// The offloaded RDMA and TCP/IP stacks separate control from data: each
// payload packet they deliver carries a control-plane tag (the RoCE queue
// pair number or the TCP connection id). A table written by the driver (for
// RDMA when a QP is created with an SCU index) maps each tag to the SCU that
// processes that flow, giving per-flow isolation. The tag is sampled with the
// first beat of a packet; the whole packet goes to the selected SCU.
//
// Table: N_TAG entries of $clog2(N_SCU) bits, written through cfg_we/cfg_tag/
// cfg_scu, reset to SCU 0. Routing is combinational (no added latency); the
// decision is held for the rest of the packet. Backpressure from the chosen
// SCU stalls the stack. Table size, reset value and port timing are this
// design's choices; the paper gives the mapping itself.
module flow_steering
  import scenic_pkg::*;
#(
  parameter int N_SCU = 2,
  parameter int N_TAG = 256
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // configuration (driver)
  input  logic                     cfg_we,
  input  logic [$clog2(N_TAG)-1:0] cfg_tag,
  input  logic [$clog2(N_SCU > 1 ? N_SCU : 2)-1:0] cfg_scu,
  // payload from the stack
  input  axis_beat_t               in_beat,
  input  logic [$clog2(N_TAG)-1:0] in_tag,
  input  logic                     in_valid,
  output logic                     in_ready,
  // one stream per SCU
  output axis_beat_t               out_beat  [N_SCU],
  output logic [$clog2(N_TAG)-1:0] out_tag   [N_SCU],
  output logic                     out_valid [N_SCU],
  input  logic                     out_ready [N_SCU]
);
  localparam int SW = $clog2(N_SCU > 1 ? N_SCU : 2);

  logic [SW-1:0] table_q [N_TAG];
  logic          in_pkt;
  logic [SW-1:0] held, dest;
  logic [$clog2(N_TAG)-1:0] held_tag, tag;

  assign dest = in_pkt ? held : table_q[in_tag];
  assign tag  = in_pkt ? held_tag : in_tag;

  always_comb begin
    for (int i = 0; i < N_SCU; i++) begin
      out_beat[i]  = in_beat;
      out_tag[i]   = tag;
      out_valid[i] = in_valid && (dest == SW'(i));
    end
    in_ready = (int'(dest) < N_SCU) ? out_ready[dest] : 1'b0;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < N_TAG; i++) table_q[i] <= '0;
      in_pkt   <= 1'b0;
      held     <= '0;
      held_tag <= '0;
    end else begin
      if (cfg_we) table_q[cfg_tag] <= cfg_scu;
      if (in_valid && in_ready) begin
        if (!in_pkt) begin
          held     <= dest;
          held_tag <= in_tag;
        end
        in_pkt <= !in_beat.last;
      end
    end
  end
endmodule
