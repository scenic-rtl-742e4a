// traffic_filter: network prefilter that separates fast path from slow path.
//
// Every received Ethernet frame is classified from its first 64-byte beat and
// the whole frame is forwarded to one of three outputs:
//   DEST_ROCE - IPv4 / UDP with destination port 4791 (RoCEv2), if ROCE_EN
//   DEST_TCP  - IPv4 / TCP, if TCP_EN
//   DEST_SLOW - everything else (ARP, ICMP, other UDP, IPv6, ...), which goes
//               to the host through the netdev path.
// Following the paper, TCP and RoCEv2 packets go to the offloaded stacks when
// those are compiled in and all unhandled traffic goes to the host. The header
// offsets, the UDP port number and the handling of IPv4 options (the UDP port
// must lie in the first beat, IHL <= 11, otherwise the frame takes the slow
// path) are this design's choices from the protocol standards.
//
// Timing: purely combinational routing, zero added latency; the decision for
// the first beat is held in a register for the rest of the frame. Backpressure
// from the chosen output stalls the input. Per-destination frame counters are
// provided for statistics.
module traffic_filter
  import scenic_pkg::*;
#(
  parameter bit TCP_EN  = 1'b1,
  parameter bit ROCE_EN = 1'b1
) (
  input  logic        clk,
  input  logic        rst_n,
  input  axis_beat_t  in_beat,
  input  logic        in_valid,
  output logic        in_ready,
  output axis_beat_t  out_beat  [3],
  output logic        out_valid [3],
  input  logic        out_ready [3],
  output logic [31:0] frame_count [3]
);
  logic     in_frame;      // a frame is in progress (first beat already seen)
  fp_dest_e held_dest, first_dest, dest;

  // Classification of a first beat.
  always_comb begin
    logic [15:0] etype;
    logic [7:0]  proto;
    logic [3:0]  ihl;
    int unsigned port_off;
    logic [15:0] udp_dport;
    etype     = frame_u16(in_beat.data, OFF_ETHERTYPE);
    proto     = frame_byte(in_beat.data, OFF_IP_PROTO);
    ihl       = in_beat.data[OFF_L4_BASE*8 +: 4];
    port_off  = OFF_L4_BASE + 4 * int'(ihl) + 2;
    udp_dport = (port_off <= KEEP_W - 2) ? frame_u16(in_beat.data, port_off) : 16'h0;
    first_dest = DEST_SLOW;
    if (etype == ETHERTYPE_IPV4 && ihl >= 4'd5) begin
      if (ROCE_EN && proto == IP_PROTO_UDP && port_off <= KEEP_W - 2 && udp_dport == ROCEV2_UDP_PORT)
        first_dest = DEST_ROCE;
      else if (TCP_EN && proto == IP_PROTO_TCP)
        first_dest = DEST_TCP;
    end
  end

  assign dest = in_frame ? held_dest : first_dest;

  always_comb begin
    for (int i = 0; i < 3; i++) begin
      out_beat[i]  = in_beat;
      out_valid[i] = in_valid && (dest == fp_dest_e'(i));
    end
    in_ready = out_ready[dest];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      in_frame  <= 1'b0;
      held_dest <= DEST_SLOW;
      for (int i = 0; i < 3; i++) frame_count[i] <= '0;
    end else if (in_valid && in_ready) begin
      if (!in_frame) held_dest <= first_dest;
      in_frame <= !in_beat.last;
      if (in_beat.last) frame_count[dest] <= frame_count[dest] + 1;
    end
  end
endmodule
