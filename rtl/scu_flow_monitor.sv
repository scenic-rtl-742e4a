// scu_flow_monitor: example SCU for incast flow monitoring and rate limiting.
//
// The SCU sits on a stream of complete Ethernet/IPv4 frames. For each frame it
// takes the source IPv4 address and selects a subnet index
// src_ip[subnet_shift +: SUBNET_BITS] (with shift 16 and addresses
// 10.pod.switch.host this is the pod of a fat-tree). Per subnet it keeps
// packet, byte and drop counters, which the Arm cores read over the register
// port (rd_*), for example on every tick of the periodic timer interrupt.
// The policy decided in software is enforced in the datapath by a token-bucket
// rate limiter per subnet: rate (in 1/256 bytes per cycle) and burst (bytes)
// are written by the CPU (cfg_*); a frame whose IPv4 total length + 14 exceeds
// the tokens of its subnet is dropped as a whole, otherwise its length is
// taken from the bucket. rate = 0 disables limiting for the subnet.
// Non-IPv4 frames pass unchanged and are counted in subnet 0.
//
// From the paper: flow tracking by source subnet in an SCU, statistics read
// by the Arm cores after a timer interrupt, and a configurable SCU rate
// limiter enforcing their policy. Subnet selection, counter widths and the
// token-bucket form of the limiter are this design's choices.
// Timing: decision from the first beat, combinational pass/drop, no added
// latency; buckets refill every cycle.
module scu_flow_monitor
  import scenic_pkg::*;
#(
  parameter int SUBNET_BITS = 4
) (
  input  logic        clk,
  input  logic        rst_n,
  input  axis_beat_t  in_beat,
  input  logic        in_valid,
  output logic        in_ready,
  output axis_beat_t  out_beat,
  output logic        out_valid,
  input  logic        out_ready,
  // configuration from the Arm cores
  input  logic [4:0]  subnet_shift,
  input  logic        cfg_we,
  input  logic [SUBNET_BITS-1:0] cfg_idx,
  input  logic [15:0] cfg_rate,
  input  logic [23:0] cfg_burst,
  // statistics read port
  input  logic [SUBNET_BITS-1:0] rd_idx,
  output logic [47:0] rd_pkts,
  output logic [47:0] rd_bytes,
  output logic [31:0] rd_drops,
  output logic        drop_event    // one pulse per dropped frame (interrupt source)
);
  localparam int NS = 1 << SUBNET_BITS;

  logic [47:0] pkts  [NS];
  logic [47:0] bytes [NS];
  logic [31:0] drops [NS];
  logic [15:0] rate  [NS];
  logic [23:0] burst [NS];
  logic [31:0] tokens [NS];   // in 1/256 byte

  // first-beat classification
  logic                   in_frame, hold_drop;
  logic [SUBNET_BITS-1:0] sub_first;
  logic [15:0]            flen;
  logic                   drop_first;
  always_comb begin
    logic [31:0] src;
    logic        ipv4;
    ipv4 = frame_u16(in_beat.data, OFF_ETHERTYPE) == ETHERTYPE_IPV4;
    src  = frame_u32(in_beat.data, OFF_IP_SRC);
    sub_first  = ipv4 ? SUBNET_BITS'(src >> subnet_shift) : '0;
    flen       = ipv4 ? frame_u16(in_beat.data, OFF_L4_BASE + 2) + 16'd14 : 16'(keep_bytes(in_beat.keep));
    drop_first = (rate[sub_first] != 0) && (tokens[sub_first] < {8'h0, flen, 8'h0});
  end

  wire drop = in_frame ? hold_drop : drop_first;

  assign out_beat  = in_beat;
  assign out_valid = in_valid && !drop;
  assign in_ready  = drop ? 1'b1 : out_ready;
  wire   first_fire = in_valid && in_ready && !in_frame;
  assign drop_event = first_fire && drop_first;

  assign rd_pkts  = pkts[rd_idx];
  assign rd_bytes = bytes[rd_idx];
  assign rd_drops = drops[rd_idx];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NS; i++) begin
        pkts[i] <= '0; bytes[i] <= '0; drops[i] <= '0;
        rate[i] <= '0; burst[i] <= '0; tokens[i] <= '0;
      end
      in_frame <= 1'b0; hold_drop <= 1'b0;
    end else begin
      // refill
      for (int i = 0; i < NS; i++) begin
        logic [32:0] t;
        t = {1'b0, tokens[i]} + 33'(rate[i]);
        tokens[i] <= (t > {1'b0, burst[i], 8'h0}) ? {burst[i], 8'h0} : t[31:0];
      end
      if (in_valid && in_ready) begin
        in_frame <= !in_beat.last;
        if (!in_frame) hold_drop <= drop_first;
      end
      if (first_fire) begin
        if (drop_first) begin
          drops[sub_first] <= drops[sub_first] + 1;
        end else begin
          pkts[sub_first]  <= pkts[sub_first] + 1;
          bytes[sub_first] <= bytes[sub_first] + 48'(flen);
          if (rate[sub_first] != 0) begin
            logic [32:0] t2;
            t2 = {1'b0, tokens[sub_first]} + 33'(rate[sub_first]);
            tokens[sub_first] <= t2[31:0] - {8'h0, flen, 8'h0};
          end
        end
      end
      if (cfg_we) begin
        rate[cfg_idx]   <= cfg_rate;
        burst[cfg_idx]  <= cfg_burst;
        tokens[cfg_idx] <= {cfg_burst, 8'h0};
      end
    end
  end
endmodule
