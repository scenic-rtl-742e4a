// scenic_pkg: types and constants shared by the SmartNIC datapath blocks.
//
// All packet streams in the user clock domain are 512-bit AXI-Stream-like
// buses (data, byte keep, last) with a valid/ready handshake carried next to
// the struct. 512 bits at the 391 MHz user clock gives 200 Gbit/s, the line
// rate of the 200G configuration; the bus width itself is this design's
// choice. Frame offsets follow the Ethernet/IPv4/UDP/TCP standards: byte 0 of
// a frame sits in data[7:0] of the first beat (little-endian byte lanes).
package scenic_pkg;

  localparam int DATA_W = 512;
  localparam int KEEP_W = DATA_W / 8;

  typedef struct packed {
    logic [DATA_W-1:0] data;
    logic [KEEP_W-1:0] keep;
    logic              last;
  } axis_beat_t;

  localparam int AXIS_W = $bits(axis_beat_t);

  // Standard header constants (not taken from the paper).
  localparam logic [15:0] ETHERTYPE_IPV4 = 16'h0800;
  localparam logic [7:0]  IP_PROTO_TCP   = 8'd6;
  localparam logic [7:0]  IP_PROTO_UDP   = 8'd17;
  localparam logic [15:0] ROCEV2_UDP_PORT = 16'd4791;

  // Byte offsets inside an untagged Ethernet II frame carrying IPv4 (no options
  // needed for the fields read here, except the L4 port which uses the IHL).
  localparam int OFF_ETHERTYPE = 12;
  localparam int OFF_IP_PROTO  = 23;
  localparam int OFF_IP_SRC    = 26;
  localparam int OFF_L4_BASE   = 14;   // start of the IPv4 header

  // Destinations of the traffic prefilter.
  typedef enum logic [1:0] {
    DEST_SLOW = 2'd0,
    DEST_TCP  = 2'd1,
    DEST_ROCE = 2'd2
  } fp_dest_e;

  // Host DMA command: one transfer of len bytes at a host (virtual) address.
  typedef struct packed {
    logic [63:0] addr;
    logic [31:0] len;
  } dma_cmd_t;

  // Inside the card, a DMA write travels as one "write packet": a header beat
  // carrying the command (data[63:0] address, data[95:64] length in bytes,
  // data[101:96] address-space id of the issuing application, data[102] set
  // when the address is already physical), followed by the payload beats, the
  // last one with `last`. The packet format is this design's choice.
  localparam int ASID_W = 6;

  function automatic axis_beat_t wr_header(input dma_cmd_t c, input logic [ASID_W-1:0] asid,
                                           input logic phys);
    axis_beat_t b;
    b = '0;
    b.data[63:0]   = c.addr;
    b.data[95:64]  = c.len;
    b.data[101:96] = asid;
    b.data[102]    = phys;
    b.keep         = '1;
    b.last         = 1'b0;
    return b;
  endfunction

  // RDMA work command as it leaves the host towards the RoCE stack.
  localparam int QPN_W = 8;
  typedef struct packed {
    logic [QPN_W-1:0] qpn;
    logic [1:0]       opcode;  // 0 WRITE, 1 READ request, 2 SEND
    logic [63:0]      vaddr;
    logic [31:0]      len;
  } rdma_cmd_t;

  // Congestion signal from the RoCE stack: ACK of one packet, optional ECN
  // mark / CNP, and an RTT sample (Fig. 2: QP-Info, ECN, RTT).
  typedef struct packed {
    logic [QPN_W-1:0] qpn;
    logic             ack;
    logic             ecn;
    logic [15:0]      rtt;
  } cc_signal_t;

  // Read a byte of a frame that lies in its first 64-byte beat.
  function automatic logic [7:0] frame_byte(input logic [DATA_W-1:0] d, input int unsigned idx);
    return d[idx*8 +: 8];
  endfunction

  // Big-endian 16-bit network field.
  function automatic logic [15:0] frame_u16(input logic [DATA_W-1:0] d, input int unsigned idx);
    return {d[idx*8 +: 8], d[(idx+1)*8 +: 8]};
  endfunction

  function automatic logic [31:0] frame_u32(input logic [DATA_W-1:0] d, input int unsigned idx);
    return {d[idx*8 +: 8], d[(idx+1)*8 +: 8], d[(idx+2)*8 +: 8], d[(idx+3)*8 +: 8]};
  endfunction

  // Number of set bits of a keep vector = number of valid bytes in a beat.
  function automatic logic [6:0] keep_bytes(input logic [KEEP_W-1:0] k);
    logic [6:0] n;
    n = '0;
    for (int i = 0; i < KEEP_W; i++) n += 7'(k[i]);
    return n;
  endfunction

endpackage
