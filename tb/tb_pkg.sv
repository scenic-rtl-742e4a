// tb_pkg: helpers shared by the testbenches: building the first beat of
// Ethernet/IPv4 frames with chosen fields, and a keep mask for a byte count.
package tb_pkg;
  import scenic_pkg::*;

  function automatic void put8(ref logic [DATA_W-1:0] d, input int idx, input logic [7:0] v);
    d[idx*8 +: 8] = v;
  endfunction
  function automatic void put16(ref logic [DATA_W-1:0] d, input int idx, input logic [15:0] v);
    d[idx*8 +: 8] = v[15:8]; d[(idx+1)*8 +: 8] = v[7:0];
  endfunction
  function automatic void put32(ref logic [DATA_W-1:0] d, input int idx, input logic [31:0] v);
    put16(d, idx, v[31:16]); put16(d, idx + 2, v[15:0]);
  endfunction

  // First 64 bytes of a frame: ethertype, IPv4 with IHL 5, protocol, source
  // address, total length, L4 destination port. Other bytes are filled from seed.
  function automatic logic [DATA_W-1:0] hdr(input logic [15:0] etype, input logic [7:0] proto,
                                            input logic [15:0] dport, input logic [31:0] src,
                                            input logic [15:0] iplen, input int seed);
    logic [DATA_W-1:0] d;
    for (int i = 0; i < KEEP_W; i++) d[i*8 +: 8] = 8'(seed * 7 + i * 13);
    put16(d, 12, etype);
    put8(d, 14, 8'h45);
    put16(d, 16, iplen);
    put8(d, 23, proto);
    put32(d, 26, src);
    put16(d, 36, dport);
    return d;
  endfunction

  function automatic logic [KEEP_W-1:0] keep_of(input int nbytes);
    return (nbytes >= KEEP_W) ? '1 : ((KEEP_W'(1) << nbytes) - 1);
  endfunction
endpackage
