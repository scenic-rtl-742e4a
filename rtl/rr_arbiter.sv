// rr_arbiter: packet-based round-robin arbiter for N packet streams.
//
// The system-wide arbiters of the SmartNIC share a resource (the DMA engine,
// the RDMA command path, a GPU write channel) fairly among offloaded
// applications. A grant is given for one whole packet: once input i is
// granted, its beats pass until the beat with `last`; then the search for the
// next grant starts at input i+1. An input with nothing to send is skipped, so
// active inputs share the output equally at packet granularity.
//
// The paper states packet-based round-robin arbitration; the grant pipeline
// (combinational grant, zero added latency, no bubble between packets) is
// this design's choice. `sel` reports the granted input with each beat.
module rr_arbiter
  import scenic_pkg::*;
#(
  parameter int N = 2
) (
  input  logic           clk,
  input  logic           rst_n,
  input  axis_beat_t     in_beat  [N],
  input  logic           in_valid [N],
  output logic           in_ready [N],
  output axis_beat_t     out_beat,
  output logic           out_valid,
  input  logic           out_ready,
  output logic [$clog2(N > 1 ? N : 2)-1:0] sel
);
  localparam int SW = $clog2(N > 1 ? N : 2);

  logic          locked;          // inside a packet of input `cur`
  logic [SW-1:0] cur;             // currently / last granted input
  logic [SW-1:0] pick;
  logic          pick_valid;

  // Round-robin search starting after the last granted input.
  always_comb begin
    pick       = cur;
    pick_valid = 1'b0;
    for (int k = 1; k <= N; k++) begin
      int idx;
      idx = (int'(cur) + k) % N;
      if (!pick_valid && in_valid[idx]) begin
        pick       = SW'(idx);
        pick_valid = 1'b1;
      end
    end
  end

  assign sel = locked ? cur : pick;

  always_comb begin
    out_beat  = in_beat[sel];
    out_valid = (locked || pick_valid) && in_valid[sel];
    for (int i = 0; i < N; i++) in_ready[i] = out_ready && (SW'(i) == sel) && (locked || pick_valid);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      locked <= 1'b0;
      cur    <= SW'(N - 1);
    end else if (out_valid && out_ready) begin
      cur    <= sel;
      locked <= !out_beat.last;
    end
  end

  // A granted packet is never interrupted by another input.
  a_no_switch: assert property (@(posedge clk) disable iff (!rst_n)
    (locked && out_valid && out_ready) |-> (sel == cur));
endmodule
