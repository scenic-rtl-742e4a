// cmd_stream_merge: turns a DMA write command plus its data stream into one
// write packet (header beat, then the data beats up to `last`), the format
// the shared DMA arbiter and the address translation stage work on. The
// header carries the command, the source's address-space id ASID and whether
// the address is physical (PHYS). Zero added latency for data; one extra
// beat per packet.
module cmd_stream_merge
  import scenic_pkg::*;
#(
  parameter logic [ASID_W-1:0] ASID = '0,
  parameter bit                PHYS = 1'b0
) (
  input  logic       clk,
  input  logic       rst_n,
  input  dma_cmd_t   cmd,
  input  logic       cmd_valid,
  output logic       cmd_ready,
  input  axis_beat_t in_beat,
  input  logic       in_valid,
  output logic       in_ready,
  output axis_beat_t out_beat,
  output logic       out_valid,
  input  logic       out_ready
);
  logic in_data;   // header sent, passing data
  always_comb begin
    if (!in_data) begin
      out_beat  = wr_header(cmd, ASID, PHYS);
      out_valid = cmd_valid;
      cmd_ready = out_ready;
      in_ready  = 1'b0;
    end else begin
      out_beat  = in_beat;
      out_valid = in_valid;
      cmd_ready = 1'b0;
      in_ready  = out_ready;
    end
  end
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) in_data <= 1'b0;
    else if (!in_data && cmd_valid && cmd_ready) in_data <= 1'b1;
    else if (in_data && in_valid && in_ready && in_beat.last) in_data <= 1'b0;
  end
endmodule
