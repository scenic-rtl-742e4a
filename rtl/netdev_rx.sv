// netdev_rx: slow-path receive engine towards the Linux network driver.
//
// Frames that none of the offloaded stacks handle are written into a ring
// buffer in host memory, each preceded by a metadata tag, so that tag and
// payload travel in a single DMA transfer (Fig. 3):
//   META    counts the bytes of the incoming frame; at `last` the length is
//           pushed into the metadata FIFO.
//   DATA    FIFO holding the frame beats.
//   MERGER  for every stored length, emits one DMA write command for the
//           current ring slot and then the stream tag beat + frame beats.
//   IRQ     each written frame is an event for the MSI-X moderation block.
// Ring registers (driver-written): buff_vaddr (ring base), buff_stride (bytes
// per slot), buff_size (number of slots), buff_tail (index of the next slot
// the driver will consume, i.e. slots before it are free again). The engine's
// own write index is `wr_idx`; it stalls while the ring is full
// (wr_idx + 1 == buff_tail modulo buff_size).
//
// Tag format (this design's choice; the paper says only "packet length and a
// valid flag"): one 64-byte beat, bits [15:0] = frame length in bytes,
// bit 16 = valid, rest zero. The payload starts at slot offset 64. The DMA
// length is 64 + frame length. Frames longer than buff_stride-64 would be
// truncated by the host ring layout; the driver is expected to choose
// buff_stride >= MTU + 64.
//
// Timing: a frame is forwarded once it has been received completely
// (store-and-forward, so a short frame cannot underrun the DMA), then
// 1 + ceil(len/64) output beats back to back. The FIFOs absorb bursts;
// when the data FIFO is full, input is back-pressured.
module netdev_rx
  import scenic_pkg::*;
#(
  parameter int DATA_DEPTH = 512,
  parameter int META_DEPTH = 32
) (
  input  logic        clk,
  input  logic        rst_n,
  // frames from the traffic filter (slow path)
  input  axis_beat_t  in_beat,
  input  logic        in_valid,
  output logic        in_ready,
  // ring registers
  input  logic [63:0] buff_vaddr,
  input  logic [31:0] buff_stride,
  input  logic [31:0] buff_size,
  input  logic [31:0] buff_tail,
  // DMA write command and data towards the host DMA engine
  output dma_cmd_t    dma_cmd,
  output logic        dma_cmd_valid,
  input  logic        dma_cmd_ready,
  output axis_beat_t  dma_beat,
  output logic        dma_valid,
  input  logic        dma_ready,
  // one pulse per frame handed to the DMA engine (to the MSI-X controller)
  output logic        pkt_event,
  output logic [31:0] wr_idx
);
  // ---------------- META: length counter ----------------
  logic [15:0] len_acc;
  wire  [15:0] len_now = len_acc + 16'(keep_bytes(in_beat.keep));

  logic meta_in_ready, data_in_ready;
  wire  in_fire = in_valid && in_ready;
  // A last beat needs room in both FIFOs.
  assign in_ready = data_in_ready && (!in_beat.last || meta_in_ready);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) len_acc <= '0;
    else if (in_fire) len_acc <= in_beat.last ? '0 : len_now;
  end

  logic        meta_valid, meta_ready;
  logic [15:0] meta_len;
  sync_fifo #(.W(16), .DEPTH(META_DEPTH)) u_meta (
    .clk, .rst_n,
    .in_valid(in_fire && in_beat.last), .in_ready(meta_in_ready), .in_data(len_now),
    .out_valid(meta_valid), .out_ready(meta_ready), .out_data(meta_len), .count());

  // ---------------- DATA FIFO ----------------
  axis_beat_t data_out;
  logic       data_valid, data_ready;
  sync_fifo #(.W($bits(axis_beat_t)), .DEPTH(DATA_DEPTH)) u_data (
    .clk, .rst_n,
    .in_valid(in_fire), .in_ready(data_in_ready), .in_data(in_beat),
    .out_valid(data_valid), .out_ready(data_ready), .out_data(data_out), .count());

  // ---------------- MERGER ----------------
  typedef enum logic [1:0] {M_IDLE, M_TAG, M_DATA} mstate_e;
  mstate_e state;

  wire [31:0] wr_next   = (wr_idx + 1 >= buff_size) ? 32'd0 : wr_idx + 1;
  wire        ring_full = (wr_next == buff_tail);

  always_comb begin
    dma_cmd.addr  = buff_vaddr + 64'(wr_idx) * 64'(buff_stride);
    dma_cmd.len   = 32'd64 + 32'(meta_len);
    dma_cmd_valid = (state == M_IDLE) && meta_valid && !ring_full;

    dma_beat      = data_out;
    dma_valid     = 1'b0;
    data_ready    = 1'b0;
    meta_ready    = 1'b0;
    unique case (state)
      M_TAG: begin
        dma_beat.data = '0;
        dma_beat.data[15:0] = meta_len;
        dma_beat.data[16]   = 1'b1;
        dma_beat.keep = '1;
        dma_beat.last = 1'b0;
        dma_valid     = 1'b1;
      end
      M_DATA: begin
        dma_valid  = data_valid;
        data_ready = dma_ready;
        meta_ready = dma_ready && data_valid && data_out.last;
      end
      default: ;
    endcase
  end

  assign pkt_event = dma_cmd_valid && dma_cmd_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state  <= M_IDLE;
      wr_idx <= '0;
    end else begin
      unique case (state)
        M_IDLE: if (dma_cmd_valid && dma_cmd_ready) begin
          state  <= M_TAG;
          wr_idx <= wr_next;
        end
        M_TAG:  if (dma_ready) state <= M_DATA;
        M_DATA: if (dma_ready && data_valid && data_out.last) state <= M_IDLE;
        default: state <= M_IDLE;
      endcase
    end
  end
endmodule
