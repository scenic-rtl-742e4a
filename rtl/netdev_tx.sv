// netdev_tx: slow-path transmit engine for frames sent by the Linux driver.
//
// The driver places each outgoing frame in a host TX ring and enqueues a
// command (host address, length in bytes). The engine keeps the commands in
// a FIFO, and for each one issues a DMA read of `len` bytes, then forwards
// the returned beats as one Ethernet frame towards the MAC: the beat count is
// ceil(len/64), `keep` of the final beat is trimmed to the length and `last`
// is set on it, whatever the DMA engine signals. A completed frame pulses
// `tx_event` and increments `tx_done` (the driver uses it to free ring slots).
//
// The paper says only that the TX path mirrors the RX path with a ring
// buffer of outgoing commands; command format, FIFO depth and the
// completion counter are this design's choices. One frame is in flight at a
// time; the next DMA read is issued in the cycle after the last beat.
module netdev_tx
  import scenic_pkg::*;
#(
  parameter int CMD_DEPTH = 32
) (
  input  logic        clk,
  input  logic        rst_n,
  input  dma_cmd_t    cmd_in,
  input  logic        cmd_in_valid,
  output logic        cmd_in_ready,
  // DMA read request and returned data
  output dma_cmd_t    dma_rd_cmd,
  output logic        dma_rd_cmd_valid,
  input  logic        dma_rd_cmd_ready,
  input  axis_beat_t  dma_rd_beat,
  input  logic        dma_rd_valid,
  output logic        dma_rd_ready,
  // frame towards the MAC
  output axis_beat_t  tx_beat,
  output logic        tx_valid,
  input  logic        tx_ready,
  output logic        tx_event,
  output logic [31:0] tx_done
);
  dma_cmd_t cmd_q;
  logic     cmd_q_valid, cmd_q_ready;
  sync_fifo #(.W($bits(dma_cmd_t)), .DEPTH(CMD_DEPTH)) u_cmd (
    .clk, .rst_n,
    .in_valid(cmd_in_valid), .in_ready(cmd_in_ready), .in_data(cmd_in),
    .out_valid(cmd_q_valid), .out_ready(cmd_q_ready), .out_data(cmd_q), .count());

  typedef enum logic {T_IDLE, T_DATA} tstate_e;
  tstate_e     state;
  logic [31:0] remaining;   // bytes still to forward

  wire final_beat = (remaining <= 32'd64);

  always_comb begin
    dma_rd_cmd       = cmd_q;
    dma_rd_cmd_valid = (state == T_IDLE) && cmd_q_valid;
    cmd_q_ready      = (state == T_IDLE) && dma_rd_cmd_ready;

    tx_beat      = dma_rd_beat;
    tx_beat.last = final_beat;
    tx_beat.keep = final_beat ? (KEEP_W'({KEEP_W{1'b1}}) >> (7'(KEEP_W) - 7'(remaining))) : '1;
    tx_valid     = (state == T_DATA) && dma_rd_valid;
    dma_rd_ready = (state == T_DATA) && tx_ready;
  end

  assign tx_event = tx_valid && tx_ready && final_beat;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= T_IDLE; remaining <= '0; tx_done <= '0;
    end else begin
      unique case (state)
        T_IDLE: if (dma_rd_cmd_valid && dma_rd_cmd_ready && cmd_q.len != 0) begin
          state     <= T_DATA;
          remaining <= cmd_q.len;
        end
        T_DATA: if (tx_valid && tx_ready) begin
          if (final_beat) begin
            state   <= T_IDLE;
            tx_done <= tx_done + 1;
          end
          remaining <= remaining - 32'd64;
        end
        default: state <= T_IDLE;
      endcase
    end
  end
endmodule
