// msix_irq_ctrl: interrupt moderation for the slow-path RX ring.
//
// Each packet written to the host ring is an `event`. The controller raises
// one interrupt request for a group of events: as soon as `irq_coal` events
// are pending (coalescing, amortises interrupt cost under load), or when the
// oldest pending event has waited `irq_time` cycles (timeout, bounds latency
// under sparse traffic). Both thresholds are driver registers (Fig. 3:
// irq_coal, irq_time); irq_coal = 0 disables coalescing so only the timeout
// fires, irq_time = 0 disables the timeout.
//
// Timing: a coalesced interrupt is requested in the cycle after the event
// that reaches irq_coal; a timeout interrupt is requested irq_time + 1 cycles
// after the cycle that presented the first pending event.
// irq_req stays high until the DMA engine acknowledges it with irq_ack
// (req/ack as on the DMA engine's user-interrupt port, this design's choice);
// events arriving meanwhile are counted towards the next interrupt. The
// counter of issued interrupts and the reason of the last one are outputs for
// statistics. The paper gives the two behaviours; encodings and the handshake
// are chosen here.
module msix_irq_ctrl #(
  parameter int CNT_W = 16
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             event_i,
  input  logic [CNT_W-1:0] irq_coal,
  input  logic [31:0]      irq_time,
  output logic             irq_req,
  input  logic             irq_ack,
  output logic [31:0]      irq_count,
  output logic             last_by_timeout
);
  logic [CNT_W-1:0] pending;
  logic [31:0]      timer;

  wire [CNT_W-1:0] pending_n = pending + CNT_W'(event_i);
  wire coal_hit = (irq_coal != '0) && (pending_n >= irq_coal);
  wire time_hit = (irq_time != '0) && (pending != '0) && (timer + 1 >= irq_time);
  wire fire     = !irq_req && (pending_n != '0) && (coal_hit || time_hit);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pending <= '0; timer <= '0; irq_req <= 1'b0; irq_count <= '0; last_by_timeout <= 1'b0;
    end else begin
      if (irq_req && irq_ack) irq_req <= 1'b0;
      if (fire) begin
        irq_req         <= 1'b1;
        irq_count       <= irq_count + 1;
        last_by_timeout <= !coal_hit;
        pending         <= '0;
        timer           <= '0;
      end else begin
        pending <= pending_n;
        timer   <= (pending != '0) ? timer + 1 : '0;
      end
    end
  end
endmodule
