// irq_router: interrupt lines from the SCUs to the embedded Arm cores.
//
// The Arm processing subsystem has N_IRQ interrupt inputs. Each line can be
// assigned at run time to one SCU interrupt source (map register: source
// index plus enable); a source may drive several lines. In addition one
// programmable hardware timer raises its own line (TIMER_LINE) every
// `timer_period` cycles, which the firewall example uses to make the CPU read
// traffic statistics periodically. SCU sources are level signals; a line is
// high while its source is high. The timer line is a pulse held until the CPU
// clears it (timer_clr).
//
// Following the paper: up to 16 IRQ connections dynamically assigned to
// SCUs, and a periodic hardware timer. The map register format, the level
// semantics and the choice of line for the timer are this design's.
// Timing: lines are registered (one cycle from source to line).
module irq_router #(
  parameter int N_IRQ      = 16,
  parameter int N_SRC      = 16,
  parameter int TIMER_LINE = 15
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic [N_SRC-1:0]         src_irq,
  input  logic                     map_we,
  input  logic [$clog2(N_IRQ)-1:0] map_line,
  input  logic [$clog2(N_SRC)-1:0] map_src,
  input  logic                     map_en,
  input  logic [31:0]              timer_period,   // 0 disables the timer
  input  logic                     timer_clr,
  output logic [N_IRQ-1:0]         irq_out
);
  logic [$clog2(N_SRC)-1:0] src_of [N_IRQ];
  logic [N_IRQ-1:0]         en;
  logic [31:0]              tcnt;
  logic                     tpend;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < N_IRQ; i++) src_of[i] <= '0;
      en <= '0; tcnt <= '0; tpend <= 1'b0; irq_out <= '0;
    end else begin
      if (map_we) begin
        src_of[map_line] <= map_src;
        en[map_line]     <= map_en;
      end
      if (timer_period != 0 && tcnt + 1 >= timer_period) begin
        tcnt  <= '0;
        tpend <= 1'b1;
      end else begin
        tcnt  <= (timer_period != 0) ? tcnt + 1 : '0;
        if (timer_clr) tpend <= 1'b0;
      end
      for (int i = 0; i < N_IRQ; i++)
        irq_out[i] <= (en[i] && src_irq[src_of[i]]) || (i == TIMER_LINE && tpend);
    end
  end
endmodule
