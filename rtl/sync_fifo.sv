// sync_fifo: single-clock first-word-fall-through FIFO.
//
// Helper used by the slow-path RX/TX blocks and the steering logic. Storage is
// an array of DEPTH words of W bits; DEPTH must be a power of two. in_ready is
// low when full, out_valid is high while a word is stored. A word written in
// cycle n can be read in cycle n+1. count gives the fill level. Reset empties
// the FIFO; the storage itself is not reset.
module sync_fifo #(
  parameter int W     = 32,
  parameter int DEPTH = 16
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   in_valid,
  output logic                   in_ready,
  input  logic [W-1:0]           in_data,
  output logic                   out_valid,
  input  logic                   out_ready,
  output logic [W-1:0]           out_data,
  output logic [$clog2(DEPTH):0] count
);
  localparam int AW = $clog2(DEPTH);

  logic [W-1:0] mem [DEPTH];
  logic [AW:0]  wptr, rptr;

  wire do_wr = in_valid && in_ready;
  wire do_rd = out_valid && out_ready;

  assign count     = wptr - rptr;
  assign in_ready  = (count != (AW+1)'(DEPTH));
  assign out_valid = (count != '0);
  assign out_data  = mem[rptr[AW-1:0]];

  always_ff @(posedge clk) begin
    if (do_wr) mem[wptr[AW-1:0]] <= in_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wptr <= '0;
      rptr <= '0;
    end else begin
      if (do_wr) wptr <= wptr + 1'b1;
      if (do_rd) rptr <= rptr + 1'b1;
    end
  end
endmodule
