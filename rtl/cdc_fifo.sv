// cdc_fifo: asynchronous FIFO between the MAC clock and the user clock.
//
// The Ethernet MAC streams in its own bandwidth-dependent clock and cannot be
// back-pressured, so both directions cross into and out of the user clock
// through a buffer. This is a classic dual-clock FIFO: binary write/read
// pointers, Gray-coded copies passed through two-flop synchronisers, full and
// empty derived from the synchronised Gray pointers. Because the MAC side has
// no backpressure, a write while full is dropped and counted in `overflow`
// (sticky until reset) instead of being stalled.
//
// Interface: write side (wr_clk) has wr_valid/wr_data and a wr_full status;
// read side (rd_clk) is first-word-fall-through with rd_valid/rd_ready.
// Latency from write to rd_valid is 3 read-clock edges (pointer sync).
// The paper states only that a buffered, pipelined crossing is used; the FIFO
// structure, depth and drop-on-full behaviour are choices of this design.
module cdc_fifo #(
  parameter int W     = 577,
  parameter int DEPTH = 64
) (
  input  logic         wr_clk,
  input  logic         wr_rst_n,
  input  logic         wr_valid,
  input  logic [W-1:0] wr_data,
  output logic         wr_full,
  output logic         overflow,
  input  logic         rd_clk,
  input  logic         rd_rst_n,
  output logic         rd_valid,
  input  logic         rd_ready,
  output logic [W-1:0] rd_data
);
  localparam int AW = $clog2(DEPTH);

  logic [W-1:0] mem [DEPTH];
  logic [AW:0] wbin, wgray, rbin, rgray;
  logic [AW:0] rgray_w1, rgray_w2;   // read pointer synchronised to wr_clk
  logic [AW:0] wgray_r1, wgray_r2;   // write pointer synchronised to rd_clk

  function automatic logic [AW:0] bin2gray(input logic [AW:0] b);
    return b ^ (b >> 1);
  endfunction

  // ---------------- write domain ----------------
  wire [AW:0] wbin_n  = wbin + 1'b1;
  assign wr_full = (wgray == {~rgray_w2[AW:AW-1], rgray_w2[AW-2:0]});
  wire do_wr = wr_valid && !wr_full;

  always_ff @(posedge wr_clk) begin
    if (do_wr) mem[wbin[AW-1:0]] <= wr_data;
  end

  always_ff @(posedge wr_clk or negedge wr_rst_n) begin
    if (!wr_rst_n) begin
      wbin <= '0; wgray <= '0; rgray_w1 <= '0; rgray_w2 <= '0; overflow <= 1'b0;
    end else begin
      rgray_w1 <= rgray;
      rgray_w2 <= rgray_w1;
      if (do_wr) begin
        wbin  <= wbin_n;
        wgray <= bin2gray(wbin_n);
      end
      if (wr_valid && wr_full) overflow <= 1'b1;
    end
  end

  // ---------------- read domain ----------------
  assign rd_valid = (rgray != wgray_r2);
  assign rd_data  = mem[rbin[AW-1:0]];
  wire [AW:0] rbin_n = rbin + 1'b1;

  always_ff @(posedge rd_clk or negedge rd_rst_n) begin
    if (!rd_rst_n) begin
      rbin <= '0; rgray <= '0; wgray_r1 <= '0; wgray_r2 <= '0;
    end else begin
      wgray_r1 <= wgray;
      wgray_r2 <= wgray_r1;
      if (rd_valid && rd_ready) begin
        rbin  <= rbin_n;
        rgray <= bin2gray(rbin_n);
      end
    end
  end
endmodule
