// completion_counters: per-QP completion counters polled by the RDMA provider.
//
// Instead of interrupts, RDMA completions are reported by counters: every
// completion event of queue pair `inc_qpn` and kind `inc_kind` (e.g. local
// WRITE done, READ data delivered, remote WRITE received) increments one
// counter in a single cycle (a read-modify-write that nothing else can
// interleave with, so increments are atomic). After each increment the new
// value is queued for a writeback DMA to host memory at
// wb_base + 4*(qpn*N_KIND + kind), where the user-space provider polls it.
// The driver can also read a counter directly (rd_*) and clear it (clr_*).
//
// The paper gives the per-QP counters and their atomic increments; the kinds,
// writeback layout and FIFO depth are this design's choices. inc_ready is low
// while the writeback FIFO is full. Read data is combinational.
module completion_counters
  import scenic_pkg::*;
#(
  parameter int N_QP     = 256,
  parameter int N_KIND   = 4,
  parameter int WB_DEPTH = 16
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      inc_valid,
  output logic                      inc_ready,
  input  logic [$clog2(N_QP)-1:0]   inc_qpn,
  input  logic [$clog2(N_KIND)-1:0] inc_kind,
  input  logic                      clr_valid,
  input  logic [$clog2(N_QP)-1:0]   clr_qpn,
  input  logic [$clog2(N_KIND)-1:0] clr_kind,
  input  logic [$clog2(N_QP)-1:0]   rd_qpn,
  input  logic [$clog2(N_KIND)-1:0] rd_kind,
  output logic [31:0]               rd_data,
  input  logic [63:0]               wb_base,
  output logic [63:0]               wb_addr,
  output logic [31:0]               wb_data,
  output logic                      wb_valid,
  input  logic                      wb_ready
);
  localparam int IW = $clog2(N_QP) + $clog2(N_KIND);

  // counters in a memory; one valid bit per counter makes reset and clear
  // single-cycle operations (an invalid counter reads as 0)
  logic [31:0]            cnt [N_QP * N_KIND];
  logic [N_QP*N_KIND-1:0] live;

  wire [IW-1:0] inc_i = {inc_qpn, inc_kind};
  wire [IW-1:0] clr_i = {clr_qpn, clr_kind};
  wire [31:0]   inc_v = (live[inc_i] ? cnt[inc_i] : 32'd0) + 32'd1;

  logic          fifo_in_ready;
  logic [IW+31:0] wb_entry;
  wire inc_fire = inc_valid && inc_ready;
  assign inc_ready = fifo_in_ready;

  sync_fifo #(.W(IW + 32), .DEPTH(WB_DEPTH)) u_wb (
    .clk, .rst_n,
    .in_valid(inc_fire), .in_ready(fifo_in_ready), .in_data({inc_i, inc_v}),
    .out_valid(wb_valid), .out_ready(wb_ready), .out_data(wb_entry), .count());

  assign wb_addr = wb_base + {{(62 - IW){1'b0}}, wb_entry[IW+31:32], 2'b00};
  assign wb_data = wb_entry[31:0];
  wire   [IW-1:0] rd_i = {rd_qpn, rd_kind};
  assign rd_data = live[rd_i] ? cnt[rd_i] : 32'd0;

  always_ff @(posedge clk) begin
    if (inc_fire) cnt[inc_i] <= inc_v;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      live <= '0;
    end else begin
      if (clr_valid) live[clr_i] <= 1'b0;
      if (inc_fire)  live[inc_i] <= 1'b1;   // increment wins over a clear of the same counter
    end
  end
endmodule
