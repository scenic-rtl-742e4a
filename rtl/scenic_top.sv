// scenic_top: the SmartNIC datapath with its two example offloads.
//
// Receive: frames from the MAC (mac_clk, no backpressure) cross into the user
// clock through an asynchronous FIFO and reach the traffic prefilter. RoCEv2
// frames leave towards the RDMA stack (roce_rx_*), TCP frames towards the
// TCP/IP stack (tcp_rx_*); both stacks are external to this RTL. All other
// frames take the slow path: they pass SCU 0, the flow-monitoring firewall,
// and the netdev RX engine writes them with a metadata tag into the host RX
// ring; the MSI-X moderation block raises the host interrupt.
//
// RDMA payload returned by the RDMA stack (roce_pl_*, write packets with
// header beat, tagged with the QPN) is steered by QPN: slot 0 writes straight
// to host memory, slot 1 feeds SCU 1, the hash partitioner, whose 64 kB
// flushes target GPU memory. Completion events of the stack increment the
// per-QP completion counters, whose values are written back to the host.
// All DMA writes (netdev RX, RDMA slot 0, hash SCU, counter writebacks) are
// merged by a packet-based round-robin arbiter, then translated by the
// TLB-based MMU, and leave on dma_wr_*.
//
// Transmit: host RDMA commands pass the programmable congestion control
// (two regions, reconfiguration signal) on their way to the RDMA stack; the
// stack's ACK/ECN/RTT signals feed both regions. Slow-path TX commands are
// served by the netdev TX engine through DMA reads. TX frames of the netdev
// path and of both stacks share the MAC through a second round-robin arbiter
// and an asynchronous FIFO into mac_clk.
//
// Arm interface: SCU interrupt sources are mapped to 16 IRQ lines, plus the
// periodic timer line; the flow monitor's statistics and limiter registers
// are on the fm_* ports.
//
// Configuration follows the paper's Fig. 1 with both example SCUs present;
// the composition of the write path (write packets, MMU after the arbiter)
// and all port formats are this design's choices. Parameters are the block
// defaults; N_SCU is fixed at 2 (pass-through slot and hash SCU on the RDMA
// side) because each SCU here is a different module.
module scenic_top
  import scenic_pkg::*;
#(
  parameter int N_QP       = 256,
  parameter int TLB_ENTRIES = 32,
  parameter int HASH_DEPTH = 65536,
  parameter int N_GPU      = 4,
  parameter int DCQCN_PERIOD = 21505
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        mac_clk,
  input  logic        mac_rst_n,
  // MAC
  input  axis_beat_t  mac_rx_beat,
  input  logic        mac_rx_valid,
  output logic        mac_rx_overflow,
  output axis_beat_t  mac_tx_beat,
  output logic        mac_tx_valid,
  input  logic        mac_tx_ready,
  // RDMA stack (external)
  output axis_beat_t  roce_rx_beat,
  output logic        roce_rx_valid,
  input  logic        roce_rx_ready,
  input  axis_beat_t  roce_tx_beat,
  input  logic        roce_tx_valid,
  output logic        roce_tx_ready,
  input  axis_beat_t  roce_pl_beat,
  input  logic [QPN_W-1:0] roce_pl_qpn,
  input  logic        roce_pl_valid,
  output logic        roce_pl_ready,
  output rdma_cmd_t   roce_cmd,
  output logic        roce_cmd_valid,
  input  logic        roce_cmd_ready,
  input  cc_signal_t  roce_sig,
  input  logic        roce_sig_valid,
  input  logic        roce_cpl_valid,
  input  logic [QPN_W-1:0] roce_cpl_qpn,
  input  logic [1:0]  roce_cpl_kind,
  // TCP/IP stack (external)
  output axis_beat_t  tcp_rx_beat,
  output logic        tcp_rx_valid,
  input  logic        tcp_rx_ready,
  input  axis_beat_t  tcp_tx_beat,
  input  logic        tcp_tx_valid,
  output logic        tcp_tx_ready,
  // host: RDMA commands, congestion-control switch
  input  rdma_cmd_t   host_rdma_cmd,
  input  logic        host_rdma_cmd_valid,
  output logic        host_rdma_cmd_ready,
  input  logic        cc_reconfig,
  output logic        cc_active,
  // host: netdev ring registers and TX commands
  input  logic [63:0] rx_buff_vaddr,
  input  logic [31:0] rx_buff_stride,
  input  logic [31:0] rx_buff_size,
  input  logic [31:0] rx_buff_tail,
  input  logic [15:0] irq_coal,
  input  logic [31:0] irq_time,
  input  dma_cmd_t    host_tx_cmd,
  input  logic        host_tx_cmd_valid,
  output logic        host_tx_cmd_ready,
  output logic [31:0] tx_done,
  // host: steering table, completion counters, TLB
  input  logic        steer_we,
  input  logic [QPN_W-1:0] steer_qpn,
  input  logic        steer_scu,
  input  logic [63:0] cpl_wb_base,
  input  logic [QPN_W-1:0] cpl_rd_qpn,
  input  logic [1:0]  cpl_rd_kind,
  output logic [31:0] cpl_rd_data,
  output logic        tlb_miss_valid,
  output logic [ASID_W-1:0] tlb_miss_asid,
  output logic [63:0] tlb_miss_vaddr,
  input  logic        tlb_fill_valid,
  input  logic [ASID_W-1:0] tlb_fill_asid,
  input  logic [63:0] tlb_fill_vaddr,
  input  logic [63:0] tlb_fill_paddr,
  input  logic        tlb_flush,
  // host: hash-partition SCU registers
  input  logic        hp_start,
  input  logic        hp_clear,
  input  logic [31:0] hp_rows,
  input  logic [3:0]  hp_key_cols,
  input  logic [3:0]  hp_data_cols,
  input  logic [63:0] hp_gpu_base [N_GPU],
  input  logic [63:0] hp_col_stride,
  output logic        hp_busy,
  output logic [31:0] hp_flush_count,
  // Arm: flow monitor registers, IRQ routing
  input  logic [4:0]  fm_subnet_shift,
  input  logic        fm_cfg_we,
  input  logic [3:0]  fm_cfg_idx,
  input  logic [15:0] fm_cfg_rate,
  input  logic [23:0] fm_cfg_burst,
  input  logic [3:0]  fm_rd_idx,
  output logic [47:0] fm_rd_pkts,
  output logic [47:0] fm_rd_bytes,
  output logic [31:0] fm_rd_drops,
  input  logic        irq_map_we,
  input  logic [3:0]  irq_map_line,
  input  logic [3:0]  irq_map_src,
  input  logic        irq_map_en,
  input  logic [31:0] arm_timer_period,
  input  logic        arm_timer_clr,
  output logic [15:0] arm_irq,
  // host DMA engine
  output axis_beat_t  dma_wr_beat,       // write packets, physical addresses
  output logic        dma_wr_valid,
  input  logic        dma_wr_ready,
  output dma_cmd_t    dma_rd_cmd,
  output logic        dma_rd_cmd_valid,
  input  logic        dma_rd_cmd_ready,
  input  axis_beat_t  dma_rd_beat,
  input  logic        dma_rd_valid,
  output logic        dma_rd_ready,
  output logic        msix_irq_req,
  input  logic        msix_irq_ack,
  // statistics
  output logic [31:0] filter_frames [3],
  output logic [31:0] msix_irq_count,
  output logic [31:0] tlb_miss_count,
  output logic [31:0] cc_switch_count,
  output logic [31:0] cc_window_blocked,
  output logic [31:0] cc_cnp_count
);
  // ---------------- RX clock crossing and prefilter ----------------
  axis_beat_t rx_beat;
  logic       rx_valid, rx_ready;
  cdc_fifo #(.W($bits(axis_beat_t)), .DEPTH(64)) u_rx_cdc (
    .wr_clk(mac_clk), .wr_rst_n(mac_rst_n), .wr_valid(mac_rx_valid), .wr_data(mac_rx_beat),
    .wr_full(), .overflow(mac_rx_overflow),
    .rd_clk(clk), .rd_rst_n(rst_n), .rd_valid(rx_valid), .rd_ready(rx_ready), .rd_data(rx_beat));

  axis_beat_t flt_beat [3];
  logic       flt_valid [3], flt_ready [3];
  traffic_filter u_filter (
    .clk, .rst_n, .in_beat(rx_beat), .in_valid(rx_valid), .in_ready(rx_ready),
    .out_beat(flt_beat), .out_valid(flt_valid), .out_ready(flt_ready), .frame_count(filter_frames));

  assign roce_rx_beat  = flt_beat[DEST_ROCE];
  assign roce_rx_valid = flt_valid[DEST_ROCE];
  assign flt_ready[DEST_ROCE] = roce_rx_ready;
  assign tcp_rx_beat   = flt_beat[DEST_TCP];
  assign tcp_rx_valid  = flt_valid[DEST_TCP];
  assign flt_ready[DEST_TCP] = tcp_rx_ready;

  // ---------------- slow path: SCU 0 (flow monitor) and netdev RX ----------------
  axis_beat_t fm_beat;
  logic       fm_valid, fm_ready, fm_drop;
  scu_flow_monitor u_scu0_flowmon (
    .clk, .rst_n,
    .in_beat(flt_beat[DEST_SLOW]), .in_valid(flt_valid[DEST_SLOW]), .in_ready(flt_ready[DEST_SLOW]),
    .out_beat(fm_beat), .out_valid(fm_valid), .out_ready(fm_ready),
    .subnet_shift(fm_subnet_shift), .cfg_we(fm_cfg_we), .cfg_idx(fm_cfg_idx),
    .cfg_rate(fm_cfg_rate), .cfg_burst(fm_cfg_burst),
    .rd_idx(fm_rd_idx), .rd_pkts(fm_rd_pkts), .rd_bytes(fm_rd_bytes), .rd_drops(fm_rd_drops),
    .drop_event(fm_drop));

  dma_cmd_t   nrx_cmd;
  logic       nrx_cmd_valid, nrx_cmd_ready, nrx_valid, nrx_ready, nrx_event;
  axis_beat_t nrx_beat;
  netdev_rx u_netdev_rx (
    .clk, .rst_n, .in_beat(fm_beat), .in_valid(fm_valid), .in_ready(fm_ready),
    .buff_vaddr(rx_buff_vaddr), .buff_stride(rx_buff_stride), .buff_size(rx_buff_size),
    .buff_tail(rx_buff_tail),
    .dma_cmd(nrx_cmd), .dma_cmd_valid(nrx_cmd_valid), .dma_cmd_ready(nrx_cmd_ready),
    .dma_beat(nrx_beat), .dma_valid(nrx_valid), .dma_ready(nrx_ready),
    .pkt_event(nrx_event), .wr_idx());

  msix_irq_ctrl u_msix (
    .clk, .rst_n, .event_i(nrx_event), .irq_coal, .irq_time,
    .irq_req(msix_irq_req), .irq_ack(msix_irq_ack), .irq_count(msix_irq_count), .last_by_timeout());

  // DMA write sources: 0 netdev RX, 1 RDMA pass-through, 2 hash SCU, 3 counter writeback
  axis_beat_t wr_beat [4];
  logic       wr_valid [4], wr_ready [4];

  cmd_stream_merge #(.ASID('0)) u_nrx_merge (
    .clk, .rst_n, .cmd(nrx_cmd), .cmd_valid(nrx_cmd_valid), .cmd_ready(nrx_cmd_ready),
    .in_beat(nrx_beat), .in_valid(nrx_valid), .in_ready(nrx_ready),
    .out_beat(wr_beat[0]), .out_valid(wr_valid[0]), .out_ready(wr_ready[0]));

  // ---------------- RDMA payload steering, SCU 1 (hash partitioning) ----------------
  axis_beat_t st_beat [2];
  logic [QPN_W-1:0] st_tag [2];
  logic       st_valid [2], st_ready [2];
  flow_steering #(.N_SCU(2), .N_TAG(1 << QPN_W)) u_steer (
    .clk, .rst_n, .cfg_we(steer_we), .cfg_tag(steer_qpn), .cfg_scu(steer_scu),
    .in_beat(roce_pl_beat), .in_tag(roce_pl_qpn), .in_valid(roce_pl_valid), .in_ready(roce_pl_ready),
    .out_beat(st_beat), .out_tag(st_tag), .out_valid(st_valid), .out_ready(st_ready));

  assign wr_beat[1]  = st_beat[0];
  assign wr_valid[1] = st_valid[0];
  assign st_ready[0] = wr_ready[1];

  axis_beat_t hp_in_beat;
  logic       hp_in_valid, hp_in_ready;
  hdr_strip u_hp_strip (
    .clk, .rst_n, .in_beat(st_beat[1]), .in_valid(st_valid[1]), .in_ready(st_ready[1]),
    .out_beat(hp_in_beat), .out_valid(hp_in_valid), .out_ready(hp_in_ready), .hdr_valid());

  dma_cmd_t   hp_cmd;
  logic       hp_cmd_valid, hp_cmd_ready, hp_out_valid, hp_out_ready, hp_done;
  axis_beat_t hp_out_beat;
  scu_hash_partition #(.BUF_DEPTH(HASH_DEPTH), .N_GPU(N_GPU)) u_scu1_hash (
    .clk, .rst_n, .start(hp_start), .clear(hp_clear), .cfg_rows(hp_rows),
    .cfg_key_cols(hp_key_cols), .cfg_data_cols(hp_data_cols), .cfg_gpu_base(hp_gpu_base),
    .cfg_col_stride(hp_col_stride), .busy(hp_busy), .done(hp_done),
    .rd_gpu('0), .rd_col('0), .rd_out_bytes(), .flush_count(hp_flush_count),
    .in_beat(hp_in_beat), .in_valid(hp_in_valid), .in_ready(hp_in_ready),
    .dma_cmd(hp_cmd), .dma_cmd_valid(hp_cmd_valid), .dma_cmd_ready(hp_cmd_ready),
    .dma_beat(hp_out_beat), .dma_valid(hp_out_valid), .dma_ready(hp_out_ready));

  cmd_stream_merge #(.ASID(6'd1)) u_hp_merge (
    .clk, .rst_n, .cmd(hp_cmd), .cmd_valid(hp_cmd_valid), .cmd_ready(hp_cmd_ready),
    .in_beat(hp_out_beat), .in_valid(hp_out_valid), .in_ready(hp_out_ready),
    .out_beat(wr_beat[2]), .out_valid(wr_valid[2]), .out_ready(wr_ready[2]));

  // ---------------- completion counters ----------------
  logic [63:0] wb_addr;
  logic [31:0] wb_data;
  logic        wb_valid, wb_ready, wb_hdr_sent;
  completion_counters #(.N_QP(N_QP), .N_KIND(4)) u_cpl (
    .clk, .rst_n, .inc_valid(roce_cpl_valid), .inc_ready(), .inc_qpn(roce_cpl_qpn),
    .inc_kind(roce_cpl_kind), .clr_valid(1'b0), .clr_qpn('0), .clr_kind('0),
    .rd_qpn(cpl_rd_qpn), .rd_kind(cpl_rd_kind), .rd_data(cpl_rd_data),
    .wb_base(cpl_wb_base), .wb_addr, .wb_data, .wb_valid, .wb_ready);

  // a writeback is a write packet of one 4-byte beat; wb_base is a virtual
  // address of the provider's counter page
  always_comb begin
    dma_cmd_t c;
    c.addr = wb_addr; c.len = 32'd4;
    if (!wb_hdr_sent) wr_beat[3] = wr_header(c, 6'd2, 1'b0);
    else begin
      wr_beat[3].data = {480'h0, wb_data};
      wr_beat[3].keep = 64'hF;
      wr_beat[3].last = 1'b1;
    end
    wr_valid[3] = wb_valid;
    wb_ready    = wb_hdr_sent && wr_ready[3];
  end
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) wb_hdr_sent <= 1'b0;
    else if (wr_valid[3] && wr_ready[3]) wb_hdr_sent <= !wb_hdr_sent;
  end

  // ---------------- DMA write arbitration and translation ----------------
  axis_beat_t arb_beat;
  logic       arb_valid, arb_ready;
  rr_arbiter #(.N(4)) u_wr_arb (
    .clk, .rst_n, .in_beat(wr_beat), .in_valid(wr_valid), .in_ready(wr_ready),
    .out_beat(arb_beat), .out_valid(arb_valid), .out_ready(arb_ready), .sel());

  dma_mmu #(.ENTRIES(TLB_ENTRIES)) u_mmu (
    .clk, .rst_n, .in_beat(arb_beat), .in_valid(arb_valid), .in_ready(arb_ready),
    .out_beat(dma_wr_beat), .out_valid(dma_wr_valid), .out_ready(dma_wr_ready),
    .miss_valid(tlb_miss_valid), .miss_asid(tlb_miss_asid), .miss_vaddr(tlb_miss_vaddr),
    .fill_valid(tlb_fill_valid), .fill_asid(tlb_fill_asid), .fill_vaddr(tlb_fill_vaddr),
    .fill_paddr(tlb_fill_paddr), .flush(tlb_flush), .miss_count(tlb_miss_count));

  // ---------------- RDMA commands through programmable congestion control ----------------
  pcc #(.N_QP(N_QP), .DCQCN_PERIOD(DCQCN_PERIOD)) u_pcc (
    .clk, .rst_n, .reconfig(cc_reconfig), .active(cc_active), .switch_count(cc_switch_count),
    .cmd_in(host_rdma_cmd), .cmd_in_valid(host_rdma_cmd_valid), .cmd_in_ready(host_rdma_cmd_ready),
    .cmd_out(roce_cmd), .cmd_out_valid(roce_cmd_valid), .cmd_out_ready(roce_cmd_ready),
    .sig(roce_sig), .sig_valid(roce_sig_valid),
    .window_blocked_cycles(cc_window_blocked), .dcqcn_cnp_count(cc_cnp_count));

  // ---------------- TX: netdev TX, stacks, MAC ----------------
  axis_beat_t tx_beat [3];
  logic       tx_valid [3], tx_ready [3];
  netdev_tx u_netdev_tx (
    .clk, .rst_n, .cmd_in(host_tx_cmd), .cmd_in_valid(host_tx_cmd_valid), .cmd_in_ready(host_tx_cmd_ready),
    .dma_rd_cmd, .dma_rd_cmd_valid, .dma_rd_cmd_ready, .dma_rd_beat, .dma_rd_valid, .dma_rd_ready,
    .tx_beat(tx_beat[0]), .tx_valid(tx_valid[0]), .tx_ready(tx_ready[0]), .tx_event(), .tx_done);

  assign tx_beat[1] = roce_tx_beat;
  assign tx_valid[1] = roce_tx_valid;
  assign roce_tx_ready = tx_ready[1];
  assign tx_beat[2] = tcp_tx_beat;
  assign tx_valid[2] = tcp_tx_valid;
  assign tcp_tx_ready = tx_ready[2];

  axis_beat_t txa_beat;
  logic       txa_valid, txa_ready, tx_full;
  rr_arbiter #(.N(3)) u_tx_arb (
    .clk, .rst_n, .in_beat(tx_beat), .in_valid(tx_valid), .in_ready(tx_ready),
    .out_beat(txa_beat), .out_valid(txa_valid), .out_ready(txa_ready), .sel());

  assign txa_ready = !tx_full;
  cdc_fifo #(.W($bits(axis_beat_t)), .DEPTH(64)) u_tx_cdc (
    .wr_clk(clk), .wr_rst_n(rst_n), .wr_valid(txa_valid), .wr_data(txa_beat),
    .wr_full(tx_full), .overflow(),
    .rd_clk(mac_clk), .rd_rst_n(mac_rst_n), .rd_valid(mac_tx_valid), .rd_ready(mac_tx_ready),
    .rd_data(mac_tx_beat));

  // ---------------- Arm interrupt lines ----------------
  irq_router #(.N_IRQ(16), .N_SRC(16), .TIMER_LINE(15)) u_irq (
    .clk, .rst_n, .src_irq({13'h0, msix_irq_req, fm_drop, hp_done}),
    .map_we(irq_map_we), .map_line(irq_map_line), .map_src(irq_map_src), .map_en(irq_map_en),
    .timer_period(arm_timer_period), .timer_clr(arm_timer_clr), .irq_out(arm_irq));
endmodule
