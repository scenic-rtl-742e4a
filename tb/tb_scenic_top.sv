// tb_scenic_top: end-to-end test of the SmartNIC at its full-size default
// parameters. Models around the card: a MAC on its own clock (rx frames, tx
// sink), the host DMA engine (write sink with a memory-less checker, read
// responder), the TLB miss handler of the driver (fills paddr = vaddr with
// bit 40 set after a delay), the RX ring consumer, the interrupt
// acknowledgement, the RDMA stack's ports (rx/tx sinks and sources, payload
// write packets, completions, ACK/ECN signals) and the TCP stack's ports.
//
// Scenario: RoCE, TCP and slow-path frames arrive from the MAC while RDMA
// payload, completion writebacks and host TX run in parallel. The RX ring
// has 8 slots and is consumed only after it has stalled the RX engine. A
// subnet's rate limiter drops frames and raises its mapped Arm IRQ line.
// Host RDMA commands first hit the window limit of congestion-control region
// 0, then a reconfiguration moves them to DCQCN, which receives a CNP. A
// small table is hash-partitioned by SCU 1 and flushed to GPU memory. Last,
// the RoCE sink stops and the MAC-side FIFO overflows.
// Each mechanism is counted and the test fails if any count is zero; data
// checks: header translation, per-source packet counts and byte totals,
// frame counts at every sink, interrupt counts.
module tb_scenic_top;
  import scenic_pkg::*;
  import tb_pkg::*;
  localparam int N_GPU = 4;

  logic clk = 0, rst_n = 0, mac_clk = 0, mac_rst_n = 0;
  always #1 clk = ~clk;
  always #1.3 mac_clk = ~mac_clk;
  int checks = 0, failures = 0;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // ---------------- DUT ----------------
  axis_beat_t mac_rx_beat, mac_tx_beat, roce_rx_beat, roce_tx_beat, roce_pl_beat, tcp_rx_beat, tcp_tx_beat;
  axis_beat_t dma_wr_beat, dma_rd_beat;
  logic mac_rx_valid, mac_rx_overflow, mac_tx_valid, mac_tx_ready;
  logic roce_rx_valid, roce_rx_ready, roce_tx_valid, roce_tx_ready, roce_pl_valid, roce_pl_ready;
  logic [QPN_W-1:0] roce_pl_qpn, roce_cpl_qpn, steer_qpn, cpl_rd_qpn;
  rdma_cmd_t roce_cmd, host_rdma_cmd;
  logic roce_cmd_valid, roce_cmd_ready, roce_sig_valid, roce_cpl_valid;
  cc_signal_t roce_sig;
  logic [1:0] roce_cpl_kind, cpl_rd_kind;
  logic tcp_rx_valid, tcp_rx_ready, tcp_tx_valid, tcp_tx_ready;
  logic host_rdma_cmd_valid, host_rdma_cmd_ready, cc_reconfig, cc_active;
  logic [63:0] rx_buff_vaddr, cpl_wb_base, tlb_miss_vaddr, tlb_fill_vaddr, tlb_fill_paddr, hp_col_stride;
  logic [31:0] rx_buff_stride, rx_buff_size, rx_buff_tail, irq_time, tx_done, cpl_rd_data;
  logic [15:0] irq_coal, fm_cfg_rate, arm_irq;
  dma_cmd_t host_tx_cmd, dma_rd_cmd;
  logic host_tx_cmd_valid, host_tx_cmd_ready, steer_we, steer_scu;
  logic tlb_miss_valid, tlb_fill_valid, tlb_flush;
  logic [ASID_W-1:0] tlb_miss_asid, tlb_fill_asid;
  logic hp_start, hp_clear, hp_busy;
  logic [31:0] hp_rows, hp_flush_count;
  logic [3:0] hp_key_cols, hp_data_cols, fm_cfg_idx, fm_rd_idx, irq_map_line, irq_map_src;
  logic [63:0] hp_gpu_base [N_GPU];
  logic [4:0] fm_subnet_shift;
  logic fm_cfg_we, irq_map_we, irq_map_en, arm_timer_clr;
  logic [23:0] fm_cfg_burst;
  logic [47:0] fm_rd_pkts, fm_rd_bytes;
  logic [31:0] fm_rd_drops, arm_timer_period;
  logic dma_wr_valid, dma_wr_ready, dma_rd_cmd_valid, dma_rd_cmd_ready, dma_rd_valid, dma_rd_ready;
  logic msix_irq_req, msix_irq_ack;
  logic [31:0] filter_frames [3];
  logic [31:0] msix_irq_count, tlb_miss_count, cc_switch_count, cc_window_blocked, cc_cnp_count;

  scenic_top dut (.*);

  // ---------------- counters of mechanisms ----------------
  int cyc = 0;
  int ring_stall = 0, wr_arb_contention = 0, tx_arb_contention = 0;
  int irq_coalesced = 0, irq_timeout = 0, tlb_fills = 0;
  int wr_pkts [8];
  longint wr_bytes [8];
  int roce_rx_frames = 0, tcp_rx_frames = 0, mac_tx_frames = 0, roce_cmds = 0;
  int arm_drop_irq = 0, arm_hash_irq = 0, arm_timer_irq = 0;
  logic [15:0] arm_prev = 0;
  bit consume = 0, roce_stop = 0;

  always @(posedge clk) begin
    int nv;
    cyc <= cyc + 1;
    if (rst_n && dut.u_netdev_rx.ring_full && dut.u_netdev_rx.meta_valid) ring_stall++;
    nv = 0;
    for (int i = 0; i < 4; i++) nv += int'(rst_n && dut.wr_valid[i]);
    if (nv >= 2) wr_arb_contention++;
    nv = 0;
    for (int i = 0; i < 3; i++) nv += int'(rst_n && dut.tx_valid[i]);
    if (nv >= 2) tx_arb_contention++;
    arm_prev <= arm_irq;
    if (rst_n && arm_irq[2] && !arm_prev[2]) arm_drop_irq++;
    if (rst_n && arm_irq[0] && !arm_prev[0]) arm_hash_irq++;
    if (rst_n && arm_irq[15] && !arm_prev[15]) arm_timer_irq++;
  end

  // host DMA write sink: parse write packets, check translation
  bit in_pkt = 0;
  int pkt_asid, pkt_left;
  always @(posedge clk) begin
    dma_wr_ready <= ($urandom % 4) != 0;
    if (rst_n && dma_wr_valid && dma_wr_ready) begin
      if (!in_pkt) begin
        pkt_asid = int'(dma_wr_beat.data[101:96]);
        pkt_left = int'(dma_wr_beat.data[95:64]);
        checks++;
        if (!dma_wr_beat.data[102] || !dma_wr_beat.data[40]) begin
          failures++; $display("FAIL: untranslated write header %h", dma_wr_beat.data[102:0]);
        end
        wr_pkts[pkt_asid]++;
        wr_bytes[pkt_asid] += pkt_left;
        in_pkt = 1;
      end else begin
        pkt_left -= keep_bytes(dma_wr_beat.keep);
        if (dma_wr_beat.last) begin
          checks++;
          if (pkt_left != 0) begin failures++; $display("FAIL: write packet length off by %0d", pkt_left); end
          in_pkt = 0;
        end
      end
    end
  end

  // driver: TLB miss handling
  initial begin
    tlb_fill_valid = 0; tlb_fill_asid = 0; tlb_fill_vaddr = 0; tlb_fill_paddr = 0; tlb_flush = 0;
    forever begin
      @(posedge clk);
      if (rst_n && tlb_miss_valid) begin
        logic [ASID_W-1:0] a;
        logic [63:0] v;
        a = tlb_miss_asid; v = tlb_miss_vaddr;
        repeat (10) @(negedge clk);
        tlb_fill_valid = 1; tlb_fill_asid = a; tlb_fill_vaddr = v; tlb_fill_paddr = v | (64'd1 << 40);
        @(negedge clk);
        tlb_fill_valid = 0;
        tlb_fills++;
      end
    end
  end

  // driver: MSI-X acknowledgement, classify coalesced/timeout interrupts
  initial begin
    msix_irq_ack = 0;
    forever begin
      @(posedge clk);
      if (rst_n && msix_irq_req && !msix_irq_ack) begin
        if (dut.u_msix.last_by_timeout) irq_timeout++; else irq_coalesced++;
        repeat (3) @(negedge clk);
        msix_irq_ack = 1;
        @(negedge clk);
        msix_irq_ack = 0;
      end
    end
  end

  // driver: RX ring consumer (enabled once the ring has stalled)
  always @(posedge clk) if (consume) rx_buff_tail <= 32'(wr_pkts[0] % 8);

  // host DMA read responder for netdev TX
  initial begin
    dma_rd_cmd_ready = 0; dma_rd_valid = 0; dma_rd_beat = '0;
    forever begin
      @(negedge clk);
      dma_rd_cmd_ready = 1;
      #0.1;
      if (rst_n && dma_rd_cmd_valid) begin
        int nb;
        nb = (dma_rd_cmd.len + 63) / 64;
        @(negedge clk);
        dma_rd_cmd_ready = 0;
        for (int i = 0; i < nb; i++) begin
          dma_rd_beat.data = {16{32'(i)}}; dma_rd_beat.keep = '1; dma_rd_beat.last = (i == nb - 1);
          dma_rd_valid = 1;
          #0.1;
          while (!dma_rd_ready) begin @(negedge clk); #0.1; end
          @(negedge clk);
        end
        dma_rd_valid = 0;
      end
    end
  end

  // sinks of the stacks and the MAC
  always @(posedge clk) begin
    roce_rx_ready <= !roce_stop && (($urandom % 4) != 0);
    tcp_rx_ready  <= ($urandom % 2) != 0;
    roce_cmd_ready <= 1'b1;
    if (rst_n && roce_rx_valid && roce_rx_ready && roce_rx_beat.last) roce_rx_frames++;
    if (rst_n && tcp_rx_valid && tcp_rx_ready && tcp_rx_beat.last) tcp_rx_frames++;
    if (rst_n && roce_cmd_valid && roce_cmd_ready) roce_cmds++;
  end
  always @(posedge mac_clk) begin
    mac_tx_ready <= 1'b1;
    if (mac_rst_n && mac_tx_valid && mac_tx_ready && mac_tx_beat.last) mac_tx_frames++;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- stimulus helpers ----------------
  task automatic mac_frame(input logic [15:0] etype, input logic [7:0] proto, input logic [15:0] dport,
                           input logic [31:0] src, input int nbytes, input int seed);
    int nb;
    nb = (nbytes + 63) / 64;
    for (int i = 0; i < nb; i++) begin
      @(negedge mac_clk);
      mac_rx_beat.data = (i == 0) ? hdr(etype, proto, dport, src, 16'(nbytes - 14), seed) : {16{32'(seed + i)}};
      mac_rx_beat.keep = (i == nb - 1) ? keep_of(nbytes - 64 * i) : '1;
      mac_rx_beat.last = (i == nb - 1);
      mac_rx_valid = 1;
    end
    @(negedge mac_clk);
    mac_rx_valid = 0;
  endtask

  task automatic put(ref axis_beat_t b, ref logic v, const ref logic r, input axis_beat_t x);
    b = x; v = 1;
    #0.1;
    while (!r) begin @(negedge clk); #0.1; end
    @(posedge clk);
    @(negedge clk);
    v = 0;
  endtask

  // RDMA payload write packet: header (virtual address, asid) + beats
  task automatic payload(input int qpn, input logic [63:0] vaddr, input int asid,
                         input logic [31:0] words [], input int w0, input int nbeats);
    axis_beat_t x;
    dma_cmd_t c;
    c.addr = vaddr; c.len = 32'(64 * nbeats);
    roce_pl_qpn = QPN_W'(qpn);
    put(roce_pl_beat, roce_pl_valid, roce_pl_ready, wr_header(c, ASID_W'(asid), 1'b0));
    for (int i = 0; i < nbeats; i++) begin
      x.keep = '1; x.last = (i == nbeats - 1);
      for (int l = 0; l < 16; l++) x.data[l*32 +: 32] = words[w0 + 16 * i + l];
      put(roce_pl_beat, roce_pl_valid, roce_pl_ready, x);
    end
  endtask

  task automatic rdma_cmd(input int qpn, input int len, input int max_wait, output bit ok);
    host_rdma_cmd = '0; host_rdma_cmd.qpn = QPN_W'(qpn); host_rdma_cmd.len = 32'(len);
    host_rdma_cmd_valid = 1;
    #0.1;
    ok = 0;
    for (int i = 0; i < max_wait; i++) begin
      if (host_rdma_cmd_ready) begin ok = 1; break; end
      @(negedge clk); #0.1;
    end
    if (ok) @(posedge clk);
    @(negedge clk);
    if (ok) host_rdma_cmd_valid = 0;
  endtask

  task automatic map_irq(input int line, input int src);
    irq_map_we = 1; irq_map_line = 4'(line); irq_map_src = 4'(src); irq_map_en = 1;
    @(negedge clk);
    irq_map_we = 0;
  endtask

  // ---------------- main sequence ----------------
  initial begin
    logic [31:0] words [];
    int slow_sent, n_ok;
    bit ok;
    mac_rx_beat = '0; mac_rx_valid = 0; roce_tx_beat = '0; roce_tx_valid = 0; tcp_tx_beat = '0; tcp_tx_valid = 0;
    roce_pl_beat = '0; roce_pl_valid = 0; roce_pl_qpn = 0; roce_sig = '0; roce_sig_valid = 0;
    roce_cpl_valid = 0; roce_cpl_qpn = 0; roce_cpl_kind = 0;
    host_rdma_cmd = '0; host_rdma_cmd_valid = 0; cc_reconfig = 0;
    rx_buff_vaddr = 64'h10_0000; rx_buff_stride = 2048; rx_buff_size = 8; rx_buff_tail = 0;
    irq_coal = 4; irq_time = 400; host_tx_cmd = '0; host_tx_cmd_valid = 0;
    steer_we = 0; steer_qpn = 0; steer_scu = 0; cpl_wb_base = 64'h20_0000; cpl_rd_qpn = 0; cpl_rd_kind = 0;
    hp_start = 0; hp_clear = 0; hp_rows = 0; hp_key_cols = 0; hp_data_cols = 0;
    for (int g = 0; g < N_GPU; g++) hp_gpu_base[g] = 64'h4000_0000 + 64'(g) * 64'h100_0000;
    hp_col_stride = 64'h10_0000;
    fm_subnet_shift = 8; fm_cfg_we = 0; fm_cfg_idx = 0; fm_cfg_rate = 0; fm_cfg_burst = 0; fm_rd_idx = 0;
    irq_map_we = 0; irq_map_line = 0; irq_map_src = 0; irq_map_en = 0;
    arm_timer_period = 1000; arm_timer_clr = 0;
    for (int i = 0; i < 8; i++) begin wr_pkts[i] = 0; wr_bytes[i] = 0; end
    repeat (4) @(posedge clk);
    rst_n = 1; mac_rst_n = 1;
    @(negedge clk);
    // configuration: steering QPN 5 -> hash SCU, limiter on subnet 3,
    // IRQ lines: 0 <- hash done, 1 <- MSI-X, 2 <- flow-monitor drop
    steer_we = 1; steer_qpn = 5; steer_scu = 1; @(negedge clk); steer_we = 0;
    fm_cfg_we = 1; fm_cfg_idx = 3; fm_cfg_rate = 16'd4; fm_cfg_burst = 24'd200; @(negedge clk); fm_cfg_we = 0;
    map_irq(0, 0); map_irq(1, 2); map_irq(2, 1);

    words = new[4096];
    foreach (words[i]) words[i] = 32'(i * 7919 + 3);

    fork
      // MAC: RoCE, TCP and slow-path frames
      begin
        for (int i = 0; i < 16; i++) begin
          case (i % 4)
            0: mac_frame(ETHERTYPE_IPV4, IP_PROTO_UDP, ROCEV2_UDP_PORT, 32'h0A00_0101, 250, i);
            1: mac_frame(ETHERTYPE_IPV4, IP_PROTO_TCP, 16'd80, 32'h0A00_0102, 190, i);
            default: mac_frame(ETHERTYPE_IPV4, IP_PROTO_UDP, 16'd53, 32'h0A00_0200 + i, 100 + 20 * i, i);
          endcase
        end
        // subnet 3: the first frame fits the 200-byte burst, the next two are dropped
        for (int i = 0; i < 3; i++) mac_frame(ETHERTYPE_IPV4, IP_PROTO_UDP, 16'd53, 32'h0A00_0305, 150, 50 + i);
      end
      // RDMA payload to host memory (QPN 7, slot 0)
      for (int p = 0; p < 6; p++) payload(7, 64'h3000_0000 + 64'(p) * 512, 3, words, 128 * p, 8);
      // completions with writeback
      for (int i = 0; i < 6; i++) begin
        roce_cpl_valid = 1; roce_cpl_qpn = QPN_W'(i % 3); roce_cpl_kind = 2'(i % 2);
        @(negedge clk);
        roce_cpl_valid = 0;
        repeat (20) @(negedge clk);
      end
      // TX: netdev TX commands and the stacks' frames
      begin
        host_tx_cmd.addr = 64'h50_0000; host_tx_cmd.len = 200; host_tx_cmd_valid = 1;
        #0.1;
        while (!host_tx_cmd_ready) begin @(negedge clk); #0.1; end
        @(posedge clk); @(negedge clk);
        host_tx_cmd.len = 900;
        #0.1;
        while (!host_tx_cmd_ready) begin @(negedge clk); #0.1; end
        @(posedge clk); @(negedge clk);
        host_tx_cmd_valid = 0;
      end
      for (int f = 0; f < 3; f++)
        for (int i = 0; i < 4; i++) begin
          axis_beat_t x;
          x.data = {16{32'(f * 10 + i)}}; x.keep = '1; x.last = (i == 3);
          put(roce_tx_beat, roce_tx_valid, roce_tx_ready, x);
        end
      for (int f = 0; f < 3; f++)
        for (int i = 0; i < 2; i++) begin
          axis_beat_t x;
          x.data = {16{32'(f * 20 + i)}}; x.keep = '1; x.last = (i == 1);
          put(tcp_tx_beat, tcp_tx_valid, tcp_tx_ready, x);
        end
    join

    // the 8-slot ring holds 7 frames; the rest waits until the host consumes
    for (int i = 0; i < 2000 && ring_stall < 200; i++) @(negedge clk);
    check(ring_stall >= 200, $sformatf("RX ring full stall: %0d cycles", ring_stall));
    consume = 1;
    slow_sent = 8 + 1;
    for (int i = 0; i < 5000 && wr_pkts[0] < slow_sent; i++) @(negedge clk);
    check(wr_pkts[0] == slow_sent, $sformatf("slow-path frames written to the ring: %0d, expected %0d", wr_pkts[0], slow_sent));
    check(filter_frames[DEST_ROCE] == 4 && filter_frames[DEST_TCP] == 4 && filter_frames[DEST_SLOW] == 11,
          $sformatf("filter counts slow/tcp/roce = %0d/%0d/%0d", filter_frames[DEST_SLOW],
                    filter_frames[DEST_TCP], filter_frames[DEST_ROCE]));
    check(roce_rx_frames == 4 && tcp_rx_frames == 4, $sformatf("stack rx frames roce %0d tcp %0d", roce_rx_frames, tcp_rx_frames));
    fm_rd_idx = 3;
    @(negedge clk);
    check(fm_rd_pkts == 1 && fm_rd_drops == 2, $sformatf("subnet 3: %0d pkts, %0d drops", fm_rd_pkts, fm_rd_drops));
    check(wr_pkts[3] == 6 && wr_bytes[3] == 6 * 512, $sformatf("RDMA payload packets %0d bytes %0d", wr_pkts[3], wr_bytes[3]));
    check(wr_pkts[2] == 6 && wr_bytes[2] == 24, $sformatf("completion writebacks %0d", wr_pkts[2]));
    cpl_rd_qpn = 1; cpl_rd_kind = 1;
    @(negedge clk);
    check(cpl_rd_data == 1, $sformatf("completion counter qp1/kind1 = %0d", cpl_rd_data));
    for (int i = 0; i < 2000 && mac_tx_frames < 8; i++) @(negedge clk);
    check(mac_tx_frames == 8 && tx_done == 2, $sformatf("MAC tx frames %0d, netdev tx done %0d", mac_tx_frames, tx_done));
    // remaining ring events reach the host by the MSI-X timeout
    repeat (600) @(negedge clk);
    check(msix_irq_count == 32'(irq_coalesced + irq_timeout), "MSI-X interrupt count");

    // congestion control: window of region 0, switch, DCQCN
    n_ok = 0;
    for (int i = 0; i < 17; i++) begin
      rdma_cmd(1, 4096, 4, ok);
      n_ok += ok;
    end
    check(n_ok == 16, $sformatf("region 0 passed %0d of 17 commands (window 16)", n_ok));
    check(cc_window_blocked > 0, "window blocking counted");
    cc_reconfig = 1; @(negedge clk); cc_reconfig = 0;
    #0.1;
    check(cc_active && host_rdma_cmd_ready, "after reconfiguration DCQCN takes the held command");
    @(negedge clk);
    host_rdma_cmd_valid = 0;
    roce_sig = '0; roce_sig.qpn = 1; roce_sig.ecn = 1; roce_sig_valid = 1;
    @(negedge clk);
    roce_sig_valid = 0;
    rdma_cmd(1, 4096, 400, ok);
    check(ok, "DCQCN paces but passes the next command");
    check(roce_cmds == 18, $sformatf("commands to the RDMA stack: %0d", roce_cmds));

    // hash partitioning of 256 rows, 1 key and 1 data column, via QPN 5
    hp_rows = 256; hp_key_cols = 1; hp_data_cols = 1;
    hp_start = 1; @(negedge clk); hp_start = 0;
    for (int c = 0; c < 2; c++) payload(5, 64'h0, 0, words, 256 * c, 16);
    for (int i = 0; i < 3000 && hp_busy; i++) @(negedge clk);
    repeat (200) @(negedge clk);
    check(!hp_busy, "hash partitioning finished");
    check(hp_flush_count >= 1 && wr_pkts[1] == int'(hp_flush_count) && wr_bytes[1] == 1024,
          $sformatf("hash flushes %0d, packets %0d, bytes %0d", hp_flush_count, wr_pkts[1], wr_bytes[1]));

    // overflow of the MAC-side FIFO: the RDMA stack stops taking frames
    roce_stop = 1;
    for (int i = 0; i < 40; i++) mac_frame(ETHERTYPE_IPV4, IP_PROTO_UDP, ROCEV2_UDP_PORT, 32'h0A00_0101, 256, 100 + i);
    check(mac_rx_overflow, "MAC RX FIFO overflow flagged");
    roce_stop = 0;
    repeat (500) @(negedge clk);

    // ---------------- mechanism counts ----------------
    $display("mechanisms: stall=%0d wr_contention=%0d tx_contention=%0d coal=%0d timeout=%0d tlb_miss=%0d fills=%0d",
             ring_stall, wr_arb_contention, tx_arb_contention, irq_coalesced, irq_timeout, tlb_miss_count, tlb_fills);
    $display("mechanisms: switch=%0d window_blocked=%0d cnp=%0d hash_flush=%0d fm_drop_irq=%0d hash_irq=%0d timer_irq=%0d",
             cc_switch_count, cc_window_blocked, cc_cnp_count, hp_flush_count, arm_drop_irq, arm_hash_irq, arm_timer_irq);
    check(ring_stall > 0, "mechanism: ring-full stall");
    check(wr_arb_contention > 0, "mechanism: DMA write arbitration under contention");
    check(tx_arb_contention > 0, "mechanism: TX arbitration under contention");
    check(irq_coalesced > 0, "mechanism: coalesced MSI-X interrupt");
    check(irq_timeout > 0, "mechanism: MSI-X timeout interrupt");
    check(tlb_miss_count > 0 && tlb_fills == int'(tlb_miss_count), "mechanism: TLB miss and fill");
    check(cc_switch_count == 1, "mechanism: congestion-control switch");
    check(cc_window_blocked > 0, "mechanism: window block");
    check(cc_cnp_count == 1, "mechanism: DCQCN rate cut");
    check(hp_flush_count > 0, "mechanism: hash flush");
    check(arm_drop_irq > 0, "mechanism: flow-monitor drop interrupt");
    check(arm_hash_irq > 0, "mechanism: hash-done interrupt");
    check(arm_timer_irq > 0, "mechanism: Arm timer interrupt");
    check(filter_frames[DEST_ROCE] > 0 && filter_frames[DEST_TCP] > 0 && filter_frames[DEST_SLOW] > 0,
          "mechanism: all three filter destinations");
    check(mac_rx_overflow, "mechanism: MAC-side FIFO overflow");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
