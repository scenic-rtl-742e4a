// tb_netdev_rx: sends 20 frames of random length (60..1514 bytes) into the
// slow-path RX engine, with a ring of 8 slots of 2 KiB. The host side (DMA
// sink) applies random backpressure and frees slots only later, so the ring
// fills up. Checks for every frame: DMA command address = base + slot*stride,
// length = 64 + frame length, a tag beat with the length and the valid flag,
// then the frame beats unchanged; that the engine stops at 7 outstanding slots
// while the ring is full; and one pkt_event per frame.
module tb_netdev_rx;
  import scenic_pkg::*;
  import tb_pkg::*;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;

  axis_beat_t in_beat, dma_beat;
  logic in_valid, in_ready, dma_cmd_valid, dma_cmd_ready, dma_valid, dma_ready, pkt_event;
  logic [63:0] buff_vaddr;
  logic [31:0] buff_stride, buff_size, buff_tail, wr_idx;
  dma_cmd_t dma_cmd;
  netdev_rx #(.DATA_DEPTH(64), .META_DEPTH(8)) dut (.*);

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  localparam int NPKT = 20;
  int lens [NPKT];
  axis_beat_t exp_q [$];
  int pkt_out = 0, events = 0;

  // sender
  initial begin
    in_valid = 0; in_beat = '0;
    wait (rst_n);
    for (int p = 0; p < NPKT; p++) begin
      int nb;
      lens[p] = $urandom_range(60, 1514);
      nb = (lens[p] + 63) / 64;
      for (int b = 0; b < nb; b++) begin
        axis_beat_t bt;
        for (int w = 0; w < 16; w++) bt.data[w*32 +: 32] = $urandom;
        bt.keep = (b == nb - 1) ? keep_of(lens[p] - 64 * b) : '1;
        bt.last = (b == nb - 1);
        exp_q.push_back(bt);
        @(negedge clk);
        in_beat = bt; in_valid = 1;
        #0.1;
        while (!in_ready) begin @(negedge clk); #0.1; end
        @(posedge clk);
      end
      @(negedge clk); in_valid = 0;
    end
  end

  // DMA sink
  int beat_no = 0;
  int slot = 0;
  always @(posedge clk) begin
    dma_ready     <= ($urandom_range(0, 3) != 0);
    dma_cmd_ready <= ($urandom_range(0, 1) != 0);
    if (pkt_event) events <= events + 1;
    if (rst_n && dma_cmd_valid && dma_cmd_ready) begin
      check(dma_cmd.addr == buff_vaddr + 64'(slot) * 64'(buff_stride), $sformatf("pkt %0d: address %h", pkt_out, dma_cmd.addr));
      check(dma_cmd.len == 32'(64 + lens[pkt_out]), $sformatf("pkt %0d: DMA length %0d, frame %0d", pkt_out, dma_cmd.len, lens[pkt_out]));
      slot = (slot + 1) % 8;
    end
    if (rst_n && dma_valid && dma_ready) begin
      if (beat_no == 0) begin
        check(dma_beat.data[15:0] == 16'(lens[pkt_out]) && dma_beat.data[16] && dma_beat.data[511:17] == '0,
              $sformatf("pkt %0d: tag %h", pkt_out, dma_beat.data[31:0]));
        check(!dma_beat.last, "tag beat marked last");
      end else begin
        axis_beat_t e;
        e = exp_q.pop_front();
        check(dma_beat == e, $sformatf("pkt %0d beat %0d differs", pkt_out, beat_no));
      end
      beat_no++;
      if (dma_beat.last) begin pkt_out++; beat_no = 0; end
    end
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    buff_vaddr = 64'h0000_7f00_0000_0000; buff_stride = 2048; buff_size = 8; buff_tail = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // ring full: only 7 slots can be used while the driver consumes nothing
    repeat (3000) @(posedge clk);
    check(pkt_out == 7, $sformatf("%0d frames written into a ring with 7 free slots", pkt_out));
    check(wr_idx == 7, "write index should stop at 7");
    // driver consumes slots gradually
    while (pkt_out < NPKT) begin
      repeat (40) @(negedge clk);
      buff_tail = (buff_tail + 1) % 8;
    end
    repeat (20) @(posedge clk);
    check(pkt_out == NPKT, "not all frames delivered");
    check(events == NPKT, $sformatf("%0d events for %0d frames", events, NPKT));
    check(exp_q.size() == 0, "beats left over");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
