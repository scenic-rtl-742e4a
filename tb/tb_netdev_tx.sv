// tb_netdev_tx: the driver enqueues 16 TX commands of random length; a host
// memory model answers each DMA read with beats whose words encode
// (address, beat). Checks that every DMA read carries the command's address
// and length, that the MAC receives ceil(len/64) beats with the data of that
// read, `last` on the final beat and keep trimmed to the length, and that
// tx_done counts the frames.
module tb_netdev_tx;
  import scenic_pkg::*;
  import tb_pkg::*;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;

  dma_cmd_t cmd_in, dma_rd_cmd;
  logic cmd_in_valid, cmd_in_ready, dma_rd_cmd_valid, dma_rd_cmd_ready, dma_rd_valid, dma_rd_ready;
  axis_beat_t dma_rd_beat, tx_beat;
  logic tx_valid, tx_ready, tx_event;
  logic [31:0] tx_done;
  netdev_tx dut (.*);

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  localparam int N = 16;
  dma_cmd_t cmds [N];
  int rd_no = 0, tx_pkt = 0, tx_b = 0;

  // host memory model: one outstanding read, returns beats until the
  // engine has taken ceil(len/64)
  logic [63:0] cur_addr;
  int          cur_beats = 0, sent_beats = 0;
  always @(posedge clk) begin
    dma_rd_cmd_ready <= (cur_beats == sent_beats);
    tx_ready <= ($urandom_range(0, 3) != 0);
    if (rst_n && dma_rd_cmd_valid && dma_rd_cmd_ready) begin
      check(dma_rd_cmd == cmds[rd_no], $sformatf("read %0d: command %h/%0d", rd_no, dma_rd_cmd.addr, dma_rd_cmd.len));
      cur_addr = dma_rd_cmd.addr; cur_beats = (int'(dma_rd_cmd.len) + 63) / 64; sent_beats = 0;
      rd_no++;
      dma_rd_cmd_ready <= 1'b0;
    end
    if (rst_n && dma_rd_valid && dma_rd_ready) sent_beats = sent_beats + 1;
  end
  always_comb begin
    dma_rd_valid = (sent_beats < cur_beats);
    dma_rd_beat.data = {16{cur_addr[31:0] + 32'(sent_beats)}};
    dma_rd_beat.keep = '1;
    dma_rd_beat.last = 1'b0;
  end

  always @(posedge clk) begin
    if (rst_n && tx_valid && tx_ready) begin
      int nb;
      nb = (int'(cmds[tx_pkt].len) + 63) / 64;
      check(tx_beat.data[31:0] == cmds[tx_pkt].addr[31:0] + 32'(tx_b), $sformatf("frame %0d beat %0d data", tx_pkt, tx_b));
      check(tx_beat.last == (tx_b == nb - 1), $sformatf("frame %0d beat %0d last", tx_pkt, tx_b));
      if (tx_b == nb - 1) check(tx_beat.keep == keep_of(int'(cmds[tx_pkt].len) - 64 * tx_b), "keep of final beat");
      else check(tx_beat.keep == '1, "keep of full beat");
      tx_b++;
      if (tx_beat.last) begin tx_pkt++; tx_b = 0; end
    end
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    cmd_in_valid = 0; cmd_in = '0;
    for (int i = 0; i < N; i++) begin
      cmds[i].addr = 64'h1_0000_0000 + 64'(i) * 64'h800;
      cmds[i].len  = 32'($urandom_range(42, 1514));
    end
    cmds[3].len = 64; cmds[4].len = 65;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < N; i++) begin
      @(negedge clk);
      cmd_in = cmds[i]; cmd_in_valid = 1;
      #0.1;
      while (!cmd_in_ready) begin @(negedge clk); #0.1; end
      @(posedge clk);
    end
    @(negedge clk); cmd_in_valid = 0;
    wait (tx_pkt == N);
    repeat (5) @(posedge clk);
    check(tx_done == N, $sformatf("tx_done = %0d", tx_done));
    check(rd_no == N, "number of DMA reads");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
