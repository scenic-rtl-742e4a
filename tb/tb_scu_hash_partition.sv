// tb_scu_hash_partition: checks hash partitioning against a reference model,
// with a reduced buffer (64 words, 1024 rows) and 512-byte flushes so that
// both full-buffer flushes and column-end flushes occur. A batch of 1000 rows
// with two key columns and two data columns is streamed column by column;
// the model hashes fmix32(fmix32(k0) ^ k1), assigns row r to GPU h mod 4 and
// expects the rows of each GPU, in order, at gpu_base[g] + c * stride for data
// column c. A memory model captures the DMA writes (random command and data
// backpressure, lengths and keep checked). A second batch of 300 rows without
// clear must append behind the first. out_bytes and done are checked too.
module tb_scu_hash_partition;
  import scenic_pkg::*;
  localparam int N_GPU = 4;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;

  logic        start, clear, busy, done;
  logic [31:0] cfg_rows, rd_out_bytes, flush_count;
  logic [3:0]  cfg_key_cols, cfg_data_cols;
  logic [63:0] cfg_gpu_base [N_GPU];
  logic [63:0] cfg_col_stride;
  logic [1:0]  rd_gpu, rd_col;
  axis_beat_t  in_beat, dma_beat;
  logic        in_valid, in_ready, dma_cmd_valid, dma_cmd_ready, dma_valid, dma_ready;
  dma_cmd_t    dma_cmd;
  scu_hash_partition #(.LANES(16), .BUF_DEPTH(64), .N_GPU(N_GPU), .FLUSH_BYTES(512), .MAX_DCOLS(4)) dut (.*);

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  function automatic logic [31:0] fmix(input logic [31:0] k);
    logic [31:0] h;
    h = k ^ (k >> 16);
    h = h * 32'h85EBCA6B;
    h = h ^ (h >> 13);
    h = h * 32'hC2B2AE35;
    return h ^ (h >> 16);
  endfunction
  function automatic logic [31:0] key(input int c, input int r);
    return 32'(r * 2654435761 + c * 97 + 5);
  endfunction
  function automatic logic [31:0] dval(input int c, input int r);
    return {8'(c + 1), 24'(r)};
  endfunction

  // memory model of the DMA writes (word addressed)
  logic [31:0] mem [longint];
  longint      w_addr;
  int          w_left, dones = 0;
  bit          in_pkt = 0;
  always @(posedge clk) begin
    dma_cmd_ready <= ($urandom % 3) != 0;
    dma_ready     <= ($urandom % 4) != 0;
    if (rst_n && done) dones <= dones + 1;
    if (rst_n && dma_cmd_valid && dma_cmd_ready) begin
      checks++;
      if (in_pkt || dma_cmd.len == 0 || dma_cmd.len > 512 || dma_cmd.len[1:0] != 0) begin
        failures++; $display("FAIL: bad command len %0d", dma_cmd.len);
      end
      w_addr = longint'(dma_cmd.addr); w_left = dma_cmd.len; in_pkt = 1;
    end
    if (rst_n && dma_valid && dma_ready) begin
      int nb;
      nb = (w_left > 64) ? 64 : w_left;
      checks++;
      if (!in_pkt || dma_beat.keep !== ((nb == 64) ? {64{1'b1}} : ((64'd1 << nb) - 1))
          || dma_beat.last !== (w_left <= 64)) begin
        failures++; $display("FAIL: bad data beat (left %0d)", w_left);
      end
      for (int i = 0; i < nb / 4; i++) mem[w_addr + 4 * i] = dma_beat.data[i*32 +: 32];
      w_addr += 64; w_left -= nb;
      if (dma_beat.last) in_pkt = 0;
    end
  end

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic put_beat(input axis_beat_t b);
    in_beat = b; in_valid = 1;
    #0.1;
    while (!in_ready) begin @(negedge clk); #0.1; end
    @(posedge clk);
    @(negedge clk);
    in_valid = 0;
  endtask

  // expected output per GPU and data column, accumulated over batches
  logic [31:0] exp_out [N_GPU][2][$];

  task automatic run_batch(input int rows, input int row0);
    int nbeats;
    logic [31:0] h [];
    nbeats = (rows + 15) / 16;
    h = new[rows];
    for (int r = 0; r < rows; r++) h[r] = fmix(fmix(key(0, row0 + r)) ^ key(1, row0 + r));
    for (int c = 0; c < 2; c++)
      for (int r = 0; r < rows; r++) exp_out[h[r] % N_GPU][c].push_back(dval(c, row0 + r));
    cfg_rows = rows; cfg_key_cols = 2; cfg_data_cols = 2;
    start = 1; @(negedge clk); start = 0;
    check(busy, "busy after start");
    for (int c = 0; c < 4; c++)
      for (int b = 0; b < nbeats; b++) begin
        axis_beat_t x;
        x.keep = '1; x.last = (b == nbeats - 1);
        for (int l = 0; l < 16; l++)
          x.data[l*32 +: 32] = (c < 2) ? key(c, row0 + b * 16 + l) : dval(c - 2, row0 + b * 16 + l);
        put_beat(x);
      end
    for (int i = 0; i < 2000 && busy; i++) @(negedge clk);
    check(!busy, "batch finished");
  endtask

  task automatic compare(input string tag);
    for (int g = 0; g < N_GPU; g++)
      for (int c = 0; c < 2; c++) begin
        int bad = 0;
        longint base;
        base = longint'(g) * 64'h100_0000 + longint'(c) * 64'h10_0000;
        for (int i = 0; i < exp_out[g][c].size(); i++)
          if (!mem.exists(base + 4 * i) || mem[base + 4 * i] !== exp_out[g][c][i]) bad++;
        check(bad == 0, $sformatf("%s: GPU %0d column %0d: %0d of %0d words wrong",
                                  tag, g, c, bad, exp_out[g][c].size()));
        rd_gpu = 2'(g); rd_col = 2'(c);
        @(negedge clk);
        check(rd_out_bytes == 32'(4 * exp_out[g][c].size()),
              $sformatf("%s: out_bytes[%0d][%0d] = %0d, expected %0d", tag, g, c,
                        rd_out_bytes, 4 * exp_out[g][c].size()));
      end
  endtask

  initial begin
    start = 0; clear = 0; in_beat = '0; in_valid = 0; rd_gpu = 0; rd_col = 0;
    cfg_rows = 0; cfg_key_cols = 0; cfg_data_cols = 0;
    for (int g = 0; g < N_GPU; g++) cfg_gpu_base[g] = 64'(g) * 64'h100_0000;
    cfg_col_stride = 64'h10_0000;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    run_batch(1000, 0);
    compare("batch 1");
    check(flush_count > 8, $sformatf("flush_count = %0d, expected full and column-end flushes", flush_count));
    run_batch(300, 1000);
    compare("batch 2");
    check(dones == 2, $sformatf("done pulses = %0d", dones));
    clear = 1; @(negedge clk); clear = 0;
    rd_gpu = 1; rd_col = 1;
    @(negedge clk);
    check(rd_out_bytes == 0, "clear resets the output offsets");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
