// tb_cdc_fifo: writes a counting sequence from a 322 MHz-like write clock
// into the FIFO and reads it with a 391 MHz-like read clock under random
// read stalls. Checks order and completeness, that nothing is lost while the
// writer respects wr_full, and that writing into a full FIFO sets the sticky
// overflow flag.
module tb_cdc_fifo;
  localparam int W = 40;
  logic wr_clk = 0, rd_clk = 0, wr_rst_n = 0, rd_rst_n = 0;
  always #1.55 wr_clk = ~wr_clk;
  always #1.28 rd_clk = ~rd_clk;
  int checks = 0, failures = 0;

  logic wr_valid, wr_full, overflow, rd_valid, rd_ready;
  logic [W-1:0] wr_data, rd_data;
  cdc_fifo #(.W(W), .DEPTH(16)) dut (.*);

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  int n_wr = 0, n_rd = 0;
  localparam int TOTAL = 300;
  bit stall_reader = 0;

  always @(posedge rd_clk) begin
    rd_ready <= !stall_reader && ($urandom_range(0, 2) != 0);
    if (rd_rst_n && rd_valid && rd_ready) begin
      check(rd_data == W'(n_rd * 7 + 3), $sformatf("read %0d: got %0d", n_rd, rd_data));
      n_rd++;
    end
  end

  initial begin
    #20000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wr_valid = 0; wr_data = '0; rd_ready = 0;
    #5 wr_rst_n = 1; rd_rst_n = 1;
    while (n_wr < TOTAL) begin
      @(negedge wr_clk);
      if (!wr_full && $urandom_range(0, 3) != 0) begin
        wr_valid = 1; wr_data = W'(n_wr * 7 + 3); n_wr++;
      end else wr_valid = 0;
    end
    @(negedge wr_clk); wr_valid = 0;
    wait (n_rd == TOTAL);
    check(!overflow, "overflow set although the writer respected wr_full");
    // now fill the FIFO with the reader stopped and keep writing
    stall_reader = 1;
    repeat (4) @(posedge rd_clk);
    for (int i = 0; i < 24; i++) begin
      @(negedge wr_clk); wr_valid = 1; wr_data = W'(n_wr * 7 + 3); if (!wr_full) n_wr++;
    end
    @(negedge wr_clk); wr_valid = 0;
    check(wr_full, "FIFO not full after 24 writes into 16 entries");
    check(overflow, "overflow not flagged");
    stall_reader = 0;
    wait (n_rd == n_wr);
    check(n_rd == TOTAL + 16, $sformatf("read %0d words, expected %0d", n_rd, TOTAL + 16));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
