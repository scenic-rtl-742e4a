// tb_completion_counters: 500 random completion events over 8 QPs and 4 kinds
// (including back-to-back increments of the same counter) against a model.
// Checks every counter through the read port, that each writeback carries the
// counter's address and its new value in increment order, and that a clear
// resets a counter.
module tb_completion_counters;
  localparam int NQ = 8, NK = 4;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;

  logic inc_valid, inc_ready, clr_valid, wb_valid, wb_ready;
  logic [2:0] inc_qpn, clr_qpn, rd_qpn;
  logic [1:0] inc_kind, clr_kind, rd_kind;
  logic [31:0] rd_data, wb_data;
  logic [63:0] wb_base, wb_addr;
  completion_counters #(.N_QP(NQ), .N_KIND(NK), .WB_DEPTH(4)) dut (.*);

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  int model [NQ*NK];
  logic [63:0] exp_addr [$];
  int exp_val [$];

  always @(posedge clk) begin
    wb_ready <= ($urandom_range(0, 2) != 0);
    if (rst_n && wb_valid && wb_ready) begin
      check(exp_addr.size() > 0, "unexpected writeback");
      if (exp_addr.size() > 0) begin
        check(wb_addr == exp_addr.pop_front(), "writeback address");
        check(wb_data == 32'(exp_val.pop_front()), "writeback value");
      end
    end
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    inc_valid = 0; clr_valid = 0; inc_qpn = 0; inc_kind = 0; clr_qpn = 0; clr_kind = 0;
    rd_qpn = 0; rd_kind = 0; wb_base = 64'h2000_0000;
    for (int i = 0; i < NQ*NK; i++) model[i] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 500; n++) begin
      int q, k;
      q = (n % 5 == 0) ? 3 : $urandom_range(0, NQ - 1);
      k = (n % 5 == 0) ? 1 : $urandom_range(0, NK - 1);
      @(negedge clk);
      inc_valid = 1; inc_qpn = 3'(q); inc_kind = 2'(k);
      #0.1;
      while (!inc_ready) begin @(negedge clk); #0.1; end
      model[q*NK + k]++;
      exp_addr.push_back(wb_base + 64'((q*NK + k) * 4));
      exp_val.push_back(model[q*NK + k]);
      @(posedge clk);
    end
    @(negedge clk); inc_valid = 0;
    for (int t = 0; t < 2000 && exp_addr.size() != 0; t++) @(posedge clk);
    for (int i = 0; i < NQ*NK; i++) begin
      @(negedge clk); rd_qpn = 3'(i / NK); rd_kind = 2'(i % NK);
      #0.1 check(rd_data == 32'(model[i]), $sformatf("counter %0d = %0d, expected %0d", i, rd_data, model[i]));
    end
    @(negedge clk); clr_valid = 1; clr_qpn = 3; clr_kind = 1;
    @(negedge clk); clr_valid = 0; rd_qpn = 3; rd_kind = 1;
    #0.1 check(rd_data == 0, "clear");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
