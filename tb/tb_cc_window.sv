// tb_cc_window: checks the ACK-clocked window. With WINDOW = 4 packets and
// PMTU = 4096, four one-packet commands of QP 1 pass, the fifth is held
// (blocked_cycles grows) until one ACK of QP 1 arrives, and then passes in the
// cycle after it. A 10000-byte command counts as 3 packets. ACKs of another
// QP do not open QP 1's window. The downstream is always ready.
module tb_cc_window;
  import scenic_pkg::*;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;

  rdma_cmd_t  cmd_in, cmd_out;
  logic       cmd_in_valid, cmd_in_ready, cmd_out_valid, cmd_out_ready;
  cc_signal_t sig;
  logic       sig_valid;
  logic [31:0] blocked_cycles;
  cc_window #(.N_QP(4), .WINDOW(4), .PMTU(4096)) dut (.*);

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  int cyc = 0, accepted = 0, last_acc = 0;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (cmd_in_valid && cmd_in_ready) begin accepted <= accepted + 1; last_acc <= cyc; end
    if (cmd_out_valid !== (cmd_in_valid && cmd_in_ready)) begin
      checks++; failures++; $display("FAIL: cmd_out_valid mismatch at %0d", cyc);
    end
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // offer one command, wait at most max_wait cycles; returns 1 if accepted
  task automatic send(input int qpn, input int len, input int max_wait, output bit ok);
    cmd_in = '0; cmd_in.qpn = QPN_W'(qpn); cmd_in.len = 32'(len); cmd_in_valid = 1;
    #0.1;
    ok = 0;
    for (int i = 0; i < max_wait; i++) begin
      if (cmd_in_ready) begin ok = 1; break; end
      @(negedge clk); #0.1;
    end
    if (ok) @(posedge clk);
    @(negedge clk);
    cmd_in_valid = 0;
  endtask

  task automatic ack(input int qpn);
    sig = '0; sig.qpn = QPN_W'(qpn); sig.ack = 1; sig_valid = 1;
    @(negedge clk);
    sig_valid = 0;
  endtask

  initial begin
    bit ok;
    int t;
    cmd_in = '0; cmd_in_valid = 0; cmd_out_ready = 1; sig = '0; sig_valid = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int i = 0; i < 4; i++) begin
      send(1, 4096, 3, ok);
      check(ok, $sformatf("command %0d of QP 1 should pass", i));
    end
    send(1, 100, 10, ok);
    check(!ok, "fifth command of QP 1 must be held by the window");
    check(blocked_cycles >= 10, $sformatf("blocked_cycles = %0d", blocked_cycles));
    // an ACK of QP 2 does not help QP 1
    ack(2);
    send(1, 100, 5, ok);
    check(!ok, "ACK of another QP must not open the window");
    // QP 2 is independent
    send(2, 10000, 3, ok);
    check(ok, "QP 2 command should pass");
    // one ACK for QP 1 opens one slot; the held command passes right after
    ack(1);
    t = cyc;
    send(1, 100, 3, ok);
    check(ok, "command of QP 1 should pass after one ACK");
    send(1, 100, 5, ok);
    check(!ok, "window of QP 1 is full again");
    // QP 2 holds 3 packets: one more command passes, then it is full
    send(2, 100, 3, ok);
    check(ok, "QP 2 fourth packet should pass");
    send(2, 100, 5, ok);
    check(!ok, "QP 2 window (3 + 1 packets) should be full");
    repeat (4) ack(2);
    send(2, 4096 * 4, 3, ok);
    check(ok, "QP 2 should pass after four ACKs");
    check(accepted == 8, $sformatf("accepted = %0d, expected 8", accepted));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
