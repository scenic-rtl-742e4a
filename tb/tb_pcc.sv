// tb_pcc: checks the dual-region congestion control and its switch. With
// region 0 (window of 2 packets) active, a third command of QP 0 is held. A
// one-cycle reconfiguration pulse makes region 1 (DCQCN) active and the
// held command passes at once. A CNP is counted by region 1. Switching back
// to region 0 finds QP 0's window still full (its state was kept) until an
// ACK arrives. switch_count counts both switches.
module tb_pcc;
  import scenic_pkg::*;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;

  logic       reconfig, active;
  logic [31:0] switch_count, window_blocked_cycles, dcqcn_cnp_count;
  rdma_cmd_t  cmd_in, cmd_out;
  logic       cmd_in_valid, cmd_in_ready, cmd_out_valid, cmd_out_ready;
  cc_signal_t sig;
  logic       sig_valid;
  pcc #(.N_QP(4), .WINDOW(2), .DCQCN_PERIOD(1000)) dut (.*);

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic send(input int qpn, input int max_wait, input bit keep, output bit ok);
    cmd_in = '0; cmd_in.qpn = QPN_W'(qpn); cmd_in.len = 32'd1024; cmd_in_valid = 1;
    #0.1;
    ok = 0;
    for (int i = 0; i < max_wait; i++) begin
      if (cmd_in_ready) begin ok = 1; break; end
      @(negedge clk); #0.1;
    end
    if (ok) begin
      check(cmd_out_valid && cmd_out.qpn == QPN_W'(qpn), "command visible at the output");
      @(posedge clk);
    end
    @(negedge clk);
    if (ok || !keep) cmd_in_valid = 0;
  endtask

  task automatic pulse_reconfig();
    reconfig = 1; @(negedge clk); reconfig = 0;
  endtask

  initial begin
    bit ok;
    cmd_in = '0; cmd_in_valid = 0; cmd_out_ready = 1; sig = '0; sig_valid = 0; reconfig = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    check(!active, "region 0 active after reset");
    send(0, 3, 0, ok); check(ok, "first command passes");
    send(0, 3, 0, ok); check(ok, "second command passes");
    send(0, 8, 1, ok); check(!ok, "third command held by the window");
    check(window_blocked_cycles > 0, "window blocking counted");
    // switch while the command is still offered
    reconfig = 1;
    @(negedge clk);
    reconfig = 0;
    #0.1;
    check(active, "region 1 active after the pulse");
    check(cmd_in_ready && cmd_out_valid, "held command passes through DCQCN");
    @(negedge clk);
    cmd_in_valid = 0;
    sig = '0; sig.qpn = 2; sig.ecn = 1; sig_valid = 1;
    @(negedge clk);
    sig_valid = 0;
    check(dcqcn_cnp_count == 1, $sformatf("dcqcn_cnp_count = %0d", dcqcn_cnp_count));
    pulse_reconfig();
    check(!active, "region 0 active again");
    send(0, 5, 0, ok); check(!ok, "QP 0 window still full in region 0");
    sig = '0; sig.qpn = 0; sig.ack = 1; sig_valid = 1;
    @(negedge clk);
    sig_valid = 0;
    send(0, 3, 0, ok); check(ok, "QP 0 passes after an ACK");
    check(switch_count == 2, $sformatf("switch_count = %0d", switch_count));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
