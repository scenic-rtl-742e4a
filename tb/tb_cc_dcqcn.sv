// tb_cc_dcqcn: checks DCQCN state and pacing against hand-computed values.
// At full rate (Rc = 65535) two 6400-byte (100-beat) commands of QP 2 are
// accepted 100 cycles apart. A CNP for QP 1 halves its rate to 32768
// (alpha = 1) and a pair of QP 1 commands is then spaced 200 cycles. After
// the first period sweep Rc = (65535 + 32768) / 2 = 49151 with alpha still
// 1024 (a CNP was seen in that period); after the second, Rc = 57343 and
// alpha = 1024 - 4 = 1020. cnp_count counts the one notification.
module tb_cc_dcqcn;
  import scenic_pkg::*;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;

  rdma_cmd_t  cmd_in, cmd_out;
  logic       cmd_in_valid, cmd_in_ready, cmd_out_valid, cmd_out_ready;
  cc_signal_t sig;
  logic       sig_valid;
  logic [1:0] obs_qpn;
  logic [15:0] obs_rc, obs_rt;
  logic [10:0] obs_alpha;
  logic [31:0] cnp_count;
  cc_dcqcn #(.N_QP(4), .PERIOD(1000)) dut (.*);

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // offer one command and return the cycle it was accepted
  task automatic send(input int qpn, input int len, output int t_acc);
    cmd_in = '0; cmd_in.qpn = QPN_W'(qpn); cmd_in.len = 32'(len); cmd_in_valid = 1;
    #0.1;
    while (!cmd_in_ready) begin @(negedge clk); #0.1; end
    t_acc = cyc;
    @(posedge clk);
    @(negedge clk);
    cmd_in_valid = 0;
  endtask

  initial begin
    int t0, t1, gap;
    cmd_in = '0; cmd_in_valid = 0; cmd_out_ready = 1; sig = '0; sig_valid = 0; obs_qpn = 1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    check(obs_rc == 16'hFFFF && obs_alpha == 11'd1024, "initial state: full rate, alpha 1");
    send(2, 6400, t0);
    send(2, 6400, t1);
    gap = t1 - t0;
    check(gap == 100, $sformatf("QP 2 spacing at full rate: %0d, expected 100", gap));
    // congestion notification for QP 1
    sig = '0; sig.qpn = 1; sig.ecn = 1; sig_valid = 1;
    @(negedge clk);
    sig_valid = 0;
    check(obs_rc == 16'd32768, $sformatf("Rc after CNP = %0d, expected 32768", obs_rc));
    check(obs_rt == 16'hFFFF, $sformatf("Rt after CNP = %0d", obs_rt));
    check(obs_alpha == 11'd1024, $sformatf("alpha after CNP = %0d", obs_alpha));
    send(1, 6400, t0);
    send(1, 6400, t1);
    gap = t1 - t0;
    check(gap == 200, $sformatf("QP 1 spacing after CNP: %0d, expected 200", gap));
    check(cyc < 1000, "pacing part must finish before the first sweep");
    while (cyc < 1020) @(negedge clk);
    check(obs_rc == 16'd49151, $sformatf("Rc after sweep 1 = %0d, expected 49151", obs_rc));
    check(obs_alpha == 11'd1024, $sformatf("alpha after sweep 1 = %0d, expected 1024", obs_alpha));
    while (cyc < 2020) @(negedge clk);
    check(obs_rc == 16'd57343, $sformatf("Rc after sweep 2 = %0d, expected 57343", obs_rc));
    check(obs_alpha == 11'd1020, $sformatf("alpha after sweep 2 = %0d, expected 1020", obs_alpha));
    obs_qpn = 2;
    #0.1;
    check(obs_rc == 16'hFFFF, "QP 2 keeps full rate");
    check(cnp_count == 1, $sformatf("cnp_count = %0d", cnp_count));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
