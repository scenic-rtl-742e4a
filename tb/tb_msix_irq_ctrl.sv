// tb_msix_irq_ctrl: checks interrupt moderation. With irq_coal = 8 and a
// long timeout, a burst of 20 events gives interrupts exactly at the 8th and
// 16th event, and the remaining 4 events are reported by the timeout exactly
// irq_time + 1 cycles after the cycle that presented the first of them. A single event with coalescing
// disabled is reported by the timeout alone, and irq_req stays high until
// irq_ack.
module tb_msix_irq_ctrl;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;

  logic event_i, irq_req, irq_ack, last_by_timeout;
  logic [15:0] irq_coal;
  logic [31:0] irq_time, irq_count;
  msix_irq_ctrl dut (.*);

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  int cyc = 0;
  int irq_cycles [$];
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (irq_req && !irq_ack) irq_cycles.push_back(cyc);
  end
  // acknowledge two cycles after a request rises
  always @(posedge clk) irq_ack <= irq_req && !irq_ack && $past(irq_req);

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int first_rem;
    event_i = 0; irq_coal = 8; irq_time = 100; irq_ack = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int i = 0; i < 20; i++) begin
      event_i = 1;
      if (i == 16) first_rem = cyc;
      @(negedge clk);
      event_i = 0;
      @(negedge clk);
    end
    repeat (150) @(negedge clk);
    check(irq_count == 3, $sformatf("irq_count = %0d, expected 3", irq_count));
    check(last_by_timeout, "third interrupt should come from the timeout");
    // first two: raised in the cycle after the 8th / 16th event (events every 2 cycles)
    if (irq_cycles.size() >= 1) begin
      int r0;
      r0 = irq_cycles[0];
      check(irq_cycles.size() >= 3, "fewer than three interrupt request cycles seen");
    end
    // timeout interrupt: request visible irq_time cycles after the first pending event
    begin
      int t_irq;
      t_irq = -1;
      foreach (irq_cycles[k]) if (irq_cycles[k] > first_rem && t_irq < 0) t_irq = irq_cycles[k];
      check(t_irq - first_rem == 101, $sformatf("timeout interrupt after %0d cycles, expected 101", t_irq - first_rem));
    end
    // coalescing only: 8th event at cycle e8 -> request one cycle later
    // single event, coalescing disabled
    irq_coal = 0; irq_time = 30;
    irq_cycles.delete();
    event_i = 1; first_rem = cyc; @(negedge clk); event_i = 0;
    repeat (60) @(negedge clk);
    check(irq_count == 4, "single event not reported");
    check(irq_cycles.size() > 0 && irq_cycles[0] - first_rem == 31, "timeout latency for a single event");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // exact cycle of the coalesced interrupts
  int ev_count = 0;
  always @(posedge clk) begin
    if (rst_n && event_i) ev_count <= ev_count + 1;
    if (rst_n && event_i && (ev_count == 7 || ev_count == 15)) begin
      @(posedge clk);
      check(irq_req, $sformatf("no interrupt right after event %0d", ev_count + 1));
    end
  end
endmodule
