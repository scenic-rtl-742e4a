// tb_irq_router: checks interrupt line mapping and the periodic timer.
// Line 3 is mapped to source 5 and line 7 to source 5 but disabled; a pulse
// on source 5 appears on line 3 one cycle later and nowhere else. Remapping
// line 3 to source 9 moves it. The timer line (15) rises every
// timer_period cycles and stays high until timer_clr.
module tb_irq_router;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;

  logic [15:0] src_irq, irq_out;
  logic        map_we, map_en, timer_clr;
  logic [3:0]  map_line, map_src;
  logic [31:0] timer_period;
  irq_router #(.N_IRQ(16), .N_SRC(16), .TIMER_LINE(15)) dut (.*);

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  int cyc = 0;
  int timer_rise [$];
  logic prev15 = 0;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    prev15 <= irq_out[15];
    if (rst_n && irq_out[15] && !prev15) timer_rise.push_back(cyc);
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic map(input int line, input int src, input bit en);
    map_we = 1; map_line = 4'(line); map_src = 4'(src); map_en = en;
    @(negedge clk);
    map_we = 0;
  endtask

  task automatic pulse_and_check(input int src, input logic [14:0] expect_lines);
    src_irq = 16'(1) << src;
    @(negedge clk);
    src_irq = '0;
    check(irq_out[14:0] == expect_lines,
          $sformatf("source %0d: lines %h, expected %h", src, irq_out[14:0], expect_lines));
    @(negedge clk);
    check(irq_out[14:0] == 0, "lines must drop after the source pulse");
  endtask

  initial begin
    src_irq = 0; map_we = 0; map_en = 0; map_line = 0; map_src = 0;
    timer_period = 0; timer_clr = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    map(3, 5, 1);
    map(7, 5, 0);
    pulse_and_check(5, 15'h0008);
    pulse_and_check(9, 15'h0000);
    map(3, 9, 1);
    pulse_and_check(5, 15'h0000);
    pulse_and_check(9, 15'h0008);
    map(7, 5, 1);
    pulse_and_check(5, 15'h0080);
    check(timer_rise.size() == 0, "timer disabled: no timer interrupt");
    // periodic timer
    timer_period = 50;
    repeat (60) @(negedge clk);
    check(irq_out[15], "timer line should be pending");
    repeat (60) @(negedge clk);
    check(irq_out[15], "timer line stays high until cleared");
    timer_clr = 1; @(negedge clk); timer_clr = 0;
    @(negedge clk);
    check(!irq_out[15], "timer line cleared");
    repeat (200) @(negedge clk);
    timer_period = 0;
    check(timer_rise.size() >= 2, $sformatf("timer rises: %0d", timer_rise.size()));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
