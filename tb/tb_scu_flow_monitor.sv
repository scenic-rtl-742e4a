// tb_scu_flow_monitor: checks per-subnet statistics and the token-bucket
// limiter. Subnet = source address bits [11:8]. Subnet 2 is unlimited;
// subnet 3 gets 1 byte/cycle with a 1000-byte burst. Twenty back-to-back
// 164-byte frames (3 beats) of subnet 3 can only use about 1000 + 60 bytes of
// tokens, so 6 or 7 pass and the rest are dropped whole; all ten subnet 2
// frames pass; a non-IPv4 frame is counted in subnet 0. After an idle period
// the bucket is full again and a frame of subnet 3 passes. The output is
// checked beat by beat against the frames that should pass (random
// backpressure), and drop_event pulses are counted against the drop counter.
module tb_scu_flow_monitor;
  import scenic_pkg::*;
  import tb_pkg::*;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;

  axis_beat_t in_beat, out_beat;
  logic       in_valid, in_ready, out_valid, out_ready;
  logic [4:0] subnet_shift;
  logic       cfg_we, drop_event;
  logic [3:0] cfg_idx, rd_idx;
  logic [15:0] cfg_rate;
  logic [23:0] cfg_burst;
  logic [47:0] rd_pkts, rd_bytes;
  logic [31:0] rd_drops;
  scu_flow_monitor #(.SUBNET_BITS(4)) dut (.*);

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  int cyc = 0, drop_events = 0, out_frames = 0, out_beats = 0;
  axis_beat_t exp_q [$];
  always @(posedge clk) begin
    cyc <= cyc + 1;
    out_ready <= ($urandom % 4) != 0;
    if (drop_event) drop_events <= drop_events + 1;
    if (out_valid && out_ready) begin
      axis_beat_t e;
      checks++;
      if (exp_q.size() == 0) begin failures++; $display("FAIL: unexpected output beat"); end
      else begin
        e = exp_q.pop_front();
        if (e !== out_beat) begin failures++; $display("FAIL: output beat mismatch at %0d", cyc); end
      end
      out_beats <= out_beats + 1;
      if (out_beat.last) out_frames <= out_frames + 1;
    end
  end

  initial begin
    repeat (20000) @(posedge clk);
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

  // 3-beat frame; if pass, its beats are expected at the output
  task automatic frame(input logic [15:0] etype, input int subnet, input int id, input bit pass);
    axis_beat_t b [3];
    b[0].data = hdr(etype, IP_PROTO_UDP, 16'd9000, {8'd10, 8'd0, 8'(subnet), 8'(id)}, 16'd150, id);
    b[0].keep = '1; b[0].last = 0;
    b[1].data = {16{32'(id)}}; b[1].keep = '1; b[1].last = 0;
    b[2].data = {16{32'(~id)}}; b[2].keep = keep_of(164 - 128); b[2].last = 1;
    if (pass) for (int i = 0; i < 3; i++) exp_q.push_back(b[i]);
    for (int i = 0; i < 3; i++) put_beat(b[i]);
  endtask

  // frame of subnet 3 whose fate is decided by the DUT: peek at the decision
  task automatic frame_sub3(input int id, output bit passed);
    axis_beat_t b [3];
    b[0].data = hdr(ETHERTYPE_IPV4, IP_PROTO_UDP, 16'd9000, {8'd10, 8'd0, 8'd3, 8'(id)}, 16'd150, id);
    b[0].keep = '1; b[0].last = 0;
    b[1].data = {16{32'(id)}}; b[1].keep = '1; b[1].last = 0;
    b[2].data = {16{32'(~id)}}; b[2].keep = keep_of(164 - 128); b[2].last = 1;
    in_beat = b[0]; in_valid = 1;
    #0.1;
    passed = !dut.drop_first;
    if (passed) for (int i = 0; i < 3; i++) exp_q.push_back(b[i]);
    in_valid = 0;
    for (int i = 0; i < 3; i++) put_beat(b[i]);
  endtask

  task automatic read_stats(input int idx, output longint p, output longint by, output int d);
    rd_idx = 4'(idx);
    @(negedge clk);
    p = rd_pkts; by = rd_bytes; d = rd_drops;
  endtask

  initial begin
    int n3;
    bit ok;
    longint p, by;
    int d;
    in_beat = '0; in_valid = 0; subnet_shift = 8; cfg_we = 0; cfg_idx = 0;
    cfg_rate = 0; cfg_burst = 0; rd_idx = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    cfg_we = 1; cfg_idx = 3; cfg_rate = 16'd256; cfg_burst = 24'd1000;
    @(negedge clk);
    cfg_we = 0;
    for (int i = 0; i < 10; i++) frame(ETHERTYPE_IPV4, 2, i, 1);
    n3 = 0;
    for (int i = 0; i < 20; i++) begin
      frame_sub3(100 + i, ok);
      n3 += ok;
    end
    frame(16'h86DD, 5, 7, 1);
    check(n3 >= 6 && n3 <= 7, $sformatf("subnet 3 passed %0d of 20 frames, expected 6 or 7", n3));
    repeat (1200) @(negedge clk);
    frame_sub3(200, ok);
    check(ok, "after idle time the bucket is refilled");
    n3 += ok;
    for (int i = 0; i < 200 && exp_q.size() != 0; i++) @(negedge clk);
    check(exp_q.size() == 0, "all passing beats delivered");
    read_stats(2, p, by, d);
    check(p == 10 && by == 1640 && d == 0, $sformatf("subnet 2: %0d pkts %0d bytes %0d drops", p, by, d));
    read_stats(3, p, by, d);
    check(p == n3 && by == 164 * n3 && d == 21 - n3,
          $sformatf("subnet 3: %0d pkts %0d bytes %0d drops (passed %0d)", p, by, d, n3));
    check(drop_events == d, $sformatf("drop_event pulses %0d vs drops %0d", drop_events, d));
    read_stats(0, p, by, d);
    check(p == 1 && d == 0, $sformatf("non-IPv4 frame in subnet 0: %0d pkts", p));
    check(out_frames == 11 + n3, $sformatf("output frames %0d", out_frames));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
