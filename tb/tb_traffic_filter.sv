// tb_traffic_filter: sends RoCEv2, TCP, other UDP, ICMP, ARP and IPv6 frames of
// several lengths through the prefilter with random output backpressure and
// checks that each frame arrives, complete and in order, on the output its
// headers select, and that the frame counters match.
module tb_traffic_filter;
  import scenic_pkg::*;
  import tb_pkg::*;

  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;

  axis_beat_t in_beat, out_beat [3];
  logic in_valid, in_ready, out_valid [3], out_ready [3];
  logic [31:0] frame_count [3];

  traffic_filter dut (.*);

  // expected beats per destination
  axis_beat_t exp_q [3][$];
  int sent [3] = '{0, 0, 0};

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  task automatic send_frame(input logic [15:0] et, input logic [7:0] pr, input logic [15:0] port,
                            input int nbeats, input int dest, input int seed);
    for (int b = 0; b < nbeats; b++) begin
      axis_beat_t bt;
      bt.data = (b == 0) ? hdr(et, pr, port, 32'h0a000001, 16'(nbeats * 64 - 14), seed)
                         : {16{32'(seed * 1000 + b)}};
      bt.keep = (b == nbeats - 1) ? keep_of(20) : '1;
      bt.last = (b == nbeats - 1);
      exp_q[dest].push_back(bt);
      @(negedge clk);
      in_beat  = bt;
      in_valid = 1'b1;
      #0.1;
      while (!in_ready) begin @(negedge clk); #0.1; end
      @(posedge clk);
    end
    @(negedge clk);
    in_valid = 1'b0;
    sent[dest]++;
  endtask

  // output monitors
  always @(posedge clk) begin
    for (int d = 0; d < 3; d++) begin
      out_ready[d] <= ($urandom_range(0, 3) != 0);
      if (rst_n && out_valid[d] && out_ready[d]) begin
        if (exp_q[d].size() == 0) check(0, $sformatf("unexpected beat on output %0d", d));
        else begin
          axis_beat_t e;
          e = exp_q[d].pop_front();
          check(out_beat[d] == e, $sformatf("beat mismatch on output %0d", d));
        end
      end
    end
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_valid = 0; in_beat = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 24; i++) begin
      int kind, n;
      kind = i % 6;
      n = 1 + (i % 4);
      case (kind)
        0: send_frame(ETHERTYPE_IPV4, IP_PROTO_UDP, ROCEV2_UDP_PORT, n, int'(DEST_ROCE), i);
        1: send_frame(ETHERTYPE_IPV4, IP_PROTO_TCP, 16'd80, n, int'(DEST_TCP), i);
        2: send_frame(ETHERTYPE_IPV4, IP_PROTO_UDP, 16'd53, n, int'(DEST_SLOW), i);
        3: send_frame(ETHERTYPE_IPV4, 8'd1, 16'd0, n, int'(DEST_SLOW), i);       // ICMP
        4: send_frame(16'h0806, 8'd0, 16'd0, n, int'(DEST_SLOW), i);             // ARP
        default: send_frame(16'h86DD, IP_PROTO_UDP, ROCEV2_UDP_PORT, n, int'(DEST_SLOW), i); // IPv6
      endcase
    end
    repeat (50) @(posedge clk);
    for (int d = 0; d < 3; d++) begin
      check(exp_q[d].size() == 0, $sformatf("output %0d missing %0d beats", d, exp_q[d].size()));
      check(frame_count[d] == 32'(sent[d]), $sformatf("frame counter %0d = %0d, expected %0d", d, frame_count[d], sent[d]));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
