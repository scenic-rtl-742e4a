// tb_rr_arbiter: four sources send packets of 1-4 beats at random times while
// the sink applies random backpressure. Checks that packets are never
// interleaved, that each source's packets arrive intact and in order, and
// that with all sources busy the grants rotate strictly 0,1,2,3,0,...
module tb_rr_arbiter;
  import scenic_pkg::*;
  localparam int N = 4;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;

  axis_beat_t in_beat [N], out_beat;
  logic in_valid [N], in_ready [N], out_valid, out_ready;
  logic [1:0] sel;
  rr_arbiter #(.N(N)) dut (.*);

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  int pkts_per_src = 12;
  bit saturate = 1;
  int next_seq [N];
  int got_seq  [N];
  int cur_src = -1;
  int last_grant = N - 1;
  int grants_checked = 0;

  // sources: beat data = {src, seq, beat index}
  for (genvar s = 0; s < N; s++) begin : g_src
    initial begin
      in_valid[s] = 0; in_beat[s] = '0;
      wait (rst_n);
      for (int p = 0; p < pkts_per_src; p++) begin
        int nb;
        nb = 1 + (p + s) % 4;
        if (!saturate) repeat ($urandom_range(0, 6)) @(negedge clk);
        for (int b = 0; b < nb; b++) begin
          @(negedge clk);
          in_beat[s].data = '0;
          in_beat[s].data[31:0] = {8'(s), 16'(p), 8'(b)};
          in_beat[s].keep = '1;
          in_beat[s].last = (b == nb - 1);
          in_valid[s] = 1;
          #0.1;
          while (!in_ready[s]) begin @(negedge clk); #0.1; end
          @(posedge clk);
        end
        @(negedge clk);
        in_valid[s] = 0;
      end
    end
  end

  int beat_in_pkt = 0;
  always @(posedge clk) begin
    out_ready <= ($urandom_range(0, 4) != 0);
    if (rst_n && out_valid && out_ready) begin
      int s, p, b;
      s = int'(out_beat.data[31:24]); p = int'(out_beat.data[23:8]); b = int'(out_beat.data[7:0]);
      if (cur_src < 0) begin
        cur_src = s;
        if (saturate && grants_checked < 30) begin
          check(s == (last_grant + 1) % N, $sformatf("grant to %0d after %0d", s, last_grant));
          grants_checked++;
        end
        last_grant = s;
      end
      check(s == cur_src, "packets interleaved");
      check(p == got_seq[s] && b == beat_in_pkt, $sformatf("src %0d: pkt %0d beat %0d, expected %0d/%0d", s, p, b, got_seq[s], beat_in_pkt));
      check(32'(sel) == 32'(s), "sel does not match the granted source");
      beat_in_pkt++;
      if (out_beat.last) begin
        got_seq[s]++; cur_src = -1; beat_in_pkt = 0;
      end
    end
  end

  initial begin
    repeat (4000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < N; i++) got_seq[i] = 0;
    out_ready = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (got_seq[0] == pkts_per_src && got_seq[1] == pkts_per_src && got_seq[2] == pkts_per_src && got_seq[3] == pkts_per_src);
    for (int i = 0; i < N; i++) check(got_seq[i] == pkts_per_src, "missing packets");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
