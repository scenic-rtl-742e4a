// tb_flow_steering: maps 16 QPNs to 4 SCUs through the table, then sends 40
// payload packets of 1-3 beats with random tags under random SCU
// backpressure. Checks that each packet arrives whole at the SCU its tag is
// mapped to (unmapped tags at SCU 0), with the tag attached, and in order.
module tb_flow_steering;
  import scenic_pkg::*;
  localparam int NS = 4, NT = 64;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;

  logic cfg_we, in_valid, in_ready;
  logic [5:0] cfg_tag, in_tag, out_tag [NS];
  logic [1:0] cfg_scu;
  axis_beat_t in_beat, out_beat [NS];
  logic out_valid [NS], out_ready [NS];
  flow_steering #(.N_SCU(NS), .N_TAG(NT)) dut (.*);

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  int map [NT];
  axis_beat_t exp_q [NS][$];
  int exp_tag [NS][$];

  always @(posedge clk) begin
    for (int s = 0; s < NS; s++) begin
      out_ready[s] <= ($urandom_range(0, 2) != 0);
      if (rst_n && out_valid[s] && out_ready[s]) begin
        if (exp_q[s].size() == 0) check(0, $sformatf("unexpected beat at SCU %0d", s));
        else begin
          check(out_beat[s] == exp_q[s].pop_front(), $sformatf("beat mismatch at SCU %0d", s));
          check(int'(out_tag[s]) == exp_tag[s].pop_front(), $sformatf("tag mismatch at SCU %0d", s));
        end
      end
    end
  end

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    cfg_we = 0; cfg_tag = 0; cfg_scu = 0; in_valid = 0; in_beat = '0; in_tag = 0;
    for (int t = 0; t < NT; t++) map[t] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 16; t++) begin
      @(negedge clk);
      cfg_we = 1; cfg_tag = 6'(t); cfg_scu = 2'((t * 3 + 1) % NS); map[t] = (t * 3 + 1) % NS;
    end
    @(negedge clk); cfg_we = 0;
    for (int p = 0; p < 40; p++) begin
      int tg, nb;
      tg = $urandom_range(0, 23);     // tags 16..23 stay unmapped
      nb = 1 + p % 3;
      for (int b = 0; b < nb; b++) begin
        axis_beat_t bt;
        bt.data = {16{32'(p * 16 + b)}}; bt.keep = '1; bt.last = (b == nb - 1);
        exp_q[map[tg]].push_back(bt); exp_tag[map[tg]].push_back(tg);
        @(negedge clk);
        in_beat = bt; in_tag = (b == 0) ? 6'(tg) : 6'($urandom); in_valid = 1;
        #0.1;
        while (!in_ready) begin @(negedge clk); #0.1; end
        @(posedge clk);
      end
      @(negedge clk); in_valid = 0;
    end
    repeat (30) @(posedge clk);
    for (int s = 0; s < NS; s++) check(exp_q[s].size() == 0, $sformatf("SCU %0d missing beats", s));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
