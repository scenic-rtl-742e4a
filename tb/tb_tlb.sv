// tb_tlb: fills an 8-entry TLB through the miss/fill path, checks translated
// addresses (page number replaced, offset kept), that translations of one
// address space are not visible to another, that the least recently used
// entry is the one evicted, and that flush invalidates everything. A
// reference model of the LRU order runs alongside on random traffic.
module tb_tlb;
  localparam int E = 8, PB = 21;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;

  logic req_valid, resp_valid, resp_hit, miss_valid, fill_valid, flush;
  logic [5:0] req_asid, miss_asid, fill_asid;
  logic [63:0] req_vaddr, resp_paddr, miss_vaddr, fill_vaddr, fill_paddr;
  tlb #(.ENTRIES(E), .PAGE_BITS(PB)) dut (.*);

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  function automatic logic [63:0] pa_of(input int asid, input int vpage);
    return 64'(asid * 4096 + vpage * 3 + 1) << PB;
  endfunction

  // reference: list of {asid, vpage}, most recent first
  int ref_a [$], ref_p [$];
  function automatic int ref_find(input int a, input int p);
    foreach (ref_a[i]) if (ref_a[i] == a && ref_p[i] == p) return i;
    return -1;
  endfunction
  function automatic void ref_touch(input int i);
    int a, p;
    a = ref_a[i]; p = ref_p[i];
    ref_a.delete(i); ref_p.delete(i);
    ref_a.push_front(a); ref_p.push_front(p);
  endfunction

  task automatic lookup(input int a, input int p, input int off, output bit hit);
    @(negedge clk);
    req_valid = 1; req_asid = 6'(a); req_vaddr = (64'(p) << PB) | 64'(off);
    @(negedge clk);
    req_valid = 0;
    hit = resp_hit;
    check(resp_valid, "no response");
    if (resp_hit) check(resp_paddr == (pa_of(a, p) | 64'(off)), $sformatf("wrong translation of %0d/%0d", a, p));
    else check(miss_valid && miss_asid == 6'(a) && miss_vaddr == req_vaddr, "miss not reported");
  endtask

  task automatic fill(input int a, input int p);
    fill_valid = 1; fill_asid = 6'(a); fill_vaddr = 64'(p) << PB; fill_paddr = pa_of(a, p);
    @(negedge clk);
    fill_valid = 0;
  endtask

  // access with driver behaviour: on a miss the driver fills the entry
  task automatic access(input int a, input int p);
    bit hit;
    int i;
    lookup(a, p, $urandom_range(0, (1 << PB) - 1), hit);
    i = ref_find(a, p);
    check(hit == (i >= 0), $sformatf("hit=%0d but model says %0d for %0d/%0d", hit, i >= 0, a, p));
    if (i >= 0) ref_touch(i);
    else begin
      fill(a, p);
      if (ref_a.size() == E) begin void'(ref_a.pop_back()); void'(ref_p.pop_back()); end
      ref_a.push_front(a); ref_p.push_front(p);
    end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit hit;
    req_valid = 0; fill_valid = 0; flush = 0; req_asid = 0; req_vaddr = 0;
    fill_asid = 0; fill_vaddr = 0; fill_paddr = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // isolation: page 5 of asid 1 is not visible to asid 2
    access(1, 5);
    lookup(1, 5, 123, hit); check(hit, "own translation must hit");
    ref_touch(ref_find(1, 5));
    lookup(2, 5, 123, hit); check(!hit, "translation leaked to another address space");
    // random traffic over 12 pages of two address spaces
    for (int n = 0; n < 300; n++) access($urandom_range(1, 2), $urandom_range(0, 5));
    // flush
    @(negedge clk); flush = 1; @(negedge clk); flush = 0;
    ref_a.delete(); ref_p.delete();
    lookup(1, 5, 0, hit); check(!hit, "entry survived flush");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
