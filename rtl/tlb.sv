// tlb: on-device translation lookaside buffer of the virtual memory layer.
//
// Offloaded applications (SCUs) and the RDMA stack address host, GPU and card
// memory with virtual addresses. Memory registration (ibv_reg_mr) stores the
// translations in this TLB; a lookup that misses is reported to the driver
// (miss_*), which walks its tables and writes the entry through fill_*. The
// entry replaced by a fill is the least recently used one. Each entry is
// tagged with the address-space id `asid` of the owning application so that
// one application cannot use another's translations (isolation).
//
// Organisation (sizes are this design's choice, the paper gives none):
// ENTRIES fully associative entries, pages of 2^PAGE_BITS bytes (2 MiB huge
// pages by default). LRU is kept exactly with one age counter per entry:
// on a hit or fill, the touched entry gets age 0 and every younger entry ages
// by one; the victim is an invalid entry if any, else the oldest.
//
// Timing: lookups are accepted every cycle; the response (hit, physical
// address) appears one cycle later. A miss also pulses miss_valid with the
// request. A fill takes effect in the cycle after fill_valid.
module tlb #(
  parameter int ENTRIES   = 32,
  parameter int PAGE_BITS = 21,
  parameter int ASID_W    = 6,
  parameter int VA_W      = 64,
  parameter int PA_W      = 64
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              req_valid,
  input  logic [ASID_W-1:0] req_asid,
  input  logic [VA_W-1:0]   req_vaddr,
  output logic              resp_valid,
  output logic              resp_hit,
  output logic [PA_W-1:0]   resp_paddr,
  output logic              miss_valid,
  output logic [ASID_W-1:0] miss_asid,
  output logic [VA_W-1:0]   miss_vaddr,
  input  logic              fill_valid,
  input  logic [ASID_W-1:0] fill_asid,
  input  logic [VA_W-1:0]   fill_vaddr,
  input  logic [PA_W-1:0]   fill_paddr,
  input  logic              flush
);
  localparam int IW  = $clog2(ENTRIES);
  localparam int VPN = VA_W - PAGE_BITS;
  localparam int PPN = PA_W - PAGE_BITS;

  logic              v    [ENTRIES];
  logic [ASID_W-1:0] asid [ENTRIES];
  logic [VPN-1:0]    vpn  [ENTRIES];
  logic [PPN-1:0]    ppn  [ENTRIES];
  logic [IW-1:0]     age  [ENTRIES];

  // ---------------- lookup ----------------
  logic          hit;
  logic [IW-1:0] hit_idx;
  always_comb begin
    hit = 1'b0; hit_idx = '0;
    for (int i = 0; i < ENTRIES; i++)
      if (!hit && v[i] && asid[i] == req_asid && vpn[i] == req_vaddr[VA_W-1:PAGE_BITS]) begin
        hit = 1'b1; hit_idx = IW'(i);
      end
  end

  // ---------------- victim ----------------
  logic          have_free;
  logic [IW-1:0] victim;
  always_comb begin
    have_free = 1'b0; victim = '0;
    for (int i = 0; i < ENTRIES; i++)
      if (!have_free && !v[i]) begin have_free = 1'b1; victim = IW'(i); end
    if (!have_free)
      for (int i = 0; i < ENTRIES; i++)
        if (age[i] == IW'(ENTRIES - 1)) victim = IW'(i);
  end

  // Entry touched this cycle (fill has priority over a lookup hit).
  wire           touch     = fill_valid || (req_valid && hit);
  wire [IW-1:0]  touch_idx = fill_valid ? victim : hit_idx;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < ENTRIES; i++) begin
        v[i] <= 1'b0; age[i] <= IW'(i); asid[i] <= '0; vpn[i] <= '0; ppn[i] <= '0;
      end
      resp_valid <= 1'b0; resp_hit <= 1'b0; resp_paddr <= '0;
      miss_valid <= 1'b0; miss_asid <= '0; miss_vaddr <= '0;
    end else begin
      resp_valid <= req_valid;
      resp_hit   <= req_valid && hit;
      resp_paddr <= {ppn[hit_idx], req_vaddr[PAGE_BITS-1:0]};
      miss_valid <= req_valid && !hit;
      miss_asid  <= req_asid;
      miss_vaddr <= req_vaddr;
      if (touch) begin
        for (int i = 0; i < ENTRIES; i++)
          if (age[i] < age[touch_idx]) age[i] <= age[i] + 1'b1;
        age[touch_idx] <= '0;
      end
      if (fill_valid) begin
        v[victim]    <= 1'b1;
        asid[victim] <= fill_asid;
        vpn[victim]  <= fill_vaddr[VA_W-1:PAGE_BITS];
        ppn[victim]  <= fill_paddr[PA_W-1:PAGE_BITS];
      end
      if (flush) for (int i = 0; i < ENTRIES; i++) v[i] <= 1'b0;
    end
  end
endmodule
