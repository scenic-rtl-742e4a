// dma_mmu: virtual-to-physical translation of DMA write packets.
//
// Every write packet that leaves the card carries a virtual address and the
// address-space id of the application that issued it. The header beat is
// held while the TLB is consulted; on a hit the address is replaced by the
// physical one (page offset kept) and the packet proceeds. On a miss the TLB
// reports the address to the driver (miss_*), the packet waits, and the
// lookup is repeated once the driver has written the translation (fill_*).
// Headers marked physical pass without lookup. Payload beats pass through.
// This wraps the `tlb` block; the stall-on-miss policy is this design's
// choice. Timing: 2 cycles per translated header on a hit.
module dma_mmu
  import scenic_pkg::*;
#(
  parameter int ENTRIES   = 32,
  parameter int PAGE_BITS = 21
) (
  input  logic              clk,
  input  logic              rst_n,
  input  axis_beat_t        in_beat,
  input  logic              in_valid,
  output logic              in_ready,
  output axis_beat_t        out_beat,
  output logic              out_valid,
  input  logic              out_ready,
  output logic              miss_valid,
  output logic [ASID_W-1:0] miss_asid,
  output logic [63:0]       miss_vaddr,
  input  logic              fill_valid,
  input  logic [ASID_W-1:0] fill_asid,
  input  logic [63:0]       fill_vaddr,
  input  logic [63:0]       fill_paddr,
  input  logic              flush,
  output logic [31:0]       miss_count
);
  typedef enum logic [2:0] {H_IDLE, H_LOOK, H_RESP, H_FILL, H_SEND, H_BODY} hstate_e;
  hstate_e     st;
  logic [63:0] paddr;
  logic        req_valid, resp_valid, resp_hit;
  logic [63:0] resp_paddr;

  tlb #(.ENTRIES(ENTRIES), .PAGE_BITS(PAGE_BITS), .ASID_W(ASID_W)) u_tlb (
    .clk, .rst_n,
    .req_valid, .req_asid(in_beat.data[101:96]), .req_vaddr(in_beat.data[63:0]),
    .resp_valid, .resp_hit, .resp_paddr,
    .miss_valid, .miss_asid, .miss_vaddr,
    .fill_valid, .fill_asid, .fill_vaddr, .fill_paddr, .flush);

  assign req_valid = (st == H_LOOK);

  always_comb begin
    out_beat  = in_beat;
    out_valid = 1'b0;
    in_ready  = 1'b0;
    unique case (st)
      H_IDLE: if (in_beat.data[102]) begin     // already physical
        out_valid = in_valid; in_ready = out_ready;
      end
      H_SEND: begin
        out_beat.data[63:0] = paddr;
        out_beat.data[102]  = 1'b1;
        out_valid = in_valid; in_ready = out_ready;
      end
      H_BODY: begin out_valid = in_valid; in_ready = out_ready; end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= H_IDLE; paddr <= '0; miss_count <= '0;
    end else begin
      unique case (st)
        H_IDLE: if (in_valid) begin
          if (!in_beat.data[102]) st <= H_LOOK;
          else if (out_ready && !in_beat.last) st <= H_BODY;
        end
        H_LOOK: st <= H_RESP;
        H_RESP: if (resp_valid) begin
          if (resp_hit) begin paddr <= resp_paddr; st <= H_SEND; end
          else begin miss_count <= miss_count + 1; st <= H_FILL; end
        end
        H_FILL: if (fill_valid) st <= H_LOOK;
        H_SEND: if (in_valid && out_ready) st <= in_beat.last ? H_IDLE : H_BODY;
        H_BODY: if (in_valid && out_ready && in_beat.last) st <= H_IDLE;
        default: st <= H_IDLE;
      endcase
    end
  end
endmodule
