// dx100_tlb: DX100's small fully associative TLB for huge pages.
//
// ENTRIES translations of 2^PAGE_BITS-byte pages (2 MB by default). The cores
// load the entries once through a memory-mapped window (we/widx/wdata:
// bit 63 valid, bits 58:32 virtual page number, bits 18:0 physical page
// number). Two combinational lookup ports, one per memory-access unit, return
// the physical address and a hit flag in the same cycle.
// The 256-entry size and the huge-page assumption follow the paper; page size,
// entry format and the absence of a page walk (a miss is reported, not
// serviced) are this design's choices.
module dx100_tlb
  import dx100_pkg::*;
#(
  parameter int unsigned ENTRIES   = 256,
  parameter int unsigned PAGE_BITS = 21
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       we,
  input  logic [$clog2(ENTRIES)-1:0] widx,
  input  logic [63:0]                wdata,
  input  logic [VA_W-1:0]            va  [2],
  output paddr_t                     pa  [2],
  output logic                       hit [2]
);
  localparam int unsigned VPN_W = VA_W - PAGE_BITS;
  localparam int unsigned PPN_W = PA_W - PAGE_BITS;
  logic [ENTRIES-1:0] v;
  logic [VPN_W-1:0]   vpn [ENTRIES];
  logic [PPN_W-1:0]   ppn [ENTRIES];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v <= '0;
      for (int e = 0; e < ENTRIES; e++) begin vpn[e] <= '0; ppn[e] <= '0; end
    end else if (we) begin
      v[widx]   <= wdata[63];
      vpn[widx] <= wdata[32 +: VPN_W];
      ppn[widx] <= wdata[0 +: PPN_W];
    end
  end

  always_comb begin
    for (int p = 0; p < 2; p++) begin
      hit[p] = 1'b0;
      pa[p]  = '0;
      for (int e = 0; e < ENTRIES; e++)
        if (v[e] && vpn[e] == va[p][VA_W-1:PAGE_BITS]) begin
          hit[p] = 1'b1;
          pa[p]  = {ppn[e], va[p][PAGE_BITS-1:0]};
        end
    end
  end
endmodule
