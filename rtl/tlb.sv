// tlb: translation lookaside buffer of the Farview MMU.
//
// Farview's MMU translates the virtual addresses used by the dynamic regions
// into physical addresses of the on-board DRAM using naturally aligned 2 MB
// pages; the paper keeps all mappings in a TLB held in block RAM. This TLB is
// direct mapped: the entry index is the low bits of the virtual page number
// XORed with the region number placed in the top index bits (so the low
// pages of different regions use different entries), and each entry stores the rest of the page
// number, the owning region and the physical page number. A mapping only
// matches for the region that owns it, which gives the isolation between
// regions. NPORT lookup ports (one per DMA engine) read the table
// combinationally; the host loads entries through the single write port.
// The direct-mapped organisation, the index hash and the entry count are
// this design's choices: ENTRIES covers 2 channels x 16 GB / 2 MB.
module tlb
  import fv_pkg::*;
#(
  parameter int unsigned NPORT   = 6,
  parameter int unsigned ENTRIES = 16384,
  parameter int unsigned RID_W   = 3
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // host programming port
  input  logic                          wr_en,
  input  logic [VA_W-PAGE_B-1:0]        wr_vpn,
  input  logic [RID_W-1:0]              wr_rid,
  input  logic [PA_W-PAGE_B-1:0]        wr_ppn,
  input  logic                          wr_valid,     // 0 removes the mapping
  // lookup ports
  input  logic [NPORT-1:0][VA_W-PAGE_B-1:0] lk_vpn,
  input  logic [NPORT-1:0][RID_W-1:0]       lk_rid,
  output logic [NPORT-1:0]                  lk_hit,
  output logic [NPORT-1:0][PA_W-PAGE_B-1:0] lk_ppn
);
  localparam int unsigned VPN_W = VA_W - PAGE_B;
  localparam int unsigned PPN_W = PA_W - PAGE_B;
  localparam int unsigned IW    = $clog2(ENTRIES);

  typedef struct packed {
    logic              valid;
    logic [VPN_W-1:0]  vpn;
    logic [RID_W-1:0]  rid;
    logic [PPN_W-1:0]  ppn;
  } entry_t;

  entry_t tab [ENTRIES];
  logic [ENTRIES-1:0] vld;      // valid bits in flops so reset clears them

  function automatic logic [IW-1:0] idx(logic [VPN_W-1:0] vpn, logic [RID_W-1:0] rid);
    return vpn[IW-1:0] ^ (IW'(rid) << (IW - RID_W));
  endfunction

  always_ff @(posedge clk) begin
    if (wr_en) tab[idx(wr_vpn, wr_rid)] <= '{valid: 1'b1, vpn: wr_vpn, rid: wr_rid, ppn: wr_ppn};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) vld <= '0;
    else if (wr_en) vld[idx(wr_vpn, wr_rid)] <= wr_valid;
  end

  always_comb begin
    for (int p = 0; p < NPORT; p++) begin
      entry_t e;
      logic [IW-1:0] i;
      i = idx(lk_vpn[p], lk_rid[p]);
      e = tab[i];
      lk_hit[p] = vld[i] && e.vpn == lk_vpn[p] && e.rid == lk_rid[p];
      lk_ppn[p] = e.ppn;
    end
  end
endmodule
