// mmu: the memory management unit of the Farview memory stack.
//
// The MMU sits between the NREG dynamic regions and the NCH DRAM channels.
// It holds the TLB (2 MB pages, shared by all regions, a region only sees
// its own mappings), one DMA engine per region that translates, splits and
// stripes the region's requests over all channels, and one round-robin
// arbiter per channel. Every region therefore gets the bandwidth of all
// channels, and concurrent regions share each channel fairly, as the paper
// describes. Read data reaches a region as lines of NCH 64-byte words.
// The channel side is a simple request / write-data / read-data handshake
// per channel, to be bridged to the memory controllers (not part of this
// design). The wiring follows the architecture figure; the internals of the
// parts are this design's own.
module mmu
  import fv_pkg::*;
#(
  parameter int unsigned NREG    = 6,
  parameter int unsigned NCH     = 2,
  parameter int unsigned ENTRIES = 16384
) (
  input  logic                                  clk,
  input  logic                                  rst_n,
  // TLB programming
  input  logic                                  tlb_wr_en,
  input  logic [VA_W-PAGE_B-1:0]                tlb_wr_vpn,
  input  logic [2:0]                            tlb_wr_rid,
  input  logic [PA_W-PAGE_B-1:0]                tlb_wr_ppn,
  input  logic                                  tlb_wr_valid,
  output logic [NREG-1:0]                       fault,
  // regions
  input  logic [NREG-1:0]                       req_valid,
  output logic [NREG-1:0]                       req_ready,
  input  mem_req_t [NREG-1:0]                   req,
  input  logic [NREG-1:0]                       wr_valid,
  output logic [NREG-1:0]                       wr_ready,
  input  logic [NREG-1:0][WORD_W-1:0]           wr_data,
  output logic [NREG-1:0]                       rd_valid,
  input  logic [NREG-1:0]                       rd_ready,
  output logic [NREG-1:0][NCH-1:0][WORD_W-1:0]  rd_data,
  output logic [NREG-1:0][$clog2(NCH):0]        rd_keep,
  output logic [NREG-1:0]                       rd_last,
  // channels
  output logic [NCH-1:0]                        mc_req_valid,
  input  logic [NCH-1:0]                        mc_req_ready,
  output ch_req_t [NCH-1:0]                     mc_req,
  output logic [NCH-1:0]                        mc_wvalid,
  input  logic [NCH-1:0]                        mc_wready,
  output logic [NCH-1:0][WORD_W-1:0]            mc_wdata,
  input  logic [NCH-1:0]                        mc_rvalid,
  output logic [NCH-1:0]                        mc_rready,
  input  logic [NCH-1:0][WORD_W-1:0]            mc_rdata
);
  logic [NREG-1:0][VA_W-PAGE_B-1:0] lk_vpn;
  logic [NREG-1:0][2:0]             lk_rid;
  logic [NREG-1:0]                  lk_hit;
  logic [NREG-1:0][PA_W-PAGE_B-1:0] lk_ppn;

  tlb #(.NPORT(NREG), .ENTRIES(ENTRIES), .RID_W(3)) u_tlb (
    .clk, .rst_n, .wr_en(tlb_wr_en), .wr_vpn(tlb_wr_vpn), .wr_rid(tlb_wr_rid),
    .wr_ppn(tlb_wr_ppn), .wr_valid(tlb_wr_valid),
    .lk_vpn, .lk_rid, .lk_hit, .lk_ppn);

  // region r <-> channel c crossbar signals, indexed [c][r]
  logic    [NCH-1:0][NREG-1:0]             x_req_valid, x_req_ready, x_wvalid, x_wready, x_rvalid, x_rready;
  ch_req_t [NCH-1:0][NREG-1:0]             x_req;
  logic    [NCH-1:0][NREG-1:0][WORD_W-1:0] x_wdata;
  logic    [NCH-1:0][WORD_W-1:0]           x_rdata;

  for (genvar r = 0; r < NREG; r++) begin : g_dma
    logic    [NCH-1:0]             d_req_valid, d_req_ready, d_wvalid, d_wready, d_rvalid, d_rready;
    ch_req_t [NCH-1:0]             d_req;
    logic    [NCH-1:0][WORD_W-1:0] d_wdata, d_rdata;
    assign lk_rid[r] = 3'(r);
    dma_engine #(.NCH(NCH)) u_dma (
      .clk, .rst_n,
      .req_valid(req_valid[r]), .req_ready(req_ready[r]), .req(req[r]),
      .tlb_vpn(lk_vpn[r]), .tlb_hit(lk_hit[r]), .tlb_ppn(lk_ppn[r]), .fault(fault[r]),
      .wr_valid(wr_valid[r]), .wr_ready(wr_ready[r]), .wr_data(wr_data[r]),
      .rd_valid(rd_valid[r]), .rd_ready(rd_ready[r]), .rd_data(rd_data[r]),
      .rd_keep(rd_keep[r]), .rd_last(rd_last[r]),
      .ch_req_valid(d_req_valid), .ch_req_ready(d_req_ready), .ch_req(d_req),
      .ch_wvalid(d_wvalid), .ch_wready(d_wready), .ch_wdata(d_wdata),
      .ch_rvalid(d_rvalid), .ch_rready(d_rready), .ch_rdata(d_rdata));
    for (genvar c = 0; c < NCH; c++) begin : g_x
      assign x_req_valid[c][r] = d_req_valid[c];
      assign x_req[c][r]       = d_req[c];
      assign d_req_ready[c]    = x_req_ready[c][r];
      assign x_wvalid[c][r]    = d_wvalid[c];
      assign x_wdata[c][r]     = d_wdata[c];
      assign d_wready[c]       = x_wready[c][r];
      assign d_rvalid[c]       = x_rvalid[c][r];
      assign d_rdata[c]        = x_rdata[c];
      assign x_rready[c][r]    = d_rready[c];
    end
  end

  for (genvar c = 0; c < NCH; c++) begin : g_arb
    mem_arbiter #(.NREQ(NREG)) u_arb (
      .clk, .rst_n,
      .in_req_valid(x_req_valid[c]), .in_req_ready(x_req_ready[c]), .in_req(x_req[c]),
      .in_wvalid(x_wvalid[c]), .in_wready(x_wready[c]), .in_wdata(x_wdata[c]),
      .in_rvalid(x_rvalid[c]), .in_rready(x_rready[c]), .in_rdata(x_rdata[c]),
      .mc_req_valid(mc_req_valid[c]), .mc_req_ready(mc_req_ready[c]), .mc_req(mc_req[c]),
      .mc_wvalid(mc_wvalid[c]), .mc_wready(mc_wready[c]), .mc_wdata(mc_wdata[c]),
      .mc_rvalid(mc_rvalid[c]), .mc_rready(mc_rready[c]), .mc_rdata(mc_rdata[c]));
  end
endmodule
