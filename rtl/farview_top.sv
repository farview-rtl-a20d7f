// farview_top: the Farview smart disaggregated memory node.
//
// Three stacks, as in the paper's architecture figure:
//  * network side: the packet arbiter, which maps each client queue pair to
//    a dynamic region and merges the regions' outgoing packets. The RoCE v2
//    network stack itself (taken from StRoM in the paper) is outside this
//    design: its request, payload and transmit streams are top-level ports.
//  * operator stack: NREG dynamic regions (6 in the paper's prototype),
//    each holding the complete operator pipeline for one client.
//  * memory stack: the MMU (TLB, one DMA engine per region, one arbiter per
//    channel). The DRAM controllers and the DRAM itself are vendor IP and
//    are reached through the per-channel mc_* ports (64-byte words).
// Host-side control (the TLB and the queue-pair table) is written through
// the tlb_wr_* and qp_wr_* ports. Everything runs on one clock here; the
// paper uses 250 MHz for the network and operator stacks and 300 MHz for
// the memory stack, with clock-domain crossings that are not modelled.
// The per-region activity counters are summed and exported for monitoring.
module farview_top
  import fv_pkg::*;
#(
  parameter int unsigned NREG    = 6,
  parameter int unsigned NCH     = 2,
  parameter int unsigned ENTRIES = 16384,
  parameter int unsigned NQP     = 64,
  parameter int unsigned NTAB    = 4,
  parameter int unsigned TDEPTH  = 4096
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // host control
  input  logic                          tlb_wr_en,
  input  logic [VA_W-PAGE_B-1:0]        tlb_wr_vpn,
  input  logic [2:0]                    tlb_wr_rid,
  input  logic [PA_W-PAGE_B-1:0]        tlb_wr_ppn,
  input  logic                          tlb_wr_valid,
  input  logic                          qp_wr_en,
  input  logic [$clog2(NQP)-1:0]        qp_wr_qpn,
  input  logic [2:0]                    qp_wr_rid,
  // network stack: received requests and write payload
  input  logic                          rx_req_valid,
  output logic                          rx_req_ready,
  input  net_req_t                      rx_req,
  input  logic                          rx_wvalid,
  output logic                          rx_wready,
  input  word_t                         rx_wdata,
  // network stack: transmit commands and payload
  output logic                          tx_cmd_valid,
  input  logic                          tx_cmd_ready,
  output rdma_cmd_t                     tx_cmd,
  output logic [2:0]                    tx_rid,
  output logic                          tx_valid,
  input  logic                          tx_ready,
  output word_t                         tx_data,
  output logic                          tx_last,
  // DRAM channel controllers
  output logic [NCH-1:0]                mc_req_valid,
  input  logic [NCH-1:0]                mc_req_ready,
  output ch_req_t [NCH-1:0]             mc_req,
  output logic [NCH-1:0]                mc_wvalid,
  input  logic [NCH-1:0]                mc_wready,
  output logic [NCH-1:0][WORD_W-1:0]    mc_wdata,
  input  logic [NCH-1:0]                mc_rvalid,
  output logic [NCH-1:0]                mc_rready,
  input  logic [NCH-1:0][WORD_W-1:0]    mc_rdata,
  // status
  output logic [NREG-1:0]               fault,
  output logic [31:0]                   st_fv_done,
  output logic [31:0]                   st_base_rd,
  output logic [31:0]                   st_base_wr,
  output logic [31:0]                   st_vec_lines,
  output logic [31:0]                   st_dec_lines,
  output logic [31:0]                   st_filtered,
  output logic [31:0]                   st_lru_hits,
  output logic [31:0]                   st_table_hits,
  output logic [31:0]                   st_evictions,
  output logic [31:0]                   st_collisions
);
  // network side <-> regions
  logic [NREG-1:0]            r_req_valid, r_req_ready, r_wvalid, r_wready;
  net_req_t                   r_req;
  word_t                      r_wdata;
  logic [NREG-1:0]            r_cmd_valid, r_cmd_ready, r_tvalid, r_tready, r_tlast;
  rdma_cmd_t [NREG-1:0]       r_cmd;
  word_t [NREG-1:0]           r_tdata;
  // regions <-> memory stack
  logic [NREG-1:0]            m_req_valid, m_req_ready, m_wvalid, m_wready;
  logic [NREG-1:0]            m_rvalid, m_rready, m_rlast;
  mem_req_t [NREG-1:0]        m_req;
  logic [NREG-1:0][WORD_W-1:0]          m_wdata;
  logic [NREG-1:0][NCH-1:0][WORD_W-1:0] m_rdata;
  logic [NREG-1:0][$clog2(NCH):0]       m_rkeep;
  // counters
  logic [NREG-1:0][9:0][31:0] st;

  packet_arbiter #(.NREG(NREG), .NQP(NQP)) u_parb (
    .clk, .rst_n, .qp_wr_en, .qp_wr_qpn, .qp_wr_rid,
    .rx_req_valid, .rx_req_ready, .rx_req, .rx_wvalid, .rx_wready, .rx_wdata,
    .r_req_valid, .r_req_ready, .r_req, .r_wvalid, .r_wready, .r_wdata,
    .r_cmd_valid, .r_cmd_ready, .r_cmd, .r_tvalid, .r_tready, .r_tdata, .r_tlast,
    .tx_cmd_valid, .tx_cmd_ready, .tx_cmd, .tx_rid, .tx_valid, .tx_ready, .tx_data, .tx_last);

  for (genvar r = 0; r < NREG; r++) begin : g_reg
    dynamic_region #(.NCH(NCH), .NTAB(NTAB), .TDEPTH(TDEPTH)) u_region (
      .clk, .rst_n,
      .req_valid(r_req_valid[r]), .req_ready(r_req_ready[r]), .req(r_req),
      .wvalid(r_wvalid[r]), .wready(r_wready[r]), .wdata(r_wdata),
      .cmd_valid(r_cmd_valid[r]), .cmd_ready(r_cmd_ready[r]), .cmd(r_cmd[r]),
      .tvalid(r_tvalid[r]), .tready(r_tready[r]), .tdata(r_tdata[r]), .tlast(r_tlast[r]),
      .mreq_valid(m_req_valid[r]), .mreq_ready(m_req_ready[r]), .mreq(m_req[r]),
      .mw_valid(m_wvalid[r]), .mw_ready(m_wready[r]), .mw_data(m_wdata[r]),
      .mr_valid(m_rvalid[r]), .mr_ready(m_rready[r]), .mr_data(m_rdata[r]),
      .mr_keep(m_rkeep[r]), .mr_last(m_rlast[r]),
      .n_fv_done(st[r][0]), .n_base_rd(st[r][1]), .n_base_wr(st[r][2]),
      .n_vec_lines(st[r][3]), .n_dec_lines(st[r][4]), .n_filtered(st[r][5]),
      .lru_hits(st[r][6]), .table_hits(st[r][7]), .evictions(st[r][8]), .collisions(st[r][9]));
  end

  mmu #(.NREG(NREG), .NCH(NCH), .ENTRIES(ENTRIES)) u_mmu (
    .clk, .rst_n, .tlb_wr_en, .tlb_wr_vpn, .tlb_wr_rid, .tlb_wr_ppn, .tlb_wr_valid, .fault,
    .req_valid(m_req_valid), .req_ready(m_req_ready), .req(m_req),
    .wr_valid(m_wvalid), .wr_ready(m_wready), .wr_data(m_wdata),
    .rd_valid(m_rvalid), .rd_ready(m_rready), .rd_data(m_rdata), .rd_keep(m_rkeep), .rd_last(m_rlast),
    .mc_req_valid, .mc_req_ready, .mc_req, .mc_wvalid, .mc_wready, .mc_wdata,
    .mc_rvalid, .mc_rready, .mc_rdata);

  logic [9:0][31:0] tot;
  always_comb begin
    tot = '0;
    for (int r = 0; r < NREG; r++)
      for (int k = 0; k < 10; k++) tot[k] = tot[k] + st[r][k];
  end
  assign st_fv_done    = tot[0];
  assign st_base_rd    = tot[1];
  assign st_base_wr    = tot[2];
  assign st_vec_lines  = tot[3];
  assign st_dec_lines  = tot[4];
  assign st_filtered   = tot[5];
  assign st_lru_hits   = tot[6];
  assign st_table_hits = tot[7];
  assign st_evictions  = tot[8];
  assign st_collisions = tot[9];
endmodule
