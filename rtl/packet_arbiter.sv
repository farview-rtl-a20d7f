// packet_arbiter: the interface between the dynamic regions and the RDMA
// network stack ("Packet Based Arbitration (Fair-sharing)").
//
// Receive side: every request from the network names its queue pair; a
// table loaded by the host when a connection is opened maps the queue pair
// to the dynamic region assigned to the client, and the request is handed
// to that region. Write payload words follow the write request they belong
// to and are steered to the same region.
// Transmit side: the regions' RDMA commands are served round robin, one
// packet (a command and all its payload words) per grant. No region can
// hold the network for more than one packet while others wait, which is the
// fair sharing the paper asks of the network side. The queue-pair table
// size and the packet-level round robin are this design's choices.
module packet_arbiter
  import fv_pkg::*;
#(
  parameter int unsigned NREG = 6,
  parameter int unsigned NQP  = 64
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // host: queue pair -> region
  input  logic                  qp_wr_en,
  input  logic [$clog2(NQP)-1:0] qp_wr_qpn,
  input  logic [2:0]            qp_wr_rid,
  // from the network stack
  input  logic                  rx_req_valid,
  output logic                  rx_req_ready,
  input  net_req_t              rx_req,
  input  logic                  rx_wvalid,
  output logic                  rx_wready,
  input  word_t                 rx_wdata,
  // to the regions
  output logic [NREG-1:0]       r_req_valid,
  input  logic [NREG-1:0]       r_req_ready,
  output net_req_t              r_req,
  output logic [NREG-1:0]       r_wvalid,
  input  logic [NREG-1:0]       r_wready,
  output word_t                 r_wdata,
  // from the regions
  input  logic [NREG-1:0]       r_cmd_valid,
  output logic [NREG-1:0]       r_cmd_ready,
  input  rdma_cmd_t [NREG-1:0]  r_cmd,
  input  logic [NREG-1:0]       r_tvalid,
  output logic [NREG-1:0]       r_tready,
  input  word_t [NREG-1:0]      r_tdata,
  input  logic [NREG-1:0]       r_tlast,
  // to the network stack
  output logic                  tx_cmd_valid,
  input  logic                  tx_cmd_ready,
  output rdma_cmd_t             tx_cmd,
  output logic [2:0]            tx_rid,
  output logic                  tx_valid,
  input  logic                  tx_ready,
  output word_t                 tx_data,
  output logic                  tx_last
);
  localparam int unsigned IW = (NREG > 1) ? $clog2(NREG) : 1;

  // ------------------------------------------------------------ receive
  logic [2:0] qp_tab [NQP];
  always_ff @(posedge clk) if (qp_wr_en) qp_tab[qp_wr_qpn] <= qp_wr_rid;

  logic [2:0] rx_rid;
  assign rx_rid = qp_tab[rx_req.qpn[$clog2(NQP)-1:0]];
  assign r_req  = rx_req;

  // write payload routing: region and word count of each accepted write
  logic        wq_in_ready, wq_valid, wq_pop;
  logic [LEN_W+2:0] wq_head;
  logic [LEN_W-7:0] wcnt;
  logic        is_wr;
  assign is_wr = (rx_req.op == OP_WRITE);

  always_comb begin
    r_req_valid = '0;
    r_req_valid[rx_rid] = rx_req_valid && (!is_wr || wq_in_ready);
  end
  assign rx_req_ready = r_req_ready[rx_rid] && (!is_wr || wq_in_ready);

  fv_fifo #(.WIDTH(LEN_W + 3), .DEPTH(16)) u_wq (
    .clk, .rst_n, .in_valid(rx_req_valid && rx_req_ready && is_wr), .in_ready(wq_in_ready),
    .in_data({rx_rid, rx_req.len}), .out_valid(wq_valid), .out_ready(wq_pop),
    .out_data(wq_head), .count());

  assign r_wdata = rx_wdata;
  always_comb begin
    r_wvalid = '0;
    r_wvalid[wq_head[LEN_W +: 3]] = wq_valid && rx_wvalid;
  end
  assign rx_wready = wq_valid && r_wready[wq_head[LEN_W +: 3]];
  assign wq_pop    = rx_wvalid && rx_wready && (wcnt + 1'b1 == wq_head[LEN_W-1:6]);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) wcnt <= '0;
    else if (rx_wvalid && rx_wready) wcnt <= wq_pop ? '0 : wcnt + 1'b1;
  end

  // ------------------------------------------------------------ transmit
  logic [IW-1:0] last_g, g, owner;
  logic          any, busy;
  always_comb begin
    any = 1'b0;
    g   = '0;
    for (int k = 1; k <= NREG; k++) begin
      int unsigned i;
      i = (int'(last_g) + k) % NREG;
      if (!any && r_cmd_valid[i]) begin
        any = 1'b1;
        g   = IW'(i);
      end
    end
  end

  assign tx_cmd_valid = !busy && any;
  assign tx_cmd       = r_cmd[g];
  assign tx_rid       = 3'(g);
  always_comb begin
    r_cmd_ready    = '0;
    r_cmd_ready[g] = !busy && tx_cmd_ready;
    r_tready       = '0;
    r_tready[owner] = busy && tx_ready;
  end
  assign tx_valid = busy && r_tvalid[owner];
  assign tx_data  = r_tdata[owner];
  assign tx_last  = r_tlast[owner];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; owner <= '0; last_g <= IW'(NREG - 1);
    end else if (!busy) begin
      if (tx_cmd_valid && tx_cmd_ready) begin
        last_g <= g;
        owner  <= g;
        busy   <= (tx_cmd.len != '0);
      end
    end else if (tx_valid && tx_ready && tx_last) begin
      busy <= 1'b0;
    end
  end
endmodule
