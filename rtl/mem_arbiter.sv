// mem_arbiter: arbiter in front of one DRAM channel (Arbiter 1..M in the
// architecture figure).
//
// Every DMA engine can send requests to every channel. This arbiter picks
// among the NREQ requesters round robin, one channel request per grant, so
// concurrent regions share the channel's bandwidth fairly. Each granted
// request is logged in a read or a write routing queue; the read queue
// steers the words the channel returns back to the requester that asked for
// them (the channel answers in order), and the write queue takes the write
// words from the requester whose write request is oldest. Read and write
// paths are independent. The round-robin policy and queue depth are this
// design's choices; the paper only names the arbiters and says they give
// isolation and fair sharing.
module mem_arbiter
  import fv_pkg::*;
#(
  parameter int unsigned NREQ = 6,
  parameter int unsigned QD   = 16
) (
  input  logic                      clk,
  input  logic                      rst_n,
  // requesters
  input  logic [NREQ-1:0]           in_req_valid,
  output logic [NREQ-1:0]           in_req_ready,
  input  ch_req_t [NREQ-1:0]        in_req,
  input  logic [NREQ-1:0]           in_wvalid,
  output logic [NREQ-1:0]           in_wready,
  input  logic [NREQ-1:0][WORD_W-1:0] in_wdata,
  output logic [NREQ-1:0]           in_rvalid,
  input  logic [NREQ-1:0]           in_rready,
  output logic [WORD_W-1:0]         in_rdata,
  // channel controller
  output logic                      mc_req_valid,
  input  logic                      mc_req_ready,
  output ch_req_t                   mc_req,
  output logic                      mc_wvalid,
  input  logic                      mc_wready,
  output logic [WORD_W-1:0]         mc_wdata,
  input  logic                      mc_rvalid,
  output logic                      mc_rready,
  input  logic [WORD_W-1:0]         mc_rdata
);
  localparam int unsigned IW  = (NREQ > 1) ? $clog2(NREQ) : 1;
  localparam int unsigned NWW = LEN_W - 6;

  typedef struct packed {
    logic [IW-1:0]  id;
    logic [NWW-1:0] nwords;
  } route_t;

  logic [IW-1:0] last_gnt, gnt;
  logic          any;
  logic          rq_ready, wq_ready;

  // round-robin choice, starting after the last grant
  always_comb begin
    any = 1'b0;
    gnt = '0;
    for (int k = 1; k <= NREQ; k++) begin
      int unsigned i;
      i = (int'(last_gnt) + k) % NREQ;
      if (!any && in_req_valid[i]) begin
        any = 1'b1;
        gnt = IW'(i);
      end
    end
  end

  assign mc_req       = in_req[gnt];
  assign mc_req_valid = any && (mc_req.wr ? wq_ready : rq_ready);
  always_comb begin
    in_req_ready = '0;
    in_req_ready[gnt] = mc_req_valid && mc_req_ready;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) last_gnt <= IW'(NREQ - 1);
    else if (mc_req_valid && mc_req_ready) last_gnt <= gnt;
  end

  // routing queues
  route_t rr_in, r_head, w_head;
  logic   r_valid, r_pop, w_valid, w_pop;
  assign rr_in = '{id: gnt, nwords: mc_req.nwords};

  fv_fifo #(.WIDTH($bits(route_t)), .DEPTH(QD)) u_rd_route (
    .clk, .rst_n, .in_valid(mc_req_valid && mc_req_ready && !mc_req.wr), .in_ready(rq_ready),
    .in_data(rr_in), .out_valid(r_valid), .out_ready(r_pop), .out_data(r_head), .count());
  fv_fifo #(.WIDTH($bits(route_t)), .DEPTH(QD)) u_wr_route (
    .clk, .rst_n, .in_valid(mc_req_valid && mc_req_ready && mc_req.wr), .in_ready(wq_ready),
    .in_data(rr_in), .out_valid(w_valid), .out_ready(w_pop), .out_data(w_head), .count());

  // read data back to its requester
  logic [NWW-1:0] rcnt, wcnt;
  assign in_rdata  = mc_rdata;
  assign mc_rready = r_valid && in_rready[r_head.id];
  always_comb begin
    in_rvalid = '0;
    in_rvalid[r_head.id] = r_valid && mc_rvalid;
  end
  assign r_pop = mc_rvalid && mc_rready && (rcnt + 1'b1 == r_head.nwords);

  // write data from the oldest write requester
  assign mc_wdata  = in_wdata[w_head.id];
  assign mc_wvalid = w_valid && in_wvalid[w_head.id];
  always_comb begin
    in_wready = '0;
    in_wready[w_head.id] = w_valid && mc_wready;
  end
  assign w_pop = mc_wvalid && mc_wready && (wcnt + 1'b1 == w_head.nwords);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rcnt <= '0; wcnt <= '0;
    end else begin
      if (mc_rvalid && mc_rready) rcnt <= r_pop ? '0 : rcnt + 1'b1;
      if (mc_wvalid && mc_wready) wcnt <= w_pop ? '0 : wcnt + 1'b1;
      // a channel request always carries at least one word
      if (mc_req_valid)
        assert (mc_req.nwords != '0) else $error("mem_arbiter: empty channel request");
    end
  end
endmodule
