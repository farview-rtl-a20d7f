// dma_engine: per-region DMA engine of the memory stack (DMA 1..N in the
// architecture figure).
//
// A dynamic region hands this engine virtual requests (64-byte aligned
// address and length). The engine cuts each request at 2 MB page
// boundaries, translates each piece through its TLB port and spreads it over
// the NCH memory channels: physical memory is striped in 64-byte words, word
// w living in channel w mod NCH at channel address w / NCH. It sends every
// channel its share of a piece as one channel request and keeps a note of
// the piece so that it can
//  * for reads, gather the words the channels return into lines of NCH
//    consecutive words (rd_keep says how many are valid, rd_last marks the
//    end of a request) so a region sees the full striped bandwidth, and
//  * for writes, deal the incoming 64-byte words out to the channels.
// Reads and writes are tracked in separate queues, so the two directions are
// decoupled as the paper's MMU requires. A TLB miss sets the sticky fault
// output and the piece is dropped: the paper has the TLB hold all mappings,
// so a miss is a host programming error. Striping at 64-byte granularity and
// the miss policy are this design's choices; the paper only says memory is
// allocated in a striping pattern across all channels.
module dma_engine
  import fv_pkg::*;
#(
  parameter int unsigned NCH   = 2,
  parameter int unsigned QD    = 16
) (
  input  logic                         clk,
  input  logic                         rst_n,
  // virtual requests from the region
  input  logic                         req_valid,
  output logic                         req_ready,
  input  mem_req_t                     req,
  // TLB port
  output logic [VA_W-PAGE_B-1:0]       tlb_vpn,
  input  logic                         tlb_hit,
  input  logic [PA_W-PAGE_B-1:0]       tlb_ppn,
  output logic                         fault,
  // write data from the region (one 64-byte word per beat)
  input  logic                         wr_valid,
  output logic                         wr_ready,
  input  word_t                        wr_data,
  // read data to the region
  output logic                         rd_valid,
  input  logic                         rd_ready,
  output logic [NCH-1:0][WORD_W-1:0]   rd_data,
  output logic [$clog2(NCH):0]         rd_keep,
  output logic                         rd_last,
  // channel side
  output logic [NCH-1:0]               ch_req_valid,
  input  logic [NCH-1:0]               ch_req_ready,
  output ch_req_t [NCH-1:0]            ch_req,
  output logic [NCH-1:0]               ch_wvalid,
  input  logic [NCH-1:0]               ch_wready,
  output logic [NCH-1:0][WORD_W-1:0]   ch_wdata,
  input  logic [NCH-1:0]               ch_rvalid,
  output logic [NCH-1:0]               ch_rready,
  input  logic [NCH-1:0][WORD_W-1:0]   ch_rdata
);
  localparam int unsigned CW  = (NCH > 1) ? $clog2(NCH) : 1;
  localparam int unsigned NWW = LEN_W - 6;
  localparam int unsigned SH  = $clog2(NCH);

  typedef struct packed {
    logic [CW-1:0]  c0;       // channel of the first word
    logic [NWW-1:0] nwords;
    logic           last;     // last piece of its request
  } piece_t;

  // ---------------------------------------------------------------- split
  mem_req_t              cur;
  logic                  busy;
  logic [NCH-1:0]        pend;        // channels still to accept this piece
  logic [LEN_W-1:0]      plen;
  logic [VA_W-1:0]       poff_room;
  logic [PA_W-7:0]       w0;          // first global physical word
  logic [NWW-1:0]        pn;
  logic                  plast;
  logic                  pq_ready_r, pq_ready_w, piece_go;
  logic                  issued;      // channel requests of the piece sent

  assign tlb_vpn   = cur.addr[VA_W-1:PAGE_B];
  assign poff_room = (VA_W'(1) << PAGE_B) - VA_W'(cur.addr[PAGE_B-1:0]);
  assign plen      = (VA_W'(cur.len) > poff_room) ? LEN_W'(poff_room) : cur.len;
  assign plast     = (plen == cur.len);
  assign w0        = {tlb_ppn, cur.addr[PAGE_B-1:6]};
  assign pn        = plen[LEN_W-1:6];
  assign req_ready = !busy;

  always_comb begin
    for (int c = 0; c < NCH; c++) begin
      logic [CW-1:0]   sk;
      logic [PA_W-7:0] f;
      logic [NWW-1:0]  cnt;
      sk  = CW'(c) - CW'(w0 % NCH);
      f   = w0 + (PA_W-6)'(sk);
      cnt = (NWW'(sk) < pn) ? NWW'((pn - NWW'(sk) + NWW'(NCH - 1)) >> SH) : '0;
      ch_req[c].waddr  = f >> SH;
      ch_req[c].nwords = cnt;
      ch_req[c].wr     = cur.wr;
      ch_req_valid[c]  = busy && tlb_hit && !issued && pend[c] && cnt != '0;
    end
  end

  // a piece is done when every channel with words accepted its request and
  // the piece was logged in the read or write queue
  logic [NCH-1:0] pend_nx;
  always_comb begin
    for (int c = 0; c < NCH; c++)
      pend_nx[c] = pend[c] && !(ch_req_valid[c] && ch_req_ready[c]) && ch_req[c].nwords != '0;
  end
  assign piece_go = busy && tlb_hit && (cur.wr ? pq_ready_w : pq_ready_r);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; pend <= '0; issued <= 1'b0; fault <= 1'b0; cur <= '0;
    end else if (!busy) begin
      if (req_valid) begin
        busy <= 1'b1; cur <= req; pend <= '1; issued <= 1'b0;
      end
    end else if (!tlb_hit) begin
      fault <= 1'b1;
      busy  <= 1'b0;
    end else if (!issued) begin
      pend <= pend_nx;
      if (pend_nx == '0) issued <= 1'b1;
    end else if (piece_go) begin
      if (plast) busy <= 1'b0;
      cur.addr <= cur.addr + VA_W'(plen);
      cur.len  <= cur.len - plen;
      pend     <= '1;
      issued   <= 1'b0;
    end
  end

  // ---------------------------------------------------------------- queues
  piece_t pin, rq_head, wq_head;
  logic   rq_valid, rq_pop, wq_valid, wq_pop;
  assign pin = '{c0: CW'(w0 % NCH), nwords: pn, last: plast};

  fv_fifo #(.WIDTH($bits(piece_t)), .DEPTH(QD)) u_rq (
    .clk, .rst_n, .in_valid(issued && piece_go && !cur.wr), .in_ready(pq_ready_r), .in_data(pin),
    .out_valid(rq_valid), .out_ready(rq_pop), .out_data(rq_head), .count());
  fv_fifo #(.WIDTH($bits(piece_t)), .DEPTH(QD)) u_wq (
    .clk, .rst_n, .in_valid(issued && piece_go && cur.wr), .in_ready(pq_ready_w), .in_data(pin),
    .out_valid(wq_valid), .out_ready(wq_pop), .out_data(wq_head), .count());

  // ---------------------------------------------------------------- reads
  logic [NWW-1:0] rdone;              // words of the head piece delivered
  logic [NWW-1:0] rleft;
  logic [CW:0]    rnum;               // words in the current line
  logic [NCH-1:0] need;
  assign rleft = rq_head.nwords - rdone;
  assign rnum  = (rleft >= NWW'(NCH)) ? (CW+1)'(NCH) : (CW+1)'(rleft);

  always_comb begin
    for (int c = 0; c < NCH; c++) need[c] = 1'b0;
    for (int p = 0; p < NCH; p++) begin
      logic [CW-1:0] ch;
      ch = CW'(rq_head.c0 + CW'(p));
      rd_data[p] = ch_rdata[ch];
      if ((CW+1)'(p) < rnum) need[ch] = 1'b1;
    end
    rd_valid  = rq_valid && ((ch_rvalid & need) == need);
    rd_keep   = rnum;
    rd_last   = rq_head.last && (rleft <= NWW'(NCH));
    ch_rready = (rd_valid && rd_ready) ? need : '0;
    rq_pop    = rd_valid && rd_ready && (rleft <= NWW'(NCH));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) rdone <= '0;
    else if (rd_valid && rd_ready) rdone <= rq_pop ? '0 : rdone + NWW'(NCH);
  end

  // ---------------------------------------------------------------- writes
  logic [NWW-1:0] wdone;
  logic [CW-1:0]  wch;
  assign wch = CW'(wq_head.c0 + CW'(wdone % NCH));
  always_comb begin
    for (int c = 0; c < NCH; c++) begin
      ch_wdata[c]  = wr_data;
      ch_wvalid[c] = wq_valid && wr_valid && (wch == CW'(c));
    end
    wr_ready = wq_valid && ch_wready[wch];
    wq_pop   = wr_valid && wr_ready && (wdone + 1'b1 == wq_head.nwords);
  end
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) wdone <= '0;
    else if (wr_valid && wr_ready) wdone <= wq_pop ? '0 : wdone + 1'b1;
  end

  initial assert (NCH >= 1 && (NCH & (NCH - 1)) == 0)
    else $error("dma_engine: NCH must be a power of two");
endmodule
