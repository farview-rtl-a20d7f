// dynamic_region: one virtual dynamic region of the operator stack with its
// operator pipeline.
//
// A region serves the client whose queue pair is mapped to it. Requests
// arrive from the network side:
//  * Plain RDMA read / write ("base" requests, blue path of the dynamic
//    region figure) go straight to the memory stack. Read data bypasses the
//    operators: the striped lines are cut into 64-byte words and sent back
//    by a second sender as read-response packets. Write payload goes to
//    memory unchanged.
//  * A Farview request (green path) goes to the projection operator, which
//    pushes the request parameters into five parameter queues (keys,
//    annotations, predicates, aggregation, network parameters) and issues
//    the memory reads. The returning data streams through the operator
//    pipeline: decryption (AES-128 CTR), projection (tuple parser),
//    selection, grouping (distinct / group by / aggregation), packing and
//    sending. Each stage reads its parameters from the head of its queue
//    and pops the queue when the end of the stream passes it.
// Vectorized model (vec_en): each word of a memory line (one per channel)
// feeds its own projection + selection lane, the lanes are merged round
// robin; without it one lane sees one word per clock. A routing queue
// remembers, for every memory read in flight, whether its data belongs to
// the operator pipeline or to the bypass. The two senders share the output
// packet by packet. One Farview request is processed at a time (a new one
// is accepted after the previous result has been sent): the paper does not
// say whether requests overlap inside a region, this is this design's
// choice. Operator selection is by run-time parameters in one generic
// pipeline instead of partial reconfiguration of the region.
module dynamic_region
  import fv_pkg::*;
#(
  parameter int unsigned NCH    = 2,
  parameter int unsigned NTAB   = 4,
  parameter int unsigned TDEPTH = 4096
) (
  input  logic                        clk,
  input  logic                        rst_n,
  // requests and write payload from the network side
  input  logic                        req_valid,
  output logic                        req_ready,
  input  net_req_t                    req,
  input  logic                        wvalid,
  output logic                        wready,
  input  word_t                       wdata,
  // packets to the network side
  output logic                        cmd_valid,
  input  logic                        cmd_ready,
  output rdma_cmd_t                   cmd,
  output logic                        tvalid,
  input  logic                        tready,
  output word_t                       tdata,
  output logic                        tlast,
  // memory stack (virtual addresses)
  output logic                        mreq_valid,
  input  logic                        mreq_ready,
  output mem_req_t                    mreq,
  output logic                        mw_valid,
  input  logic                        mw_ready,
  output word_t                       mw_data,
  input  logic                        mr_valid,
  output logic                        mr_ready,
  input  logic [NCH-1:0][WORD_W-1:0]  mr_data,
  input  logic [$clog2(NCH):0]        mr_keep,
  input  logic                        mr_last,
  // activity counters
  output logic [31:0]                 n_fv_done,
  output logic [31:0]                 n_base_rd,
  output logic [31:0]                 n_base_wr,
  output logic [31:0]                 n_vec_lines,
  output logic [31:0]                 n_dec_lines,
  output logic [31:0]                 n_filtered,
  output logic [31:0]                 lru_hits,
  output logic [31:0]                 table_hits,
  output logic [31:0]                 evictions,
  output logic [31:0]                 collisions
);
  localparam int unsigned KW = $clog2(NCH) + 1;

  // ------------------------------------------------------------ requests
  logic       is_fv, base_rd, base_wr;
  logic       po_fv_ready, po_free;
  logic       po_mreq_valid, po_mreq_ready, po_mreq_last;
  mem_req_t   po_mreq;
  logic       par_valid, par_ready;
  fv_params_t par;

  assign is_fv   = (req.op == OP_FARVIEW);
  assign base_rd = req_valid && (req.op == OP_READ);
  assign base_wr = req_valid && (req.op == OP_WRITE);

  projection_operator u_po (
    .clk, .rst_n, .free(po_free),
    .fv_valid(req_valid && is_fv), .fv_ready(po_fv_ready), .fv(req.fv),
    .par_valid, .par_ready, .par,
    .mreq_valid(po_mreq_valid), .mreq_ready(po_mreq_ready), .mreq(po_mreq), .mreq_last(po_mreq_last));

  // routing queue: {farview, last request of the table}
  logic       rt_in_ready, rt_valid, rt_pop;
  logic [1:0] rt_head;
  logic       rt_push;
  logic       bm_in_ready, bm_valid, bm_pop;
  logic [63:0] bm_head;

  always_comb begin
    mreq       = po_mreq;
    mreq_valid = 1'b0;
    rt_push    = 1'b0;
    po_mreq_ready = 1'b0;
    req_ready  = 1'b0;
    if (base_rd || base_wr) begin
      mreq      = '{addr: req.vaddr, len: req.len, wr: base_wr};
      mreq_valid = base_wr || (rt_in_ready && bm_in_ready);
      req_ready = mreq_ready && mreq_valid;
      rt_push   = base_rd && req_ready;
    end else begin
      req_ready = req_valid && po_fv_ready;
      mreq_valid = po_mreq_valid && rt_in_ready;
      po_mreq_ready = mreq_ready && rt_in_ready;
      rt_push   = po_mreq_valid && po_mreq_ready;
    end
  end

  fv_fifo #(.WIDTH(2), .DEPTH(32)) u_rt (
    .clk, .rst_n, .in_valid(rt_push), .in_ready(rt_in_ready),
    .in_data((base_rd || base_wr) ? 2'b01 : {1'b1, po_mreq_last}),
    .out_valid(rt_valid), .out_ready(rt_pop), .out_data(rt_head), .count());

  // client buffer address of each plain read
  fv_fifo #(.WIDTH(64), .DEPTH(16)) u_bm (
    .clk, .rst_n, .in_valid(base_rd && req_ready), .in_ready(bm_in_ready), .in_data(req.client_vaddr),
    .out_valid(bm_valid), .out_ready(bm_pop), .out_data(bm_head), .count());

  assign mw_valid = wvalid;
  assign mw_data  = wdata;
  assign wready   = mw_ready;

  // ------------------------------------------------------------ parameter queues
  typedef struct packed { logic dec_en; logic [127:0] key; logic [127:0] iv; } keys_t;
  typedef struct packed { logic [3:0] tw; logic sa; logic vec; logic [MAX_TCOL-1:0] mask; } ann_t;
  typedef struct packed { logic [NPRED-1:0] en; logic [NPRED-1:0][$bits(pred_t)-1:0] p; } preds_t;
  typedef struct packed { grp_mode_e mode; logic [NCOL-1:0] km; logic [2:0] col; } aggp_t;

  keys_t  q_keys;
  ann_t   q_ann;
  preds_t q_pred;
  aggp_t  q_agg;
  logic [63:0] q_net;
  logic [4:0]  pq_in_ready, pq_valid, pq_pop;

  assign par_ready = &pq_in_ready;

  fv_fifo #(.WIDTH($bits(keys_t)), .DEPTH(2)) u_q_keys (.clk, .rst_n,
    .in_valid(par_valid && par_ready), .in_ready(pq_in_ready[0]), .in_data({par.dec_en, par.aes_key, par.aes_iv}),
    .out_valid(pq_valid[0]), .out_ready(pq_pop[0]), .out_data(q_keys), .count());
  fv_fifo #(.WIDTH($bits(ann_t)), .DEPTH(2)) u_q_ann (.clk, .rst_n,
    .in_valid(par_valid && par_ready), .in_ready(pq_in_ready[1]),
    .in_data({par.tuple_words, par.sa_en, par.vec_en, par.proj_mask}),
    .out_valid(pq_valid[1]), .out_ready(pq_pop[1]), .out_data(q_ann), .count());
  fv_fifo #(.WIDTH($bits(preds_t)), .DEPTH(2)) u_q_pred (.clk, .rst_n,
    .in_valid(par_valid && par_ready), .in_ready(pq_in_ready[2]), .in_data({par.pred_en, par.pred}),
    .out_valid(pq_valid[2]), .out_ready(pq_pop[2]), .out_data(q_pred), .count());
  fv_fifo #(.WIDTH($bits(aggp_t)), .DEPTH(2)) u_q_agg (.clk, .rst_n,
    .in_valid(par_valid && par_ready), .in_ready(pq_in_ready[3]), .in_data({par.grp_mode, par.key_mask, par.agg_col}),
    .out_valid(pq_valid[3]), .out_ready(pq_pop[3]), .out_data(q_agg), .count());
  fv_fifo #(.WIDTH(64), .DEPTH(2)) u_q_net (.clk, .rst_n,
    .in_valid(par_valid && par_ready), .in_ready(pq_in_ready[4]), .in_data(par.client_vaddr),
    .out_valid(pq_valid[4]), .out_ready(pq_pop[4]), .out_data(q_net), .count());

  // ------------------------------------------------------------ read data steering
  logic to_fv;
  logic aes_in_ready, byp_in_ready, key_loaded, key_load;
  assign to_fv    = rt_valid && rt_head[1];
  assign key_load = pq_valid[0] && !key_loaded;
  assign mr_ready = rt_valid && (to_fv ? (aes_in_ready && key_loaded) : byp_in_ready);
  assign rt_pop   = mr_valid && mr_ready && mr_last;

  // bypass: words of plain reads to sender B
  logic  b_valid, b_ready, b_last;
  word_t b_data;
  line_serializer #(.NCH(NCH)) u_byp_ser (
    .clk, .rst_n, .in_valid(mr_valid && rt_valid && !to_fv), .in_ready(byp_in_ready),
    .in_data(mr_data), .in_keep(mr_keep), .in_last(mr_last),
    .out_valid(b_valid), .out_ready(b_ready), .out_data(b_data), .out_last(b_last));

  // ------------------------------------------------------------ decryption
  logic                    a_valid, a_ready, a_last;
  logic [NCH*WORD_W-1:0]   a_data;
  logic [7:0]              a_user;
  aes_ctr #(.NBLK(4 * NCH)) u_aes (
    .clk, .rst_n, .key_load, .key(q_keys.key), .iv(q_keys.iv), .en(q_keys.dec_en),
    .in_valid(mr_valid && to_fv && key_loaded), .in_ready(aes_in_ready),
    .in_data(mr_data), .in_user(8'(mr_keep)), .in_last(mr_last && rt_head[0]),
    .out_valid(a_valid), .out_ready(a_ready), .out_data(a_data), .out_user(a_user), .out_last(a_last));

  assign pq_pop[0] = a_valid && a_ready && a_last;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) key_loaded <= 1'b0;
    else if (pq_pop[0]) key_loaded <= 1'b0;
    else if (key_load) key_loaded <= 1'b1;
  end

  // ------------------------------------------------------------ lanes
  logic vec;
  assign vec = q_ann.vec;

  logic                    s_valid, s_ready, s_last, s_in_ready;
  word_t                   s_data;
  line_serializer #(.NCH(NCH)) u_lane_ser (
    .clk, .rst_n, .in_valid(a_valid && !vec), .in_ready(s_in_ready),
    .in_data(a_data), .in_keep(KW'(a_user)), .in_last(a_last),
    .out_valid(s_valid), .out_ready(s_ready), .out_data(s_data), .out_last(s_last));

  logic [NCH-1:0]  lf_in_valid, lf_in_ready, lf_valid, lf_ready;
  logic [NCH-1:0][WORD_W+1:0] lf_in, lf_out;
  always_comb begin
    for (int p = 0; p < NCH; p++) begin
      lf_in_valid[p] = vec && a_valid && (&lf_in_ready);
      lf_in[p]       = {a_last, (p >= int'(a_user)), a_data[p*WORD_W +: WORD_W]};
    end
    if (!vec) begin
      lf_in_valid[0] = s_valid;
      lf_in[0]       = {s_last, 1'b0, s_data};
    end
    s_ready = lf_in_ready[0];
    a_ready = vec ? (&lf_in_ready) : s_in_ready;
  end

  titem_t [NCH-1:0] sel_out;
  logic   [NCH-1:0] sel_valid, sel_ready;
  for (genvar p = 0; p < NCH; p++) begin : g_lane
    titem_t pi;
    logic   pv, pr;
    fv_fifo #(.WIDTH(WORD_W + 2), .DEPTH(4)) u_lf (
      .clk, .rst_n, .in_valid(lf_in_valid[p]), .in_ready(lf_in_ready[p]), .in_data(lf_in[p]),
      .out_valid(lf_valid[p]), .out_ready(lf_ready[p]), .out_data(lf_out[p]), .count());
    tuple_parser u_parse (
      .clk, .rst_n, .tuple_words(q_ann.tw), .sa_en(q_ann.sa), .proj_mask(q_ann.mask),
      .in_valid(lf_valid[p] && pq_valid[1]), .in_ready(lf_ready[p]),
      .in_data(lf_out[p][WORD_W-1:0]), .in_empty(lf_out[p][WORD_W]), .in_last(lf_out[p][WORD_W+1]),
      .out_valid(pv), .out_ready(pr), .out(pi));
    selection u_sel (
      .clk, .rst_n, .pred_en(q_pred.en), .pred(q_pred.p),
      .in_valid(pv), .in_ready(pr), .in(pi),
      .out_valid(sel_valid[p]), .out_ready(sel_ready[p]), .out(sel_out[p]));
  end

  logic   c_valid, c_ready;
  titem_t c_out;
  rr_combiner #(.NL(NCH)) u_comb (
    .clk, .rst_n, .vec_en(vec), .in_valid(sel_valid & {NCH{pq_valid[1]}}), .in_ready(sel_ready),
    .in(sel_out), .out_valid(c_valid), .out_ready(c_ready), .out(c_out));
  assign pq_pop[1] = c_valid && c_ready && c_out.last;
  assign pq_pop[2] = pq_pop[1];

  // ------------------------------------------------------------ grouping
  logic   g_valid, g_ready;
  titem_t g_out;
  group_distinct #(.NTAB(NTAB), .TDEPTH(TDEPTH)) u_grp (
    .clk, .rst_n, .mode(q_agg.mode), .key_mask(q_agg.km), .agg_col(q_agg.col),
    .in_valid(c_valid && pq_valid[3]), .in_ready(c_ready), .in(c_out),
    .out_valid(g_valid), .out_ready(g_ready), .out(g_out),
    .lru_hits, .table_hits, .evictions, .collisions, .coll_lost());
  assign pq_pop[3] = g_valid && g_ready && g_out.last;

  // ------------------------------------------------------------ packing, sending
  logic        k_valid, k_ready, k_last;
  word_t       k_data;
  logic [6:0]  k_bytes;
  packer u_pack (
    .clk, .rst_n, .in_valid(g_valid), .in_ready(g_ready), .in(g_out),
    .out_valid(k_valid), .out_ready(k_ready), .out_data(k_data), .out_bytes(k_bytes), .out_last(k_last));

  logic      sa_cmd_valid, sa_cmd_ready, sa_tvalid, sa_tready, sa_tlast, sa_done;
  rdma_cmd_t sa_cmd;
  word_t     sa_tdata;
  sender u_send_fv (
    .clk, .rst_n, .base_vaddr(q_net), .rd_resp(1'b0),
    .in_valid(k_valid), .in_ready(k_ready), .in_data(k_data), .in_bytes(k_bytes), .in_last(k_last),
    .cmd_valid(sa_cmd_valid), .cmd_ready(sa_cmd_ready), .cmd(sa_cmd),
    .out_valid(sa_tvalid), .out_ready(sa_tready), .out_data(sa_tdata), .out_last(sa_tlast), .done(sa_done));
  assign pq_pop[4] = sa_done;

  logic      sb_cmd_valid, sb_cmd_ready, sb_tvalid, sb_tready, sb_tlast, sb_done;
  rdma_cmd_t sb_cmd;
  word_t     sb_tdata;
  sender u_send_rd (
    .clk, .rst_n, .base_vaddr(bm_head), .rd_resp(1'b1),
    .in_valid(b_valid), .in_ready(b_ready), .in_data(b_data), .in_bytes(7'(WORD_B)), .in_last(b_last),
    .cmd_valid(sb_cmd_valid), .cmd_ready(sb_cmd_ready), .cmd(sb_cmd),
    .out_valid(sb_tvalid), .out_ready(sb_tready), .out_data(sb_tdata), .out_last(sb_tlast), .done(sb_done));
  assign bm_pop = sb_done;

  // output: packet-granular choice between the two senders
  logic busy, own_b, pick_b, pref_b;
  assign pick_b    = sb_cmd_valid && (!sa_cmd_valid || pref_b);
  assign cmd_valid = !busy && (sa_cmd_valid || sb_cmd_valid);
  assign cmd       = pick_b ? sb_cmd : sa_cmd;
  assign sa_cmd_ready = !busy && !pick_b && cmd_ready;
  assign sb_cmd_ready = !busy && pick_b && cmd_ready;
  assign tvalid    = busy && (own_b ? sb_tvalid : sa_tvalid);
  assign tdata     = own_b ? sb_tdata : sa_tdata;
  assign tlast     = own_b ? sb_tlast : sa_tlast;
  assign sa_tready = busy && !own_b && tready;
  assign sb_tready = busy && own_b && tready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; own_b <= 1'b0; pref_b <= 1'b0;
    end else if (!busy) begin
      if (cmd_valid && cmd_ready) begin
        busy   <= (cmd.len != '0);
        own_b  <= pick_b;
        pref_b <= !pick_b;
      end
    end else if (tvalid && tready && tlast) begin
      busy <= 1'b0;
    end
  end

  // ------------------------------------------------------------ bookkeeping
  logic active;
  assign po_free = !active;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active <= 1'b0; n_fv_done <= '0; n_base_rd <= '0; n_base_wr <= '0;
      n_vec_lines <= '0; n_dec_lines <= '0; n_filtered <= '0;
    end else begin
      if (req_valid && req_ready && is_fv) active <= 1'b1;
      else if (sa_done) active <= 1'b0;
      if (sa_done) n_fv_done <= n_fv_done + 1'b1;
      if (base_rd && req_ready) n_base_rd <= n_base_rd + 1'b1;
      if (base_wr && req_ready) n_base_wr <= n_base_wr + 1'b1;
      if (vec && a_valid && a_ready) n_vec_lines <= n_vec_lines + 1'b1;
      if (q_keys.dec_en && a_valid && a_ready) n_dec_lines <= n_dec_lines + 1'b1;
      for (int p = 0; p < NCH; p++)
        if (sel_valid[p] && sel_ready[p] && !sel_out[p].keep && !sel_out[p].last) n_filtered <= n_filtered + 1'b1;
    end
  end
endmodule
