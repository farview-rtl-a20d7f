// group_distinct: the grouping operator (DISTINCT, GROUP BY with
// aggregation, and plain aggregation) of the operator pipeline.
//
// How it works (after the paper's DISTINCT figure):
//  * LRU cache. The key of each incoming tuple (the first two attributes
//    marked in key_mask, 128 bits) is compared with every entry of a shift
//    register of LRU_DEPTH recent keys. The shift register is the cache and
//    the delay line in one: a key that hits is not entered again. In
//    DISTINCT mode the tuple is a duplicate and is dropped; in GROUP BY mode
//    its aggregate is merged into the cached entry (write-through: the entry
//    carries the merged aggregate to the hash tables). This hides the hash
//    table latency: two equal keys never reach the tables back to back.
//  * Lookup request / response. An entry leaving the shift register has its
//    NTAB cuckoo hash indices computed (request stage); one clock later all
//    tables are read in parallel at those indices (response stage).
//    A hit updates the aggregate in place (GROUP BY) or drops the tuple
//    (DISTINCT). A miss emits the tuple (DISTINCT), records the key in the
//    group queue (GROUP BY) and inserts the entry in table 0.
//  * Cuckoo eviction. An entry pushed out of table i moves, one clock later,
//    into table i+1 at its own hash index, in the background. An entry
//    pushed out of the last table is a collision: it goes to the collision
//    buffer, which is sent to the client at the end (DISTINCT keys, or
//    GROUP BY partial groups that the client merges in software). Entries
//    in flight between tables are compared like table entries.
//  * Flush. At the end of the stream, GROUP BY pops the group queue, looks
//    each key up, sends the group (key, count, sum, min, max; the average is
//    sum / count) and clears the slot so a key is sent once; then the
//    collision buffer is sent and an end-of-stream marker follows.
//    AGGREGATE mode is GROUP BY with a constant key, i.e. one group.
//  * GRP_NONE passes the stream through.
// The internal pipeline never stalls; the input is accepted only while the
// output queue has room for every tuple in flight (credit-based). One tuple
// per clock. Output records of groups put the key in slots 0-1 and count,
// sum, min, max in slots 2-5 (AGGREGATE: slots 2-5 only).
// The paper gives the structure (LRU shift register, cuckoo tables with
// eviction to the next table, collision buffer, write-through cache, flush
// queue). Table sizes, hash functions, the 128-bit key, signed 64-bit
// aggregates and the table memories (arrays read asynchronously, as
// distributed RAM or registers, with two write ports) are this design's.
module group_distinct
  import fv_pkg::*;
#(
  parameter int unsigned NTAB      = 4,
  parameter int unsigned TDEPTH    = 4096,
  parameter int unsigned LRU_DEPTH = 8,
  parameter int unsigned COLL_D    = 64,
  parameter int unsigned OUT_D     = 32
) (
  input  logic              clk,
  input  logic              rst_n,
  input  grp_mode_e         mode,
  input  logic [NCOL-1:0]   key_mask,
  input  logic [2:0]        agg_col,
  input  logic              in_valid,
  output logic              in_ready,
  input  titem_t            in,
  output logic              out_valid,
  input  logic              out_ready,
  output titem_t            out,
  // statistics
  output logic [31:0]       lru_hits,
  output logic [31:0]       table_hits,
  output logic [31:0]       evictions,
  output logic [31:0]       collisions,
  output logic              coll_lost
);
  localparam int unsigned IW = $clog2(TDEPTH);
  localparam int unsigned GQ = NTAB * TDEPTH;

  typedef struct packed {
    logic          v;
    logic [127:0]  key;
    agg_t          agg;
    tuple_t        col;
    logic [NCOL-1:0] ann;
  } ent_t;

  typedef struct packed {
    logic [127:0] key;
    agg_t         agg;
  } slot_t;

  // ------------------------------------------------------------ helpers
  function automatic agg_t agg_merge(agg_t a, agg_t b);
    agg_t r;
    r.count = a.count + b.count;
    r.sum   = a.sum + b.sum;
    r.min   = ($signed(a.min) < $signed(b.min)) ? a.min : b.min;
    r.max   = ($signed(a.max) > $signed(b.max)) ? a.max : b.max;
    return r;
  endfunction

  localparam logic [NTAB*64-1:0] HC = {64'h9e3779b97f4a7c15, 64'hc2b2ae3d27d4eb4f,
                                       64'h165667b19e3779f9, 64'hd6e8feb86659fd93} >> (64 * (4 - NTAB));
  function automatic logic [IW-1:0] hsh(logic [127:0] k, int t);
    logic [63:0] f;
    logic [127:0] p;
    f = k[63:0] ^ {k[127:64] << 29 | k[127:64] >> 35};
    p = 128'(f) * 128'(HC[64*(NTAB-1-t) +: 64]);
    return p[63 -: IW];
  endfunction

  // key of an input tuple
  logic [127:0] in_key;
  agg_t         in_agg;
  always_comb begin
    int n;
    in_key = '0;
    n = 0;
    if (mode != GRP_AGGREGATE) begin
      for (int i = 0; i < NCOL; i++)
        if (key_mask[i] && n < 2) begin
          if (n == 0) in_key[63:0] = in.col[i];
          else        in_key[127:64] = in.col[i];
          n++;
        end
    end
    in_agg = '{count: 32'd1, sum: in.col[agg_col], min: in.col[agg_col], max: in.col[agg_col]};
  end

  // ------------------------------------------------------------ state
  typedef enum logic [2:0] {S_RUN, S_DRAIN, S_FLUSH_G, S_FLUSH_C, S_END, S_CLEAR} state_e;
  state_e st;

  ent_t [LRU_DEPTH-1:0] sr;
  ent_t                 lq;       // lookup request stage
  logic [NTAB-1:0][IW-1:0] lq_idx;
  ent_t [NTAB-1:0]      ev;       // ev[t]: entry moving into table t (t >= 1)

  slot_t                tab [NTAB][TDEPTH];
  logic [NTAB-1:0][TDEPTH-1:0] tv;

  logic pass_mode;
  assign pass_mode = (mode == GRP_NONE);

  // output queue
  logic   oq_in_valid, oq_in_ready;
  titem_t oq_in;
  logic [$clog2(OUT_D):0] oq_cnt;

  // group queue and collision buffer
  logic         gq_push, gq_pop, gq_valid;
  logic [127:0] gq_head;
  logic         cb_push, cb_pop, cb_valid, cb_ready;
  slot_t        cb_in, cb_head;

  // in-flight count for credits
  logic [7:0] inflight;
  always_comb begin
    inflight = '0;
    for (int i = 0; i < LRU_DEPTH; i++) inflight += 8'(sr[i].v);
    inflight += 8'(lq.v);
  end

  // ------------------------------------------------------------ LRU stage
  logic                    acc, hit_sr;
  logic [$clog2(LRU_DEPTH+1)-1:0] hit_i;
  always_comb begin
    hit_sr = 1'b0;
    hit_i  = '0;
    for (int i = 0; i < LRU_DEPTH; i++)
      if (sr[i].v && sr[i].key == in_key && !hit_sr) begin
        hit_sr = 1'b1;
        hit_i  = ($clog2(LRU_DEPTH+1))'(i);
      end
  end

  assign in_ready = pass_mode ? oq_in_ready
                  : (st == S_RUN) && (32'(oq_cnt) + 32'(inflight) + 2 < OUT_D);
  assign acc = in_valid && in_ready && !pass_mode;

  // ------------------------------------------------------------ response
  // lq is the entry whose indices were computed last clock: look it up now
  logic [NTAB-1:0] th, eh;
  always_comb begin
    for (int t = 0; t < NTAB; t++) begin
      th[t] = lq.v && tv[t][lq_idx[t]] && tab[t][lq_idx[t]].key == lq.key;
      eh[t] = lq.v && (t > 0) && ev[t].v && ev[t].key == lq.key;
    end
  end
  logic found;
  assign found = (|th) || (|eh);

  // writes of this clock: response entry into table `rw_t`, evictions
  logic              rw_en;
  logic [$clog2(NTAB)-1:0] rw_t;
  slot_t             rw_val;
  always_comb begin
    rw_en  = 1'b0;
    rw_t   = '0;
    rw_val = '{key: lq.key, agg: lq.agg};
    if (lq.v) begin
      if (|th) begin
        rw_en = (mode != GRP_DISTINCT);
        for (int t = NTAB - 1; t >= 0; t--)
          if (th[t]) begin
            rw_t   = ($clog2(NTAB))'(t);
            rw_val = '{key: lq.key, agg: agg_merge(tab[t][lq_idx[t]].agg, lq.agg)};
          end
      end else if (!(|eh)) begin
        rw_en = 1'b1;
        rw_t  = '0;
      end
    end
  end

  logic [NTAB-1:0][IW-1:0] ev_idx;
  always_comb for (int t = 0; t < NTAB; t++) ev_idx[t] = hsh(ev[t].key, t);

  // new entry into table 0 and what it pushes out
  ent_t            ev_nx [NTAB+1];
  always_comb begin
    for (int t = 0; t <= NTAB; t++) ev_nx[t] = '0;
    // table 0 insert (response miss)
    if (rw_en && rw_t == 0 && !(|th)) begin
      if (tv[0][lq_idx[0]]) begin
        ev_nx[1].v   = 1'b1;
        ev_nx[1].key = tab[0][lq_idx[0]].key;
        ev_nx[1].agg = tab[0][lq_idx[0]].agg;
      end
    end
    // background moves: ev[t] goes into table t
    for (int t = 1; t < NTAB; t++) begin
      if (ev[t].v) begin
        if (tv[t][ev_idx[t]]) begin
          ev_nx[t+1].v   = 1'b1;
          if (rw_en && rw_t == ($clog2(NTAB))'(t) && lq_idx[t] == ev_idx[t]) begin
            ev_nx[t+1].key = rw_val.key;
            ev_nx[t+1].agg = rw_val.agg;
          end else begin
            ev_nx[t+1].key = tab[t][ev_idx[t]].key;
            ev_nx[t+1].agg = tab[t][ev_idx[t]].agg;
          end
        end
      end
    end
  end

  // collision buffer input: whatever leaves the last table
  assign cb_push = ev_nx[NTAB].v;
  assign cb_in   = '{key: ev_nx[NTAB].key, agg: ev_nx[NTAB].agg};

  // ------------------------------------------------------------ flush
  logic [NTAB-1:0] fh;
  logic [NTAB-1:0][IW-1:0] fidx;
  always_comb begin
    for (int t = 0; t < NTAB; t++) begin
      fidx[t] = hsh(gq_head, t);
      fh[t]   = tv[t][fidx[t]] && tab[t][fidx[t]].key == gq_head;
    end
  end
  slot_t fslot;
  always_comb begin
    fslot = '0;
    for (int t = NTAB - 1; t >= 0; t--) if (fh[t]) fslot = tab[t][fidx[t]];
  end

  function automatic titem_t rec(slot_t s, grp_mode_e m);
    titem_t r;
    r        = '0;
    r.col[0] = s.key[63:0];
    r.col[1] = s.key[127:64];
    r.col[2] = 64'(s.agg.count);
    r.col[3] = s.agg.sum;
    r.col[4] = s.agg.min;
    r.col[5] = s.agg.max;
    r.ann    = (m == GRP_AGGREGATE) ? 8'b0011_1100 : (m == GRP_DISTINCT) ? 8'b0000_0011 : 8'b0011_1111;
    r.keep   = 1'b1;
    return r;
  endfunction

  // ------------------------------------------------------------ output mux
  always_comb begin
    oq_in_valid = 1'b0;
    oq_in       = '0;
    gq_pop      = 1'b0;
    cb_pop      = 1'b0;
    gq_push     = 1'b0;
    if (pass_mode) begin
      oq_in_valid = in_valid;
      oq_in       = in;
    end else begin
      if (lq.v && !found && mode == GRP_DISTINCT) begin
        oq_in_valid = 1'b1;
        oq_in       = '{col: lq.col, ann: lq.ann, keep: 1'b1, last: 1'b0};
      end
      gq_push = lq.v && !found && mode != GRP_DISTINCT;
      unique case (st)
        S_FLUSH_G: if (gq_valid) begin
          oq_in_valid = |fh;
          oq_in       = rec(fslot, mode);
          gq_pop      = !(|fh) || oq_in_ready;
        end
        S_FLUSH_C: if (cb_valid) begin
          oq_in_valid = 1'b1;
          oq_in       = rec(cb_head, mode);
          cb_pop      = oq_in_ready;
        end
        S_END: begin
          oq_in_valid = 1'b1;
          oq_in.last  = 1'b1;
        end
        default: ;
      endcase
    end
  end

  fv_fifo #(.WIDTH($bits(titem_t)), .DEPTH(OUT_D)) u_oq (
    .clk, .rst_n, .in_valid(oq_in_valid), .in_ready(oq_in_ready), .in_data(oq_in),
    .out_valid, .out_ready, .out_data(out), .count(oq_cnt));

  fv_fifo #(.WIDTH(128), .DEPTH(GQ)) u_gq (
    .clk, .rst_n, .in_valid(gq_push), .in_ready(), .in_data(lq.key),
    .out_valid(gq_valid), .out_ready(gq_pop), .out_data(gq_head), .count());

  fv_fifo #(.WIDTH($bits(slot_t)), .DEPTH(COLL_D)) u_cb (
    .clk, .rst_n, .in_valid(cb_push), .in_ready(cb_ready), .in_data(cb_in),
    .out_valid(cb_valid), .out_ready(cb_pop), .out_data(cb_head), .count());

  // ------------------------------------------------------------ tables
  always_ff @(posedge clk) begin
    if (rw_en) tab[rw_t][lq_idx[rw_t]] <= rw_val;
    for (int t = 1; t < NTAB; t++)
      if (ev[t].v)
        tab[t][hsh(ev[t].key, t)] <= '{key: ev[t].key,
          agg: (eh[t] && mode != GRP_DISTINCT) ? agg_merge(ev[t].agg, lq.agg) : ev[t].agg};
  end

  logic sr_empty, ev_empty;
  always_comb begin
    sr_empty = !lq.v;
    for (int i = 0; i < LRU_DEPTH; i++) if (sr[i].v) sr_empty = 1'b0;
    ev_empty = 1'b1;
    for (int t = 1; t < NTAB; t++) if (ev[t].v) ev_empty = 1'b0;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_RUN; sr <= '0; lq <= '0; lq_idx <= '0; ev <= '0; tv <= '0;
      lru_hits <= '0; table_hits <= '0; evictions <= '0; collisions <= '0; coll_lost <= 1'b0;
    end else begin
      // LRU shift register
      for (int i = LRU_DEPTH - 1; i > 0; i--) begin
        sr[i] <= sr[i-1];
        if (acc && in.keep && hit_sr && hit_i == ($clog2(LRU_DEPTH+1))'(i-1) && mode != GRP_DISTINCT)
          sr[i].agg <= agg_merge(sr[i-1].agg, in_agg);
      end
      sr[0] <= '0;
      if (acc && in.keep && !hit_sr)
        sr[0] <= '{v: 1'b1, key: in_key, agg: in_agg, col: in.col, ann: in.ann};
      if (acc && in.keep && hit_sr) lru_hits <= lru_hits + 1'b1;
      // lookup request
      lq <= sr[LRU_DEPTH-1];
      if (acc && in.keep && hit_sr && hit_i == ($clog2(LRU_DEPTH+1))'(LRU_DEPTH-1) && mode != GRP_DISTINCT)
        lq.agg <= agg_merge(sr[LRU_DEPTH-1].agg, in_agg);
      for (int t = 0; t < NTAB; t++) lq_idx[t] <= hsh(sr[LRU_DEPTH-1].key, t);
      // response: merge into an entry in flight between tables
      // background cuckoo moves (an entry found in flight is merged where it lands)
      for (int t = 1; t < NTAB; t++) ev[t] <= ev_nx[t];
      if (lq.v && found) table_hits <= table_hits + 1'b1;
      // valid bits
      if (rw_en) tv[rw_t][lq_idx[rw_t]] <= 1'b1;
      for (int t = 1; t < NTAB; t++)
        if (ev[t].v) tv[t][hsh(ev[t].key, t)] <= 1'b1;
      if (ev_nx[1].v) evictions <= evictions + 1'b1;
      if (cb_push) begin
        collisions <= collisions + 1'b1;
        if (!cb_ready) coll_lost <= 1'b1;
      end
      // control
      unique case (st)
        S_RUN:     if (acc && in.last) st <= S_DRAIN;
        S_DRAIN:   if (sr_empty && ev_empty)
                     st <= (mode == GRP_DISTINCT) ? S_FLUSH_C : S_FLUSH_G;
        S_FLUSH_G: begin
          if (gq_valid && gq_pop)
            for (int t = 0; t < NTAB; t++) if (fh[t]) tv[t][fidx[t]] <= 1'b0;
          if (!gq_valid) st <= S_FLUSH_C;
        end
        S_FLUSH_C: if (!cb_valid) st <= S_END;
        S_END:     if (oq_in_ready) st <= S_CLEAR;
        S_CLEAR: begin
          tv <= '0;
          st <= S_RUN;
        end
        default:   st <= S_RUN;
      endcase
    end
  end

endmodule
