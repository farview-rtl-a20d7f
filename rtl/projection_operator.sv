// projection_operator: request side of a dynamic region ("Projection
// operator (Smart addressing)" in the operator pipeline figure).
//
// A Farview request names a table (virtual address, length) and carries the
// parameters of the whole operator pipeline. This operator hands the
// parameters on to the region's parameter queues and turns the table into
// read requests to the memory stack:
//  * Sequential mode (sa_en = 0): the table is read whole, in requests of
//    REQ_B bytes; projection then happens on the data stream.
//  * Smart addressing (sa_en = 1): for every tuple only the 64-byte words
//    that hold at least one projected attribute are read, and neighbouring
//    words are merged into a single request. This wins for wide tuples with
//    few projected attributes.
// The last request of a table is flagged so the region can mark the end of
// the data stream. One request is produced per clock. A new Farview request
// is taken only when `free` says the previous one has left the pipeline.
// The word-merging rule follows the authors' notes on smart addressing; the
// request size REQ_B is this design's choice.
module projection_operator
  import fv_pkg::*;
#(
  parameter int unsigned REQ_B = 4096
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        free,
  // Farview request
  input  logic        fv_valid,
  output logic        fv_ready,
  input  fv_params_t  fv,
  // parameters to the queues
  output logic        par_valid,
  input  logic        par_ready,
  output fv_params_t  par,
  // memory read requests
  output logic        mreq_valid,
  input  logic        mreq_ready,
  output mem_req_t    mreq,
  output logic        mreq_last
);
  typedef enum logic [1:0] {S_IDLE, S_PAR, S_SEQ, S_SA} state_e;
  state_e           st;
  fv_params_t       q;
  logic [VA_W-1:0]  addr, tend, tbase;
  logic [3:0]       w;             // next word of the current tuple to look at
  logic [MAX_TW-1:0] wm;           // words holding projected attributes

  always_comb begin
    for (int i = 0; i < MAX_TW; i++)
      wm[i] = (i < int'(q.tuple_words)) && (|q.proj_mask[i*NCOL +: NCOL]);
  end

  // next run of wanted words at or after w: start s, length n
  logic [3:0] s, n;
  logic       found;
  always_comb begin
    logic run;
    s = '0; n = '0; found = 1'b0; run = 1'b0;
    for (int i = 0; i < MAX_TW; i++) begin
      if (i >= int'(w) && wm[i] && !found) begin
        found = 1'b1; run = 1'b1; s = 4'(i);
      end
      if (run) begin
        if (wm[i]) n = n + 1'b1;
        else       run = 1'b0;
      end
    end
  end

  logic [VA_W-1:0] tstride, rem;
  logic            tuple_end, table_end;
  assign tstride   = VA_W'(q.tuple_words) << 6;
  assign rem       = tend - addr;
  // smart addressing: is this run the last of its tuple / of the table?
  always_comb begin
    logic more;
    more = 1'b0;
    for (int i = 0; i < MAX_TW; i++)
      if (i >= int'(s) + int'(n) && wm[i]) more = 1'b1;
    tuple_end = !more;
  end
  assign table_end = (tbase + tstride >= tend);

  assign fv_ready  = (st == S_IDLE) && free;
  assign par_valid = (st == S_PAR);
  assign par       = q;

  always_comb begin
    mreq       = '0;
    mreq_valid = 1'b0;
    mreq_last  = 1'b0;
    if (st == S_SEQ) begin
      mreq_valid = 1'b1;
      mreq.addr  = addr;
      mreq.len   = (rem > VA_W'(REQ_B)) ? LEN_W'(REQ_B) : LEN_W'(rem);
      mreq_last  = (rem <= VA_W'(REQ_B));
    end else if (st == S_SA) begin
      mreq_valid = found;
      mreq.addr  = tbase + (VA_W'(s) << 6);
      mreq.len   = LEN_W'(n) << 6;
      mreq_last  = tuple_end && table_end;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; q <= '0; addr <= '0; tend <= '0; tbase <= '0; w <= '0;
    end else begin
      unique case (st)
        S_IDLE: if (fv_valid && fv_ready) begin
          q     <= fv;
          addr  <= fv.vaddr;
          tbase <= fv.vaddr;
          tend  <= fv.vaddr + VA_W'(fv.len);
          w     <= '0;
          st    <= S_PAR;
        end
        S_PAR: if (par_ready) st <= q.sa_en ? S_SA : S_SEQ;
        S_SEQ: if (mreq_ready) begin
          addr <= addr + VA_W'(mreq.len);
          if (mreq_last) st <= S_IDLE;
        end
        S_SA: if (!found || mreq_ready) begin
          // a tuple with no wanted word cannot happen (mask checked by host)
          if (!found || tuple_end) begin
            w     <= '0;
            tbase <= tbase + tstride;
            if (table_end) st <= S_IDLE;
          end else begin
            w <= s + n;
          end
        end
        default: st <= S_IDLE;
      endcase
    end
  end
endmodule
