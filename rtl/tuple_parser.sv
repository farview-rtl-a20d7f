// tuple_parser: the projection stage of the operator pipeline.
//
// The data stream from memory is cut into tuples of `tuple_words` 64-byte
// words. The attributes selected by `proj_mask` (one bit per 8-byte
// attribute of the tuple, up to 64) are gathered, in order, into the 8 slots
// of a pipeline tuple, and the annotation bits mark which slots are filled;
// later stages use the annotation (the packer sends only annotated slots).
// With smart addressing the memory returns only the words that hold a
// projected attribute, so the parser places each arriving word at the next
// such word position instead of counting words. One word is taken per
// clock; a tuple leaves one clock after its last word arrives, so 64-byte
// tuples flow at one per clock. An input beat with `in_empty` set carries
// only the end-of-stream flag (used by vectorized lanes that get no word in
// the final line); it produces an item with keep = 0.
// The paper states the function (parse by tuple size, project, annotate);
// gathering into 8 slots is this design's choice, so a query may project at
// most 8 attributes.
module tuple_parser
  import fv_pkg::*;
(
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [3:0]           tuple_words,
  input  logic                 sa_en,
  input  logic [MAX_TCOL-1:0]  proj_mask,
  input  logic                 in_valid,
  output logic                 in_ready,
  input  word_t                in_data,
  input  logic                 in_empty,
  input  logic                 in_last,
  output logic                 out_valid,
  input  logic                 out_ready,
  output titem_t               out
);
  logic [MAX_TW-1:0][WORD_W-1:0] buf_q;
  logic [3:0]                    pos;       // word position of the next beat
  logic [MAX_TW-1:0]             wm;
  logic [3:0]                    wpos, nxt;
  logic                          tuple_done;

  always_comb begin
    for (int i = 0; i < MAX_TW; i++)
      wm[i] = (i < int'(tuple_words)) && (!sa_en || (|proj_mask[i*NCOL +: NCOL]));
  end

  // first wanted position of a tuple
  logic [3:0] first;
  always_comb begin
    logic f;
    f = 1'b0;
    first = '0;
    for (int i = 0; i < MAX_TW; i++)
      if (!f && wm[i]) begin f = 1'b1; first = 4'(i); end
  end

  // position of this beat is pos; next wanted position after it
  assign wpos = (pos == 4'hf) ? first : pos;
  always_comb begin
    logic f;
    f = 1'b0;
    nxt = 4'(MAX_TW);
    for (int i = 0; i < MAX_TW; i++)
      if (!f && i > int'(wpos) && wm[i]) begin f = 1'b1; nxt = 4'(i); end
  end
  assign tuple_done = (nxt >= tuple_words) || (nxt == 4'(MAX_TW));

  // gather the projected attributes of the complete tuple
  tuple_t          g;
  logic [NCOL-1:0] ga;
  always_comb begin
    logic [MAX_TW-1:0][WORD_W-1:0] full;
    logic [MAX_TCOL-1:0][COL_W-1:0] cols;
    int k;
    full = buf_q;
    full[wpos[2:0]] = in_data;
    cols = full;
    g  = '0;
    ga = '0;
    k  = 0;
    for (int i = 0; i < MAX_TCOL; i++) begin
      if (proj_mask[i] && (i / NCOL) < int'(tuple_words) && k < NCOL) begin
        g[k]  = cols[i];
        ga[k] = 1'b1;
        k++;
      end
    end
  end

  logic take;
  assign in_ready = !out_valid || out_ready;
  assign take     = in_valid && in_ready;

  // words of a tuple in progress (data only, no reset needed)
  always_ff @(posedge clk)
    if (take && !in_empty && !tuple_done) buf_q[wpos[2:0]] <= in_data;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out       <= '0;
      pos       <= 4'hf;            // marks "start of tuple"
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (take) begin
        if (in_empty) begin
          out_valid <= 1'b1;
          out       <= '{col: '0, ann: '0, keep: 1'b0, last: in_last};
          pos       <= 4'hf;
        end else if (tuple_done) begin
          out_valid <= 1'b1;
          out       <= '{col: g, ann: ga, keep: 1'b1, last: in_last};
          pos       <= 4'hf;
        end else begin
          pos <= nxt;
        end
      end
    end
  end

endmodule
