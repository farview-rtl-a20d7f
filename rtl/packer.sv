// packer: packs the annotated attributes of the result tuples into 64-byte
// words for the network (the "Packing" stage).
//
// Each kept item contributes the attributes in its annotated slots, in slot
// order. They are appended to an overflow buffer of up to 7 attributes; as
// soon as 8 are available a full 64-byte word goes out and the rest stays in
// the buffer, so the stage keeps up with one tuple per clock. At the end of
// the stream the partial word is sent with its byte count and the last flag
// (a stream with no result bytes ends with an empty last word). Attribute k
// of a word occupies bits [64k+63:64k]. The paper describes the function and
// the overflow buffer; the word format is this design's choice.
module packer
  import fv_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_valid,
  output logic        in_ready,
  input  titem_t      in,
  output logic        out_valid,
  input  logic        out_ready,
  output word_t       out_data,
  output logic [6:0]  out_bytes,
  output logic        out_last
);
  logic [NCOL-2:0][COL_W-1:0] ob;        // overflow buffer
  logic [2:0]                 cnt;       // attributes in it
  logic                       tail;      // a final partial word is owed

  // attributes of the incoming item, compacted
  logic [NCOL-1:0][COL_W-1:0] nc;
  logic [3:0]                 nn;
  always_comb begin
    nc = '0;
    nn = '0;
    if (in.keep)
      for (int i = 0; i < NCOL; i++)
        if (in.ann[i]) begin
          nc[nn[2:0]] = in.col[i];
          nn = nn + 1'b1;
        end
  end

  // buffer followed by the new attributes
  logic [2*NCOL-1:0][COL_W-1:0] cat;
  logic [4:0]                   tot;
  always_comb begin
    cat = '0;
    for (int i = 0; i < NCOL - 1; i++) if (i < int'(cnt)) cat[i] = ob[i];
    for (int i = 0; i < NCOL; i++) if (i < int'(nn)) cat[int'(cnt) + i] = nc[i];
    tot = 5'(cnt) + 5'(nn);
  end

  assign in_ready = (!out_valid || out_ready) && !tail;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0; out_data <= '0; out_bytes <= '0; out_last <= 1'b0;
      ob <= '0; cnt <= '0; tail <= 1'b0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (tail && (!out_valid || out_ready)) begin
        out_valid <= 1'b1;
        out_data  <= word_t'(ob);
        out_bytes <= 7'(cnt) << 3;
        out_last  <= 1'b1;
        cnt       <= '0;
        tail      <= 1'b0;
      end else if (in_valid && in_ready) begin
        if (tot >= 5'(NCOL)) begin
          out_valid <= 1'b1;
          out_data  <= cat[NCOL-1:0];
          out_bytes <= 7'(WORD_B);
          out_last  <= in.last && (tot == 5'(NCOL));
          for (int i = 0; i < NCOL - 1; i++) ob[i] <= cat[NCOL + i];
          cnt       <= 3'(tot - 5'(NCOL));
          tail      <= in.last && (tot != 5'(NCOL));
        end else if (in.last) begin
          out_valid <= 1'b1;
          out_data  <= cat[NCOL-1:0];
          out_bytes <= 7'(tot) << 3;
          out_last  <= 1'b1;
          cnt       <= '0;
        end else begin
          for (int i = 0; i < NCOL - 1; i++) ob[i] <= cat[i];
          cnt <= 3'(tot);
        end
      end
    end
  end
endmodule
