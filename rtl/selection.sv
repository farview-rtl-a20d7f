// selection: predicate selection stage of the operator pipeline.
//
// Each of the NPRED predicates compares one annotated slot of the tuple with
// a constant from the request (<, <=, >, >=, =, <>), reading the attribute
// as an unsigned or signed 64-bit integer or as an IEEE double. Enabled
// predicates are ANDed, as in the paper's evaluation query
// "WHERE S.a < X AND S.b < Y". A tuple that fails has its keep flag
// cleared; end-of-stream flags always pass. One tuple per clock, one clock
// of latency. The paper hard-wires a predicate circuit per query; here the
// comparison operator and type are run-time parameters so one circuit
// serves all queries (this design's choice).
module selection
  import fv_pkg::*;
(
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic [NPRED-1:0]              pred_en,
  input  logic [NPRED-1:0][$bits(pred_t)-1:0] pred,
  input  logic                          in_valid,
  output logic                          in_ready,
  input  titem_t                        in,
  output logic                          out_valid,
  input  logic                          out_ready,
  output titem_t                        out
);
  logic pass;
  always_comb begin
    pass = 1'b1;
    for (int i = 0; i < NPRED; i++) begin
      pred_t p;
      p = pred_t'(pred[i]);
      if (pred_en[i] && !cmp_eval(in.col[p.col], p.value, p.op, p.ty)) pass = 1'b0;
    end
  end

  assign in_ready = !out_valid || out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out       <= '0;
    end else if (in_ready) begin
      out_valid <= in_valid;
      if (in_valid) begin
        out      <= in;
        out.keep <= in.keep && pass;
      end
    end
  end
endmodule
