// rr_combiner: merges the parallel lanes of the vectorized model.
//
// With vectorization a region runs NL copies of the stateless front of the
// pipeline (projection and selection), each fed from one memory channel's
// share of every line. Before the stateful stages the lanes are merged by a
// simple round-robin arbiter, as the paper describes for the packing stage.
// Items with keep = 0 are dropped here; each lane ends a stream with an
// item whose last flag is set, and the combiner emits a single last marker
// (keep = 0) once every lane has delivered its own (this end-of-stream
// handling is this design's choice). When `vec_en` is low only lane 0 is
// used. Output: up to one item per clock, combinational from the inputs.
module rr_combiner
  import fv_pkg::*;
#(
  parameter int unsigned NL = 2
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  vec_en,
  input  logic [NL-1:0]         in_valid,
  output logic [NL-1:0]         in_ready,
  input  titem_t [NL-1:0]       in,
  output logic                  out_valid,
  input  logic                  out_ready,
  output titem_t                out
);
  localparam int unsigned IW = (NL > 1) ? $clog2(NL) : 1;
  logic [NL-1:0] used, done, avail;
  logic [IW-1:0] last_g, g;
  logic          any, all_done;

  assign used     = vec_en ? '1 : NL'(1);
  assign avail    = in_valid & used & ~done;
  assign all_done = ((done | ~used) == '1);

  always_comb begin
    any = 1'b0;
    g   = '0;
    for (int k = 1; k <= NL; k++) begin
      int unsigned i;
      i = (int'(last_g) + k) % NL;
      if (!any && avail[i]) begin
        any = 1'b1;
        g   = IW'(i);
      end
    end
  end

  // the granted item is forwarded if kept, else consumed silently; its last
  // flag only marks its lane done
  titem_t cur;
  logic   fwd;
  assign cur = in[g];
  assign fwd = any && cur.keep;

  always_comb begin
    out_valid = 1'b0;
    out       = cur;
    out.last  = 1'b0;
    in_ready  = '0;
    if (all_done) begin
      out_valid = 1'b1;
      out       = '0;
      out.last  = 1'b1;
    end else if (fwd) begin
      out_valid   = 1'b1;
      in_ready[g] = out_ready;
    end else if (any) begin
      in_ready[g] = 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      done   <= '0;
      last_g <= IW'(NL - 1);
    end else if (all_done) begin
      if (out_ready) done <= '0;
    end else if (any && in_ready[g]) begin
      last_g <= g;
      if (cur.last) done[g] <= 1'b1;
    end
  end
endmodule
