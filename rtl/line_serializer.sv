// line_serializer: turns lines of up to NCH 64-byte words (as delivered by
// the striped memory stack) into a stream of single words, one per clock.
// `in_keep` says how many words of the line are valid; `in_last` on a line
// becomes `out_last` on its final word. A line is released once its last
// valid word is taken. Helper of the dynamic region (bypass path and the
// non-vectorized operator pipeline).
module line_serializer
  import fv_pkg::*;
#(
  parameter int unsigned NCH = 2
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        in_valid,
  output logic                        in_ready,
  input  logic [NCH-1:0][WORD_W-1:0]  in_data,
  input  logic [$clog2(NCH):0]        in_keep,
  input  logic                        in_last,
  output logic                        out_valid,
  input  logic                        out_ready,
  output word_t                       out_data,
  output logic                        out_last
);
  localparam int unsigned PW = $clog2(NCH) + 1;
  logic [PW-1:0] p;
  logic          fin;
  assign fin       = (p + 1'b1 >= PW'(in_keep));
  assign out_valid = in_valid && in_keep != '0;
  assign out_data  = in_data[p[PW-1:0] % NCH];
  assign out_last  = in_last && fin;
  assign in_ready  = out_ready && fin;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) p <= '0;
    else if (out_valid && out_ready) p <= fin ? '0 : p + 1'b1;
  end
endmodule
