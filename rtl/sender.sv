// sender: turns the queue of packed result words into RDMA write commands
// (the "Sending" stage, the last step before the network stack).
//
// Result words are written into a queue. The sender watches its fill level:
// whenever a full packet (PKT_WORDS words, 1 kB by default, the packet size
// of the paper's measurements) is waiting, or the end of the result is in
// the queue, it issues one command (remote address, byte length, last flag)
// and then streams that many words. The remote address starts at the
// client's result buffer address and advances by the bytes sent, so the
// final result size need not be known in advance. An empty final word
// (result size a multiple of 64 bytes, or an empty result) is consumed
// without being sent. `rd_resp` marks commands that answer a plain RDMA
// read rather than a Farview request. `done` pulses when the command with
// the last flag has had all its data sent. Queue depth and command format
// are this design's choices.
module sender
  import fv_pkg::*;
#(
  parameter int unsigned PKT_WORDS = 16,
  parameter int unsigned QD        = 64
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [63:0]       base_vaddr,
  input  logic              rd_resp,
  input  logic              in_valid,
  output logic              in_ready,
  input  word_t             in_data,
  input  logic [6:0]        in_bytes,
  input  logic              in_last,
  output logic              cmd_valid,
  input  logic              cmd_ready,
  output rdma_cmd_t         cmd,
  output logic              out_valid,
  input  logic              out_ready,
  output word_t             out_data,
  output logic              out_last,   // last word of a packet
  output logic              done
);
  localparam int unsigned CW = $clog2(QD) + 1;
  logic [CW-1:0]  qcnt, avail;          // words queued / not yet commanded
  logic           seen_last;            // the end of the result is queued
  logic [6:0]     last_bytes;
  logic [63:0]    off;
  logic [CW-1:0]  left;                 // words still to stream for the command
  logic           cur_last, streaming;
  logic           q_valid, q_pop;
  logic [WORD_W+7:0] q_out;

  fv_fifo #(.WIDTH(WORD_W + 8), .DEPTH(QD)) u_q (
    .clk, .rst_n, .in_valid, .in_ready, .in_data({in_last, in_bytes, in_data}),
    .out_valid(q_valid), .out_ready(q_pop), .out_data(q_out), .count(qcnt));

  logic          fire_full, fire_end;
  logic [CW-1:0] k;
  assign fire_full = !streaming && (avail >= CW'(PKT_WORDS)) &&
                     !(seen_last && avail == CW'(PKT_WORDS));
  assign fire_end  = !streaming && seen_last && (avail <= CW'(PKT_WORDS));
  assign k         = fire_full ? CW'(PKT_WORDS) : avail;

  assign cmd_valid  = fire_full || fire_end;
  assign cmd.vaddr  = base_vaddr + off;
  assign cmd.len    = fire_full ? LEN_W'(PKT_WORDS * WORD_B)
                                : (LEN_W'(k - 1'b1) << 6) + LEN_W'(last_bytes);
  assign cmd.last   = fire_end;
  assign cmd.rd_resp = rd_resp;

  // stream: the final empty word is dropped
  logic drop;
  assign drop      = streaming && cur_last && left == CW'(1) && q_out[WORD_W +: 7] == '0;
  assign out_valid = streaming && q_valid && !drop;
  assign out_data  = q_out[WORD_W-1:0];
  assign out_last  = (left == CW'(1)) || (cur_last && left == CW'(2) && last_bytes == '0);
  assign q_pop     = streaming && q_valid && (drop || out_ready);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      avail <= '0; seen_last <= 1'b0; last_bytes <= '0; off <= '0;
      left <= '0; cur_last <= 1'b0; streaming <= 1'b0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      avail <= avail + CW'(in_valid && in_ready) - ((cmd_valid && cmd_ready) ? k : '0);
      if (in_valid && in_ready && in_last) begin
        seen_last  <= 1'b1;
        last_bytes <= in_bytes;
      end
      if (cmd_valid && cmd_ready) begin
        streaming <= 1'b1;
        left      <= k;
        cur_last  <= fire_end;
        off       <= off + 64'(cmd.len);
        if (fire_end) seen_last <= 1'b0;
      end else if (q_pop) begin
        left <= left - 1'b1;
        if (left == CW'(1)) begin
          streaming <= 1'b0;
          if (cur_last) begin
            done <= 1'b1;
            off  <= '0;
          end
        end
      end
    end
  end
endmodule
