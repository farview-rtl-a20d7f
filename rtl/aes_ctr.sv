// aes_ctr: 128-bit AES in counter mode on the memory read stream (the
// "Decryption" stage of the operator pipeline).
//
// Farview stores data encrypted and decrypts it as it streams out of memory;
// the paper uses AES-128 in counter mode, fully parallel and pipelined so it
// runs at the full data rate. Each beat carries NBLK 128-bit blocks (4 per
// 64-byte word). Block j of the stream is XORed with AES_k(iv + j); counter
// mode is its own inverse, so the same stage encrypts. The AES rounds are
// unrolled into 10 pipeline stages with one AES core per block lane, so one
// beat is accepted every clock and the latency is 11 clocks. Round keys are
// expanded in one clock when `key_load` is pulsed (before the first beat of
// a request). With `en` low the data passes unchanged (same latency).
// Inside a lane, AES byte 0 is the most significant byte of the lane and
// lane k is bits [128k+127:128k] of the beat: this byte order and the
// counter (a position in the stream, not an address) are this design's
// choices. The S-box is the FIPS-197 table held as a constant (one
// 256-entry ROM per byte of state; in an FPGA these map to LUTs or BRAM).
module aes_ctr
  import fv_pkg::*;
#(
  parameter int unsigned NBLK = 8
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   key_load,
  input  logic [127:0]           key,
  input  logic [127:0]           iv,
  input  logic                   en,
  input  logic                   in_valid,
  output logic                   in_ready,
  input  logic [NBLK*128-1:0]    in_data,
  input  logic [7:0]             in_user,     // side band carried along
  input  logic                   in_last,     // last beat: counter restarts
  output logic                   out_valid,
  input  logic                   out_ready,
  output logic [NBLK*128-1:0]    out_data,
  output logic [7:0]             out_user,
  output logic                   out_last
);
  localparam int unsigned NST = 11;

  // ---------------------------------------------------------------- S-box
  // FIPS-197 S-box, row-major (index = input byte)
  localparam logic [7:0] SBOX [256] = '{
    8'h63, 8'h7c, 8'h77, 8'h7b, 8'hf2, 8'h6b, 8'h6f, 8'hc5, 8'h30, 8'h01, 8'h67, 8'h2b, 8'hfe, 8'hd7, 8'hab, 8'h76,
    8'hca, 8'h82, 8'hc9, 8'h7d, 8'hfa, 8'h59, 8'h47, 8'hf0, 8'had, 8'hd4, 8'ha2, 8'haf, 8'h9c, 8'ha4, 8'h72, 8'hc0,
    8'hb7, 8'hfd, 8'h93, 8'h26, 8'h36, 8'h3f, 8'hf7, 8'hcc, 8'h34, 8'ha5, 8'he5, 8'hf1, 8'h71, 8'hd8, 8'h31, 8'h15,
    8'h04, 8'hc7, 8'h23, 8'hc3, 8'h18, 8'h96, 8'h05, 8'h9a, 8'h07, 8'h12, 8'h80, 8'he2, 8'heb, 8'h27, 8'hb2, 8'h75,
    8'h09, 8'h83, 8'h2c, 8'h1a, 8'h1b, 8'h6e, 8'h5a, 8'ha0, 8'h52, 8'h3b, 8'hd6, 8'hb3, 8'h29, 8'he3, 8'h2f, 8'h84,
    8'h53, 8'hd1, 8'h00, 8'hed, 8'h20, 8'hfc, 8'hb1, 8'h5b, 8'h6a, 8'hcb, 8'hbe, 8'h39, 8'h4a, 8'h4c, 8'h58, 8'hcf,
    8'hd0, 8'hef, 8'haa, 8'hfb, 8'h43, 8'h4d, 8'h33, 8'h85, 8'h45, 8'hf9, 8'h02, 8'h7f, 8'h50, 8'h3c, 8'h9f, 8'ha8,
    8'h51, 8'ha3, 8'h40, 8'h8f, 8'h92, 8'h9d, 8'h38, 8'hf5, 8'hbc, 8'hb6, 8'hda, 8'h21, 8'h10, 8'hff, 8'hf3, 8'hd2,
    8'hcd, 8'h0c, 8'h13, 8'hec, 8'h5f, 8'h97, 8'h44, 8'h17, 8'hc4, 8'ha7, 8'h7e, 8'h3d, 8'h64, 8'h5d, 8'h19, 8'h73,
    8'h60, 8'h81, 8'h4f, 8'hdc, 8'h22, 8'h2a, 8'h90, 8'h88, 8'h46, 8'hee, 8'hb8, 8'h14, 8'hde, 8'h5e, 8'h0b, 8'hdb,
    8'he0, 8'h32, 8'h3a, 8'h0a, 8'h49, 8'h06, 8'h24, 8'h5c, 8'hc2, 8'hd3, 8'hac, 8'h62, 8'h91, 8'h95, 8'he4, 8'h79,
    8'he7, 8'hc8, 8'h37, 8'h6d, 8'h8d, 8'hd5, 8'h4e, 8'ha9, 8'h6c, 8'h56, 8'hf4, 8'hea, 8'h65, 8'h7a, 8'hae, 8'h08,
    8'hba, 8'h78, 8'h25, 8'h2e, 8'h1c, 8'ha6, 8'hb4, 8'hc6, 8'he8, 8'hdd, 8'h74, 8'h1f, 8'h4b, 8'hbd, 8'h8b, 8'h8a,
    8'h70, 8'h3e, 8'hb5, 8'h66, 8'h48, 8'h03, 8'hf6, 8'h0e, 8'h61, 8'h35, 8'h57, 8'hb9, 8'h86, 8'hc1, 8'h1d, 8'h9e,
    8'he1, 8'hf8, 8'h98, 8'h11, 8'h69, 8'hd9, 8'h8e, 8'h94, 8'h9b, 8'h1e, 8'h87, 8'he9, 8'hce, 8'h55, 8'h28, 8'hdf,
    8'h8c, 8'ha1, 8'h89, 8'h0d, 8'hbf, 8'he6, 8'h42, 8'h68, 8'h41, 8'h99, 8'h2d, 8'h0f, 8'hb0, 8'h54, 8'hbb, 8'h16
  };

  // ---------------------------------------------------------------- round
  function automatic logic [7:0] xt(logic [7:0] a);
    return {a[6:0], 1'b0} ^ (a[7] ? 8'h1b : 8'h00);
  endfunction

  function automatic logic [127:0] aes_round(logic [127:0] s, logic [127:0] rk, logic final_rnd);
    logic [7:0] b [16];
    logic [7:0] t [16];
    logic [127:0] o;
    for (int i = 0; i < 16; i++) b[i] = SBOX[s[127 - 8*i -: 8]];
    // ShiftRows: byte (row r, column c) is index r + 4c
    for (int c = 0; c < 4; c++)
      for (int r = 0; r < 4; r++)
        t[r + 4*c] = b[r + 4*((c + r) % 4)];
    for (int c = 0; c < 4; c++) begin
      logic [7:0] a0, a1, a2, a3;
      a0 = t[4*c]; a1 = t[4*c+1]; a2 = t[4*c+2]; a3 = t[4*c+3];
      if (!final_rnd) begin
        t[4*c]   = xt(a0) ^ xt(a1) ^ a1 ^ a2 ^ a3;
        t[4*c+1] = a0 ^ xt(a1) ^ xt(a2) ^ a2 ^ a3;
        t[4*c+2] = a0 ^ a1 ^ xt(a2) ^ xt(a3) ^ a3;
        t[4*c+3] = xt(a0) ^ a0 ^ a1 ^ a2 ^ xt(a3);
      end
    end
    for (int i = 0; i < 16; i++) o[127 - 8*i -: 8] = t[i];
    return o ^ rk;
  endfunction

  // ---------------------------------------------------------------- keys
  logic [10:0][127:0] rk, rk_nx;
  always_comb begin
    logic [31:0] w [44];
    logic [7:0]  rc;
    for (int i = 0; i < 4; i++) w[i] = key[127 - 32*i -: 32];
    rc = 8'h01;
    for (int i = 4; i < 44; i++) begin
      logic [31:0] tmp;
      tmp = w[i-1];
      if (i % 4 == 0) begin
        tmp = {SBOX[tmp[23:16]], SBOX[tmp[15:8]], SBOX[tmp[7:0]], SBOX[tmp[31:24]]} ^ {rc, 24'h0};
        rc  = xt(rc);
      end
      w[i] = w[i-4] ^ tmp;
    end
    for (int r = 0; r <= 10; r++) rk_nx[r] = {w[4*r], w[4*r+1], w[4*r+2], w[4*r+3]};
  end

  logic [127:0] ctr;
  logic         en_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rk <= '0; ctr <= '0; en_q <= 1'b0;
    end else if (key_load) begin
      rk <= rk_nx; ctr <= iv; en_q <= en;
    end else if (in_valid && in_ready) begin
      ctr <= in_last ? iv : ctr + 128'(NBLK);
    end
  end

  // ---------------------------------------------------------------- pipeline
  // stage 0 whitens the counter blocks, stages 1..10 are the AES rounds
  logic [NST-1:0] v;
  logic           adv;

  assign adv      = !v[NST-1] || out_ready;
  assign in_ready = adv;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) v <= '0;
    else if (adv) v <= {v[NST-2:0], in_valid};
  end

  for (genvar s = 0; s < NST; s++) begin : g_st
    logic [NBLK-1:0][127:0] ks;
    logic [NBLK*128-1:0]    d;
    logic [7:0]             u;
    logic                   l;
    if (s == 0) begin : g_first
      always_ff @(posedge clk) begin
        if (adv) begin
          for (int k = 0; k < NBLK; k++) ks[k] <= (ctr + 128'(k)) ^ rk[0];
          d <= in_data; u <= in_user; l <= in_last;
        end
      end
    end else begin : g_round
      always_ff @(posedge clk) begin
        if (adv) begin
          for (int k = 0; k < NBLK; k++) ks[k] <= aes_round(g_st[s-1].ks[k], rk[s], s == NST - 1);
          d <= g_st[s-1].d; u <= g_st[s-1].u; l <= g_st[s-1].l;
        end
      end
    end
  end

  assign out_valid = v[NST-1];
  assign out_data  = en_q ? (g_st[NST-1].d ^ g_st[NST-1].ks) : g_st[NST-1].d;
  assign out_user  = g_st[NST-1].u;
  assign out_last  = g_st[NST-1].l;
endmodule
