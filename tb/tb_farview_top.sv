// tb_farview_top: end-to-end test of the Farview node at its default size
// (6 regions, 2 memory channels, 4 x 4096-entry grouping tables).
//
// The DRAM channels are the behavioural dram_model; the network side is
// modelled by driving requests into the rx ports and collecting the tx
// commands and payload into a per-region client buffer. Scenarios:
//  1. plain RDMA write then plain RDMA read back (bypass path)
//  2. selection "a < X AND b < Y" on 64-byte tuples, scalar and vectorized,
//     result compared tuple by tuple, with a throughput bound
//  3. projection of 3 attributes from 256-byte tuples with smart addressing
//  4. decryption: a table is read through AES-CTR, the result written back
//     and read through AES-CTR again, which must give the original
//  5. group by with SUM / COUNT
//  6. distinct on six regions at once, under random tx back-pressure
//  7. access to an unmapped page raises the region's fault flag
// Each mechanism seen is counted and reported.
module tb_farview_top;
  import fv_pkg::*;
  localparam int NREG = 6, NCH = 2;

  logic clk = 1'b0, rst_n = 1'b0;
  always #2 clk = ~clk;

  int checks = 0, failures = 0;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // ------------------------------------------------------------ DUT
  logic tlb_wr_en = 0, tlb_wr_valid = 0, qp_wr_en = 0;
  logic [VA_W-PAGE_B-1:0] tlb_wr_vpn = '0;
  logic [2:0] tlb_wr_rid = '0, qp_wr_rid = '0;
  logic [PA_W-PAGE_B-1:0] tlb_wr_ppn = '0;
  logic [5:0] qp_wr_qpn = '0;
  logic rx_req_valid = 0, rx_req_ready, rx_wvalid = 0, rx_wready;
  net_req_t rx_req = '0;
  word_t rx_wdata = '0;
  logic tx_cmd_valid, tx_cmd_ready, tx_valid, tx_ready, tx_last;
  rdma_cmd_t tx_cmd;
  logic [2:0] tx_rid;
  word_t tx_data;
  logic [NCH-1:0] mc_req_valid, mc_req_ready, mc_wvalid, mc_wready, mc_rvalid, mc_rready;
  ch_req_t [NCH-1:0] mc_req;
  logic [NCH-1:0][WORD_W-1:0] mc_wdata, mc_rdata;
  logic [NREG-1:0] fault;
  logic [31:0] st_fv_done, st_base_rd, st_base_wr, st_vec_lines, st_dec_lines, st_filtered,
               st_lru_hits, st_table_hits, st_evictions, st_collisions;

  farview_top dut (.*);
  dram_model #(.NCH(NCH), .LAT(20)) u_dram (.*);

  // ------------------------------------------------------------ client side
  logic [WORD_W-1:0] cmem [longint];
  longint rx_bytes [NREG];
  int     rx_last [NREG];
  int     n_pkts = 0, n_rd_resp = 0, n_stall = 0;
  bit     bp_en = 0;
  logic [63:0] cur_va;
  logic [2:0]  cur_rid;
  int          cur_k;
  bit          cur_last;
  bit          in_pkt = 0;

  assign tx_cmd_ready = !in_pkt;
  always @(posedge clk) tx_ready <= bp_en ? ($urandom % 4 != 0) : 1'b1;

  always @(posedge clk) begin
    if (tx_valid && !tx_ready) n_stall++;
    if (tx_cmd_valid && tx_cmd_ready) begin
      n_pkts++;
      if (tx_cmd.rd_resp) n_rd_resp++;
      rx_bytes[tx_rid] += longint'(tx_cmd.len);
      if (tx_cmd.last && tx_cmd.len == 0) rx_last[tx_rid]++;
      cur_va = tx_cmd.vaddr; cur_rid = tx_rid; cur_k = 0; cur_last = tx_cmd.last;
      in_pkt <= (tx_cmd.len != 0);
    end else if (tx_valid && tx_ready) begin
      cmem[(longint'(cur_rid) << 48) | longint'(cur_va >> 6) + cur_k] = tx_data;
      cur_k++;
      if (tx_last) begin
        in_pkt <= 0;
        if (cur_last) rx_last[cur_rid]++;
      end
    end
  end

  function automatic logic [63:0] cattr(int rid, longint va, longint k);
    longint w;
    w = (longint'(rid) << 48) | ((va >> 6) + (k / 8));
    return cmem.exists(w) ? cmem[w][(k % 8) * 64 +: 64] : 64'hdead;
  endfunction

  // ------------------------------------------------------------ helpers
  // region r, virtual page v -> physical page 8r + v; queue pair q -> region q
  function automatic longint paddr(int r, longint va);
    return (longint'(8 * r + (va >> 21)) << 21) | (va & 64'h1fffff);
  endfunction
  task automatic poke(int r, longint va, logic [WORD_W-1:0] w);
    u_dram.mem[paddr(r, va) >> 6] = w;
  endtask
  task automatic send(net_req_t q);
    @(negedge clk);
    rx_req = q; rx_req_valid = 1;
    do @(posedge clk); while (!rx_req_ready);
    @(negedge clk); rx_req_valid = 0;
  endtask
  task automatic wait_last(int r, int n);
    while (rx_last[r] < n) @(posedge clk);
  endtask
  function automatic pred_t mkpred(int col, cmp_op_e op, longint v);
    pred_t p;
    p = '{col: 3'(col), op: op, ty: TY_UINT, value: v};
    return p;
  endfunction
  function automatic net_req_t fvq(int r, longint va, longint len, longint cva);
    net_req_t q;
    q = '0;
    q.op = OP_FARVIEW; q.qpn = 24'(r);
    q.fv.vaddr = va; q.fv.len = 32'(len); q.fv.tuple_words = 4'd1;
    q.fv.proj_mask = 64'hff; q.fv.client_vaddr = cva; q.fv.grp_mode = GRP_NONE;
    return q;
  endfunction

  // ------------------------------------------------------------ tests
  logic [63:0] tab [int][8];
  int nexp, ngot, ok;
  longint t0, t1, tsc, tvec;
  net_req_t q;

  initial begin
    for (int r = 0; r < NREG; r++) begin rx_bytes[r] = 0; rx_last[r] = 0; end
    repeat (5) @(posedge clk);
    rst_n = 1;
    // TLB: two pages per region; queue pairs 0..5 -> regions 0..5
    for (int r = 0; r < NREG; r++)
      for (int v = 0; v < 2; v++) begin
        @(negedge clk);
        tlb_wr_en = 1; tlb_wr_vpn = 27'(v); tlb_wr_rid = 3'(r); tlb_wr_ppn = 15'(8 * r + v); tlb_wr_valid = 1;
      end
    for (int r = 0; r < NREG; r++) begin
      @(negedge clk);
      tlb_wr_en = 0; qp_wr_en = 1; qp_wr_qpn = 6'(r); qp_wr_rid = 3'(r);
    end
    @(negedge clk); qp_wr_en = 0;

    // ---- 1. plain write, plain read (region 1), crossing a page boundary
    begin
      logic [WORD_W-1:0] wv [16];
      longint va;
      va = 64'h1ffe00; // 8 words b4 the page end
      for (int i = 0; i < 16; i++) wv[i] = {16{$urandom}};
      q = '0; q.op = OP_WRITE; q.qpn = 1; q.vaddr = 48'(va); q.len = 32'(16 * 64);
      fork
        send(q);
        begin
          for (int i = 0; i < 16; i++) begin
            @(negedge clk); rx_wdata = wv[i]; rx_wvalid = 1;
            do @(posedge clk); while (!rx_wready);
          end
          @(negedge clk); rx_wvalid = 0;
        end
      join
      repeat (100) @(posedge clk);
      ok = 1;
      for (int i = 0; i < 16; i++) if (u_dram.mem[paddr(1, va + 64 * i) >> 6] !== wv[i]) ok = 0;
      check(ok == 1, "plain write lands in the mapped pages");
      q = '0; q.op = OP_READ; q.qpn = 1; q.vaddr = 48'(va); q.len = 32'(16 * 64); q.client_vaddr = 64'h10000;
      send(q);
      wait_last(1, 1);
      ok = 1;
      for (int i = 0; i < 16; i++)
        for (int k = 0; k < 8; k++) if (cattr(1, 64'h10000 + 64 * i, k) !== wv[i][64 * k +: 64]) ok = 0;
      check(ok == 1, "plain read returns the written data");
      check(rx_bytes[1] == 16 * 64, "plain read length");
      check(st_base_wr == 1 && st_base_rd == 1, "bypass request counters");
    end

    // ---- 1b. plain read bandwidth: 32 kB in about one word per clock
    begin
      q = '0; q.op = OP_READ; q.qpn = 3; q.vaddr = 0; q.len = 32768; q.client_vaddr = 64'h0;
      t0 = cyc;
      send(q);
      wait_last(3, 1);
      t1 = cyc;
      $display("plain read 32 kB: %0d clocks", t1 - t0);
      check(t1 - t0 <= 512 + 120, "plain read streams at one 64-byte word per clock");
      check(rx_bytes[3] == 32768, "plain read 32 kB length");
    end

    // ---- 2. selection, 1024 tuples of 64 bytes in region 0
    for (int t = 0; t < 1024; t++) begin
      logic [WORD_W-1:0] w;
      for (int j = 0; j < 8; j++) begin
        tab[t][j] = (j < 2) ? 64'($urandom % 1000) : 64'(t * 8 + j);
        w[64 * j +: 64] = tab[t][j];
      end
      poke(0, 64 * t, w);
    end
    for (int pass = 0; pass < 2; pass++) begin
      longint cva, b4;
      cva = 64'h100000 * (pass + 1);
      b4 = rx_bytes[0];
      q = fvq(0, 0, 1024 * 64, cva);
      q.fv.vec_en = pass[0];
      q.fv.pred_en = 2'b11;
      q.fv.pred[0] = mkpred(0, CMP_LT, 500);
      q.fv.pred[1] = mkpred(1, CMP_LT, 500);
      t0 = cyc;
      send(q);
      wait_last(0, pass + 1);
      t1 = cyc;
      if (pass == 0) tsc = t1 - t0; else tvec = t1 - t0;
      nexp = 0;
      for (int t = 0; t < 1024; t++) if (tab[t][0] < 500 && tab[t][1] < 500) nexp++;
      check(rx_bytes[0] - b4 == 64 * nexp, $sformatf("selection result size (vec=%0d)", pass));
      // scalar order is the table order; vectorized order may interleave
      ok = 1; ngot = 0;
      for (int t = 0; t < 1024; t++)
        if (tab[t][0] < 500 && tab[t][1] < 500) begin
          bit found;
          found = 0;
          if (pass == 0) found = (cattr(0, cva, 8 * ngot + 2) == tab[t][2]);
          else for (int i = 0; i < nexp; i++) if (cattr(0, cva, 8 * i + 2) == tab[t][2]) found = 1;
          if (!found) ok = 0;
          ngot++;
        end
      check(ok == 1, $sformatf("selection result tuples (vec=%0d)", pass));
    end
    $display("selection 1024 tuples: scalar %0d clocks, vectorized %0d clocks", tsc, tvec);
    check(tsc <= 1024 + 200, "scalar selection: one tuple per clock");
    check(tvec <= tsc + 16, "vectorized selection no slower than scalar");
    check(st_vec_lines >= 512, "vectorized lines counted");
    check(st_filtered > 0, "filtered tuples counted");

    // ---- 3. projection with smart addressing: 256 tuples of 256 bytes, region 4
    begin
      longint b4;
      for (int t = 0; t < 256; t++)
        for (int w = 0; w < 4; w++) begin
          logic [WORD_W-1:0] x;
          for (int j = 0; j < 8; j++) x[64 * j +: 64] = 64'(t * 1000 + w * 8 + j);
          poke(4, 256 * t + 64 * w, x);
        end
      for (int sa = 0; sa < 2; sa++) begin
        b4 = rx_bytes[4];
        q = fvq(4, 0, 256 * 256, 64'h200000 * (sa + 1));
        q.fv.tuple_words = 4'd4; q.fv.sa_en = sa[0];
        q.fv.proj_mask = 64'h7 << 17;      // attributes 17..19 (word 2)
        t0 = cyc;
        send(q);
        wait_last(4, sa + 1);
        $display("projection 256 x 256 B (sa=%0d): %0d clocks", sa, cyc - t0);
        check(rx_bytes[4] - b4 == 256 * 24, "projection result size");
        ok = 1;
        for (int t = 0; t < 256; t++)
          for (int k = 0; k < 3; k++)
            if (cattr(4, 64'h200000 * (sa + 1), 3 * t + k) != 64'(t * 1000 + 17 + k)) ok = 0;
        check(ok == 1, $sformatf("projected attributes (sa=%0d)", sa));
        if (sa == 0) tsc = cyc - t0;
        else check(cyc - t0 < tsc, "smart addressing faster than reading whole tuples");
      end
    end

    // ---- 4. decryption round trip, 64 tuples in region 5
    begin
      logic [WORD_W-1:0] orig [64];
      logic [WORD_W-1:0] ct [64];
      int diff;
      for (int t = 0; t < 64; t++) begin
        orig[t] = {16{$urandom}};
        poke(5, 64 * t, orig[t]);
      end
      q = fvq(5, 0, 64 * 64, 64'h300000);
      q.fv.dec_en = 1; q.fv.aes_key = 128'h2b7e151628aed2a6abf7158809cf4f3c; q.fv.aes_iv = 128'h1234;
      send(q);
      wait_last(5, 1);
      diff = 0;
      for (int t = 0; t < 64; t++) begin
        ct[t] = cmem[(longint'(5) << 48) | ((64'h300000 >> 6) + t)];
        if (ct[t] != orig[t]) diff++;
      end
      check(diff == 64, "keystream changes every word");
      q = '0; q.op = OP_WRITE; q.qpn = 5; q.vaddr = 0; q.len = 64 * 64;
      fork
        send(q);
        begin
          for (int i = 0; i < 64; i++) begin
            @(negedge clk); rx_wdata = ct[i]; rx_wvalid = 1;
            do @(posedge clk); while (!rx_wready);
          end
          @(negedge clk); rx_wvalid = 0;
        end
      join
      repeat (100) @(posedge clk);
      q = fvq(5, 0, 64 * 64, 64'h310000);
      q.fv.dec_en = 1; q.fv.aes_key = 128'h2b7e151628aed2a6abf7158809cf4f3c; q.fv.aes_iv = 128'h1234;
      send(q);
      wait_last(5, 2);
      ok = 1;
      for (int t = 0; t < 64; t++)
        if (cmem[(longint'(5) << 48) | ((64'h310000 >> 6) + t)] != orig[t]) ok = 0;
      check(ok == 1, "decrypting the encrypted table gives the original");
      check(st_dec_lines >= 64, "decrypted lines counted");
    end

    // ---- 5. group by a%16 with SUM(b), region 2, 512 tuples
    begin
      longint gs [16];
      int     gc [16];
      for (int g = 0; g < 16; g++) begin gs[g] = 0; gc[g] = 0; end
      for (int t = 0; t < 512; t++) begin
        logic [WORD_W-1:0] w;
        w = '0;
        w[63:0] = 64'($urandom % 16);
        w[127:64] = 64'($urandom % 100000);
        gs[w[3:0]] += longint'(w[127:64]);
        gc[w[3:0]]++;
        poke(2, 64 * t, w);
      end
      q = fvq(2, 0, 512 * 64, 64'h400000);
      q.fv.grp_mode = GRP_GROUPBY; q.fv.key_mask = 8'h01; q.fv.agg_col = 3'd1;
      send(q);
      wait_last(2, 1);
      nexp = 0;
      for (int g = 0; g < 16; g++) if (gc[g] != 0) nexp++;
      check(rx_bytes[2] == 48 * nexp, "group by: one record per group");
      ok = 1;
      for (int i = 0; i < nexp; i++) begin
        int g;
        g = int'(cattr(2, 64'h400000, 6 * i));
        if (g >= 16 || cattr(2, 64'h400000, 6 * i + 2) != 64'(gc[g]) ||
            cattr(2, 64'h400000, 6 * i + 3) != 64'(gs[g])) ok = 0;
      end
      check(ok == 1, "group by: counts and sums");
    end

    // ---- 6. distinct on six regions at once, with back-pressure
    begin
      int exp_d [NREG];
      bit seen [NREG][int];
      int base [NREG];
      bp_en = 1;
      for (int r = 0; r < NREG; r++) begin
        exp_d[r] = 0;
        for (int t = 0; t < 512; t++) begin
          logic [WORD_W-1:0] w;
          w = '0;
          w[63:0] = 64'($urandom % 200);
          if (!seen[r].exists(int'(w[31:0]))) begin seen[r][int'(w[31:0])] = 1; exp_d[r]++; end
          poke(r, 64'h100000 + 64 * t, w);
        end
      end
      for (int r = 0; r < NREG; r++) begin
        rx_bytes[r] = 0; base[r] = rx_last[r];
        q = fvq(r, 64'h100000, 512 * 64, 64'h500000);
        q.fv.grp_mode = GRP_DISTINCT; q.fv.key_mask = 8'h01;
        send(q);
      end
      for (int r = 0; r < NREG; r++) begin
        wait_last(r, base[r] + 1);
      end
      repeat (200) @(posedge clk);
      for (int r = 0; r < NREG; r++) begin
        // distinct returns each first-seen tuple whole (64 bytes)
        ok = (rx_bytes[r] == 64 * exp_d[r]);
        for (int i = 0; i < exp_d[r]; i++)
          if (!seen[r].exists(int'(cattr(r, 64'h500000, 8 * i)))) ok = 0;
        check(ok == 1, $sformatf("distinct values of region %0d", r));
      end
      bp_en = 0;
      check(n_stall > 0, "transmit back-pressure exercised");
      check(st_lru_hits > 0 && st_table_hits > 0, "LRU and table hits counted");
    end

    // ---- 7. unmapped page
    begin
      q = '0; q.op = OP_READ; q.qpn = 0; q.vaddr = 48'h40000000; q.len = 64; q.client_vaddr = 0;
      send(q);
      repeat (50) @(posedge clk);
      check(fault[0] == 1'b1, "unmapped access raises the fault flag");
    end

    $display("mechanisms: packets=%0d read_responses=%0d tx_stalls=%0d farview_done=%0d bypass_rd=%0d bypass_wr=%0d vec_lines=%0d dec_lines=%0d filtered=%0d lru_hits=%0d table_hits=%0d evictions=%0d collisions=%0d faults=%b",
             n_pkts, n_rd_resp, n_stall, st_fv_done, st_base_rd, st_base_wr, st_vec_lines, st_dec_lines,
             st_filtered, st_lru_hits, st_table_hits, st_evictions, st_collisions, fault);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #4000000;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
