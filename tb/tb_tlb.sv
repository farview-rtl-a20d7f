// tb_tlb: programs random mappings into the TLB and checks every lookup port
// against a reference map: hits, misses, a different region's mapping of
// the same page, removal, and overwrite by a conflicting entry.
module tb_tlb;
  import fv_pkg::*;
  localparam int NPORT = 6, ENTRIES = 16384;
  localparam int VW = VA_W - PAGE_B, PW = PA_W - PAGE_B;
  logic clk = 0, rst_n = 0;
  always #2 clk = ~clk;
  int checks = 0, failures = 0;

  logic wr_en = 0, wr_valid = 0;
  logic [VW-1:0] wr_vpn = '0;
  logic [2:0] wr_rid = '0;
  logic [PW-1:0] wr_ppn = '0;
  logic [NPORT-1:0][VW-1:0] lk_vpn = '0;
  logic [NPORT-1:0][2:0] lk_rid = '0;
  logic [NPORT-1:0] lk_hit;
  logic [NPORT-1:0][PW-1:0] lk_ppn;
  tlb #(.NPORT(NPORT), .ENTRIES(ENTRIES)) dut (.*);

  // reference: index -> {vpn, rid, ppn}
  longint ref_key [int];
  int     ref_ppn [int];
  function automatic int idx(logic [VW-1:0] v, logic [2:0] r);
    return int'(v[13:0] ^ (14'(r) << 11));
  endfunction

  task automatic prog(logic [VW-1:0] v, logic [2:0] r, logic [PW-1:0] p, logic val);
    @(negedge clk);
    wr_en = 1; wr_vpn = v; wr_rid = r; wr_ppn = p; wr_valid = val;
    @(negedge clk); wr_en = 0;
    if (val) begin ref_key[idx(v, r)] = {v, r}; ref_ppn[idx(v, r)] = int'(p); end
    else ref_key.delete(idx(v, r));           // removal clears the slot
  endtask

  task automatic probe(logic [VW-1:0] v, logic [2:0] r, int port);
    bit exp_hit;
    @(negedge clk);
    lk_vpn[port] = v; lk_rid[port] = r;
    #1;
    exp_hit = ref_key.exists(idx(v, r)) && ref_key[idx(v, r)] == {v, r};
    checks++;
    if (lk_hit[port] !== exp_hit || (exp_hit && lk_ppn[port] !== PW'(ref_ppn[idx(v, r)]))) begin
      failures++;
      $display("FAIL vpn=%0h rid=%0d port=%0d hit=%b exp=%b", v, r, port, lk_hit[port], exp_hit);
    end
  endtask

  logic [VW-1:0] vs [64];
  logic [2:0]    rs [64];
  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    probe(27'd5, 3'd1, 0);                       // empty after reset
    for (int i = 0; i < 64; i++) begin
      vs[i] = VW'($urandom % 4096); rs[i] = 3'($urandom % 6);
      prog(vs[i], rs[i], PW'($urandom), 1);
    end
    for (int i = 0; i < 64; i++) probe(vs[i], rs[i], i % NPORT);
    for (int i = 0; i < 64; i++) probe(vs[i], 3'(rs[i] + 1) % 6, i % NPORT);        // other region
    for (int i = 0; i < 64; i++) probe(vs[i] + VW'(1 << 14), rs[i], i % NPORT);     // same index, other page
    for (int i = 0; i < 16; i++) prog(vs[i], rs[i], '0, 0);                      // remove
    prog(vs[20] ^ VW'(1 << 15), rs[20], PW'(77), 1);                             // conflicting overwrite
    for (int i = 0; i < 64; i++) probe(vs[i], rs[i], i % NPORT);
    probe(vs[20] ^ VW'(1 << 15), rs[20], 2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #200000; $display("FAIL: watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end
endmodule
