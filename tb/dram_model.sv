// dram_model: behavioural model of the DRAM channel controllers, for
// simulation only.
//
// One model serves NCH channels. Each channel accepts one request per clock
// (read or write, in 64-byte channel words), returns read words in order
// LAT clocks after the request at up to one word per clock, and takes write
// words as they come. Storage is a sparse array indexed by the physical
// word number (channel word address * NCH + channel), which matches the
// 64-byte striping of the memory stack, so a testbench can preload and
// inspect memory through `mem` by physical address / 64.
module dram_model
  import fv_pkg::*;
#(
  parameter int unsigned NCH = 2,
  parameter int unsigned LAT = 20
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic [NCH-1:0]                mc_req_valid,
  output logic [NCH-1:0]                mc_req_ready,
  input  ch_req_t [NCH-1:0]             mc_req,
  input  logic [NCH-1:0]                mc_wvalid,
  output logic [NCH-1:0]                mc_wready,
  input  logic [NCH-1:0][WORD_W-1:0]    mc_wdata,
  output logic [NCH-1:0]                mc_rvalid,
  input  logic [NCH-1:0]                mc_rready,
  output logic [NCH-1:0][WORD_W-1:0]    mc_rdata
);
  logic [WORD_W-1:0] mem [longint];
  longint            cyc;
  longint            rq_addr [NCH][$];
  longint            rq_time [NCH][$];
  longint            wq_addr [NCH][$];

  function automatic logic [WORD_W-1:0] rd(longint a);
    return mem.exists(a) ? mem[a] : '0;
  endfunction

  always_comb begin
    for (int c = 0; c < NCH; c++) begin
      mc_req_ready[c] = (rq_addr[c].size() < 256);
      mc_wready[c]    = (wq_addr[c].size() != 0);
    end
  end

  always @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cyc <= 0;
      mc_rvalid <= '0;
      mc_rdata  <= '0;
      for (int c = 0; c < NCH; c++) begin
        rq_addr[c].delete(); rq_time[c].delete(); wq_addr[c].delete();
      end
    end else begin
      cyc <= cyc + 1;
      for (int c = 0; c < NCH; c++) begin
        if (mc_wvalid[c] && mc_wready[c]) begin
          mem[wq_addr[c][0]] = mc_wdata[c];
          void'(wq_addr[c].pop_front());
        end
        if (mc_req_valid[c] && mc_req_ready[c]) begin
          for (longint k = 0; k < longint'(mc_req[c].nwords); k++) begin
            longint a;
            a = (longint'(mc_req[c].waddr) + k) * NCH + c;
            if (mc_req[c].wr) wq_addr[c].push_back(a);
            else begin
              rq_addr[c].push_back(a);
              rq_time[c].push_back(cyc + LAT + k);
            end
          end
        end
        if (!mc_rvalid[c] || mc_rready[c]) begin
          if (rq_addr[c].size() != 0 && rq_time[c][0] <= cyc) begin
            mc_rvalid[c] <= 1'b1;
            mc_rdata[c]  <= rd(rq_addr[c][0]);
            void'(rq_addr[c].pop_front());
            void'(rq_time[c].pop_front());
          end else begin
            mc_rvalid[c] <= 1'b0;
          end
        end
      end
    end
  end
endmodule
