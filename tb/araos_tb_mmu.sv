// araos_tb_mmu: behavioural model of CVA6's MMU as seen on the shared MMU
// interface (testbench only, not synthesizable design).
//
// It answers one request at a time. A request whose virtual page is held
// in its small translation buffer (Entries pages, replaced first in first
// out) is answered HitLat cycles after req rises, any other one after
// MissLat cycles (the page-table walk); the answer is a one-cycle valid
// with the physical address from araos_tb_pkg::tb_translate, or a page
// fault (cause 13 for loads, 15 for stores, tval = vaddr) when the page
// equals fault_vpn_i and fault_en_i is set. It counts the requests served.
module araos_tb_mmu
  import araos_pkg::*;
  import araos_tb_pkg::*;
#(
  parameter int HitLat  = 1,
  parameter int MissLat = 6,
  parameter int Entries = 4
) (
  input  logic        clk_i,
  input  logic        rst_ni,
  input  mmu_req_t    req_i,
  output mmu_rsp_t    rsp_o,
  input  logic        fault_en_i,
  input  logic [51:0] fault_vpn_i,
  output int          n_req_o,
  output int          n_miss_o
);
  logic [51:0] tlb [Entries];
  logic        tlb_v [Entries];
  int          wr;
  int          cnt;
  logic        busy;
  mmu_req_t    cur;

  function automatic bit hit(logic [51:0] vpn);
    for (int i = 0; i < Entries; i++) if (tlb_v[i] && tlb[i] == vpn) return 1;
    return 0;
  endfunction

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      busy <= 0; cnt <= 0; wr <= 0; n_req_o <= 0; n_miss_o <= 0;
      rsp_o <= '0; cur <= '0;
      for (int i = 0; i < Entries; i++) begin tlb_v[i] <= 0; tlb[i] <= '0; end
    end else begin
      rsp_o <= '0;
      if (!busy) begin
        if (req_i.req && !rsp_o.valid) begin
          busy    <= 1;
          cur     <= req_i;
          n_req_o <= n_req_o + 1;
          if (hit(tb_vpn(req_i.vaddr))) cnt <= HitLat - 1;
          else begin
            cnt <= MissLat - 1;
            n_miss_o <= n_miss_o + 1;
          end
        end
      end else if (cnt > 0) begin
        cnt <= cnt - 1;
      end else begin
        busy <= 0;
        rsp_o.valid <= 1;
        if (fault_en_i && tb_vpn(cur.vaddr) == fault_vpn_i) begin
          rsp_o.exception.valid <= 1;
          rsp_o.exception.cause <= cur.is_st ? CauseStPageFault : CauseLdPageFault;
          rsp_o.exception.tval  <= cur.vaddr;
        end else begin
          rsp_o.paddr <= tb_translate(cur.vaddr);
          if (!hit(tb_vpn(cur.vaddr))) begin
            tlb[wr] <= tb_vpn(cur.vaddr); tlb_v[wr] <= 1;
            wr <= (wr == Entries - 1) ? 0 : wr + 1;
          end
        end
      end
    end
  end

  // the requester keeps its request up until the answer
  assert property (@(posedge clk_i) disable iff (!rst_ni) busy |-> req_i.req);
endmodule
