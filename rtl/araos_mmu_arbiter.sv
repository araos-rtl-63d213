// araos_mmu_arbiter: time-shares CVA6's MMU between the scalar core's
// load/store unit (port 0) and Ara2's address generator (port 1).
//
// Both requesters use the same MMU interface: a req level with vaddr and
// is_st, answered by a single-cycle valid with paddr and exception. When
// the MMU is free and a requester raises req, the arbiter grants it and
// keeps the MMU connected to that requester until the MMU answers valid;
// only then can the other requester be granted. If both ask in the same
// cycle, the one that was not served last wins (round robin), so neither
// can starve the other. The response is routed to the granted port only;
// the other port sees valid low.
//
// Timing: the grant decision is combinational, so a request made while
// the MMU is free reaches the MMU in the same cycle. A request that loses
// waits for the end of the running translation; the next translation can
// start in the cycle after the valid.
//
// From the paper: a shared MMU, multiplexing logic that connects the MMU
// to a requester until the MMU responds, and the interface signals. The
// round-robin tie break is this design's choice (the paper gives no
// priority).
module araos_mmu_arbiter
  import araos_pkg::*;
(
  input  logic     clk_i,
  input  logic     rst_ni,
  // requester ports: [0] CVA6 LSU, [1] Ara2 ADDRGEN
  input  mmu_req_t req_i [2],
  output mmu_rsp_t rsp_o [2],
  // shared MMU
  output mmu_req_t mmu_req_o,
  input  mmu_rsp_t mmu_rsp_i,
  // 1 while a translation is in flight, and its owner
  output logic     busy_o,
  output logic     owner_o
);

  logic busy_q;        // a translation is in flight
  logic owner_q;       // port connected to the MMU while busy
  logic last_q;        // port served last, for the tie break
  logic sel;           // port connected to the MMU this cycle
  logic any_req;

  always_comb begin
    any_req = req_i[0].req || req_i[1].req;
    if (busy_q)                          sel = owner_q;
    else if (req_i[0].req && req_i[1].req) sel = ~last_q;
    else                                 sel = req_i[1].req;
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      busy_q  <= 1'b0;
      owner_q <= 1'b0;
      last_q  <= 1'b1;
    end else begin
      if (!busy_q && any_req) begin
        owner_q <= sel;
        last_q  <= sel;
      end
      // the MMU is held from the grant until its valid
      if (mmu_rsp_i.valid)          busy_q <= 1'b0;
      else if (!busy_q && any_req)  busy_q <= 1'b1;
    end
  end

  always_comb begin
    mmu_req_o     = req_i[sel];
    mmu_req_o.req = req_i[sel].req && (busy_q || any_req);
    for (int i = 0; i < 2; i++) begin
      rsp_o[i]       = mmu_rsp_i;
      rsp_o[i].valid = mmu_rsp_i.valid && (sel == 1'(i));
    end
  end

  assign busy_o  = busy_q;
  assign owner_o = owner_q;

  // while a translation is in flight the owner keeps its request up
  assert property (@(posedge clk_i) disable iff (!rst_ni)
                   busy_q && !mmu_rsp_i.valid |-> req_i[owner_q].req);
  // the MMU only answers a request
  assert property (@(posedge clk_i) disable iff (!rst_ni)
                   mmu_rsp_i.valid |-> busy_q || mmu_req_o.req);

endmodule
