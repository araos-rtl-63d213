// tb_araos_mmu_arbiter: self-checking testbench of the shared-MMU arbiter.
//
// Two behavioural requesters (CVA6 LSU on port 0, Ara2 address generator
// on port 1) raise translation requests at random times with random
// addresses and hold them until their own valid arrives; the behavioural
// MMU model answers after a hit or miss latency. The testbench checks that
// every request gets exactly one answer, on its own port, with the
// translation of its own address; that the MMU sees at most one request
// at a time and keeps the owner until valid; that a request to an idle MMU
// reaches it in the same cycle; and that when both ports wait, the port
// not served last is granted next. It counts contention cycles and fails
// if none happened.
module tb_araos_mmu_arbiter;
  import araos_pkg::*;
  import araos_tb_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  mmu_req_t req [2];
  mmu_rsp_t rsp [2];
  mmu_req_t mmu_req;
  mmu_rsp_t mmu_rsp;
  logic busy, owner;
  int n_req, n_miss;

  araos_mmu_arbiter dut (.clk_i(clk), .rst_ni(rst_n), .req_i(req), .rsp_o(rsp),
    .mmu_req_o(mmu_req), .mmu_rsp_i(mmu_rsp), .busy_o(busy), .owner_o(owner));

  araos_tb_mmu #(.HitLat(1), .MissLat(4), .Entries(2)) mmu (
    .clk_i(clk), .rst_ni(rst_n), .req_i(mmu_req), .rsp_o(mmu_rsp),
    .fault_en_i(1'b0), .fault_vpn_i('0), .n_req_o(n_req), .n_miss_o(n_miss));

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  int issued [2], answered [2];
  int contention, rr_checked, same_cycle;
  int tb_last;         // port the testbench saw granted last
  bit tb_busy;         // MMU in use, as seen by the testbench

  // requesters
  for (genvar p = 0; p < 2; p++) begin : g_req
    initial begin
      req[p] = '0;
      @(posedge rst_n);
      repeat (300) begin
        repeat ($urandom_range(0, 6)) @(negedge clk);
        req[p].req   = 1;
        req[p].vaddr = {20'h0, 32'($urandom), 12'($urandom)};
        req[p].is_st = 1'($urandom);
        issued[p]++;
        do @(posedge clk); while (!rsp[p].valid);
        checks++;
        if (rsp[p].paddr != tb_translate(req[p].vaddr) || rsp[p].exception.valid) begin
          failures++; $display("FAIL: port %0d got %h for %h", p, rsp[p].paddr, req[p].vaddr);
        end
        answered[p]++;
        @(negedge clk);
        req[p].req = 0;
      end
    end
  end

  // protocol monitor
  always @(posedge clk) if (rst_n) begin
    if (rsp[0].valid && rsp[1].valid) begin failures++; $display("FAIL: both ports answered"); end
    if (req[0].req && req[1].req) contention++;
    // a request that finds the MMU idle is passed the same cycle
    if (!tb_busy && (req[0].req || req[1].req)) begin
      automatic int g = (req[0].req && req[1].req) ? 1 - tb_last : (req[1].req ? 1 : 0);
      checks++;
      if (!(mmu_req.req && mmu_req.vaddr == req[g].vaddr)) begin
        failures++; $display("FAIL: grant to port %0d not passed to the MMU", g);
      end
      if (req[0].req && req[1].req) rr_checked++;
      tb_last = g;
      tb_busy = 1;
    end else if (tb_busy) begin
      if (!(mmu_req.req && mmu_req.vaddr == req[tb_last].vaddr)) begin
        failures++; $display("FAIL: owner %0d not held", tb_last);
      end
    end
    if (mmu_rsp.valid) begin
      if (!rsp[tb_last].valid) begin failures++; $display("FAIL: answer not routed to owner"); end
      tb_busy = 0;
    end
  end

  initial begin
    tb_last = 1; tb_busy = 0;
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    wait (answered[0] == 300 && answered[1] == 300);
    repeat (10) @(negedge clk);
    check(n_req == 600, $sformatf("MMU served %0d requests, expected 600", n_req));
    check(contention > 0, $sformatf("contention happened %0d cycles", contention));
    check(rr_checked > 0, $sformatf("round-robin decisions checked: %0d", rr_checked));
    $display("contention cycles %0d, simultaneous grants %0d, misses %0d", contention, rr_checked, n_miss);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
