// tb_araos_addrgen: self-checking testbench of the vector address
// generator, with the behavioural MMU model on its MMU interface.
//
// For each operation an independent reference walks the elements one by
// one and groups consecutive elements of a unit-stride access into one
// burst while they stay in the same 4-KiB page and within 256 beats;
// strided and indexed accesses give one request per element. The
// reference yields the expected AXI requests (physical address, len,
// size), the expected number of MMU translations (one per request when
// virtual memory is on, none when off) and, for a faulty page or a
// misaligned element, the expected exception and faulty element index.
// AR/AW ready is randomly withheld. After a fault the testbench checks
// that no further translation is requested before the flush.
module tb_araos_addrgen;
  import araos_pkg::*;
  import araos_tb_pkg::*;

  localparam longint unsigned BeatB = AxiDataWidth / 8;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic en_vm, flush;
  logic op_valid, op_ready;
  vmem_op_t op;
  logic idx_valid, idx_ready;
  logic [63:0] idx;
  mmu_req_t mmu_req;
  mmu_rsp_t mmu_rsp;
  logic ar_valid, ar_ready, aw_valid, aw_ready;
  axi_ax_t ar, aw;
  logic busy, done, exc_valid;
  exception_t exc;
  logic [31:0] exc_elem;
  logic fault_en;
  logic [51:0] fault_vpn;
  int n_req, n_miss;

  araos_addrgen dut (
    .clk_i(clk), .rst_ni(rst_n), .en_virt_mem_i(en_vm), .flush_i(flush),
    .op_valid_i(op_valid), .op_ready_o(op_ready), .op_i(op),
    .idx_valid_i(idx_valid), .idx_ready_o(idx_ready), .idx_i(idx),
    .mmu_req_o(mmu_req), .mmu_rsp_i(mmu_rsp),
    .ar_valid_o(ar_valid), .ar_ready_i(ar_ready), .ar_o(ar),
    .aw_valid_o(aw_valid), .aw_ready_i(aw_ready), .aw_o(aw),
    .busy_o(busy), .done_o(done), .exc_valid_o(exc_valid), .exc_o(exc),
    .exc_elem_o(exc_elem));

  araos_tb_mmu #(.HitLat(1), .MissLat(5), .Entries(4)) mmu (
    .clk_i(clk), .rst_ni(rst_n), .req_i(mmu_req), .rsp_o(mmu_rsp),
    .fault_en_i(fault_en), .fault_vpn_i(fault_vpn), .n_req_o(n_req), .n_miss_o(n_miss));

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // --------------------------------------------------- reference model
  typedef struct { logic [63:0] addr; logic [7:0] len; logic [2:0] size; bit st; } exp_t;
  exp_t exp_q[$];
  logic [63:0] idx_list[$];
  int   exp_fault_elem;   // -1: no fault
  logic [63:0] exp_fault_cause, exp_fault_tval;

  function automatic logic [63:0] elem_addr(vmem_op_t o, int e);
    case (o.mode)
      MemUnit:    return o.base + (64'(e) << o.eew);
      MemStrided: return o.base + 64'(e) * o.stride;
      default:    return o.base + idx_list[e - o.vstart];
    endcase
  endfunction

  task automatic build_expected(vmem_op_t o, bit vm);
    int e = o.vstart;
    exp_q.delete();
    exp_fault_elem = -1;
    while (e < o.vl) begin
      logic [63:0] a0 = elem_addr(o, e);
      int n = 1;
      exp_t x;
      if ((a0 & ((64'd1 << o.eew) - 1)) != 0) begin
        exp_fault_elem = e; exp_fault_tval = a0;
        exp_fault_cause = o.is_store ? CauseStMisaligned : CauseLdMisaligned;
        return;
      end
      if (vm && fault_en && tb_vpn(a0) == fault_vpn) begin
        exp_fault_elem = e; exp_fault_tval = a0;
        exp_fault_cause = o.is_store ? CauseStPageFault : CauseLdPageFault;
        return;
      end
      if (o.mode == MemUnit) begin
        // extend while the next element stays in the page and the burst
        // stays within 256 beats
        while (e + n < o.vl) begin
          logic [63:0] an = elem_addr(o, e + n);
          logic [63:0] lastb = an + (64'd1 << o.eew) - 1;
          if (an[63:12] != a0[63:12]) break;
          if ((lastb / 64'(BeatB)) - (a0 / 64'(BeatB)) + 1 > 256) break;
          n++;
        end
        x.len  = 8'(((elem_addr(o, e + n - 1) + (64'd1 << o.eew) - 1) / BeatB) - (a0 / BeatB));
        x.size = 3'($clog2(BeatB));
      end else begin
        x.len = 0; x.size = {1'b0, o.eew};
      end
      x.addr = vm ? 64'(tb_translate(a0)) : a0;
      x.st   = o.is_store;
      exp_q.push_back(x);
      e += n;
    end
  endtask

  // ------------------------------------------------------ monitors
  int got_ax, mism_ax, got_exc, got_done;
  exception_t got_exc_v; int got_exc_elem;
  int req_after_fault;
  bit faulted;
  int idx_ptr;
  always @(posedge clk) begin
    if (rst_n) begin
      if (ar_valid && ar_ready) begin
        if (exp_q.size() == 0 || exp_q[0].st || exp_q[0].addr != ar.addr || exp_q[0].len != ar.len
            || exp_q[0].size != ar.size || ar.burst != AxiBurstIncr) begin
          mism_ax++;
          $display("AR mismatch: got %h len %0d size %0d", ar.addr, ar.len, ar.size);
        end
        if (exp_q.size() > 0) void'(exp_q.pop_front());
        got_ax++;
      end
      if (aw_valid && aw_ready) begin
        if (exp_q.size() == 0 || !exp_q[0].st || exp_q[0].addr != aw.addr || exp_q[0].len != aw.len
            || exp_q[0].size != aw.size) begin
          mism_ax++;
          $display("AW mismatch: got %h len %0d size %0d", aw.addr, aw.len, aw.size);
        end
        if (exp_q.size() > 0) void'(exp_q.pop_front());
        got_ax++;
      end
      if (exc_valid) begin got_exc++; got_exc_v = exc; got_exc_elem = exc_elem; faulted = 1; end
      else if (faulted && mmu_req.req) req_after_fault++;
      if (done) got_done++;
      if (idx_valid && idx_ready) idx_ptr++;
    end
  end
  assign idx_valid = (idx_ptr < idx_list.size());
  assign idx       = idx_valid ? idx_list[idx_ptr] : 64'd0;

  logic rdy_rand;
  always @(negedge clk) rdy_rand = ($urandom_range(0, 3) != 0);
  assign ar_ready = rdy_rand;
  assign aw_ready = rdy_rand;

  // run one operation and compare
  task automatic run(vmem_op_t o, bit vm, string name);
    int n_req0 = n_req;
    int nexp;
    en_vm = vm;
    build_expected(o, vm);
    nexp = exp_q.size();
    got_ax = 0; mism_ax = 0; got_exc = 0; got_done = 0; faulted = 0; req_after_fault = 0; idx_ptr = 0;
    @(negedge clk);
    op = o; op_valid = 1;
    @(negedge clk);
    op_valid = 0;
    fork
      begin wait (got_done > 0 || got_exc > 0); end
      begin repeat (20000) @(posedge clk); end
    join_any
    disable fork;
    repeat (20) @(negedge clk);
    check(mism_ax == 0, {name, ": AXI requests match"});
    check(got_ax == nexp, $sformatf("%s: %0d AXI requests, expected %0d", name, got_ax, nexp));
    check(n_req - n_req0 == (vm ? nexp + (exp_fault_elem >= 0 && exp_fault_cause > 8 ? 1 : 0) : 0),
          $sformatf("%s: %0d translations for %0d requests", name, n_req - n_req0, nexp));
    if (exp_fault_elem >= 0) begin
      check(got_exc == 1 && got_done == 0, {name, ": one exception, no done"});
      check(got_exc_elem == exp_fault_elem, $sformatf("%s: faulty element %0d, expected %0d", name, got_exc_elem, exp_fault_elem));
      check(got_exc_v.cause == exp_fault_cause && got_exc_v.tval == exp_fault_tval, {name, ": cause and tval"});
      check(req_after_fault == 0, {name, ": no translation after the fault"});
      check(!op_ready, {name, ": waits for the flush"});
      @(negedge clk); flush = 1; @(negedge clk); flush = 0;
      @(negedge clk);
      check(op_ready, {name, ": idle after flush"});
    end else begin
      check(got_done == 1 && got_exc == 0, {name, ": done once"});
      check(op_ready, {name, ": back to idle"});
    end
  endtask

  function automatic vmem_op_t mk(logic [63:0] base, logic [63:0] stride, int vl, int vstart,
                                   int eew, bit st, mem_mode_e mode);
    vmem_op_t o;
    o.base = base; o.stride = stride; o.vl = vl; o.vstart = vstart;
    o.eew = 2'(eew); o.is_store = st; o.mode = mode;
    return o;
  endfunction

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    en_vm = 0; flush = 0; op_valid = 0; op = '0; fault_en = 0; fault_vpn = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // physical addressing, burst across a page boundary
    run(mk(64'h8000_0FF0, 0, 10, 0, 3, 0, MemUnit), 0, "unit load, no VM");
    // virtual memory: one translation per burst
    run(mk(64'h4000_0FF0, 0, 10, 0, 3, 0, MemUnit), 1, "unit load, VM, page crossing");
    // a whole page of 64-bit elements: 2 bursts of 256 beats
    run(mk(64'h4000_3000, 0, 512, 0, 3, 1, MemUnit), 1, "unit store, 256-beat limit");
    // misaligned start, byte elements, vstart > 0
    run(mk(64'h4000_5FFB, 0, 40, 3, 0, 0, MemUnit), 1, "unit byte load, vstart");
    // strided store with negative stride
    run(mk(64'h4001_0000, -64'sd1000, 12, 0, 2, 1, MemStrided), 1, "strided store");
    // indexed load: one translation per element
    idx_list = '{64'h0, 64'h1238, 64'h10, 64'h5000, 64'h8, 64'h0};
    run(mk(64'h4002_0000, 0, 6, 0, 3, 0, MemIndexed), 1, "indexed load");
    idx_list.delete();
    // page fault in the middle of a unit-stride load
    fault_en = 1; fault_vpn = 52'h4000_7;
    run(mk(64'h4000_6F00, 0, 100, 0, 3, 0, MemUnit), 1, "unit load, page fault");
    run(mk(64'h4000_6800, 0, 64, 0, 2, 1, MemStrided), 1, "strided store, page fault");
    fault_en = 0;
    // misaligned strided element
    run(mk(64'h4003_0000, 64'd6, 8, 0, 2, 0, MemStrided), 1, "strided misaligned");
    // vl == vstart: nothing to do
    run(mk(64'h4003_0000, 0, 5, 5, 2, 0, MemUnit), 1, "empty op");
    // random unit-stride and strided operations
    for (int t = 0; t < 40; t++) begin
      automatic int eew = $urandom_range(0, 3);
      automatic logic [63:0] base = {32'h0, 4'h4, 16'($urandom), 12'($urandom)} & ~((64'd1 << eew) - 1);
      automatic int vl = $urandom_range(1, 700);
      automatic bit vm = 1'($urandom_range(0, 1));
      fault_en = ($urandom_range(0, 3) == 0);
      fault_vpn = tb_vpn(base) + 52'($urandom_range(0, 1));
      if (t % 3 == 2)
        run(mk(base, 64'(($urandom_range(1, 40)) << eew), $urandom_range(1, 30), 0, eew,
               1'($urandom_range(0, 1)), MemStrided), vm, $sformatf("random strided %0d", t));
      else
        run(mk(base, 0, vl, $urandom_range(0, vl - 1), eew, 1'($urandom_range(0, 1)), MemUnit), vm,
            $sformatf("random unit %0d", t));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
