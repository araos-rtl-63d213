// tb_araos_vm: end-to-end testbench of the AraOS virtual-memory path at its
// default (two-lane, 64-bit) configuration.
//
// Around the design it places behavioural models of what it connects to:
// Ara2's sequencer issuing vector loads and stores, the load and store
// units moving R/W data, CVA6's load/store unit issuing its own
// translations, CVA6's MMU (16-entry translation buffer, page-table walk
// on a miss, one programmable faulty page), the backend answering the
// flush, CVA6 taking exception responses, CVA6's L1 cache taking
// invalidations, and a 64-bit AXI memory. It checks every AR/AW request
// against the reference of araos_tb_pkg, the data beats, the
// invalidated lines of every store burst, the exception, vstart and flush
// sequence of each page fault, and that each CVA6 translation comes back
// right. Like an OS, after a page fault it maps the page and re-runs the
// instruction from vstart. Each mechanism must occur at least once:
// MMU sharing with CVA6 waiting, a burst cut at a page boundary, a burst
// cut at 256 beats, per-element translation, physical addressing, a page
// fault with flush and resume, a misaligned access, L1 invalidations.
module tb_araos_vm;
  import araos_pkg::*;
  import araos_tb_pkg::*;

  localparam int BeatB = AxiDataWidth / 8;
  localparam int LineB = DCacheLineB;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  // ------------------------------------------------------------ DUT
  logic en_vm, op_valid, op_ready, idx_valid, idx_ready, op_done;
  vmem_op_t op;
  logic [63:0] idx;
  mmu_req_t cva6_req, mmu_req;
  mmu_rsp_t cva6_rsp, mmu_rsp;
  logic vr_valid, vr_ready, vr_last, vw_valid, vw_ready, vw_last, vb_valid, vb_ready;
  logic [AxiIdWidth-1:0] vr_id, vb_id, r_id, b_id;
  logic [AxiDataWidth-1:0] vr_data, vw_data;
  logic [AxiDataWidth/8-1:0] vw_strb;
  logic [1:0] vr_resp, vb_resp, r_resp, b_resp;
  logic ar_valid, ar_ready, r_valid, r_ready, r_last, aw_valid, aw_ready, w_valid, w_ready, w_last;
  logic b_valid, b_ready;
  axi_ax_t ar, aw;
  logic [SocDataWidth-1:0] r_data, w_data;
  logic [SocDataWidth/8-1:0] w_strb;
  logic inval_valid, inval_ready;
  logic [PAddrWidth-1:0] inval_addr;
  logic preceding_done, flush_ack, stall, flush, vstart_we, exc_valid, exc_ready;
  logic [31:0] vstart;
  exception_t exc;
  logic ag_busy, mmu_busy, mmu_owner;

  araos_vm dut (
    .clk_i(clk), .rst_ni(rst_n), .en_virt_mem_i(en_vm),
    .op_valid_i(op_valid), .op_ready_o(op_ready), .op_i(op),
    .idx_valid_i(idx_valid), .idx_ready_o(idx_ready), .idx_i(idx), .op_done_o(op_done),
    .cva6_mmu_req_i(cva6_req), .cva6_mmu_rsp_o(cva6_rsp),
    .mmu_req_o(mmu_req), .mmu_rsp_i(mmu_rsp),
    .vldu_r_valid_o(vr_valid), .vldu_r_ready_i(vr_ready), .vldu_r_id_o(vr_id),
    .vldu_r_data_o(vr_data), .vldu_r_resp_o(vr_resp), .vldu_r_last_o(vr_last),
    .vstu_w_valid_i(vw_valid), .vstu_w_ready_o(vw_ready), .vstu_w_data_i(vw_data),
    .vstu_w_strb_i(vw_strb), .vstu_w_last_i(vw_last),
    .vstu_b_valid_o(vb_valid), .vstu_b_ready_i(vb_ready), .vstu_b_id_o(vb_id), .vstu_b_resp_o(vb_resp),
    .ar_valid_o(ar_valid), .ar_ready_i(ar_ready), .ar_o(ar),
    .r_valid_i(r_valid), .r_ready_o(r_ready), .r_id_i(r_id), .r_data_i(r_data), .r_resp_i(r_resp), .r_last_i(r_last),
    .aw_valid_o(aw_valid), .aw_ready_i(aw_ready), .aw_o(aw),
    .w_valid_o(w_valid), .w_ready_i(w_ready), .w_data_o(w_data), .w_strb_o(w_strb), .w_last_o(w_last),
    .b_valid_i(b_valid), .b_ready_o(b_ready), .b_id_i(b_id), .b_resp_i(b_resp),
    .inval_valid_o(inval_valid), .inval_ready_i(inval_ready), .inval_addr_o(inval_addr),
    .preceding_done_i(preceding_done), .flush_ack_i(flush_ack), .stall_o(stall), .flush_o(flush),
    .vstart_we_o(vstart_we), .vstart_o(vstart),
    .exc_resp_valid_o(exc_valid), .exc_resp_ready_i(exc_ready), .exc_resp_o(exc),
    .ag_busy_o(ag_busy), .mmu_busy_o(mmu_busy), .mmu_owner_o(mmu_owner));

  logic fault_en;
  logic [51:0] fault_vpn;
  int n_mmu_req, n_mmu_miss;
  araos_tb_mmu #(.HitLat(1), .MissLat(8), .Entries(16)) mmu (
    .clk_i(clk), .rst_ni(rst_n), .req_i(mmu_req), .rsp_o(mmu_rsp),
    .fault_en_i(fault_en), .fault_vpn_i(fault_vpn), .n_req_o(n_mmu_req), .n_miss_o(n_mmu_miss));

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // mechanism counters
  int m_cva6_wait, m_page_split, m_burst_cap, m_per_elem, m_phys, m_fault, m_resume,
      m_misaligned, m_inval, m_flush;

  // ------------------------------------------------ CVA6 LSU requester
  bit cva6_on;
  int cva6_done;
  initial begin
    cva6_req = '0;
    @(posedge rst_n);
    forever begin
      repeat ($urandom_range(1, 12)) @(negedge clk);
      if (cva6_on) begin
        cva6_req.req   = 1;
        cva6_req.vaddr = {32'h0, 8'h70, 12'($urandom_range(0, 63)), 12'($urandom)};
        cva6_req.is_st = 1'($urandom);
        do @(posedge clk); while (!cva6_rsp.valid);
        checks++;
        if (cva6_rsp.paddr != tb_translate(cva6_req.vaddr) || cva6_rsp.exception.valid) begin
          failures++; $display("FAIL: CVA6 translation of %h", cva6_req.vaddr);
        end
        cva6_done++;
        @(negedge clk);
        cva6_req.req = 0;
      end
    end
  end
  always @(posedge clk) if (cva6_req.req && mmu_busy && mmu_owner) m_cva6_wait++;

  // ------------------------------------------- 64-bit AXI memory model
  logic [7:0] mem [logic [63:0]];
  function automatic logic [63:0] beat_addr(logic [63:0] a, logic [2:0] sz, int i);
    return (i == 0) ? a : (a & ~((64'd1 << sz) - 1)) + (64'(i) << sz);
  endfunction

  initial begin : mem_read
    ar_ready = 0; r_valid = 0; r_last = 0; r_data = '0; r_resp = '0; r_id = '0;
    forever begin
      @(negedge clk);
      if (ar_valid && $urandom_range(0, 1) == 0) begin
        automatic axi_ax_t a = ar;
        ar_ready = 1; @(negedge clk); ar_ready = 0;
        for (int i = 0; i <= int'(a.len); i++) begin
          automatic logic [63:0] ba = beat_addr(a.addr, a.size, i) & ~64'(SocDataWidth / 8 - 1);
          r_valid = 1; r_last = (i == int'(a.len)); r_id = a.id;
          for (int b = 0; b < SocDataWidth / 8; b++)
            r_data[b*8 +: 8] = mem.exists(ba + 64'(b)) ? mem[ba + 64'(b)] : 8'(ba + 64'(b));
          do @(posedge clk); while (!r_ready);
          @(negedge clk); r_valid = 0; r_last = 0;
        end
      end
    end
  end

  initial begin : mem_write
    aw_ready = 0; w_ready = 0; b_valid = 0; b_resp = '0; b_id = '0;
    forever begin
      @(negedge clk);
      if (aw_valid && $urandom_range(0, 1) == 0) begin
        automatic axi_ax_t a = aw;
        aw_ready = 1; @(negedge clk); aw_ready = 0;
        for (int i = 0; i <= int'(a.len); i++) begin
          automatic logic [63:0] ba = beat_addr(a.addr, a.size, i) & ~64'(SocDataWidth / 8 - 1);
          w_ready = 1;
          do @(posedge clk); while (!w_valid);
          checks++;
          if (w_last != (i == int'(a.len))) begin failures++; $display("FAIL: W last"); end
          for (int b = 0; b < SocDataWidth / 8; b++) if (w_strb[b]) mem[ba + 64'(b)] = w_data[b*8 +: 8];
          @(negedge clk); w_ready = 0;
        end
        b_valid = 1; b_id = a.id;
        do @(posedge clk); while (!b_ready);
        @(negedge clk); b_valid = 0;
      end
    end
  end

  // ------------------------------- Ara2 load/store unit data models
  // the store unit sends one W beat per beat of every AW it sees; the
  // data is a function of the beat's physical address
  axi_ax_t aw_seen[$];
  int r_beats, w_beats, b_seen, r_bad;
  always @(posedge clk) if (rst_n) begin
    if (aw_valid && aw_ready) aw_seen.push_back(aw);
    if (vr_valid && vr_ready) r_beats++;
    if (vb_valid && vb_ready) b_seen++;
  end
  initial begin : vstu
    vw_valid = 0; vw_last = 0; vw_data = '0; vw_strb = '0; vb_ready = 1;
    forever begin
      @(negedge clk);
      if (aw_seen.size() != 0) begin
        automatic axi_ax_t a = aw_seen.pop_front();
        for (int i = 0; i <= int'(a.len); i++) begin
          automatic logic [63:0] ba = beat_addr(a.addr, a.size, i);
          automatic logic [63:0] hi = (ba & ~((64'd1 << a.size) - 1)) + (64'd1 << a.size) - 1;
          vw_valid = 1; vw_last = (i == int'(a.len));
          for (int b = 0; b < BeatB; b++) begin
            automatic logic [63:0] ad = (ba & ~64'(BeatB - 1)) + 64'(b);
            vw_data[b*8 +: 8] = ~8'(ad);
            vw_strb[b] = (ad >= ba) && (ad <= hi);
          end
          do @(posedge clk); while (!vw_ready);
          w_beats++;
          @(negedge clk); vw_valid = 0; vw_last = 0;
        end
      end
    end
  end
  always @(negedge clk) vr_ready = ($urandom_range(0, 3) != 0);

  // ----------------------------------------- L1 D$ invalidation sink
  logic [PAddrWidth-1:0] inval_exp[$];
  always @(negedge clk) inval_ready = ($urandom_range(0, 2) != 0);
  always @(posedge clk) if (rst_n) begin
    if (aw_valid && aw_ready) begin
      // lines of the burst, at most one way's worth of sets
      automatic logic [63:0] lo = aw.addr;
      automatic logic [63:0] hi = (aw.addr & ~((64'd1 << aw.size) - 1)) + ((64'(aw.len) + 1) << aw.size) - 1;
      automatic int n = 0;
      for (logic [63:0] l = lo & ~64'(LineB - 1); l <= hi && n < (1 << DCacheIdxBits) / LineB; l += 64'(LineB)) begin
        inval_exp.push_back(PAddrWidth'(l)); n++;
      end
    end
    if (inval_valid && inval_ready) begin
      checks++; m_inval++;
      if (inval_exp.size() == 0 || inval_exp[0] != inval_addr) begin
        failures++; $display("FAIL: invalidation of %h", inval_addr);
      end
      if (inval_exp.size() != 0) void'(inval_exp.pop_front());
    end
  end

  // ----------------------------------- backend and CVA6 commit models
  int t_flush;
  initial begin
    preceding_done = 0; flush_ack = 0; exc_ready = 0;
    forever begin
      @(negedge clk);
      if (stall && !flush_ack) begin
        repeat ($urandom_range(0, 10)) @(negedge clk);
        preceding_done = 1;
        wait (flush); @(negedge clk);
        preceding_done = 0;
        m_flush++;
        repeat (9) @(negedge clk);   // the flush crosses the backend
        flush_ack = 1; @(negedge clk); flush_ack = 0;
      end
    end
  end
  always @(negedge clk) exc_ready <= ($urandom_range(0, 2) == 0);

  // -------------------------------------------------- AR/AW checking
  logic [63:0] idx_list[$];
  // Reference for the AXI requests of one operation: the elements are
  // walked one by one and, for unit stride, grouped into one burst while
  // they stay in the same 4-KiB page and within 256 beats; strided and
  // indexed accesses give one request per element. The walk stops at the
  // first misaligned element or, with virtual memory on, at the first
  // element in the faulty page (fault_elem; -1 when the operation ends).
  typedef struct {
    logic [63:0] vaddr;
    logic [63:0] addr;
    logic [7:0]  len;
    logic [2:0]  size;
    bit          st;
    bit          page_end;  // the next request starts in the next page
  } exp_req_t;

  // off: the element's index offset (indexed accesses only)
  function automatic logic [63:0] ref_elem_addr(vmem_op_t o, int e, logic [63:0] off);
    case (o.mode)
      MemUnit:    return o.base + (64'(e) << o.eew);
      MemStrided: return o.base + 64'(e) * o.stride;
      default:    return o.base + off;
    endcase
  endfunction

  // fault_elem = -1 when the operation completes
  exp_req_t    exp_q[$];
  int          fault_elem;
  logic [63:0] fault_cause, fault_tval;
  task automatic ref_requests(vmem_op_t o, bit vm, int beat_bytes);
    int e = int'(o.vstart);
    logic [63:0] off, a0, an, lastb;
    int n;
    exp_req_t x;
    exp_q.delete();
    fault_elem = -1;
    while (e < int'(o.vl)) begin
      off = 64'd0;
      if (o.mode == MemIndexed) off = idx_list[e - o.vstart];
      a0 = ref_elem_addr(o, e, off);
      n = 1;
      if ((a0 & ((64'd1 << o.eew) - 1)) != 0) begin
        fault_elem = e; fault_tval = a0;
        fault_cause = o.is_store ? CauseStMisaligned : CauseLdMisaligned;
        return;
      end
      if (vm && fault_en && tb_vpn(a0) == fault_vpn) begin
        fault_elem = e; fault_tval = a0;
        fault_cause = o.is_store ? CauseStPageFault : CauseLdPageFault;
        return;
      end
      x.page_end = 0;
      if (o.mode == MemUnit) begin
        while (e + n < int'(o.vl)) begin
          an = ref_elem_addr(o, e + n, 64'd0);
          lastb = an + (64'd1 << o.eew) - 1;
          if (an[63:12] != a0[63:12]) begin x.page_end = 1; break; end
          if ((lastb / 64'(beat_bytes)) - (a0 / 64'(beat_bytes)) + 1 > 256) break;
          n++;
        end
        x.len  = 8'(((ref_elem_addr(o, e + n - 1, 64'd0) + (64'd1 << o.eew) - 1) / 64'(beat_bytes))
                    - (a0 / 64'(beat_bytes)));
        x.size = 3'($clog2(beat_bytes));
      end else begin
        x.len = 0; x.size = {1'b0, o.eew};
      end
      x.vaddr = a0;
      x.addr  = vm ? 64'(tb_translate(a0)) : a0;
      x.st    = o.is_store;
      exp_q.push_back(x);
      e += n;
    end
  endtask
  int idx_ptr, got_req, bad_req;
  always @(posedge clk) if (rst_n) begin
    if ((ar_valid && ar_ready) || (aw_valid && aw_ready)) begin
      automatic axi_ax_t a = (ar_valid && ar_ready) ? ar : aw;
      automatic bit st = !(ar_valid && ar_ready);
      got_req++;
      if (exp_q.size() == 0 || exp_q[0].addr != a.addr || exp_q[0].len != a.len ||
          exp_q[0].size != a.size || exp_q[0].st != st) begin
        bad_req++;
        $display("FAIL: request %h len %0d size %0d st %0d", a.addr, a.len, a.size, st);
      end else begin
        if (exp_q[0].page_end) m_page_split++;
        if (a.len == 8'd255) m_burst_cap++;
      end
      if (exp_q.size() != 0) void'(exp_q.pop_front());
    end
    if (idx_valid && idx_ready) idx_ptr++;
  end
  assign idx_valid = idx_ptr < idx_list.size();
  assign idx       = idx_valid ? idx_list[idx_ptr] : '0;

  int got_exc, got_done, n_vstart;
  exception_t last_exc;
  logic [31:0] last_vstart;
  always @(posedge clk) if (rst_n) begin
    if (exc_valid && exc_ready) begin got_exc++; last_exc = exc; end
    if (op_done) got_done++;
    if (vstart_we) begin n_vstart++; last_vstart = vstart; end
  end

  // run one vector memory instruction; returns the vstart of a fault or -1
  task automatic run(vmem_op_t o, bit vm, string name, output int fault_at);
    int fe; logic [63:0] fc, ft;
    int n_req0 = n_mmu_req - cva6_done;
    int nexp;
    ref_requests(o, vm, BeatB);
    fe = fault_elem; fc = fault_cause; ft = fault_tval;
    nexp = exp_q.size();
    if (!vm) m_phys++;
    if (o.mode != MemUnit && vm) m_per_elem++;
    got_req = 0; bad_req = 0; got_exc = 0; got_done = 0; n_vstart = 0; idx_ptr = 0;
    en_vm = vm;
    @(negedge clk); op = o; op_valid = 1;
    @(negedge clk); op_valid = 0;
    fork
      wait (got_done > 0 || (got_exc > 0 && !stall));
      repeat (50000) @(posedge clk);
    join_any
    disable fork;
    repeat (30) @(negedge clk);
    check(bad_req == 0 && got_req == nexp, $sformatf("%s: %0d of %0d requests right", name, got_req - bad_req, nexp));
    fault_at = -1;
    if (fe >= 0) begin
      check(got_exc == 1 && got_done == 0 && last_exc.cause == fc && last_exc.tval == ft,
            $sformatf("%s: exception cause %0d at %h", name, fc, ft));
      check(n_vstart == 1 && last_vstart == 32'(fe), $sformatf("%s: vstart %0d (expected %0d)", name, last_vstart, fe));
      check(!stall && op_ready, {name, ": flushed and idle"});
      if (fc > 8) m_fault++; else m_misaligned++;
      fault_at = fe;
    end else begin
      check(got_done == 1 && got_exc == 0, {name, ": completed"});
    end
  endtask

  function automatic vmem_op_t mk(logic [63:0] base, logic [63:0] stride, int vl, int vstart,
                                   int eew, bit st, mem_mode_e mode);
    vmem_op_t o;
    o.base = base; o.stride = stride; o.vl = 32'(vl); o.vstart = 32'(vstart);
    o.eew = 2'(eew); o.is_store = st; o.mode = mode;
    return o;
  endfunction

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int f;
    vmem_op_t o;
    en_vm = 0; op_valid = 0; op = '0; fault_en = 0; fault_vpn = '0; cva6_on = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // physical addressing (virtual memory off)
    run(mk(64'h8000_0F00, 0, 64, 0, 3, 0, MemUnit), 0, "load, VM off", f);
    // virtual memory with the core translating at the same time
    cva6_on = 1;
    run(mk(64'h4000_0F00, 0, 256, 0, 3, 0, MemUnit), 1, "load across a page", f);
    run(mk(64'h4000_2400, 0, 512, 0, 2, 1, MemUnit), 1, "store inside a page", f);
    run(mk(64'h4000_4000, 0, 256, 0, 3, 1, MemUnit), 1, "store, 256-beat burst", f);
    run(mk(64'h4001_0000, 64'd4104, 16, 0, 3, 0, MemStrided), 1, "strided load", f);
    idx_list = '{64'h0, 64'h2008, 64'h40, 64'h7000, 64'h18, 64'h3000, 64'h10, 64'h8};
    run(mk(64'h4002_0000, 0, 8, 0, 3, 1, MemIndexed), 1, "indexed store", f);
    idx_list.delete();
    run(mk(64'h4003_0002, 64'd8, 4, 0, 2, 0, MemStrided), 1, "misaligned strided load", f);
    // page faults in the middle of loads and stores, resumed from vstart
    for (int t = 0; t < 6; t++) begin
      automatic int eew = t % 4;
      automatic bit st = (t % 2) == 1;
      automatic logic [63:0] base = 64'h4010_0000 + 64'(t) * 64'h4000 + 64'hF00;
      // VLMAX with LMUL = 8: 8 * VLEN / element bits
      automatic int vl = 8 * VLEN / (8 << eew);
      o = mk(base, 0, vl, 0, eew, st, (t == 5) ? MemStrided : MemUnit);
      if (t == 5) begin o.stride = 64'd64; o.vl = 200; end
      fault_en = 1; fault_vpn = tb_vpn(base) + 1;
      run(o, 1, $sformatf("fault %0d", t), f);
      check(f >= 0, $sformatf("fault %0d: faulted", t));
      if (f >= 0) begin
        fault_en = 0;      // the OS maps the page
        o.vstart = 32'(f);
        run(o, 1, $sformatf("resume %0d", t), f);
        check(f < 0, $sformatf("resume %0d: completed", t));
        m_resume++;
      end
    end
    fault_en = 0;
    repeat (200) @(negedge clk);
    cva6_on = 0;
    repeat (100) @(negedge clk);
    check(inval_exp.size() == 0, $sformatf("all invalidations done (%0d left)", inval_exp.size()));
    check(w_beats > 0 && b_seen > 0 && r_beats > 0, $sformatf("data moved: %0d R, %0d W, %0d B", r_beats, w_beats, b_seen));
    check(m_cva6_wait > 0, $sformatf("CVA6 waited for the shared MMU (%0d cycles)", m_cva6_wait));
    check(m_page_split > 0, $sformatf("bursts cut at a page (%0d)", m_page_split));
    check(m_burst_cap > 0, $sformatf("bursts of 256 beats (%0d)", m_burst_cap));
    check(m_per_elem > 0, $sformatf("per-element translation (%0d ops)", m_per_elem));
    check(m_phys > 0, $sformatf("physical addressing (%0d ops)", m_phys));
    check(m_fault > 0 && m_flush > 0, $sformatf("page faults %0d, flushes %0d", m_fault, m_flush));
    check(m_resume > 0, $sformatf("resumes from vstart (%0d)", m_resume));
    check(m_misaligned > 0, $sformatf("misaligned accesses (%0d)", m_misaligned));
    check(m_inval > 0, $sformatf("L1 invalidations (%0d)", m_inval));
    $display("CVA6 wait %0d, page cuts %0d, 256-beat %0d, per-element %0d, phys %0d, faults %0d, flushes %0d, resumes %0d, misaligned %0d, invals %0d, translations %0d (misses %0d), CVA6 %0d",
             m_cva6_wait, m_page_split, m_burst_cap, m_per_elem, m_phys, m_fault, m_flush, m_resume,
             m_misaligned, m_inval, n_mmu_req, n_mmu_miss, cva6_done);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
