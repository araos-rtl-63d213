// tb_araos_matmul: matrix-multiplication memory traffic on the AraOS
// virtual-memory path, at the default two-lane, 64-bit configuration, for
// the three problem sizes 32x32, 64x64 and 128x128 (64-bit elements) and
// for translation buffers of 2, 16, 32 and 128 entries.
//
// The kernel computes C = A * B in blocks of eight rows of C, as a vector
// matmul does: for each block and each k, the vector unit loads row k of B
// (one unit-stride vle64 of n elements) while the scalar core loads the
// eight scalars A[i..i+7][k] it multiplies that row by; each scalar load is
// one translation on CVA6's side of the shared MMU. At the end of a block
// the vector unit stores the eight rows of C. The arithmetic is not
// modelled, only the memory and translation traffic, so the measured
// overheads are upper bounds (vector arithmetic would hide part of them).
//
// The three matrices lie page-aligned one after the other, so the dataset
// spans 3*n*n*8/4096 pages: 6, 24 and 96. The MMU model keeps a
// first-in-first-out translation buffer and walks the page table in 20
// cycles on a miss. The testbench checks, for each size:
//   * the number of distinct pages translated is 6 / 24 / 96;
//   * the vector unit asks for exactly one translation per instruction
//     (each B or C row fits in one page, so it is one burst);
//   * every scalar load is translated right;
//   * a buffer with at least as many entries as pages only takes the
//     compulsory misses (one per page), a 2-entry buffer takes more;
//   * the run time with virtual memory is never below the physical one,
//     and a buffer that holds the dataset is not slower than a 2-entry one.
// It prints the overhead of virtual memory over physical addressing for
// every size and buffer.
module tb_araos_matmul;
  import araos_pkg::*;
  import araos_tb_pkg::*;

  localparam int BeatB  = AxiDataWidth / 8;
  localparam int NrTlb  = 4;
  localparam int TlbSizes [NrTlb] = '{2, 16, 32, 128};
  localparam int MissLat = 20;
  localparam int Block  = 8;
  localparam logic [63:0] DataBase = 64'h6000_0000;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

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

  // one MMU model per buffer size; sel picks the one in use
  int sel;
  mmu_req_t mreq [NrTlb];
  mmu_rsp_t mrsp [NrTlb];
  int nreq [NrTlb], nmiss [NrTlb];
  for (genvar g = 0; g < NrTlb; g++) begin : g_mmu
    assign mreq[g] = (sel == g) ? mmu_req : '0;
    araos_tb_mmu #(.HitLat(1), .MissLat(MissLat), .Entries(TlbSizes[g])) i_mmu (
      .clk_i(clk), .rst_ni(rst_n), .req_i(mreq[g]), .rsp_o(mrsp[g]),
      .fault_en_i(1'b0), .fault_vpn_i(52'd0), .n_req_o(nreq[g]), .n_miss_o(nmiss[g]));
  end
  assign mmu_rsp = mrsp[sel];

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // ------------------------------ full-speed 64-bit AXI memory model
  axi_ax_t rq [4], wq [4];
  int rq_h, rq_n, r_cnt, wq_h, wq_n, w_cnt, b_pend;
  assign ar_ready = rq_n < 4;
  assign r_valid  = rq_n > 0;
  assign r_last   = r_valid && (r_cnt == int'(rq[rq_h].len));
  assign r_id     = rq[rq_h].id;
  assign r_resp   = 2'b00;
  assign r_data   = '0;
  assign aw_ready = wq_n < 4;
  assign w_ready  = wq_n > 0;
  assign b_valid  = b_pend > 0;
  assign b_id     = '0;
  assign b_resp   = 2'b00;
  always @(posedge clk) if (!rst_n) begin
    rq_h <= 0; rq_n <= 0; r_cnt <= 0; wq_h <= 0; wq_n <= 0; w_cnt <= 0; b_pend <= 0;
  end else begin
    if (ar_valid && ar_ready) rq[(rq_h + rq_n) % 4] <= ar;
    if (r_valid && r_ready) begin
      if (r_last) begin r_cnt <= 0; rq_h <= (rq_h + 1) % 4; end
      else r_cnt <= r_cnt + 1;
    end
    rq_n <= rq_n + int'(ar_valid && ar_ready) - int'(r_valid && r_ready && r_last);
    if (aw_valid && aw_ready) wq[(wq_h + wq_n) % 4] <= aw;
    if (w_valid && w_ready) begin
      if (w_last) begin w_cnt <= 0; wq_h <= (wq_h + 1) % 4; end
      else w_cnt <= w_cnt + 1;
    end
    wq_n <= wq_n + int'(aw_valid && aw_ready) - int'(w_valid && w_ready && w_last);
    b_pend <= b_pend + int'(w_valid && w_ready && w_last) - int'(b_valid && b_ready);
  end

  // ------------------------ store unit (VSTU) and load unit (VLDU) models
  // The store unit sends the beats of every AW, back to back.
  int st_beats, st_sent, st_len [$], n_b, n_r, cyc;
  assign vw_valid = st_len.size() != 0;
  assign vw_last  = vw_valid && (st_sent == st_len[0]);
  assign vw_strb  = '1;
  assign vw_data  = '0;
  assign vb_ready = 1'b1;
  assign vr_ready = 1'b1;
  always @(posedge clk) if (!rst_n) begin
    st_sent <= 0; n_b <= 0; n_r <= 0; st_len.delete();
  end else begin
    if (aw_valid && aw_ready) st_len.push_back(int'(aw.len));
    if (vw_valid && vw_ready) begin
      if (vw_last) begin st_sent <= 0; void'(st_len.pop_front()); end
      else st_sent <= st_sent + 1;
    end
    if (vb_valid && vb_ready) n_b <= n_b + 1;
    if (vr_valid && vr_ready && vr_last) n_r <= n_r + 1;
  end
  always @(posedge clk) cyc <= cyc + 1;

  // ---------------------------------------------- translation tracking
  bit pages [logic [51:0]];
  int ara_trans, cva6_bad;
  always @(posedge clk) if (rst_n && mmu_rsp.valid) begin
    pages[tb_vpn(mmu_req.vaddr)] = 1;
    if (!cva6_rsp.valid) ara_trans++;
  end
  assign inval_ready = 1'b1;

  // ------------------------------------------------------ the kernel
  // one scalar load of A[row][k] by CVA6; without virtual memory it
  // takes the two cycles of a translation-buffer hit and no translation
  task automatic scalar_load(logic [63:0] va);
    if (!en_vm) begin repeat (2) @(negedge clk); return; end
    @(negedge clk);
    cva6_req.req = 1; cva6_req.vaddr = va; cva6_req.is_st = 0;
    do @(posedge clk); while (!cva6_rsp.valid);
    if (cva6_rsp.paddr != tb_translate(va) || cva6_rsp.exception.valid) cva6_bad++;
    @(negedge clk);
    cva6_req.req = 0;
  endtask

  task automatic vector_op(logic [63:0] va, int n, bit st);
    @(negedge clk);
    op = '0; op.base = va; op.vl = 32'(n); op.eew = 2'd3; op.is_store = st; op.mode = MemUnit;
    op_valid = 1;
    do @(posedge clk); while (!op_ready);
    @(negedge clk); op_valid = 0;
  endtask

  // runs C = A * B for n x n; returns the cycles taken and the number of
  // vector instructions issued
  task automatic matmul(int n, bit vm, int tlb, output int cycles, output int nops);
    logic [63:0] a = DataBase;
    logic [63:0] b = DataBase + 64'(n * n * 8);
    logic [63:0] c = DataBase + 64'(2 * n * n * 8);
    int t0;
    rst_n = 0; sel = tlb; en_vm = vm;
    repeat (3) @(negedge clk);
    rst_n = 1;
    pages.delete(); ara_trans = 0;
    @(negedge clk);
    t0 = cyc; nops = 0;
    for (int i = 0; i < n; i += Block) begin
      for (int k = 0; k < n; k++) begin
        fork
          vector_op(b + 64'(k * n * 8), n, 0);
          for (int r = 0; r < Block; r++) scalar_load(a + 64'(((i + r) * n + k) * 8));
        join
        nops++;
      end
      for (int r = 0; r < Block; r++) begin vector_op(c + 64'((i + r) * n * 8), n, 1); nops++; end
    end
    while (n_r < n * n / Block || n_b < n) @(negedge clk);
    cycles = cyc - t0;
  endtask

  initial begin
    repeat (6000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int sizes [3] = '{32, 64, 128};
    int t_phys, t_vm [NrTlb], nops, np;
    cva6_req = '0; preceding_done = 0; flush_ack = 0; exc_ready = 1;
    idx_valid = 0; idx = '0; op_valid = 0; op = '0; en_vm = 0; sel = 0; cyc = 0; cva6_bad = 0;
    for (int s = 0; s < 3; s++) begin
      automatic int n = sizes[s];
      automatic int exp_pages = 3 * n * n * 8 / 4096;
      matmul(n, 0, 0, t_phys, nops);
      check(nreq[0] == 0, $sformatf("%0dx%0d physical: no translations", n, n));
      for (int g = 0; g < NrTlb; g++) begin
        matmul(n, 1, g, t_vm[g], nops);
        np = pages.num();
        check(np == exp_pages, $sformatf("%0dx%0d: %0d pages touched, expected %0d", n, n, np, exp_pages));
        check(ara_trans == nops, $sformatf("%0dx%0d: %0d vector translations for %0d instructions", n, n, ara_trans, nops));
        check(nreq[g] == nops + n * n, $sformatf("%0dx%0d: %0d translations in all", n, n, nreq[g]));
        if (TlbSizes[g] >= exp_pages)
          check(nmiss[g] == exp_pages, $sformatf("%0dx%0d, %0d entries: %0d misses, only compulsory ones expected",
                                                 n, n, TlbSizes[g], nmiss[g]));
        else if (TlbSizes[g] == 2)
          check(nmiss[g] > exp_pages, $sformatf("%0dx%0d, 2 entries: %0d misses", n, n, nmiss[g]));
        check(t_vm[g] >= t_phys, $sformatf("%0dx%0d: virtual not faster than physical", n, n));
        $display("matmul %0dx%0d  TLB %3d entries: %0d cycles vs %0d physical (+%0d.%02d %%), %0d translations, %0d misses",
                 n, n, TlbSizes[g], t_vm[g], t_phys, (t_vm[g] - t_phys) * 100 / t_phys,
                 ((t_vm[g] - t_phys) * 10000 / t_phys) % 100, nreq[g], nmiss[g]);
      end
      check(t_vm[NrTlb-1] <= t_vm[0], $sformatf("%0dx%0d: 128 entries not slower than 2", n, n));
    end
    check(cva6_bad == 0, $sformatf("scalar translations right (%0d wrong)", cva6_bad));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
