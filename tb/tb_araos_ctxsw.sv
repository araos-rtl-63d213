// tb_araos_ctxsw: vector context-switch workload on the AraOS
// virtual-memory path, at the default two-lane, 64-bit configuration.
//
// An OS switching between two vector processes saves the whole vector
// register file (32 registers of VLEN = 2048 bits, 8 KiB) to memory and
// later loads it back. With LMUL = 8 this is four unit-stride stores of
// 256 64-bit elements (vse64.v v0, v8, v16, v24) followed by four such
// loads, all to a virtually addressed save area of two 4-KiB pages.
// Each instruction is one 2-KiB burst of 256 beats and costs one
// translation. At 64 bits per cycle the 16 KiB moved take 2048 cycles, so
// the whole save-and-restore should take about 2k cycles.
//
// The memory, the store unit and the load unit around the design all run
// at one beat per cycle. The testbench checks that the data read back is
// the data saved, the number of translations (one per burst), the
// invalidations of every stored line, and that the cycle count from the
// first store to the last loaded beat lies between the 2048-cycle data
// bound and 10 % above it. Vector CSRs and the scalar part of the switch
// are not modelled.
module tb_araos_ctxsw;
  import araos_pkg::*;
  import araos_tb_pkg::*;

  localparam int BeatB    = AxiDataWidth / 8;
  localparam int VrfBytes = 32 * VLEN / 8;        // 8 KiB
  localparam int OpBytes  = 8 * VLEN / 8;         // LMUL = 8: 2 KiB per instruction
  localparam int NrOps    = VrfBytes / OpBytes;   // 4 stores, then 4 loads
  localparam int DataCycles = 2 * VrfBytes / (SocDataWidth / 8);
  localparam logic [63:0] SaveArea = 64'h5000_0000;

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

  int n_mmu_req, n_mmu_miss;
  araos_tb_mmu #(.HitLat(1), .MissLat(8), .Entries(16)) mmu (
    .clk_i(clk), .rst_ni(rst_n), .req_i(mmu_req), .rsp_o(mmu_rsp),
    .fault_en_i(1'b0), .fault_vpn_i(52'd0), .n_req_o(n_mmu_req), .n_miss_o(n_mmu_miss));

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // content of VRF byte k (register k / 256, byte k % 256)
  function automatic logic [7:0] vrf_byte(int k);
    return 8'(k * 37 + 11) ^ 8'(k >> 8);
  endfunction

  // ------------------------------ full-speed 64-bit AXI memory model
  // Reads: up to four ARs queued, one R beat per cycle. Writes: up to four
  // AWs queued, W always ready while a burst is open, B right after the
  // last beat.
  logic [7:0] mem [logic [63:0]];
  axi_ax_t rq [4], wq [4];
  int rq_h, rq_n, r_cnt, wq_h, wq_n, w_cnt, b_pend;
  assign ar_ready = rq_n < 4;
  assign r_valid  = rq_n > 0;
  assign r_last   = r_valid && (r_cnt == int'(rq[rq_h].len));
  assign r_id     = rq[rq_h].id;
  assign r_resp   = 2'b00;
  always_comb begin
    logic [63:0] ba;
    ba = (rq[rq_h].addr & ~64'(SocDataWidth / 8 - 1)) + 64'(r_cnt * SocDataWidth / 8);
    for (int b = 0; b < SocDataWidth / 8; b++)
      r_data[b*8 +: 8] = mem.exists(ba + 64'(b)) ? mem[ba + 64'(b)] : 8'hEE;
  end
  assign aw_ready = wq_n < 4;
  assign w_ready  = wq_n > 0;
  assign b_valid  = b_pend > 0;
  assign b_id     = '0;
  assign b_resp   = 2'b00;
  always @(posedge clk) if (rst_n) begin
    if (ar_valid && ar_ready) begin rq[(rq_h + rq_n) % 4] <= ar; end
    if (r_valid && r_ready) begin
      if (r_last) begin r_cnt <= 0; rq_h <= (rq_h + 1) % 4; end
      else r_cnt <= r_cnt + 1;
    end
    rq_n <= rq_n + int'(ar_valid && ar_ready) - int'(r_valid && r_ready && r_last);
    if (aw_valid && aw_ready) wq[(wq_h + wq_n) % 4] <= aw;
    if (w_valid && w_ready) begin
      automatic logic [63:0] ba = (wq[wq_h].addr & ~64'(SocDataWidth / 8 - 1)) + 64'(w_cnt * SocDataWidth / 8);
      for (int b = 0; b < SocDataWidth / 8; b++) if (w_strb[b]) mem[ba + 64'(b)] = w_data[b*8 +: 8];
      checks++;
      if (w_last != (w_cnt == int'(wq[wq_h].len))) begin failures++; $display("FAIL: W last"); end
      if (w_last) begin w_cnt <= 0; wq_h <= (wq_h + 1) % 4; end
      else w_cnt <= w_cnt + 1;
    end
    wq_n <= wq_n + int'(aw_valid && aw_ready) - int'(w_valid && w_ready && w_last);
    b_pend <= b_pend + int'(w_valid && w_ready && w_last) - int'(b_valid && b_ready);
  end

  // ------------------------------------------- store unit (VSTU) model
  // Streams the VRF, one beat per cycle, as soon as the first AW is out.
  int st_beat, n_aw;
  assign vw_valid = (st_beat < VrfBytes / BeatB) && (st_beat / (OpBytes / BeatB) < n_aw);
  assign vw_last  = vw_valid && ((st_beat % (OpBytes / BeatB)) == OpBytes / BeatB - 1);
  assign vw_strb  = '1;
  always_comb
    for (int b = 0; b < BeatB; b++) vw_data[b*8 +: 8] = vrf_byte(st_beat * BeatB + b);
  assign vb_ready = 1'b1;
  int n_b, ld_beat, ld_bad, t_last_beat;
  always @(posedge clk) if (rst_n) begin
    if (aw_valid && aw_ready) n_aw <= n_aw + 1;
    if (vw_valid && vw_ready) st_beat <= st_beat + 1;
    if (vb_valid && vb_ready) n_b <= n_b + 1;
    // load unit (VLDU): always ready, checks the restored bytes
    if (vr_valid && vr_ready) begin
      for (int b = 0; b < BeatB; b++)
        if (vr_data[b*8 +: 8] != vrf_byte(ld_beat * BeatB + b)) ld_bad++;
      ld_beat <= ld_beat + 1;
      t_last_beat <= cyc;
    end
  end
  assign vr_ready = 1'b1;

  // ---------------------------------------------- invalidation check
  int n_inval, inval_bad;
  assign inval_ready = 1'b1;
  always @(posedge clk) if (rst_n && inval_valid) begin
    // the save area is walked line by line, in order
    if (inval_addr != PAddrWidth'(tb_translate(SaveArea + 64'(n_inval * DCacheLineB)))) inval_bad++;
    n_inval++;
  end

  int cyc;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int t0, n_done;
    cva6_req = '0; preceding_done = 0; flush_ack = 0; exc_ready = 1;
    idx_valid = 0; idx = '0;
    en_vm = 1; op_valid = 0; op = '0;
    rq_h = 0; rq_n = 0; r_cnt = 0; wq_h = 0; wq_n = 0; w_cnt = 0; b_pend = 0;
    st_beat = 0; n_aw = 0; n_b = 0; ld_beat = 0; ld_bad = 0; n_inval = 0; inval_bad = 0; cyc = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    t0 = cyc;
    n_done = 0;
    // save: vse64.v v0, v8, v16, v24; then restore with vle64.v
    for (int i = 0; i < 2 * NrOps; i++) begin
      op          = '0;
      op.base     = SaveArea + 64'((i % NrOps) * OpBytes);
      op.vl       = 32'(OpBytes / 8);
      op.eew      = 2'd3;
      op.is_store = (i < NrOps);
      op.mode     = MemUnit;
      op_valid    = 1;
      do @(posedge clk); while (!op_ready);
      @(negedge clk); op_valid = 0;
      while (!op_done) @(negedge clk);
      n_done++;
      // the restore loads wait for the saved data to be written
      if (i == NrOps - 1) while (n_b < NrOps) @(negedge clk);
    end
    while (ld_beat < VrfBytes / BeatB) @(negedge clk);
    repeat (5) @(negedge clk);
    check(n_done == 2 * NrOps, $sformatf("%0d instructions completed", n_done));
    check(st_beat == VrfBytes / BeatB && n_b == NrOps, $sformatf("saved %0d beats, %0d B responses", st_beat, n_b));
    check(ld_bad == 0, $sformatf("restored VRF matches the saved one (%0d bad bytes)", ld_bad));
    check(n_mmu_req == 2 * NrOps, $sformatf("one translation per 2-KiB burst (%0d)", n_mmu_req));
    check(n_inval == NrOps * ((1 << DCacheIdxBits) / DCacheLineB) && inval_bad == 0,
          $sformatf("%0d L1 lines invalidated in order (%0d wrong)", n_inval, inval_bad));
    check(!exc_valid && !stall, "no exception");
    check(t_last_beat - t0 >= DataCycles && t_last_beat - t0 <= DataCycles + DataCycles / 10,
          $sformatf("save + restore took %0d cycles (data bound %0d)", t_last_beat - t0, DataCycles));
    $display("context switch: %0d cycles for %0d bytes saved and restored, %0d translations (%0d misses)",
             t_last_beat - t0, 2 * VrfBytes, n_mmu_req, n_mmu_miss);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
