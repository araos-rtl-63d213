// araos_addrgen: address generator (ADDRGEN) of Ara2's vector load/store
// unit, extended for virtual memory.
//
// It takes one vector memory operation at a time (base, stride, vl, vstart,
// element width, load/store, unit-stride/strided/indexed) and emits the AXI
// AR (loads) or AW (stores) requests that carry it out, in element order:
//   * unit stride: one INCR burst of full-width beats per chunk, where a
//     chunk ends at the next 4-KiB page boundary, at the 256-beat AXI limit
//     or at the last element, whichever comes first;
//   * strided and indexed: one single-beat request per element, with the
//     element's own size (indexed offsets arrive on the idx_* stream).
// When en_virt_mem_i is set, every AXI request is preceded by exactly one
// translation on the MMU interface (req held with vaddr/is_st until the MMU
// answers valid with paddr/exception), so a unit-stride burst costs a single
// translation. Without virtual memory the virtual address is used as is.
// A misaligned element or an MMU exception stops the operation: no further
// translation is requested, exc_valid_o pulses with the cause, the faulting
// address and the index of the faulty element (the future vstart), and the
// unit waits in its fault state until flush_i clears it.
//
// Timing: op_ready_o is high only when idle. Per AXI request it spends one
// cycle computing the chunk, the MMU round trip (if enabled), and one or
// more cycles offering the request until ready. done_o pulses one cycle
// after the last request of an operation is accepted.
//
// From the paper: one translation per AXI AR/AW transaction, bursts cut at
// 4-KiB pages, per-element translation for indexed accesses, no further
// translation after a fault. This design's own choices: the FSM split, the
// misalignment check (Ara2's exact checks are not given), the operation
// bundle and the fault/flush handshake.
module araos_addrgen
  import araos_pkg::*;
#(
  parameter int unsigned BeatBytes = AxiDataWidth / 8  // bytes per AXI beat
) (
  input  logic       clk_i,
  input  logic       rst_ni,
  input  logic       en_virt_mem_i,
  input  logic       flush_i,
  // vector memory operation from the sequencer
  input  logic       op_valid_i,
  output logic       op_ready_o,
  input  vmem_op_t   op_i,
  // byte offsets of an indexed access, one per element from vstart on
  input  logic       idx_valid_i,
  output logic       idx_ready_o,
  input  logic [63:0] idx_i,
  // MMU interface (to the shared MMU arbiter)
  output mmu_req_t   mmu_req_o,
  input  mmu_rsp_t   mmu_rsp_i,
  // AXI address channels
  output logic       ar_valid_o,
  input  logic       ar_ready_i,
  output axi_ax_t    ar_o,
  output logic       aw_valid_o,
  input  logic       aw_ready_i,
  output axi_ax_t    aw_o,
  // status
  output logic       busy_o,
  output logic       done_o,
  output logic       exc_valid_o,
  output exception_t exc_o,
  output logic [31:0] exc_elem_o
);

  localparam int unsigned BeatShift = $clog2(BeatBytes);
  localparam int unsigned PageBytes = 1 << PageOffset;

  typedef enum logic [2:0] {Idle, Calc, Trans, Issue, Fault} state_e;
  state_e state_q, state_d;

  vmem_op_t        op_q;
  logic [63:0]     cur_vaddr_q;   // running address (unit/strided)
  logic [31:0]     cur_elem_q;    // first element of the current request
  logic [31:0]     rem_q;         // elements still to access
  logic [63:0]     req_vaddr_q;   // virtual address of the current request
  logic [63:0]     req_paddr_q;   // its physical address
  logic [31:0]     chunk_elems_q; // elements covered by the current request
  logic [12:0]     chunk_bytes_q;
  logic [7:0]      len_q;
  logic [2:0]      size_q;

  // ------------------------------------------------ chunk computation
  logic [63:0] calc_vaddr;
  logic [63:0] bytes_rem;
  logic [63:0] page_left, burst_cap, beat_off, chunk_bytes;
  logic [63:0] beats;
  logic        misaligned;

  always_comb begin
    calc_vaddr  = (op_q.mode == MemIndexed) ? op_q.base + idx_i : cur_vaddr_q;
    misaligned  = (calc_vaddr & ((64'd1 << op_q.eew) - 64'd1)) != 64'd0;
    bytes_rem   = 64'(rem_q) << op_q.eew;
    beat_off    = calc_vaddr & 64'(BeatBytes - 1);
    page_left   = 64'(PageBytes) - 64'(calc_vaddr[PageOffset-1:0]);
    burst_cap   = 64'(256 * BeatBytes) - beat_off;
    chunk_bytes = bytes_rem;
    if (page_left < chunk_bytes) chunk_bytes = page_left;
    if (burst_cap < chunk_bytes) chunk_bytes = burst_cap;
    beats       = (beat_off + chunk_bytes + 64'(BeatBytes - 1)) >> BeatShift;
  end

  // ------------------------------------------------------------ FSM
  always_comb begin
    state_d = state_q;
    unique case (state_q)
      Idle:  if (op_valid_i && op_i.vstart < op_i.vl) state_d = Calc;
      Calc:  if (op_q.mode != MemIndexed || idx_valid_i) begin
               if (misaligned)         state_d = Fault;
               else if (en_virt_mem_i) state_d = Trans;
               else                    state_d = Issue;
             end
      Trans: if (mmu_rsp_i.valid)
               state_d = mmu_rsp_i.exception.valid ? Fault : Issue;
      Issue: if (op_q.is_store ? aw_ready_i : ar_ready_i)
               state_d = (rem_q == chunk_elems_q) ? Idle : Calc;
      Fault: ;
      default: state_d = Idle;
    endcase
    if (flush_i) state_d = Idle;
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q       <= Idle;
      op_q          <= '0;
      cur_vaddr_q   <= '0;
      cur_elem_q    <= '0;
      rem_q         <= '0;
      req_vaddr_q   <= '0;
      req_paddr_q   <= '0;
      chunk_elems_q <= '0;
      chunk_bytes_q <= '0;
      len_q         <= '0;
      size_q        <= '0;
    end else begin
      state_q <= state_d;
      unique case (state_q)
        Idle: if (op_valid_i) begin
          op_q       <= op_i;
          cur_elem_q <= op_i.vstart;
          rem_q      <= op_i.vl - op_i.vstart;
          if (op_i.mode == MemUnit)
            cur_vaddr_q <= op_i.base + (64'(op_i.vstart) << op_i.eew);
          else
            cur_vaddr_q <= op_i.base + 64'(op_i.vstart) * op_i.stride;
        end
        Calc: if (op_q.mode != MemIndexed || idx_valid_i) begin
          req_vaddr_q <= calc_vaddr;
          req_paddr_q <= calc_vaddr;
          if (op_q.mode == MemUnit) begin
            chunk_bytes_q <= chunk_bytes[12:0];
            chunk_elems_q <= 32'(chunk_bytes >> op_q.eew);
            len_q         <= 8'(beats - 64'd1);
            size_q        <= 3'(BeatShift);
          end else begin
            chunk_bytes_q <= 13'd1 << op_q.eew;
            chunk_elems_q <= 32'd1;
            len_q         <= 8'd0;
            size_q        <= {1'b0, op_q.eew};
          end
        end
        Trans: if (mmu_rsp_i.valid) req_paddr_q <= 64'(mmu_rsp_i.paddr);
        Issue: if (op_q.is_store ? aw_ready_i : ar_ready_i) begin
          cur_elem_q <= cur_elem_q + chunk_elems_q;
          rem_q      <= rem_q - chunk_elems_q;
          if (op_q.mode == MemUnit) cur_vaddr_q <= cur_vaddr_q + 64'(chunk_bytes_q);
          else                      cur_vaddr_q <= cur_vaddr_q + op_q.stride;
        end
        default: ;
      endcase
    end
  end

  // --------------------------------------------------------- outputs
  axi_ax_t ax;
  always_comb begin
    ax       = '0;
    ax.addr  = req_paddr_q;
    ax.len   = len_q;
    ax.size  = size_q;
    ax.burst = AxiBurstIncr;
  end

  assign op_ready_o  = (state_q == Idle);
  assign busy_o      = (state_q != Idle);
  assign idx_ready_o = (state_q == Calc) && (op_q.mode == MemIndexed);

  assign mmu_req_o.req   = (state_q == Trans);
  assign mmu_req_o.vaddr = req_vaddr_q;
  assign mmu_req_o.is_st = op_q.is_store;

  assign ar_valid_o = (state_q == Issue) && !op_q.is_store;
  assign aw_valid_o = (state_q == Issue) &&  op_q.is_store;
  assign ar_o       = ax;
  assign aw_o       = ax;

  // done: an operation that had nothing to do, or its last request accepted
  logic done_q;
  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) done_q <= 1'b0;
    else done_q <= ((state_q == Issue) && (state_d == Idle) && !flush_i)
                || ((state_q == Idle) && op_valid_i && op_i.vstart >= op_i.vl);
  end
  assign done_o = done_q;

  // exception report, one pulse when entering Fault
  always_comb begin
    exc_valid_o = 1'b0;
    exc_o       = '0;
    if (state_q == Calc && state_d == Fault) begin
      exc_valid_o = 1'b1;
      exc_o.valid = 1'b1;
      exc_o.cause = op_q.is_store ? CauseStMisaligned : CauseLdMisaligned;
      exc_o.tval  = calc_vaddr;
    end else if (state_q == Trans && state_d == Fault) begin
      exc_valid_o = 1'b1;
      exc_o       = mmu_rsp_i.exception;
    end
  end
  assign exc_elem_o = cur_elem_q;

  // a translation request stays up until the MMU answers
  assert property (@(posedge clk_i) disable iff (!rst_ni || flush_i)
                   mmu_req_o.req && !mmu_rsp_i.valid |=> mmu_req_o.req);
  // an offered AXI request is held stable until accepted
  assert property (@(posedge clk_i) disable iff (!rst_ni || flush_i)
                   ar_valid_o && !ar_ready_i |=> ar_valid_o && $stable(ar_o));
  assert property (@(posedge clk_i) disable iff (!rst_ni || flush_i)
                   aw_valid_o && !aw_ready_i |=> aw_valid_o && $stable(aw_o));
  // no unit-stride burst crosses a 4-KiB page
  assert property (@(posedge clk_i) disable iff (!rst_ni)
                   (state_q == Issue && op_q.mode == MemUnit) |->
                   (64'(req_vaddr_q[PageOffset-1:0]) + 64'(chunk_bytes_q) <= 64'(PageBytes)));

endmodule
