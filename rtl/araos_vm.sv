// araos_vm: the virtual-memory support path of the AraOS vector processor.
//
// AraOS runs the Ara2 RISC-V vector unit next to the CVA6 host core under an
// operating system. Ara2 has no MMU of its own: its address generator asks
// CVA6's MMU for every translation, and that MMU is time-shared between
// the core and the vector unit. This module joins the parts that make that
// work:
//   * araos_addrgen      - vector address generation, one translation per
//                          AXI burst (per element for strided/indexed);
//   * araos_mmu_arbiter  - shares CVA6's MMU between CVA6's LSU (port 0)
//                          and the address generator (port 1);
//   * araos_flush_fsm    - on a page fault: vstart update, exception
//                          report to CVA6, frontend stall and backend flush;
//   * araos_inval_filter - invalidates CVA6's L1 D$ lines written by
//                          vector stores seen on AW;
//   * araos_axi_downsizer - narrows Ara2's 32*L-bit AXI port to the
//                          64-bit SoC crossbar.
// The vector operation source (Ara2 sequencer), the MMU itself, the L1
// cache, the backend flush chain and the SoC crossbar are outside and
// connect through the ports: the R/W/B data of Ara2's load and store
// units on the wide side, the whole narrow AXI port on the SoC side.
// With the main two-lane configuration Ara2's AXI port is 64 bits wide,
// as wide as the SoC crossbar, and the downsizer reduces to wires.
//
// Timing: everything runs on clk_i with the asynchronous active-low reset
// rst_ni. The flush pulse of the FSM also returns the address generator to
// idle.
module araos_vm
  import araos_pkg::*;
(
  input  logic                  clk_i,
  input  logic                  rst_ni,
  input  logic                  en_virt_mem_i,    // from CVA6's satp
  // vector memory operations from Ara2's sequencer
  input  logic                  op_valid_i,
  output logic                  op_ready_o,
  input  vmem_op_t              op_i,
  input  logic                  idx_valid_i,
  output logic                  idx_ready_o,
  input  logic [63:0]           idx_i,
  output logic                  op_done_o,
  // CVA6 LSU translation port
  input  mmu_req_t              cva6_mmu_req_i,
  output mmu_rsp_t              cva6_mmu_rsp_o,
  // shared CVA6 MMU
  output mmu_req_t              mmu_req_o,
  input  mmu_rsp_t              mmu_rsp_i,
  // wide AXI data of Ara2's load/store units (VLDU, VSTU)
  output logic                  vldu_r_valid_o,
  input  logic                  vldu_r_ready_i,
  output logic [AxiIdWidth-1:0] vldu_r_id_o,
  output logic [AxiDataWidth-1:0] vldu_r_data_o,
  output logic [1:0]            vldu_r_resp_o,
  output logic                  vldu_r_last_o,
  input  logic                  vstu_w_valid_i,
  output logic                  vstu_w_ready_o,
  input  logic [AxiDataWidth-1:0] vstu_w_data_i,
  input  logic [AxiDataWidth/8-1:0] vstu_w_strb_i,
  input  logic                  vstu_w_last_i,
  output logic                  vstu_b_valid_o,
  input  logic                  vstu_b_ready_i,
  output logic [AxiIdWidth-1:0] vstu_b_id_o,
  output logic [1:0]            vstu_b_resp_o,
  // 64-bit AXI port towards the SoC crossbar
  output logic                  ar_valid_o,
  input  logic                  ar_ready_i,
  output axi_ax_t               ar_o,
  input  logic                  r_valid_i,
  output logic                  r_ready_o,
  input  logic [AxiIdWidth-1:0] r_id_i,
  input  logic [SocDataWidth-1:0] r_data_i,
  input  logic [1:0]            r_resp_i,
  input  logic                  r_last_i,
  output logic                  aw_valid_o,
  input  logic                  aw_ready_i,
  output axi_ax_t               aw_o,
  output logic                  w_valid_o,
  input  logic                  w_ready_i,
  output logic [SocDataWidth-1:0] w_data_o,
  output logic [SocDataWidth/8-1:0] w_strb_o,
  output logic                  w_last_o,
  input  logic                  b_valid_i,
  output logic                  b_ready_o,
  input  logic [AxiIdWidth-1:0] b_id_i,
  input  logic [1:0]            b_resp_i,
  // L1 D$ invalidation
  output logic                  inval_valid_o,
  input  logic                  inval_ready_i,
  output logic [PAddrWidth-1:0] inval_addr_o,
  // exception handling
  input  logic                  preceding_done_i,
  input  logic                  flush_ack_i,
  output logic                  stall_o,
  output logic                  flush_o,
  output logic                  vstart_we_o,
  output logic [31:0]           vstart_o,
  output logic                  exc_resp_valid_o,
  input  logic                  exc_resp_ready_i,
  output exception_t            exc_resp_o,
  // status
  output logic                  ag_busy_o,        // address generator busy
  output logic                  mmu_busy_o,       // shared MMU in use
  output logic                  mmu_owner_o       // 0: CVA6, 1: Ara2
);

  mmu_req_t   arb_req [2];
  mmu_rsp_t   arb_rsp [2];
  logic       ag_aw_valid, ag_aw_ready, ag_ar_valid, ag_ar_ready;
  axi_ax_t    ag_aw, ag_ar;
  logic       f_aw_valid, f_aw_ready;
  axi_ax_t    f_aw;
  logic       exc_valid;
  exception_t exc;
  logic [31:0] exc_elem;

  assign arb_req[0]     = cva6_mmu_req_i;
  assign cva6_mmu_rsp_o = arb_rsp[0];

  araos_addrgen i_addrgen (
    .clk_i, .rst_ni, .en_virt_mem_i,
    .flush_i     (flush_o),
    .op_valid_i, .op_ready_o, .op_i,
    .idx_valid_i, .idx_ready_o, .idx_i,
    .mmu_req_o   (arb_req[1]),
    .mmu_rsp_i   (arb_rsp[1]),
    .ar_valid_o  (ag_ar_valid),
    .ar_ready_i  (ag_ar_ready),
    .ar_o        (ag_ar),
    .aw_valid_o  (ag_aw_valid),
    .aw_ready_i  (ag_aw_ready),
    .aw_o        (ag_aw),
    .busy_o      (ag_busy_o),
    .done_o      (op_done_o),
    .exc_valid_o (exc_valid),
    .exc_o       (exc),
    .exc_elem_o  (exc_elem)
  );

  araos_mmu_arbiter i_mmu_arbiter (
    .clk_i, .rst_ni,
    .req_i     (arb_req),
    .rsp_o     (arb_rsp),
    .mmu_req_o, .mmu_rsp_i,
    .busy_o    (mmu_busy_o),
    .owner_o   (mmu_owner_o)
  );

  araos_flush_fsm i_flush_fsm (
    .clk_i, .rst_ni,
    .exc_valid_i      (exc_valid),
    .exc_i            (exc),
    .exc_elem_i       (exc_elem),
    .preceding_done_i, .flush_ack_i,
    .stall_o, .flush_o, .vstart_we_o, .vstart_o,
    .resp_valid_o     (exc_resp_valid_o),
    .resp_ready_i     (exc_resp_ready_i),
    .resp_exc_o       (exc_resp_o)
  );

  araos_inval_filter i_inval_filter (
    .clk_i, .rst_ni,
    .aw_valid_i (ag_aw_valid),
    .aw_ready_o (ag_aw_ready),
    .aw_i       (ag_aw),
    .aw_valid_o (f_aw_valid),
    .aw_ready_i (f_aw_ready),
    .aw_o       (f_aw),
    .inval_valid_o, .inval_ready_i, .inval_addr_o
  );

  araos_axi_downsizer #(
    .WideW   (AxiDataWidth),
    .NarrowW (SocDataWidth)
  ) i_downsizer (
    .clk_i, .rst_ni,
    .s_ar_valid_i (ag_ar_valid),
    .s_ar_ready_o (ag_ar_ready),
    .s_ar_i       (ag_ar),
    .s_r_valid_o  (vldu_r_valid_o),
    .s_r_ready_i  (vldu_r_ready_i),
    .s_r_id_o     (vldu_r_id_o),
    .s_r_data_o   (vldu_r_data_o),
    .s_r_resp_o   (vldu_r_resp_o),
    .s_r_last_o   (vldu_r_last_o),
    .s_aw_valid_i (f_aw_valid),
    .s_aw_ready_o (f_aw_ready),
    .s_aw_i       (f_aw),
    .s_w_valid_i  (vstu_w_valid_i),
    .s_w_ready_o  (vstu_w_ready_o),
    .s_w_data_i   (vstu_w_data_i),
    .s_w_strb_i   (vstu_w_strb_i),
    .s_w_last_i   (vstu_w_last_i),
    .s_b_valid_o  (vstu_b_valid_o),
    .s_b_ready_i  (vstu_b_ready_i),
    .s_b_id_o     (vstu_b_id_o),
    .s_b_resp_o   (vstu_b_resp_o),
    .m_ar_valid_o (ar_valid_o),
    .m_ar_ready_i (ar_ready_i),
    .m_ar_o       (ar_o),
    .m_r_valid_i  (r_valid_i),
    .m_r_ready_o  (r_ready_o),
    .m_r_id_i     (r_id_i),
    .m_r_data_i   (r_data_i),
    .m_r_resp_i   (r_resp_i),
    .m_r_last_i   (r_last_i),
    .m_aw_valid_o (aw_valid_o),
    .m_aw_ready_i (aw_ready_i),
    .m_aw_o       (aw_o),
    .m_w_valid_o  (w_valid_o),
    .m_w_ready_i  (w_ready_i),
    .m_w_data_o   (w_data_o),
    .m_w_strb_o   (w_strb_o),
    .m_w_last_o   (w_last_o),
    .m_b_valid_i  (b_valid_i),
    .m_b_ready_o  (b_ready_o),
    .m_b_id_i     (b_id_i),
    .m_b_resp_i   (b_resp_i)
  );

endmodule
