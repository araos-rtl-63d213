// araos_flush_fsm: post-page-fault flush controller of Ara2's frontend.
//
// A vector memory instruction can fault in the middle of its elements. When
// the address generator reports such a fault (exc_valid_i, with the cause,
// the faulting address and the index of the faulty element), this FSM
//   1. saves the faulty element index into vstart (vstart_we_o) and
//      reports the exception to CVA6 on the response port (held until
//      resp_ready_i), and starts stalling the frontend (stall_o);
//   2. waits in WaitCommit until the backend signals that every operation
//      before the faulty element has committed its architectural state
//      (preceding_done_i);
//   3. injects a one-cycle flush request into the backend (flush_o), which
//      clears the micro-architectural state stage by stage;
//   4. waits in WaitAck for the backend's acknowledge (flush_ack_i), then
//      releases the stall and returns to Idle.
// Faults that arrive while a flush is under way are ignored: the address
// generator stops at the first one.
//
// Timing: stall_o rises in the cycle after exc_valid_i and falls in the
// cycle after flush_ack_i. flush_o is high in exactly one cycle, the one
// after preceding_done_i is seen in WaitCommit.
//
// From the paper: the fault index saved to vstart, the exception report to
// CVA6, the stall until preceding operations committed, the flush injected
// into the backend and its acknowledge back to this FSM. The signal names,
// the one-cycle flush pulse and the response handshake are this design's
// choices.
module araos_flush_fsm
  import araos_pkg::*;
(
  input  logic        clk_i,
  input  logic        rst_ni,
  // fault report from the address generator
  input  logic        exc_valid_i,
  input  exception_t  exc_i,
  input  logic [31:0] exc_elem_i,
  // backend status
  input  logic        preceding_done_i,
  input  logic        flush_ack_i,
  // frontend control
  output logic        stall_o,
  output logic        flush_o,
  output logic        vstart_we_o,
  output logic [31:0] vstart_o,
  // exception response to CVA6
  output logic        resp_valid_o,
  input  logic        resp_ready_i,
  output exception_t  resp_exc_o
);

  typedef enum logic [1:0] {Idle, WaitCommit, Flush, WaitAck} state_e;
  state_e state_q, state_d;

  logic       resp_valid_q;
  exception_t resp_exc_q;

  always_comb begin
    state_d = state_q;
    unique case (state_q)
      Idle:       if (exc_valid_i)      state_d = WaitCommit;
      WaitCommit: if (preceding_done_i) state_d = Flush;
      Flush:                            state_d = WaitAck;
      WaitAck:    if (flush_ack_i)      state_d = Idle;
      default:                          state_d = Idle;
    endcase
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q      <= Idle;
      resp_valid_q <= 1'b0;
      resp_exc_q   <= '0;
      vstart_o     <= '0;
      vstart_we_o  <= 1'b0;
    end else begin
      state_q     <= state_d;
      vstart_we_o <= 1'b0;
      if (resp_valid_q && resp_ready_i) resp_valid_q <= 1'b0;
      if (state_q == Idle && exc_valid_i) begin
        vstart_o     <= exc_elem_i;
        vstart_we_o  <= 1'b1;
        resp_valid_q <= 1'b1;
        resp_exc_q   <= exc_i;
      end
    end
  end

  assign stall_o      = (state_q != Idle);
  assign flush_o      = (state_q == Flush);
  assign resp_valid_o = resp_valid_q;
  assign resp_exc_o   = resp_exc_q;

  // the response stays up until CVA6 takes it
  assert property (@(posedge clk_i) disable iff (!rst_ni)
                   resp_valid_o && !resp_ready_i |=> resp_valid_o && $stable(resp_exc_o));
  // a flush is only injected after the preceding operations committed
  assert property (@(posedge clk_i) disable iff (!rst_ni)
                   flush_o |-> $past(preceding_done_i));

endmodule
