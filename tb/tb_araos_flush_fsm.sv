// tb_araos_flush_fsm: self-checking testbench of the post-page-fault flush
// controller.
//
// Each round injects one fault report with a random element index, lets
// the backend report "preceding operations committed" after a random delay
// and acknowledges the flush 10 cycles after it was injected (the
// order of magnitude of the backend flush). CVA6 takes the exception
// response after a random delay. Checked per round: vstart is written once
// with the faulty index; the response carries the exception and is held
// until taken; the frontend stall rises the cycle after the fault and
// falls the cycle after the acknowledge; exactly one flush pulse, in the
// cycle after preceding_done is seen; a second fault during the flush is
// ignored.
module tb_araos_flush_fsm;
  import araos_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic exc_valid, preceding_done, flush_ack, stall, flush, vstart_we, resp_valid, resp_ready;
  exception_t exc, resp_exc;
  logic [31:0] exc_elem, vstart;

  araos_flush_fsm dut (.clk_i(clk), .rst_ni(rst_n), .exc_valid_i(exc_valid), .exc_i(exc),
    .exc_elem_i(exc_elem), .preceding_done_i(preceding_done), .flush_ack_i(flush_ack),
    .stall_o(stall), .flush_o(flush), .vstart_we_o(vstart_we), .vstart_o(vstart),
    .resp_valid_o(resp_valid), .resp_ready_i(resp_ready), .resp_exc_o(resp_exc));

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // cycle counter and event log
  int cyc;
  int t_exc, t_stall_rise, t_stall_fall, t_done_seen, t_flush, t_ack, n_flush, n_vstart_we, n_resp;
  logic [31:0] last_vstart;
  logic prev_stall;
  always @(posedge clk) begin
    cyc++;
    if (stall && !prev_stall) t_stall_rise = cyc;
    if (!stall && prev_stall) t_stall_fall = cyc;
    prev_stall = stall;
    if (flush) begin n_flush++; t_flush = cyc; end
    if (vstart_we) begin n_vstart_we++; last_vstart = vstart; end
    if (stall && preceding_done && t_done_seen < 0) t_done_seen = cyc;
    if (resp_valid && resp_ready) n_resp++;
  end

  // backend: acknowledge the flush 10 cycles after it was injected
  initial begin
    flush_ack = 0;
    forever begin
      @(posedge clk);
      if (flush) begin
        repeat (9) @(posedge clk);
        #1 flush_ack = 1; t_ack = cyc;  // sampled by the FSM at edge t_ack + 1
        @(posedge clk);
        #1 flush_ack = 0;
      end
    end
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    exc_valid = 0; exc = '0; exc_elem = '0; preceding_done = 0; resp_ready = 0;
    prev_stall = 0; cyc = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int r = 0; r < 30; r++) begin
      automatic logic [31:0] elem = $urandom_range(0, 4095);
      automatic int d_done = $urandom_range(0, 20);
      automatic int d_resp = $urandom_range(0, 8);
      automatic logic [63:0] tval = {$urandom, $urandom};
      automatic logic [63:0] cause = (r % 2 != 0) ? CauseStPageFault : CauseLdPageFault;
      t_stall_rise = -1; t_stall_fall = -1; t_done_seen = -1; t_flush = -1; t_ack = -1;
      n_flush = 0; n_vstart_we = 0; n_resp = 0;
      repeat ($urandom_range(1, 5)) @(negedge clk);
      check(!stall, $sformatf("round %0d: idle before the fault", r));
      exc_valid = 1; exc.valid = 1; exc.cause = cause; exc.tval = tval; exc_elem = elem;
      t_exc = cyc + 1;
      @(negedge clk);
      exc_valid = 0; exc = '0; exc_elem = '0;
      fork
        begin  // CVA6 takes the response after d_resp cycles
          repeat (d_resp) begin
            @(negedge clk);
            check(resp_valid && resp_exc.cause == cause && resp_exc.tval == tval,
                  $sformatf("round %0d: response held", r));
          end
          resp_ready = 1; @(negedge clk); resp_ready = 0;
        end
        begin  // a second fault while busy, then commits done
          @(negedge clk);
          exc_valid = 1; exc.valid = 1; exc_elem = elem + 1; @(negedge clk); exc_valid = 0; exc = '0;
          repeat (d_done) @(negedge clk);
          preceding_done = 1;
        end
      join
      wait (t_stall_fall >= 0);
      @(negedge clk);
      preceding_done = 0;
      check(n_vstart_we == 1 && last_vstart == elem, $sformatf("round %0d: vstart <= %0d once (got %0d, %0d writes)", r, elem, last_vstart, n_vstart_we));
      check(n_resp == 1, $sformatf("round %0d: one response", r));
      check(t_stall_rise == t_exc + 1, $sformatf("round %0d: stall rises the cycle after the fault", r));
      check(n_flush == 1, $sformatf("round %0d: one flush pulse (%0d)", r, n_flush));
      check(t_flush == t_done_seen + 1, $sformatf("round %0d: flush the cycle after commits done (%0d vs %0d)", r, t_flush, t_done_seen));
      check(t_stall_fall == t_ack + 2, $sformatf("round %0d: stall released the cycle after the ack", r));
      check(t_stall_fall - t_flush == 11, $sformatf("round %0d: flush to release %0d cycles", r, t_stall_fall - t_flush));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
