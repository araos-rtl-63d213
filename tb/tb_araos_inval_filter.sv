// tb_araos_inval_filter: self-checking testbench of the AXI invalidation
// filter.
//
// Random store bursts (random address, length and beat size) are driven
// on the AW input while the downstream AW ready and the L1 invalidation
// ready are randomly withheld. An independent reference walks every beat
// of each accepted burst byte range, lists the 16-byte lines it touches in
// address order and keeps at most one way's worth of sets (128 lines). The
// testbench checks that AW passes unchanged, that the invalidation
// addresses match the reference sequence, that the filter holds AW back
// when its queue is full (and that this happened), and that with the L1
// always ready the lines of one burst are invalidated one per cycle.
module tb_araos_inval_filter;
  import araos_pkg::*;

  localparam int LineB = DCacheLineB;
  localparam int NumSets = (1 << DCacheIdxBits) / LineB;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic aw_valid_i, aw_ready_o, aw_valid_o, aw_ready_i, inval_valid, inval_ready;
  axi_ax_t aw_i, aw_o;
  logic [PAddrWidth-1:0] inval_addr;

  araos_inval_filter dut (.clk_i(clk), .rst_ni(rst_n),
    .aw_valid_i(aw_valid_i), .aw_ready_o(aw_ready_o), .aw_i(aw_i),
    .aw_valid_o(aw_valid_o), .aw_ready_i(aw_ready_i), .aw_o(aw_o),
    .inval_valid_o(inval_valid), .inval_ready_i(inval_ready), .inval_addr_o(inval_addr));

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  logic [PAddrWidth-1:0] exp_q[$];
  int n_inval, n_aw, n_held, n_mism, n_pass_err;
  int first_inval_cyc, last_inval_cyc, cyc;

  // reference: lines touched by a burst, in order, at most NumSets of them
  task automatic expect_burst(axi_ax_t a);
    logic [63:0] beat0 = a.addr & ~((64'd1 << a.size) - 1);
    logic [63:0] lo = a.addr, hi, line, prev;
    int n = 0;
    hi = beat0 + ((64'(a.len) + 1) << a.size) - 1;
    prev = '1;
    for (logic [63:0] b = lo; b <= hi; b++) begin
      line = b & ~64'(LineB - 1);
      if (line != prev && n < NumSets) begin exp_q.push_back(PAddrWidth'(line)); n++; end
      prev = line;
    end
  endtask

  always @(posedge clk) if (rst_n) begin
    cyc++;
    if (aw_valid_o && aw_ready_i) begin
      n_aw++;
      checks++;
      if (aw_o != aw_i) begin n_pass_err++; failures++; end
      expect_burst(aw_o);
    end
    if (aw_valid_i && !aw_valid_o) n_held++;
    if (inval_valid && inval_ready) begin
      checks++;
      if (exp_q.size() == 0 || exp_q[0] != inval_addr) begin
        n_mism++; failures++;
        $display("inval mismatch: got %h expected %h", inval_addr, exp_q.size() != 0 ? exp_q[0] : '0);
      end
      if (exp_q.size() != 0) void'(exp_q.pop_front());
      n_inval++;
      if (first_inval_cyc < 0) first_inval_cyc = cyc;
      last_inval_cyc = cyc;
    end
  end

  bit rand_ready;
  int inval_slow;
  always @(negedge clk) begin
    aw_ready_i  <= rand_ready ? ($urandom_range(0, 3) != 0) : 1'b1;
    inval_ready <= rand_ready ? ($urandom_range(0, inval_slow) == 0) : 1'b1;
  end

  task automatic send(logic [63:0] addr, int len, int size);
    @(negedge clk);
    aw_valid_i = 1;
    aw_i = '0; aw_i.addr = addr; aw_i.len = 8'(len); aw_i.size = 3'(size); aw_i.burst = AxiBurstIncr;
    aw_i.id = 5'($urandom);
    do @(posedge clk); while (!(aw_valid_i && aw_ready_o));
    @(negedge clk);
    aw_valid_i = 0;
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    aw_valid_i = 0; aw_i = '0; rand_ready = 0; inval_slow = 3; cyc = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // rate: 16 beats of 8 bytes from a line boundary = 8 lines, one per cycle
    first_inval_cyc = -1;
    send(64'h8000_1000, 15, 3);
    repeat (20) @(negedge clk);
    check(n_inval == 8, $sformatf("8 lines invalidated (%0d)", n_inval));
    check(last_inval_cyc - first_inval_cyc == 7, "one invalidation per cycle");
    // unaligned start inside a beat, narrow beats, a burst over one way
    send(64'h8000_200D, 0, 3);      // bytes 0x2008..0x200F: 1 line
    send(64'h8000_3FFC, 1, 2);      // 0x3FFC..0x4003: 2 lines
    send(64'h8000_5000, 255, 3);    // 2 KiB: capped at 128 lines
    repeat (300) @(negedge clk);
    check(exp_q.size() == 0 && n_mism == 0, "directed bursts invalidated as expected");
    // random traffic with back-pressure, slow L1 so that the queue fills
    rand_ready = 1; inval_slow = 6;
    for (int i = 0; i < 150; i++) begin
      automatic int size = $urandom_range(0, 3);
      automatic int len  = $urandom_range(0, 3) == 0 ? $urandom_range(0, 255) : $urandom_range(0, 7);
      send({24'h0, 8'h80, 20'($urandom), 12'($urandom)}, len, size);
    end
    rand_ready = 0;
    repeat (3000) @(negedge clk);
    check(exp_q.size() == 0, $sformatf("all expected invalidations seen (%0d left)", exp_q.size()));
    check(n_mism == 0, $sformatf("%0d mismatching invalidations", n_mism));
    check(n_pass_err == 0, "AW passed unchanged");
    check(n_aw == 154, $sformatf("154 AW bursts passed (%0d)", n_aw));
    check(n_held > 0, $sformatf("AW held back by a full queue in %0d cycles", n_held));
    check(!inval_valid, "filter idle at the end");
    $display("invalidations %0d, AW held %0d cycles", n_inval, n_held);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
