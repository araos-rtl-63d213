// araos_tb_dsz_run: one downsizer test run at a given wide data width
// (testbench only). Instantiated by tb_araos_axi_downsizer.
//
// Behind the converter sits a behavioural AXI slave of the narrow width: a
// byte-addressed memory that serves INCR bursts with random ready and
// response delays, and checks that every narrow burst it receives has at
// most 256 beats, does not cross a 4-KiB page, uses a beat no wider than
// the narrow bus and ends its write data with last on the right beat.
// On the wide side the run writes random bursts with random data and
// strobes (full-width bursts as Ara2 issues them, with unaligned starts,
// and single narrow beats), then reads every burst back and compares the
// enabled bytes with a reference memory kept by the run itself.
module araos_tb_dsz_run
  import araos_pkg::*;
#(
  parameter int unsigned WideW = 128,
  parameter int unsigned NBursts = 60
) (
  input  logic clk,
  input  logic rst_n,
  output int   checks,
  output int   failures,
  output bit   done
);
  localparam int unsigned NarrowW = 64;
  localparam int unsigned WB = WideW / 8, NB = NarrowW / 8;
  localparam int unsigned WSize = $clog2(WB), NSize = $clog2(NB);

  logic s_ar_valid, s_ar_ready, s_r_valid, s_r_ready, s_r_last;
  logic s_aw_valid, s_aw_ready, s_w_valid, s_w_ready, s_w_last, s_b_valid, s_b_ready;
  axi_ax_t s_ar, s_aw, m_ar, m_aw;
  logic [AxiIdWidth-1:0] s_r_id, s_b_id, m_r_id, m_b_id;
  logic [WideW-1:0] s_r_data, s_w_data;
  logic [WB-1:0] s_w_strb;
  logic [1:0] s_r_resp, s_b_resp, m_r_resp, m_b_resp;
  logic m_ar_valid, m_ar_ready, m_r_valid, m_r_ready, m_r_last;
  logic m_aw_valid, m_aw_ready, m_w_valid, m_w_ready, m_w_last, m_b_valid, m_b_ready;
  logic [NarrowW-1:0] m_r_data, m_w_data;
  logic [NB-1:0] m_w_strb;

  araos_axi_downsizer #(.WideW(WideW), .NarrowW(NarrowW)) dut (
    .clk_i(clk), .rst_ni(rst_n),
    .s_ar_valid_i(s_ar_valid), .s_ar_ready_o(s_ar_ready), .s_ar_i(s_ar),
    .s_r_valid_o(s_r_valid), .s_r_ready_i(s_r_ready), .s_r_id_o(s_r_id), .s_r_data_o(s_r_data),
    .s_r_resp_o(s_r_resp), .s_r_last_o(s_r_last),
    .s_aw_valid_i(s_aw_valid), .s_aw_ready_o(s_aw_ready), .s_aw_i(s_aw),
    .s_w_valid_i(s_w_valid), .s_w_ready_o(s_w_ready), .s_w_data_i(s_w_data), .s_w_strb_i(s_w_strb),
    .s_w_last_i(s_w_last), .s_b_valid_o(s_b_valid), .s_b_ready_i(s_b_ready), .s_b_id_o(s_b_id),
    .s_b_resp_o(s_b_resp),
    .m_ar_valid_o(m_ar_valid), .m_ar_ready_i(m_ar_ready), .m_ar_o(m_ar),
    .m_r_valid_i(m_r_valid), .m_r_ready_o(m_r_ready), .m_r_id_i(m_r_id), .m_r_data_i(m_r_data),
    .m_r_resp_i(m_r_resp), .m_r_last_i(m_r_last),
    .m_aw_valid_o(m_aw_valid), .m_aw_ready_i(m_aw_ready), .m_aw_o(m_aw),
    .m_w_valid_o(m_w_valid), .m_w_ready_i(m_w_ready), .m_w_data_o(m_w_data), .m_w_strb_o(m_w_strb),
    .m_w_last_o(m_w_last), .m_b_valid_i(m_b_valid), .m_b_ready_o(m_b_ready), .m_b_id_i(m_b_id),
    .m_b_resp_i(m_b_resp));

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL[%0d]: %s", WideW, what); end
  endtask

  function automatic logic [63:0] beat_addr(logic [63:0] a, logic [2:0] sz, int i);
    return (i == 0) ? a : (a & ~((64'd1 << sz) - 1)) + (64'(i) << sz);
  endfunction

  // ---------------------------------------------- narrow slave model
  logic [7:0] smem [logic [63:0]];
  logic [7:0] refmem [logic [63:0]];
  int n_narrow_ar, n_narrow_aw, n_bad_burst;

  function automatic void check_burst(axi_ax_t a);
    logic [63:0] last_b = (a.addr & ~((64'd1 << a.size) - 1)) + ((64'(a.len) + 1) << a.size) - 1;
    if (a.size > 3'(NSize) || a.addr[63:12] != last_b[63:12] || a.burst != AxiBurstIncr)
      n_bad_burst++;
  endfunction

  initial begin : slave_read
    m_ar_ready = 0; m_r_valid = 0; m_r_last = 0; m_r_data = '0; m_r_resp = '0; m_r_id = '0;
    forever begin
      @(negedge clk);
      if (m_ar_valid && $urandom_range(0, 2) == 0) begin
        automatic axi_ax_t a = m_ar;
        m_ar_ready = 1; @(negedge clk); m_ar_ready = 0;
        n_narrow_ar++; check_burst(a);
        for (int i = 0; i <= int'(a.len); i++) begin
          automatic logic [63:0] ba = beat_addr(a.addr, a.size, i);
          repeat ($urandom_range(0, 2)) @(negedge clk);
          m_r_valid = 1; m_r_id = a.id; m_r_last = (i == int'(a.len)); m_r_resp = '0;
          m_r_data = '0;
          for (int b = 0; b < int'(NB); b++) begin
            automatic logic [63:0] ad = (ba & ~64'(NB - 1)) + 64'(b);
            if (smem.exists(ad)) m_r_data[b*8 +: 8] = smem[ad];
          end
          do @(posedge clk); while (!m_r_ready);
          @(negedge clk); m_r_valid = 0; m_r_last = 0;
        end
      end
    end
  end

  int w_beats_exp;
  initial begin : slave_write
    m_aw_ready = 0; m_w_ready = 0; m_b_valid = 0; m_b_resp = '0; m_b_id = '0;
    forever begin
      @(negedge clk);
      if (m_aw_valid && $urandom_range(0, 2) == 0) begin
        automatic axi_ax_t a = m_aw;
        m_aw_ready = 1; @(negedge clk); m_aw_ready = 0;
        n_narrow_aw++; check_burst(a);
        for (int i = 0; i <= int'(a.len); i++) begin
          automatic logic [63:0] ba = beat_addr(a.addr, a.size, i);
          m_w_ready = ($urandom_range(0, 1) == 0);
          do begin
            @(posedge clk);
            if (!(m_w_valid && m_w_ready)) begin @(negedge clk); m_w_ready = ($urandom_range(0, 1) == 0); end
          end while (!(m_w_valid && m_w_ready));
          if (m_w_last != (i == int'(a.len))) n_bad_burst++;
          for (int b = 0; b < int'(NB); b++) begin
            automatic logic [63:0] ad = (ba & ~64'(NB - 1)) + 64'(b);
            if (m_w_strb[b]) smem[ad] = m_w_data[b*8 +: 8];
          end
          @(negedge clk); m_w_ready = 0;
        end
        repeat ($urandom_range(0, 3)) @(negedge clk);
        m_b_valid = 1; m_b_id = a.id; m_b_resp = '0;
        do @(posedge clk); while (!m_b_ready);
        @(negedge clk); m_b_valid = 0;
      end
    end
  end

  // ---------------------------------------------------- wide master
  axi_ax_t bursts[$];

  task automatic wide_write(axi_ax_t a);
    s_aw = a; s_aw_valid = 1;
    do @(posedge clk); while (!s_aw_ready);
    @(negedge clk); s_aw_valid = 0;
    for (int i = 0; i <= int'(a.len); i++) begin
      automatic logic [63:0] ba = beat_addr(a.addr, a.size, i);
      automatic logic [63:0] lo = ba, hi = (ba & ~((64'd1 << a.size) - 1)) + (64'd1 << a.size) - 1;
      s_w_valid = 1; s_w_last = (i == int'(a.len));
      for (int b = 0; b < int'(WB) / 4; b++) s_w_data[b*32 +: 32] = $urandom;
      // strobes only inside this beat's address range, as AXI requires
      for (int b = 0; b < int'(WB); b++) begin
        automatic logic [63:0] lane_ad = (ba & ~64'(WB - 1)) + 64'(b);
        s_w_strb[b] = ($urandom_range(0, 5) != 0) && lane_ad >= lo && lane_ad <= hi;
      end
      // reference: enabled bytes of this beat's address range
      for (logic [63:0] ad = lo; ad <= hi; ad++)
        if (s_w_strb[ad % 64'(WB)]) refmem[ad] = s_w_data[(ad % 64'(WB))*8 +: 8];
      do @(posedge clk); while (!s_w_ready);
      @(negedge clk); s_w_valid = 0;
    end
    s_b_ready = 1;
    do @(posedge clk); while (!s_b_valid);
    check(s_b_id == a.id && s_b_resp == 2'b00, "write response id and resp");
    @(negedge clk); s_b_ready = 0;
  endtask

  task automatic wide_read(axi_ax_t a);
    int n = 0, bad = 0;
    s_ar = a; s_ar_valid = 1;
    do @(posedge clk); while (!s_ar_ready);
    @(negedge clk); s_ar_valid = 0;
    for (int i = 0; i <= int'(a.len); i++) begin
      automatic logic [63:0] ba = beat_addr(a.addr, a.size, i);
      automatic logic [63:0] lo = ba, hi = (ba & ~((64'd1 << a.size) - 1)) + (64'd1 << a.size) - 1;
      s_r_ready = ($urandom_range(0, 3) != 0);
      do begin
        @(posedge clk);
        if (!(s_r_valid && s_r_ready)) begin @(negedge clk); s_r_ready = ($urandom_range(0, 3) != 0); end
      end while (!(s_r_valid && s_r_ready));
      for (logic [63:0] ad = lo; ad <= hi; ad++)
        if (refmem.exists(ad) && s_r_data[(ad % 64'(WB))*8 +: 8] != refmem[ad]) bad++;
      if (s_r_last != (i == int'(a.len)) || s_r_id != a.id) bad++;
      n++;
      @(negedge clk); s_r_ready = 0;
    end
    check(bad == 0, $sformatf("read back of %h len %0d size %0d: %0d bad bytes", a.addr, a.len, a.size, bad));
  endtask

  initial begin
    checks = 0; failures = 0; done = 0;
    s_ar_valid = 0; s_aw_valid = 0; s_w_valid = 0; s_w_last = 0; s_r_ready = 0; s_b_ready = 0;
    s_ar = '0; s_aw = '0; s_w_data = '0; s_w_strb = '0;
    @(posedge rst_n);
    repeat (2) @(negedge clk);
    for (int t = 0; t < int'(NBursts); t++) begin
      automatic axi_ax_t a = '0;
      automatic logic [63:0] base = {32'h0, 4'h8, 8'($urandom), 8'(t), 12'($urandom)};
      automatic int room;
      a.id = 5'(t); a.burst = AxiBurstIncr;
      if (t % 4 == 3) begin
        a.size = 3'($urandom_range(0, NSize));
        a.len = 8'($urandom_range(0, 15));
        base = base & ~((64'd1 << a.size) - 1);
      end else begin
        a.size = 3'(WSize);
        // long bursts at the page start, shorter ones anywhere
        if (t % 4 == 0) base = base & ~64'hFFF;
        room = (4096 - int'(base[11:0] & ~12'(WB - 1))) / int'(WB);
        a.len = 8'($urandom_range(0, (room > 256 ? 256 : room) - 1));
        if (t % 4 == 0) a.len = 8'((room > 256 ? 256 : room) - 1);
      end
      a.addr = base;
      bursts.push_back(a);
      wide_write(a);
    end
    foreach (bursts[i]) wide_read(bursts[i]);
    check(n_bad_burst == 0, $sformatf("%0d malformed narrow bursts", n_bad_burst));
    check(n_narrow_aw > int'(NBursts), $sformatf("long bursts were split (%0d narrow AW for %0d)", n_narrow_aw, NBursts));
    $display("width %0d: %0d narrow AR, %0d narrow AW", WideW, n_narrow_ar, n_narrow_aw);
    done = 1;
  end
endmodule
