// tb_araos_axi_downsizer: self-checking testbench of the AXI downsizer.
// The converter is exercised at 128 and 256 bits on the wide side (four
// and eight lanes) towards the 64-bit crossbar, each by an
// araos_tb_dsz_run instance with its own narrow memory model, and at the
// main configuration's 64 bits, where it must be a plain connection.
module tb_araos_axi_downsizer;
  import araos_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  int c0, f0, c1, f1;
  bit d0, d1;
  araos_tb_dsz_run #(.WideW(128)) run128 (.clk, .rst_n, .checks(c0), .failures(f0), .done(d0));
  araos_tb_dsz_run #(.WideW(256)) run256 (.clk, .rst_n, .checks(c1), .failures(f1), .done(d1));

  // 64-bit wide side: equal widths
  logic ar_valid, ar_ready_m, r_valid_m, r_ready;
  axi_ax_t ar, ar_m;
  logic [63:0] r_data_m, r_data;
  logic passthru_ok;
  araos_axi_downsizer dut64 (
    .clk_i(clk), .rst_ni(rst_n),
    .s_ar_valid_i(ar_valid), .s_ar_ready_o(), .s_ar_i(ar),
    .s_r_valid_o(), .s_r_ready_i(r_ready), .s_r_id_o(), .s_r_data_o(r_data), .s_r_resp_o(), .s_r_last_o(),
    .s_aw_valid_i(1'b0), .s_aw_ready_o(), .s_aw_i('0),
    .s_w_valid_i(1'b0), .s_w_ready_o(), .s_w_data_i('0), .s_w_strb_i('0), .s_w_last_i(1'b0),
    .s_b_valid_o(), .s_b_ready_i(1'b0), .s_b_id_o(), .s_b_resp_o(),
    .m_ar_valid_o(), .m_ar_ready_i(ar_ready_m), .m_ar_o(ar_m),
    .m_r_valid_i(r_valid_m), .m_r_ready_o(), .m_r_id_i('0), .m_r_data_i(r_data_m), .m_r_resp_i('0), .m_r_last_i(1'b1),
    .m_aw_valid_o(), .m_aw_ready_i(1'b0), .m_aw_o(),
    .m_w_valid_o(), .m_w_ready_i(1'b0), .m_w_data_o(), .m_w_strb_o(), .m_w_last_o(),
    .m_b_valid_i(1'b0), .m_b_ready_o(), .m_b_id_i('0), .m_b_resp_i('0));

  initial begin
    repeat (400000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", c0 + c1 + 1, f0 + f1 + 1);
    $finish;
  end

  initial begin
    ar_valid = 0; ar = '0; ar_ready_m = 0; r_valid_m = 0; r_data_m = '0; r_ready = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    ar = '0; ar.addr = 64'h1234_5678; ar.len = 8'd200; ar.size = 3'd3; r_data_m = 64'hDEAD_BEEF_0123_4567;
    #1 passthru_ok = (ar_m == ar) && (r_data == r_data_m);
    wait (d0 && d1);
    $display("TB_RESULT checks=%0d failures=%0d", c0 + c1 + 1, f0 + f1 + (passthru_ok ? 0 : 1));
    $finish;
  end
endmodule
