// araos_axi_downsizer: AXI data-width converter from Ara2's 32*L-bit memory
// port (wide side, slave port) to the 64-bit SoC crossbar (narrow side,
// master port).
//
// Address channels: a wide burst whose beat size exceeds the narrow bus is
// re-issued with the narrow beat size and as many narrow beats as it
// covers (from the narrow-aligned start address to the end of its last
// wide beat); if that is more than 256 beats it is cut into several
// narrow bursts, which never cross a 4-KiB page because the wide burst
// does not. A burst with beats no wider than the narrow bus keeps its size
// and length. The AXI ID is kept.
// Read data: narrow beats are packed into the byte lanes of the wide beat
// given by their address; a wide beat is returned when its last narrow
// beat arrives (narrow-size transfers are replicated over all lanes, which
// puts the bytes in their lanes). The worst response of the pieces is
// kept, last marks the final beat.
// Write data: each wide beat is sent as the narrow beats of its address
// lanes, with their strobes; the wide beat is accepted with its last
// piece. The B responses of all narrow bursts are merged into one.
// One read and one write transaction are converted at a time (a new one
// is accepted once the previous one has been answered).
//
// With the main two-lane configuration both sides are 64 bits wide and
// the module is a plain connection (Ratio = 1); the converting logic is
// generated for Ratio = 2, 4, ... (four lanes and more).
//
// From the paper: the downsizer between Ara2's parametric AXI port and the
// 64-bit crossbar. The conversion scheme and the one-transaction-at-a-time
// policy are this design's choices.
module araos_axi_downsizer
  import araos_pkg::*;
#(
  parameter int unsigned WideW   = AxiDataWidth,
  parameter int unsigned NarrowW = SocDataWidth
) (
  input  logic                    clk_i,
  input  logic                    rst_ni,
  // wide side (from Ara2)
  input  logic                    s_ar_valid_i,
  output logic                    s_ar_ready_o,
  input  axi_ax_t                 s_ar_i,
  output logic                    s_r_valid_o,
  input  logic                    s_r_ready_i,
  output logic [AxiIdWidth-1:0]   s_r_id_o,
  output logic [WideW-1:0]        s_r_data_o,
  output logic [1:0]              s_r_resp_o,
  output logic                    s_r_last_o,
  input  logic                    s_aw_valid_i,
  output logic                    s_aw_ready_o,
  input  axi_ax_t                 s_aw_i,
  input  logic                    s_w_valid_i,
  output logic                    s_w_ready_o,
  input  logic [WideW-1:0]        s_w_data_i,
  input  logic [WideW/8-1:0]      s_w_strb_i,
  input  logic                    s_w_last_i,
  output logic                    s_b_valid_o,
  input  logic                    s_b_ready_i,
  output logic [AxiIdWidth-1:0]   s_b_id_o,
  output logic [1:0]              s_b_resp_o,
  // narrow side (to the crossbar)
  output logic                    m_ar_valid_o,
  input  logic                    m_ar_ready_i,
  output axi_ax_t                 m_ar_o,
  input  logic                    m_r_valid_i,
  output logic                    m_r_ready_o,
  input  logic [AxiIdWidth-1:0]   m_r_id_i,
  input  logic [NarrowW-1:0]      m_r_data_i,
  input  logic [1:0]              m_r_resp_i,
  input  logic                    m_r_last_i,
  output logic                    m_aw_valid_o,
  input  logic                    m_aw_ready_i,
  output axi_ax_t                 m_aw_o,
  output logic                    m_w_valid_o,
  input  logic                    m_w_ready_i,
  output logic [NarrowW-1:0]      m_w_data_o,
  output logic [NarrowW/8-1:0]    m_w_strb_o,
  output logic                    m_w_last_o,
  input  logic                    m_b_valid_i,
  output logic                    m_b_ready_o,
  input  logic [AxiIdWidth-1:0]   m_b_id_i,
  input  logic [1:0]              m_b_resp_i
);

  localparam int unsigned Ratio       = WideW / NarrowW;
  localparam int unsigned NarrowBytes = NarrowW / 8;
  localparam int unsigned NarrowSize  = $clog2(NarrowBytes);
  localparam int unsigned LaneW       = (Ratio > 1) ? $clog2(Ratio) : 1;

  if (Ratio == 1) begin : g_bypass
    // equal widths: nothing to convert
    assign m_ar_valid_o = s_ar_valid_i;
    assign s_ar_ready_o = m_ar_ready_i;
    assign m_ar_o       = s_ar_i;
    assign s_r_valid_o  = m_r_valid_i;
    assign m_r_ready_o  = s_r_ready_i;
    assign s_r_id_o     = m_r_id_i;
    assign s_r_data_o   = m_r_data_i;
    assign s_r_resp_o   = m_r_resp_i;
    assign s_r_last_o   = m_r_last_i;
    assign m_aw_valid_o = s_aw_valid_i;
    assign s_aw_ready_o = m_aw_ready_i;
    assign m_aw_o       = s_aw_i;
    assign m_w_valid_o  = s_w_valid_i;
    assign s_w_ready_o  = m_w_ready_i;
    assign m_w_data_o   = s_w_data_i;
    assign m_w_strb_o   = s_w_strb_i;
    assign m_w_last_o   = s_w_last_i;
    assign s_b_valid_o  = m_b_valid_i;
    assign m_b_ready_o  = s_b_ready_i;
    assign s_b_id_o     = m_b_id_i;
    assign s_b_resp_o   = m_b_resp_i;
  end else begin : g_convert

    // number of narrow beats a wide burst turns into, and its narrow size
    function automatic logic [12:0] narrow_beats(axi_ax_t ax);
      logic [63:0] wide_start, end_b, start_n;
      if (ax.size <= 3'(NarrowSize)) return 13'(ax.len) + 13'd1;
      wide_start = ax.addr & ~((64'd1 << ax.size) - 64'd1);
      end_b      = wide_start + ((64'(ax.len) + 64'd1) << ax.size);
      start_n    = ax.addr & ~64'(NarrowBytes - 1);
      return 13'((end_b - start_n) >> NarrowSize);
    endfunction

    function automatic logic [2:0] narrow_size(axi_ax_t ax);
      return (ax.size > 3'(NarrowSize)) ? 3'(NarrowSize) : ax.size;
    endfunction

    // address of the beat after the one at a, for beats of 2**sz bytes
    function automatic logic [63:0] next_beat(logic [63:0] a, logic [2:0] sz);
      return (a & ~((64'd1 << sz) - 64'd1)) + (64'd1 << sz);
    endfunction

    // a narrow beat at a with beat size nsz ends its wide beat of 2**wsz
    function automatic logic ends_wide(logic [63:0] a, logic [2:0] nsz, logic [2:0] wsz);
      logic [63:0] nxt;
      nxt = next_beat(a, nsz);
      return (nxt & ((64'd1 << wsz) - 64'd1)) == 64'd0 || (wsz <= nsz);
    endfunction

    // ----------------------------------------------------------- read
    typedef enum logic [1:0] {RIdle, RReq, RData} rstate_e;
    rstate_e             rs_q;
    axi_ax_t             rax_q;        // original wide request
    logic [12:0]         r_req_left_q; // narrow beats still to request
    logic [63:0]         r_req_addr_q; // address of the next narrow burst
    logic [12:0]         r_left_q;     // narrow beats still to receive
    logic [63:0]         r_addr_q;     // address of the next narrow beat
    logic [WideW-1:0]    r_buf_q;
    logic [1:0]          r_resp_q;
    logic                s_r_valid_q, s_r_last_q;
    logic [8:0]          r_chunk;
    logic [LaneW-1:0]    r_lane;
    logic [WideW-1:0]    r_buf_next;
    logic [1:0]          r_resp_next;

    assign r_chunk = (r_req_left_q > 13'd256) ? 9'd256 : 9'(r_req_left_q);
    assign r_lane  = LaneW'(r_addr_q >> NarrowSize);

    always_comb begin
      r_buf_next = r_buf_q;
      if (rax_q.size > 3'(NarrowSize)) r_buf_next[r_lane*NarrowW +: NarrowW] = m_r_data_i;
      else                             r_buf_next = {Ratio{m_r_data_i}};
      r_resp_next = (m_r_resp_i > r_resp_q) ? m_r_resp_i : r_resp_q;
    end

    assign s_ar_ready_o        = (rs_q == RIdle) && !s_r_valid_q;
    assign m_ar_valid_o        = (rs_q == RReq);
    always_comb begin
      m_ar_o       = rax_q;
      m_ar_o.addr  = r_req_addr_q;
      m_ar_o.size  = narrow_size(rax_q);
      m_ar_o.len   = 8'(r_chunk - 9'd1);
    end
    assign m_r_ready_o = (rs_q == RData) && !s_r_valid_q;
    assign s_r_valid_o = s_r_valid_q;
    assign s_r_id_o    = rax_q.id;
    assign s_r_data_o  = r_buf_q;
    assign s_r_resp_o  = r_resp_q;
    assign s_r_last_o  = s_r_last_q;

    always_ff @(posedge clk_i or negedge rst_ni) begin
      if (!rst_ni) begin
        rs_q <= RIdle; rax_q <= '0; r_req_left_q <= '0; r_req_addr_q <= '0;
        r_left_q <= '0; r_addr_q <= '0; r_buf_q <= '0; r_resp_q <= '0;
        s_r_valid_q <= 1'b0; s_r_last_q <= 1'b0;
      end else begin
        if (s_r_valid_q && s_r_ready_i) begin
          s_r_valid_q <= 1'b0;
          r_resp_q    <= '0;
        end
        unique case (rs_q)
          RIdle: if (s_ar_valid_i && s_ar_ready_o) begin
            rax_q        <= s_ar_i;
            r_req_left_q <= narrow_beats(s_ar_i);
            r_left_q     <= narrow_beats(s_ar_i);
            r_req_addr_q <= s_ar_i.addr;
            r_addr_q     <= s_ar_i.addr;
            rs_q         <= RReq;
          end
          RReq: if (m_ar_ready_i) begin
            r_req_left_q <= r_req_left_q - 13'(r_chunk);
            r_req_addr_q <= (r_req_addr_q & ~((64'd1 << m_ar_o.size) - 64'd1))
                          + (64'(r_chunk) << m_ar_o.size);
            rs_q         <= RData;
          end
          RData: if (m_r_valid_i && m_r_ready_o) begin
            r_buf_q  <= r_buf_next;
            r_resp_q <= r_resp_next;
            r_left_q <= r_left_q - 13'd1;
            r_addr_q <= next_beat(r_addr_q, m_ar_o.size);
            if (ends_wide(r_addr_q, m_ar_o.size, rax_q.size) || r_left_q == 13'd1) begin
              s_r_valid_q <= 1'b1;
              s_r_last_q  <= (r_left_q == 13'd1);
            end
            if (r_left_q == 13'd1)  rs_q <= RIdle;
            else if (m_r_last_i)    rs_q <= RReq;
          end
          default: rs_q <= RIdle;
        endcase
      end
    end

    // ---------------------------------------------------------- write
    typedef enum logic [1:0] {WIdle, WReq, WData, WResp} wstate_e;
    wstate_e             ws_q;
    axi_ax_t             wax_q;
    logic [12:0]         w_req_left_q;
    logic [63:0]         w_req_addr_q;
    logic [8:0]          w_sub_left_q;  // beats left in the current narrow burst
    logic [63:0]         w_addr_q;
    logic [7:0]          b_pending_q;   // narrow B responses still expected
    logic [1:0]          b_resp_q;
    logic [8:0]          w_chunk;
    logic [LaneW-1:0]    w_lane;
    logic                w_hs, w_piece_last;

    assign w_chunk      = (w_req_left_q > 13'd256) ? 9'd256 : 9'(w_req_left_q);
    assign w_lane       = LaneW'(w_addr_q >> NarrowSize);
    assign w_hs         = m_w_valid_o && m_w_ready_i;
    assign w_piece_last = ends_wide(w_addr_q, m_aw_o.size, wax_q.size) || (w_sub_left_q == 9'd1 && w_req_left_q == 13'd0);

    assign s_aw_ready_o = (ws_q == WIdle);
    assign m_aw_valid_o = (ws_q == WReq);
    always_comb begin
      m_aw_o      = wax_q;
      m_aw_o.addr = w_req_addr_q;
      m_aw_o.size = narrow_size(wax_q);
      m_aw_o.len  = 8'(w_chunk - 9'd1);
    end
    assign m_w_valid_o = (ws_q == WData) && s_w_valid_i;
    assign m_w_data_o  = s_w_data_i[w_lane*NarrowW +: NarrowW];
    assign m_w_strb_o  = s_w_strb_i[w_lane*NarrowBytes +: NarrowBytes];
    assign m_w_last_o  = (w_sub_left_q == 9'd1);
    assign s_w_ready_o = (ws_q == WData) && m_w_ready_i && w_piece_last;
    assign m_b_ready_o = (ws_q != WIdle);
    assign s_b_valid_o = (ws_q == WResp) && (b_pending_q == '0);
    assign s_b_id_o    = wax_q.id;
    assign s_b_resp_o  = b_resp_q;

    always_ff @(posedge clk_i or negedge rst_ni) begin
      if (!rst_ni) begin
        ws_q <= WIdle; wax_q <= '0; w_req_left_q <= '0; w_req_addr_q <= '0;
        w_sub_left_q <= '0; w_addr_q <= '0; b_pending_q <= '0; b_resp_q <= '0;
      end else begin
        // B responses of the narrow bursts
        b_pending_q <= b_pending_q + 8'(m_aw_valid_o && m_aw_ready_i)
                                   - 8'(m_b_valid_i && m_b_ready_o);
        if (m_b_valid_i && m_b_ready_o && m_b_resp_i > b_resp_q) b_resp_q <= m_b_resp_i;
        unique case (ws_q)
          WIdle: if (s_aw_valid_i) begin
            wax_q        <= s_aw_i;
            w_req_left_q <= narrow_beats(s_aw_i);
            w_req_addr_q <= s_aw_i.addr;
            w_addr_q     <= s_aw_i.addr;
            b_resp_q     <= '0;
            ws_q         <= WReq;
          end
          WReq: if (m_aw_ready_i) begin
            w_req_left_q <= w_req_left_q - 13'(w_chunk);
            w_req_addr_q <= (w_req_addr_q & ~((64'd1 << m_aw_o.size) - 64'd1))
                          + (64'(w_chunk) << m_aw_o.size);
            w_sub_left_q <= w_chunk;
            ws_q         <= WData;
          end
          WData: if (w_hs) begin
            w_addr_q     <= next_beat(w_addr_q, m_aw_o.size);
            w_sub_left_q <= w_sub_left_q - 9'd1;
            if (w_sub_left_q == 9'd1) ws_q <= (w_req_left_q == 13'd0) ? WResp : WReq;
          end
          WResp: if (s_b_valid_o && s_b_ready_i) ws_q <= WIdle;
          default: ws_q <= WIdle;
        endcase
      end
    end

    // the wide side's last flag must agree with the conversion
    assert property (@(posedge clk_i) disable iff (!rst_ni)
                     s_w_valid_i && s_w_ready_o |-> s_w_last_i == (w_sub_left_q == 9'd1 && w_req_left_q == 13'd0));
    // the narrow side answers no more bursts than were issued
    assert property (@(posedge clk_i) disable iff (!rst_ni)
                     m_b_valid_i |-> b_pending_q != '0 || (m_aw_valid_o && m_aw_ready_i));

    // id and last of the narrow responses are not needed beyond m_r_last_i
    logic unused;
    assign unused = ^{m_r_id_i, m_b_id_i, s_w_last_i};
  end

endmodule
