// araos_inval_filter: AXI invalidation filter keeping CVA6's write-through
// L1 data cache coherent with Ara2's vector stores.
//
// The filter sits on Ara2's AW channel. The AW request passes through
// unchanged; every accepted AW burst is recorded as (first L1 line, number
// of lines) in a small FIFO. A sequencer then walks those lines and, one
// per handshake on the inval_* port, sends CVA6's L1 D$ the line-aligned
// physical address to invalidate. The number of lines of a burst is capped
// at the number of sets of one cache way (2**DCacheIdxBits / DCacheLineB),
// since by then every set has been visited. Because the index bits
// (DCacheIdxBits = 11) lie inside the 4-KiB page offset, the physical
// address seen on AW indexes the virtually-indexed cache correctly.
//
// The bytes a burst touches run from addr to the end of its last beat:
// aligned(addr, 2**size) + (len+1) * 2**size - 1.
//
// Timing: AW passes combinationally (aw_ready_o = aw_ready_i) unless the
// FIFO is full, in which case AW is held back. Invalidations start the
// cycle after the AW handshake and proceed at one line per cycle while
// inval_ready_i is high.
//
// From the paper: the filter watches physical addresses on Ara2's AW
// channel and sequentially invalidates the L1 sets the store burst
// addresses; the 11-bit physical index. The 16-byte line, the FIFO depth
// and the handshake are this design's choices.
module araos_inval_filter
  import araos_pkg::*;
#(
  parameter int unsigned LineBytes = DCacheLineB,
  parameter int unsigned IdxBits   = DCacheIdxBits,
  parameter int unsigned FifoDepth = 4
) (
  input  logic                  clk_i,
  input  logic                  rst_ni,
  // AW from Ara2
  input  logic                  aw_valid_i,
  output logic                  aw_ready_o,
  input  axi_ax_t               aw_i,
  // AW towards the SoC
  output logic                  aw_valid_o,
  input  logic                  aw_ready_i,
  output axi_ax_t               aw_o,
  // invalidation requests to the L1 D$
  output logic                  inval_valid_o,
  input  logic                  inval_ready_i,
  output logic [PAddrWidth-1:0] inval_addr_o
);

  localparam int unsigned LineShift = $clog2(LineBytes);
  localparam int unsigned NumSets   = (1 << IdxBits) / LineBytes;
  localparam int unsigned PtrW      = (FifoDepth > 1) ? $clog2(FifoDepth) : 1;
  localparam int unsigned LineAddrW = PAddrWidth - LineShift;

  typedef struct packed {
    logic [LineAddrW-1:0] line;   // first line address
    logic [15:0]          count;  // number of lines, >= 1
  } entry_t;

  entry_t            fifo_q [FifoDepth];
  logic [PtrW-1:0]   wr_ptr_q, rd_ptr_q;
  logic [PtrW:0]     fill_q;
  logic              full, empty, push, pop;

  assign full  = (fill_q == (PtrW+1)'(FifoDepth));
  assign empty = (fill_q == '0);

  // ---------------------------------------------------------- AW path
  assign aw_valid_o = aw_valid_i && !full;
  assign aw_ready_o = aw_ready_i && !full;
  assign aw_o       = aw_i;
  assign push       = aw_valid_o && aw_ready_i;

  // lines touched by the incoming burst
  entry_t            new_entry;
  logic [63:0]       first_b, last_b, nlines;
  always_comb begin
    first_b = 64'(aw_i.addr);
    last_b  = (first_b & ~((64'd1 << aw_i.size) - 64'd1))
            + ((64'(aw_i.len) + 64'd1) << aw_i.size) - 64'd1;
    nlines  = (last_b >> LineShift) - (first_b >> LineShift) + 64'd1;
    if (nlines > 64'(NumSets)) nlines = 64'(NumSets);
    new_entry.line  = first_b[PAddrWidth-1:LineShift];
    new_entry.count = 16'(nlines);
  end

  // ---------------------------------------------------- invalidations
  logic                 active_q;
  logic [LineAddrW-1:0] cur_line_q;
  logic [15:0]          left_q;    // lines left, including the current one

  assign pop           = !active_q && !empty;
  assign inval_valid_o = active_q;
  assign inval_addr_o  = {cur_line_q, LineShift'(0)};

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      wr_ptr_q   <= '0;
      rd_ptr_q   <= '0;
      fill_q     <= '0;
      active_q   <= 1'b0;
      cur_line_q <= '0;
      left_q     <= '0;
      for (int i = 0; i < FifoDepth; i++) fifo_q[i] <= '0;
    end else begin
      if (push) begin
        fifo_q[wr_ptr_q] <= new_entry;
        wr_ptr_q <= (wr_ptr_q == PtrW'(FifoDepth - 1)) ? '0 : wr_ptr_q + 1'b1;
      end
      if (pop) begin
        rd_ptr_q   <= (rd_ptr_q == PtrW'(FifoDepth - 1)) ? '0 : rd_ptr_q + 1'b1;
        active_q   <= 1'b1;
        cur_line_q <= fifo_q[rd_ptr_q].line;
        left_q     <= fifo_q[rd_ptr_q].count;
      end else if (active_q && inval_ready_i) begin
        cur_line_q <= cur_line_q + 1'b1;
        left_q     <= left_q - 1'b1;
        if (left_q == 16'd1) active_q <= 1'b0;
      end
      fill_q <= fill_q + (PtrW+1)'(push) - (PtrW+1)'(pop);
    end
  end

  // an offered invalidation stays stable until taken
  assert property (@(posedge clk_i) disable iff (!rst_ni)
                   inval_valid_o && !inval_ready_i |=> inval_valid_o && $stable(inval_addr_o));
  assert property (@(posedge clk_i) disable iff (!rst_ni) !(push && full));

endmodule
