// araos_pkg: types and constants shared by the virtual-memory support logic
// of the AraOS vector processor (Ara2 vector unit + CVA6 host core).
//
// It holds the configuration of the main instance (two lanes, VLEN = 2048,
// a 64-bit AXI memory port), the request/response bundles of the MMU
// interface between Ara2's address generator and CVA6's shared MMU, and the
// AXI address-channel bundle the address generator emits.
//
// Taken from the paper: two lanes, VLEN, the 32*L-bit Ara2 AXI port
// narrowed to 64 bits, 4-KiB pages, the MMU interface signal names
// (req, vaddr, is_st / valid, paddr, exception / en_virt_mem) and the 11-bit
// physical L1 D$ index. This design's own choices: the address widths (Sv39
// style: 64-bit virtual, 56-bit physical), the exception record layout
// (cause + tval, as in RISC-V), the AXI ID width and the 16-byte L1 line.
package araos_pkg;

  // ---------------------------------------------------------------- config
  parameter int unsigned NrLanes       = 2;     // main AraOS configuration
  parameter int unsigned VLEN          = 2048;  // bits per vector register
  parameter int unsigned AxiDataWidth  = 32 * NrLanes; // Ara2 memory port
  parameter int unsigned SocDataWidth  = 64;    // Cheshire crossbar
  parameter int unsigned AxiAddrWidth  = 64;
  parameter int unsigned AxiIdWidth    = 5;
  parameter int unsigned VAddrWidth    = 64;
  parameter int unsigned PAddrWidth    = 56;
  parameter int unsigned PageOffset    = 12;    // 4-KiB pages
  parameter int unsigned DCacheIdxBits = 11;    // physical L1 D$ index bits
  parameter int unsigned DCacheLineB   = 16;    // L1 D$ line in bytes

  // RISC-V exception causes raised by the address generator
  parameter logic [63:0] CauseLdMisaligned = 64'd4;
  parameter logic [63:0] CauseStMisaligned = 64'd6;
  parameter logic [63:0] CauseLdPageFault  = 64'd13;
  parameter logic [63:0] CauseStPageFault  = 64'd15;

  // ----------------------------------------------------- MMU interface
  typedef struct packed {
    logic                  valid;
    logic [63:0]           cause;
    logic [63:0]           tval;
  } exception_t;

  typedef struct packed {
    logic                  req;    // start a translation
    logic [VAddrWidth-1:0] vaddr;  // address to translate
    logic                  is_st;  // store access (for the permission check)
  } mmu_req_t;

  typedef struct packed {
    logic                  valid;     // paddr and exception are valid
    logic [PAddrWidth-1:0] paddr;
    exception_t            exception;
  } mmu_rsp_t;

  // --------------------------------------------- vector memory operations
  typedef enum logic [1:0] {
    MemUnit    = 2'd0,  // unit stride
    MemStrided = 2'd1,  // constant byte stride
    MemIndexed = 2'd2   // base + per-element byte offset
  } mem_mode_e;

  typedef struct packed {
    logic [VAddrWidth-1:0] base;    // rs1
    logic [63:0]           stride;  // rs2 (signed bytes), strided only
    logic [31:0]           vl;      // vector length in elements
    logic [31:0]           vstart;  // first element to access
    logic [1:0]            eew;     // element width: 1 << eew bytes
    logic                  is_store;
    mem_mode_e             mode;
  } vmem_op_t;

  // ------------------------------------------------------ AXI AR/AW bundle
  typedef struct packed {
    logic [AxiIdWidth-1:0]   id;
    logic [AxiAddrWidth-1:0] addr;
    logic [7:0]              len;    // beats - 1
    logic [2:0]              size;   // log2 bytes per beat
    logic [1:0]              burst;  // 2'b01 = INCR
  } axi_ax_t;

  parameter logic [1:0] AxiBurstIncr = 2'b01;

endpackage
