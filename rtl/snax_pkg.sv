// snax_pkg: the types and sizes that the blocks of the SNAX multi-accelerator
// cluster share.
//
// The cluster has two interfaces. The control side is loosely coupled: a core
// sends register writes and reads (RISC-V CSR accesses) over a valid-ready
// port. The data side is tightly coupled: every accelerator port is split
// into 64-bit word requests. Those requests go through a crossbar to a
// banked scratchpad, and a read returns one cycle after it is granted.
//
// What comes from the paper: the 128 kB scratchpad, 12-bit CSR addresses,
// the 512-bit DMA and streamer widths, the 2048-bit GeMM output and the
// 8x8x8 GeMM. This design chose the rest: 64-bit words, 32 banks,
// word-interleaved banking and the CSR address map.
package snax_pkg;

  // ---------------- scratchpad / TCDM ----------------
  localparam int unsigned TCDM_DW    = 64;                 // bits per bank word
  localparam int unsigned TCDM_BW    = TCDM_DW / 8;        // bytes per word
  localparam int unsigned SPM_BYTES  = 128 * 1024;         // Table I: 128 kB
  localparam int unsigned NUM_BANKS  = 32;
  localparam int unsigned BANK_DEPTH = SPM_BYTES / (NUM_BANKS * TCDM_BW);  // 512
  localparam int unsigned TCDM_AW    = $clog2(SPM_BYTES);  // 17-bit byte address

  typedef logic [TCDM_AW-1:0] tcdm_addr_t;

  typedef struct packed {
    tcdm_addr_t               addr;   // byte address, 8-byte aligned
    logic                     we;     // 1: write, 0: read
    logic [TCDM_BW-1:0]       strb;   // byte enables for writes
    logic [TCDM_DW-1:0]       data;   // write data
  } tcdm_req_t;

  // ---------------- CSR control port ----------------
  localparam int unsigned CSR_AW = 12;   // RISC-V CSR address space
  localparam int unsigned CSR_DW = 32;

  typedef struct packed {
    logic [CSR_AW-1:0] addr;
    logic [CSR_DW-1:0] data;
    logic              write;  // 1: csrw, 0: csrr
  } csr_req_t;

  // CSR address map (this design's own). Each unit owns a window.
  localparam logic [CSR_AW-1:0] CSR_GEMM_BASE    = 12'h3C0;  // 64 regs
  localparam logic [CSR_AW-1:0] CSR_MAXPOOL_BASE = 12'h400;  // 64 regs
  localparam logic [CSR_AW-1:0] CSR_DMA_BASE     = 12'h440;  // 16 regs
  localparam logic [CSR_AW-1:0] CSR_BARRIER      = 12'h7C2;  // 1 reg

  // ---------------- streamers ----------------
  localparam int unsigned STREAM_DIMS = 6;   // nested hardware loops per channel
  // Streamer channel register block: base, then bound[d], then stride[d].
  localparam int unsigned STREAM_REGS = 1 + 2 * STREAM_DIMS;

  typedef struct packed {
    tcdm_addr_t                          base;
    logic [STREAM_DIMS-1:0][15:0]        bound;   // iterations of loop d (0 = 1)
    logic [STREAM_DIMS-1:0][TCDM_AW-1:0] stride;  // byte stride of loop d
  } agu_cfg_t;

  // Unpack one streamer channel's register block into an agu configuration.
  function automatic agu_cfg_t regs_to_agu(input logic [STREAM_REGS-1:0][CSR_DW-1:0] r);
    agu_cfg_t c;
    c.base = TCDM_AW'(r[0]);
    for (int d = 0; d < STREAM_DIMS; d++) begin
      c.bound[d]  = r[1 + d][15:0];
      c.stride[d] = TCDM_AW'(r[1 + STREAM_DIMS + d]);
    end
    return c;
  endfunction

  // ---------------- accelerators ----------------
  localparam int unsigned GEMM_M = 8, GEMM_K = 8, GEMM_N = 8;   // 512 PEs
  localparam int unsigned GEMM_AB_W = GEMM_M * GEMM_K * 8;      // 512 bit
  localparam int unsigned GEMM_C_W  = GEMM_M * GEMM_N * 32;     // 2048 bit
  localparam int unsigned MP_KERNELS = 8;                       // parallel max-pool kernels
  localparam int unsigned MP_W       = 512;                     // in/out stream width
  localparam int unsigned DMA_DW     = 512;

endpackage
