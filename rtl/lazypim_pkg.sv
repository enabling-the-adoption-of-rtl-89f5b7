// lazypim_pkg: shared constants of the LazyPIM coherence hardware. Signatures
// are 256-byte parallel Bloom filters (the paper's size) over cache-line
// addresses. The paper's memory is one 4GB HMC cube, so physical addresses
// are 32 bits and, with 64B lines, line addresses are 26 bits. PIM L1 caches
// are 64KB, 4-way, 64B lines, with 8-byte words so the per-word dirty mask
// is 8 bits per line (1.6% of the L1, as the paper states) and the
// speculative bit 1 bit per line (0.2%).
package lazypim_pkg;
  localparam int unsigned PA_W    = 32;          // 4GB cube
  localparam int unsigned LADDR_W = PA_W - 6;    // 64B lines
  localparam int unsigned WORD_W  = 64;
  localparam int unsigned WPL     = 8;           // words per line
  localparam int unsigned LINE_W  = WORD_W * WPL;

  typedef logic [LADDR_W-1:0] laddr_t;
  typedef logic [WORD_W-1:0]  word_t;
  typedef logic [LINE_W-1:0]  line_t;

  // Decision the processor-side conflict detector sends to a PIM core.
  typedef enum logic [1:0] {RES_NONE, RES_COMMIT, RES_ROLLBACK} resolve_e;

  // Request to the processor's cache, which is not part of this design.
  typedef enum logic [1:0] {
    CPU_CMD_NONE,
    CPU_CMD_FLUSH_READSET,     // write back dirty lines that hit the PIMReadSet
    CPU_CMD_INVAL_WRITESET     // invalidate lines that hit the PIMWriteSet
  } cpu_cmd_e;
endpackage
