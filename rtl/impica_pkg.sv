// impica_pkg: shared types and constants of the IMPICA pointer-chasing
// accelerator. The accelerator works on 48-bit virtual addresses that are
// translated through a region-based page table (region table indexed by
// VA[47:41], flat 2MB-page table by VA[40:21], 4KB page table by VA[20:12],
// page offset VA[11:0]); these field positions follow the paper. Word width,
// physical address width, line size and the instruction encoding of the
// address engine are this design's own choices (the paper does not give them).
package impica_pkg;

  localparam int unsigned VA_W     = 48;   // paper: 48-bit virtual address
  localparam int unsigned PA_W     = 40;   // assumed physical address width
  localparam int unsigned WORD_W   = 64;   // 64-bit data words (ARMv8 / uint64_t keys)
  localparam int unsigned LINE_B   = 64;   // assumed cache line size in bytes
  localparam int unsigned LINE_W   = LINE_B * 8;
  localparam int unsigned NREG     = 8;    // R0..R7, R0 reads as zero
  localparam int unsigned SLOT_WORDS = 16; // data RAM words per operation slot
  localparam int unsigned SLOT_W   = 7;    // 2048-word data RAM / 16 words = 128 slots
  localparam int unsigned PC_W     = 12;   // 16KB instruction RAM / 4B = 4096 instrs

  // Layout of one operation slot in the data RAM (word offsets).
  // Words 0..6 are the memory-mapped parameter/result area (__param),
  // word 7 is the completion flag the host polls, words 8..15 hold the
  // saved hardware context (R1..R7, PC) while the operation waits for memory.
  localparam int unsigned PARAM_DONE = 7;
  localparam int unsigned CTX_BASE   = 8;

  typedef logic [VA_W-1:0]   vaddr_t;
  typedef logic [PA_W-1:0]   paddr_t;
  typedef logic [WORD_W-1:0] word_t;
  typedef logic [LINE_W-1:0] line_t;
  typedef logic [SLOT_W-1:0] slot_t;
  typedef logic [PC_W-1:0]   pc_t;
  typedef logic [2:0]        reg_t;

  // Address engine instruction set (own encoding):
  // [31:28] opcode, [27:25] rd, [24:22] rs1, [21:19] rs2, [18:0] signed imm.
  typedef enum logic [3:0] {
    OP_ADD  = 4'h0, // rd = rs1 + rs2
    OP_SUB  = 4'h1, // rd = rs1 - rs2
    OP_AND  = 4'h2, // rd = rs1 & rs2
    OP_OR   = 4'h3, // rd = rs1 | rs2
    OP_XOR  = 4'h4, // rd = rs1 ^ rs2
    OP_ADDI = 4'h5, // rd = rs1 + imm
    OP_SLLI = 4'h6, // rd = rs1 << imm[5:0]
    OP_SRLI = 4'h7, // rd = rs1 >> imm[5:0]
    OP_LDP  = 4'h8, // rd = param[imm[2:0]]      (__param read)
    OP_STP  = 4'h9, // param[imm[2:0]] = rs1     (__param write)
    OP_LD   = 4'hA, // rd = mem[rs1 + imm]       (context switch)
    OP_BEQ  = 4'hB, // if rs1 == rs2 pc += imm
    OP_BNE  = 4'hC, // if rs1 != rs2 pc += imm
    OP_BLTU = 4'hD, // if rs1 <  rs2 (unsigned) pc += imm
    OP_BGEU = 4'hE, // if rs1 >= rs2 (unsigned) pc += imm
    OP_DONE = 4'hF  // finish: set completion flag, free the slot
  } opcode_e;

  typedef struct packed {
    opcode_e     op;
    reg_t        rd;
    reg_t        rs1;
    reg_t        rs2;
    logic [18:0] imm;
  } instr_t;

  // Request queue entry: a pointer-chasing operation launched by the host.
  typedef struct packed {
    pc_t   start_pc;
    slot_t slot;      // data RAM slot; also serves as the request ID
  } req_t;

  // Access queue entry: one memory instruction of one operation.
  typedef struct packed {
    vaddr_t va;
    slot_t  slot;     // data RAM stack pointer (slot) of the waiting operation
    reg_t   rd;
    logic   root;     // one of the first accesses of the operation
  } acc_t;

  // Response queue entry: the data is in the IMPICA cache at pa.
  typedef struct packed {
    paddr_t pa;
    slot_t  slot;
    reg_t   rd;
  } resp_t;

  function automatic instr_t mk(opcode_e op, int rd, int rs1, int rs2, int imm);
    instr_t i;
    i.op  = op;
    i.rd  = reg_t'(rd);
    i.rs1 = reg_t'(rs1);
    i.rs2 = reg_t'(rs2);
    i.imm = 19'(imm);
    return i;
  endfunction

endpackage
