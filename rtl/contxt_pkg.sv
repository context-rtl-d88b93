// contxt_pkg: types and constants shared by the ConTExT taint hardware.
//
// ConTExT keeps secrets from being used by transiently executed
// instructions. Memory pages carry a non-transient (NT) bit in their
// page-table entry, every architectural register carries one taint bit,
// and every 64-bit word of a last-level cache line carries one taint bit.
// This package holds the register numbering used by the taint bits and the
// IA32_TAINT MSR, the page-table-entry bit positions, and the micro-op
// descriptor that the core hands to the taint unit.
//
// Fixed by the paper: 56 tracked registers (16 general purpose, 8 floating
// point, 32 vector), one 64-bit MSR holding all taint bits, 8 taint bits per
// 64-byte line, the x86-64 PTE layout of the figure of a page-table entry
// (reserved bits 46..51, ignored bits 9..11 and 52..58), the last reserved
// bit (51) for the reserved-bit encoding, memory type 2 as the non-transient
// PAT type. Chosen here: which ignored bit holds the NT flag (58), the
// order of the registers inside the MSR, the MSR addresses, and the fields
// of the micro-op descriptor.
package contxt_pkg;

  // ---------------------------------------------------------------- registers
  localparam int unsigned NUM_GPR  = 16;
  localparam int unsigned NUM_FPR  = 8;
  localparam int unsigned NUM_VEC  = 32;
  localparam int unsigned NUM_REGS = NUM_GPR + NUM_FPR + NUM_VEC;   // 56
  localparam int unsigned REG_W    = $clog2(NUM_REGS);              // 6

  // Position of each register class inside the taint vector / IA32_TAINT.
  localparam int unsigned GPR_BASE = 0;
  localparam int unsigned FPR_BASE = GPR_BASE + NUM_GPR;            // 16
  localparam int unsigned VEC_BASE = FPR_BASE + NUM_FPR;            // 24

  typedef logic [REG_W-1:0]    reg_idx_t;
  typedef logic [NUM_REGS-1:0] taint_vec_t;

  // A few general purpose registers by their x86-64 encoding.
  localparam reg_idx_t R_RAX = reg_idx_t'(0);
  localparam reg_idx_t R_RCX = reg_idx_t'(1);
  localparam reg_idx_t R_RDX = reg_idx_t'(2);
  localparam reg_idx_t R_RBX = reg_idx_t'(3);
  localparam reg_idx_t R_RSP = reg_idx_t'(4);
  localparam reg_idx_t R_RBP = reg_idx_t'(5);
  localparam reg_idx_t R_RSI = reg_idx_t'(6);
  localparam reg_idx_t R_RDI = reg_idx_t'(7);

  // -------------------------------------------------------------------- MSRs
  // Addresses are not architecturally assigned; these are free indices.
  localparam logic [31:0] MSR_IA32_TAINT        = 32'h0000_0C90;
  localparam logic [31:0] MSR_IA32_SHADOW_TAINT = 32'h0000_0C91;

  // --------------------------------------------------------- page-table entry
  localparam int unsigned PTE_P       = 0;
  localparam int unsigned PTE_RW      = 1;
  localparam int unsigned PTE_US      = 2;
  localparam int unsigned PTE_WT      = 3;
  localparam int unsigned PTE_UC      = 4;
  localparam int unsigned PTE_PPN_LO  = 12;
  localparam int unsigned PTE_PPN_HI  = 45;   // 46-bit physical addresses
  localparam int unsigned PTE_NT_BIT  = 58;   // highest of the ignored bits 52..58
  localparam int unsigned PTE_RSV_NT  = 51;   // last reserved bit (reserved-bit variant)
  localparam int unsigned PTE_PAT     = 7;    // PAT index bit of a 4 KiB leaf entry
  localparam int unsigned PTE_X       = 63;

  localparam int unsigned PAGE_BITS = 12;     // 4 KiB pages
  localparam int unsigned VA_BITS   = 48;
  localparam int unsigned PA_BITS   = 46;
  localparam int unsigned VPN_W     = VA_BITS - PAGE_BITS;   // 36
  localparam int unsigned PPN_W     = PA_BITS - PAGE_BITS;   // 34

  // How a page is marked non-transient. The scheme offers three encodings:
  // a reserved PTE bit, an ignored PTE bit enabled by a control-register bit,
  // or a new memory type selected through the page-attribute table (PAT).
  typedef enum logic [1:0] {
    NT_MODE_RESERVED = 2'd0,
    NT_MODE_IGNORED  = 2'd1,
    NT_MODE_PAT      = 2'd2
  } nt_mode_e;

  localparam logic [2:0] MT_NON_TRANSIENT = 3'd2;  // new PAT memory type

  typedef logic [VPN_W-1:0] vpn_t;
  typedef logic [PPN_W-1:0] ppn_t;

  // -------------------------------------------------------------- cache line
  localparam int unsigned LINE_BYTES   = 64;
  localparam int unsigned WORDS_PER_LN = LINE_BYTES / 8;     // 8 taint bits / line
  localparam int unsigned LINE_OFS_W   = $clog2(LINE_BYTES); // 6

  // ------------------------------------------------------------------ uops
  // What kind of register destination write a micro-op performs. This is
  // the information the taint rules of the paper depend on.
  typedef enum logic [2:0] {
    OP_NONE     = 3'd0,  // no register destination (compare, branch, ...)
    OP_ALU      = 3'd1,  // dst <= f(sources): taint = OR of source taints
    OP_LOAD     = 3'd2,  // dst <= f(mem, sources): taint = memory taint | sources
    OP_IMM      = 3'd3,  // dst fully replaced by an immediate / zero idiom: untaint
    OP_STORE    = 3'd4,  // mem <= src0: no register written, see taint_regfile
    OP_REP_ALU  = 3'd5   // rep-prefixed arithmetic/logic: destination keeps its taint
  } op_kind_e;

  localparam int unsigned NUM_SRC = 3;

  typedef struct packed {
    op_kind_e                     kind;
    logic                         transient;  // issued under an unresolved prediction / fault
    logic [NUM_SRC-1:0]           src_valid;
    reg_idx_t [NUM_SRC-1:0]       src;        // src[0] is the data register of a store
    logic                         dst_valid;
    reg_idx_t                     dst;
    logic [VA_BITS-1:0]           vaddr;      // memory operand (LOAD / STORE)
  } uop_t;

  // Result of one page-table walk as the walker delivers it to the TLB.
  localparam int unsigned WALK_LEVELS = 4;
  typedef logic [63:0] pte_t;

endpackage
