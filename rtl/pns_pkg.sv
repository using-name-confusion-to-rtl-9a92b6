// pns_pkg -- shared types and constants of the Phantom Name System (PNS) front-end.
//
// PNS gives every instruction N = 2**n names. A name is the 32-bit program
// counter extended by an n-bit phantom index p, written {p, PC} (the
// extended PC). The phantom index is held only in hardware; software sees
// the low 32 bits. The name of a virtual address va in phantom p is
// va - p*delta, so the inverse mapping is va = PC + (p << DELTA_SHIFT).
//
// n = 8 (256 phantoms) and the 32-bit address space follow the paper. The
// 4-byte instruction size matches the 32-bit ARM/RISC-V cores the scheme
// was evaluated on. The control-flow kinds and the record layouts between
// fetch, commit and the back-end are this design's own.
package pns_pkg;

  localparam int unsigned PHANTOM_BITS = 8;   // n: phantom index width
  localparam int unsigned VA_BITS      = 32;  // architectural PC width
  localparam int unsigned INSN_BYTES   = 4;   // fixed-size instructions

  typedef logic [PHANTOM_BITS-1:0] phantom_t;
  typedef logic [VA_BITS-1:0]      va_t;

  // Extended PC, PC_p[31+n:0] = {p[n-1:0], PC[31:0]}.
  typedef struct packed {
    phantom_t p;
    va_t      pc;
  } xpc_t;

  // Kind of a committed instruction, as decoded by the back-end.
  typedef enum logic [2:0] {
    CF_NONE = 3'd0,  // not a control-flow instruction
    CF_COND = 3'd1,  // conditional direct branch
    CF_JUMP = 3'd2,  // unconditional jump (direct or indirect)
    CF_CALL = 3'd3,  // call (direct or indirect)
    CF_RET  = 3'd4,  // return, target taken from the architectural stack
    CF_TRAP = 3'd5   // TRAP instruction placed at the start of a basic block
  } cf_kind_t;

  // Branch type remembered in the BTB, so fetch knows which predictor to use.
  typedef enum logic [1:0] {
    BT_COND = 2'd0,
    BT_JUMP = 2'd1,
    BT_CALL = 2'd2,
    BT_RET  = 2'd3
  } br_type_t;

  // One committed instruction, sent in program order by the back-end.
  typedef struct packed {
    logic     valid;
    xpc_t     pc;         // name the instruction was fetched with
    cf_kind_t kind;
    logic     taken;      // CF_COND only: branch outcome
    va_t      target;     // JUMP/CALL/COND: target virtual address;
                          // RET: return address loaded from the architectural stack
    xpc_t     pred_next;  // name fetch chose to follow this instruction
  } commit_t;

  // BTB write, produced at commit.
  typedef struct packed {
    logic     valid;
    va_t      va;         // resolved address of the branch
    br_type_t btype;
    xpc_t     target;     // randomised name of the target (selector output)
  } btb_train_t;

  // Direction predictor update, produced at commit.
  typedef struct packed {
    logic valid;
    va_t  va;
    logic taken;
  } bdb_train_t;

  // Inverse name mapping f^-1 as a function, for code that needs it inline.
  function automatic va_t pns_resolve(xpc_t x, int unsigned delta_shift);
    return x.pc + (va_t'(x.p) << delta_shift);
  endfunction

endpackage
