// blackout_pkg -- shared types and constants of the blinded-capability extension.
//
// The extension adds one "blindedness" bit to every general-purpose capability
// register of a CHERI-RISC-V core and one "non-oblivious access" permission bit to
// every capability. A capability whose non-oblivious bit is 0 is a blinded
// capability: loads through it mark the destination register blinded, and the
// rules of the propagation table (see side_channel_prevention) decide which
// instructions on blinded registers may proceed and which must fault.
//
// What follows the paper: RV64 with 128-bit capabilities plus a separate validity
// tag; 12 hardware + 4 user permission bits with 3 unused bits, one of which
// becomes the non-oblivious access bit; newly created capabilities carry the bit
// set to 1; a blinded register record (BRR) is 128 bits holding a 64-bit value and
// a 64-bit marker.
// This design's own choices: the exact bit positions inside the capability word,
// the marker pattern, the fault cause codes and the micro-op classes used by the
// host pipeline to tell the extension what an instruction is.
package blackout_pkg;

  // ---------------------------------------------------------------- widths
  localparam int unsigned XLEN = 64;          // RV64 (the core is RV64ACDFIMSU + CHERI)
  // A capability is 2*XLEN = 128 bits in memory, with its validity tag held apart.

  // ------------------------------------------------ capability metadata word
  // Layout of the upper 64 bits of a 128-bit capability (CHERI-128 style):
  //   [63:60] user permissions (4)      [59:48] hardware permissions (12)
  //   [47]    non-oblivious access bit  [46:45] still unused
  //   [44:27] object type (18)          [26:0]  compressed bounds (27)
  localparam int unsigned HW_PERMS   = 12;
  localparam int unsigned USER_PERMS = 4;
  localparam int unsigned OTYPE_W    = 18;
  localparam int unsigned BOUNDS_W   = 27;

  typedef struct packed {
    logic [USER_PERMS-1:0] uperms;
    logic [HW_PERMS-1:0]   perms;
    logic                  non_oblivious;   // 1: ordinary capability, 0: blinded capability
    logic [1:0]            reserved;
    logic [OTYPE_W-1:0]    otype;
    logic [BOUNDS_W-1:0]   bounds;
  } cap_meta_t;                            // 64 bits

  typedef struct packed {
    logic            tag;                  // validity tag, kept in the tag cache in memory
    cap_meta_t       meta;
    logic [XLEN-1:0] addr;
  } cap_t;                                 // 129 bits: a capability register's contents

  // Architectural permission vector as seen by cgetperm / candperm masks:
  //   [11:0] hardware permissions, [14:12] unused in CHERI-RISC-V,
  //   [18:15] user permissions. The non-oblivious access bit takes bit 12.
  localparam int unsigned ARCH_PERM_W  = 19;
  localparam int unsigned PERM_NO_BIT  = 12;
  localparam int unsigned PERM_USER_LO = 15;

  // Object type of an unsealed capability (-1).
  localparam logic [OTYPE_W-1:0] OTYPE_UNSEALED = '1;

  // Object type used only by blinded register records. CHERI reserves the top of
  // the object-type space for architectural types; -16 is not given to any of them.
  localparam logic [OTYPE_W-1:0] BRR_OTYPE = 18'h3FFF0;

  // 64-bit marker kept in the metadata half of a BRR. All permissions zero and a
  // reserved object type: no capability the architecture can derive looks like it.
  localparam cap_meta_t BRR_MARKER = '{uperms: '0, perms: '0, non_oblivious: 1'b0,
                                       reserved: 2'b11, otype: BRR_OTYPE, bounds: '0};

  // Register holding the stack-pointer capability (csp) in CHERI-RISC-V: c2.
  localparam int unsigned CSP_IDX = 2;

  // ------------------------------------------------- micro-op classes
  // Class of the instruction issued to a pipeline, as seen by the extension.
  typedef enum logic [2:0] {
    UOP_ARITH   = 3'd0,   // register-to-register arithmetic / logic / mul / div / FP
    UOP_BRANCH  = 3'd1,   // conditional branch: rs1, rs2 are the condition operands
    UOP_JUMPREG = 3'd2,   // jalr / cjalr: rs1 is the target address register
    UOP_CAPMOD  = 3'd3,   // capability-modifying instruction (csetaddr, candperm, ...)
    UOP_LOAD    = 3'd4,   // integer load: rs1 address capability
    UOP_STORE   = 3'd5,   // integer store: rs1 address capability, rs2 data
    UOP_CLC     = 3'd6,   // load capability via capability
    UOP_CSC     = 3'd7    // store capability via capability
  } uop_e;

  // ------------------------------------------------- fault causes
  // Blinded-capability violations, reported at commit through the core's
  // capability exception path.
  typedef enum logic [2:0] {
    FLT_NONE        = 3'd0,
    FLT_BRANCH_COND = 3'd1,  // I4: blinded branch condition
    FLT_JUMP_TARGET = 3'd2,  // I4: blinded jump target, or jump through a blinded capability
    FLT_ADDR        = 3'd3,  // I5: blinded address operand of a load or store
    FLT_STORE_DATA  = 3'd4,  // I1: blinded data stored through a non-blinded capability
    FLT_CAP_TO_BD   = 3'd5,  // I2: capability stored into blinded memory
    FLT_CAPMOD      = 3'd6   // capability-modifying instruction with a blinded operand
  } fault_e;

  // Capability exception cause code reported to software for all of the above.
  // CHERI-RISC-V leaves codes 0x1C..0x1F free; 0x1C is used here.
  localparam logic [4:0] CAP_CAUSE_BLINDED = 5'h1C;

  // Training record sent from commit to the branch predictor.
  typedef struct packed {
    logic            valid;
    logic            taken;
    logic [XLEN-1:0] pc;
    logic [XLEN-1:0] target;
  } bp_train_t;

endpackage
