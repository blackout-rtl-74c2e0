// cap_perm_unit -- permission handling with the non-oblivious access permission.
//
// The extension adds no instruction. A capability is made blinded by clearing its
// new "non-oblivious access" permission with the existing candperm instruction;
// because candperm can only clear permissions, a blinded capability can never be
// turned back into an ordinary one. This unit is the permission part of the
// capability ALU:
//   candperm  perms := perms AND mask, over the hardware permissions (mask bits
//             11:0), the non-oblivious access bit (mask bit 12) and the user
//             permissions (mask bits 18:15). As in CHERI, a sealed capability
//             loses its tag when its permissions are changed.
//   cgetperm  returns the same 19-bit permission vector, zero-extended.
//   root      the permission vector of a capability created at reset: every
//             permission set, the non-oblivious access bit included, so a new
//             capability starts with enforcement off.
//   is_blinded  1 when the capability is valid and lacks the non-oblivious bit.
//
// Timing: combinational.
//
// From the paper: the permission lives in previously unused bits next to the 12
// hardware and 4 user permissions, is 1 in newly created capabilities, and is
// cleared by candperm to make a blinded capability. This design's choices: mask
// bit 12 and metadata bit 47 for the new permission (see blackout_pkg). The helper
// that builds the permission vector reads only the permission fields of the
// metadata, so the rest of its argument is unused by design.
module cap_perm_unit
  import blackout_pkg::*;
(
  input  cap_t            cap_in,
  input  logic [XLEN-1:0] mask,             // candperm mask (rs2)
  output cap_t            andperm_out,      // candperm result
  output logic [XLEN-1:0] getperm_out,      // cgetperm result
  output logic [XLEN-1:0] root_perms,       // permissions of a capability created at reset
  output logic            is_blinded        // cap_in is a valid blinded capability
);

  function automatic logic [ARCH_PERM_W-1:0] arch_perms(cap_meta_t m);
    logic [ARCH_PERM_W-1:0] p;
    p                                      = '0;
    p[HW_PERMS-1:0]                        = m.perms;
    p[PERM_NO_BIT]                         = m.non_oblivious;
    p[PERM_USER_LO +: USER_PERMS]          = m.uperms;
    return p;
  endfunction

  always_comb begin
    andperm_out                    = cap_in;
    andperm_out.meta.perms         = cap_in.meta.perms  & mask[HW_PERMS-1:0];
    andperm_out.meta.non_oblivious = cap_in.meta.non_oblivious & mask[PERM_NO_BIT];
    andperm_out.meta.uperms        = cap_in.meta.uperms & mask[PERM_USER_LO +: USER_PERMS];
    if (cap_in.meta.otype != OTYPE_UNSEALED) andperm_out.tag = 1'b0;

    getperm_out = XLEN'(arch_perms(cap_in.meta));
    root_perms  = XLEN'(arch_perms('{uperms: '1, perms: '1, non_oblivious: 1'b1,
                                     reserved: '0, otype: OTYPE_UNSEALED, bounds: '0}));
    is_blinded  = cap_in.tag && !cap_in.meta.non_oblivious;
  end

  // Monotonicity: candperm never grants a permission the source lacked.
  always_comb begin
    assert ((andperm_out.meta.non_oblivious & ~cap_in.meta.non_oblivious) == 1'b0)
      else $error("candperm set the non-oblivious access bit");
  end

endmodule
