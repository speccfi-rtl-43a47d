// speccfi_pkg -- types and constants shared by the SpecCFI blocks.
//
// Labels and addresses are 32 bits wide. The label width is the one the
// SpecCFI hardware evaluation uses for CFI_REG; the 32-bit address width
// follows the 32-bit in-order core that evaluation was carried out on and is
// a choice of this design. The instruction classes below are what the front
// end's decoder hands to the CFI logic; their encoding is this design's own.
package speccfi_pkg;

  localparam int unsigned LABEL_W = 32;  // CFI label width (CFI_REG size)
  localparam int unsigned ADDR_W  = 32;  // return-address / code-address width

  typedef logic [LABEL_W-1:0] label_t;
  typedef logic [ADDR_W-1:0]  addr_t;

  // Control-flow class of a decoded (or committed) micro-op.
  typedef enum logic [2:0] {
    IC_OTHER    = 3'd0,  // anything that is not listed below (includes lfence uops)
    IC_IND_CALL = 3'd1,  // call *reg, label
    IC_IND_JMP  = 3'd2,  // jmp  *reg, label
    IC_DIR_CALL = 3'd3,  // direct call (pushes the RSB/SCS, no label check)
    IC_RET      = 3'd4,  // ret
    IC_CFI_LBL  = 3'd5   // cfi_lbl label (marks a legal indirect target)
  } iclass_e;

  // A micro-op as seen by the decode-stage CFI logic.
  typedef struct packed {
    iclass_e cls;
    label_t  label;    // label of call/jmp, or of cfi_lbl
    addr_t   next_pc;  // address after the instruction: return address of a call
  } dec_uop_t;

  // Cause reported by the commit-stage check.
  typedef enum logic [1:0] {
    VIOL_NONE     = 2'd0,
    VIOL_FWD_NOLBL = 2'd1,  // indirect call/jmp not followed by cfi_lbl
    VIOL_FWD_LABEL = 2'd2,  // cfi_lbl label differs from the call/jmp label
    VIOL_RET      = 2'd3    // OLD_RS differs from the software stack's return address
  } viol_e;

  function automatic logic is_indirect(iclass_e c);
    return (c == IC_IND_CALL) || (c == IC_IND_JMP);
  endfunction

  function automatic logic is_call(iclass_e c);
    return (c == IC_IND_CALL) || (c == IC_DIR_CALL);
  endfunction

endpackage
