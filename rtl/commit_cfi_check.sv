// commit_cfi_check -- commit-stage CFI enforcement (the "full" SpecCFI mode).
//
// This is conventional hardware CFI applied to the committed instruction
// stream, one micro-op per cycle in program order.
//   Forward edge: a committed indirect call/jmp loads its label into the
//   commit-stage CFI_REG; the next committed micro-op must be a cfi_lbl with an
//   equal label. Anything else raises a CFI violation.
//   Backward edge: a committed ret carries the OLD_RS value it popped from the
//   RSB/SCS at decode (from the ROB) and the return address read from the
//   ordinary software stack; if they differ, or if the RSB/SCS had no entry to
//   give, a CFI violation is raised.
//
// The violation is reported combinationally in the cycle the offending
// micro-op commits (viol_valid with viol_cause), so the pipeline can turn that
// commit into an exception. After a violation the forward check restarts from
// its idle state; the exception handler's redirect is the pipeline's concern.
// When ENABLE is 0 (the "base" mode: CFI for speculation only) nothing is
// ever reported.
//
// The paper specifies what is checked at commit and that a second CFI_REG and
// comparator sit there; the two-state sequencing and the violation interface
// are this design's own.
module commit_cfi_check
  import speccfi_pkg::*;
#(
  parameter bit ENABLE = 1'b1
) (
  input  logic    clk,
  input  logic    rst_n,

  input  logic    commit_valid,
  input  iclass_e commit_cls,
  input  label_t  commit_label,
  input  addr_t   commit_old_rs,    // OLD_RS of a committing ret
  input  logic    commit_ret_hit,   // the ret's decode-time pop found an entry
  input  addr_t   commit_sw_ret,    // return address on the software stack

  output logic    viol_valid,
  output viol_e   viol_cause
);

  logic   wait_q;       // an indirect call/jmp committed, cfi_lbl expected next
  label_t cfi_reg_q;    // CFI_REG of the commit stage

  always_comb begin
    viol_cause = VIOL_NONE;
    if (commit_valid) begin
      if (wait_q) begin
        if (commit_cls != IC_CFI_LBL)        viol_cause = VIOL_FWD_NOLBL;
        else if (commit_label != cfi_reg_q)  viol_cause = VIOL_FWD_LABEL;
      end else if (commit_cls == IC_RET) begin
        if (!commit_ret_hit || (commit_old_rs != commit_sw_ret)) viol_cause = VIOL_RET;
      end
    end
    if (!ENABLE) viol_cause = VIOL_NONE;
  end

  assign viol_valid = (viol_cause != VIOL_NONE);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wait_q    <= 1'b0;
      cfi_reg_q <= '0;
    end else if (commit_valid) begin
      if (wait_q) begin
        wait_q <= 1'b0;
      end else if (is_indirect(commit_cls)) begin
        wait_q    <= 1'b1;
        cfi_reg_q <= commit_label;
      end
    end
  end

endmodule
