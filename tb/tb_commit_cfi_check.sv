// tb_commit_cfi_check -- self-checking test of the commit-stage CFI check.
//
// A random committed stream (indirect calls/jmps, cfi_lbl with right and wrong
// labels, rets with matching and differing software-stack return addresses,
// rets without an RSB/SCS entry, other micro-ops, idle cycles) is compared,
// cycle by cycle, with a reference model of the two rules: the micro-op
// committed after an indirect branch must be a cfi_lbl with the same label,
// and a ret's OLD_RS must equal the software stack's return address. The
// violation must appear in the same cycle as the offending commit. A second
// instance with ENABLE = 0 (speculation-only mode) must never report.
module tb_commit_cfi_check;
  import speccfi_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  logic commit_valid, commit_ret_hit;
  iclass_e commit_cls;
  label_t commit_label;
  addr_t commit_old_rs, commit_sw_ret;
  logic viol_valid, viol_valid_base;
  viol_e viol_cause, viol_cause_base;

  int checks = 0, failures = 0;
  int n_fwd_nolbl = 0, n_fwd_label = 0, n_ret = 0, n_ok_pairs = 0;

  always #5 clk = ~clk;

  commit_cfi_check dut (.*);
  commit_cfi_check #(.ENABLE(1'b0)) dut_base (
    .clk, .rst_n, .commit_valid, .commit_cls, .commit_label, .commit_old_rs,
    .commit_ret_hit, .commit_sw_ret, .viol_valid(viol_valid_base), .viol_cause(viol_cause_base));

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL: %s (t=%0t)", what, $time);
    end
  endtask

  // reference model state
  bit     m_wait;
  label_t m_lbl;

  initial begin
    commit_valid = 0; commit_cls = IC_OTHER; commit_label = '0;
    commit_old_rs = '0; commit_sw_ret = '0; commit_ret_hit = 1'b1;
    m_wait = 0; m_lbl = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < 20000; i++) begin
      int r;
      viol_e exp_c;
      @(negedge clk);
      r = $urandom_range(0, 99);
      commit_valid   = ($urandom_range(0, 4) != 0);
      commit_label   = label_t'($urandom_range(0, 3));
      commit_old_rs  = addr_t'($urandom_range(0, 7));
      commit_sw_ret  = ($urandom_range(0, 3) != 0) ? commit_old_rs : addr_t'($urandom_range(0, 7));
      commit_ret_hit = ($urandom_range(0, 9) != 0);
      if (m_wait && r < 60) begin
        commit_cls = IC_CFI_LBL;
        if ($urandom_range(0, 3) != 0) commit_label = m_lbl;
      end else if (r < 25) commit_cls = ($urandom_range(0, 1) != 0) ? IC_IND_CALL : IC_IND_JMP;
      else if (r < 45) commit_cls = IC_RET;
      else if (r < 55) commit_cls = IC_CFI_LBL;
      else if (r < 60) commit_cls = IC_DIR_CALL;
      else commit_cls = IC_OTHER;
      // expected
      exp_c = VIOL_NONE;
      if (commit_valid) begin
        if (m_wait) begin
          if (commit_cls != IC_CFI_LBL) begin exp_c = VIOL_FWD_NOLBL; n_fwd_nolbl++; end
          else if (commit_label != m_lbl) begin exp_c = VIOL_FWD_LABEL; n_fwd_label++; end
          else n_ok_pairs++;
          m_wait = 0;
        end else begin
          if (commit_cls == IC_RET && (!commit_ret_hit || commit_old_rs != commit_sw_ret)) begin
            exp_c = VIOL_RET; n_ret++;
          end
          if (commit_cls == IC_IND_CALL || commit_cls == IC_IND_JMP) begin
            m_wait = 1; m_lbl = commit_label;
          end
        end
      end
      #1;
      check(viol_cause == exp_c && viol_valid == (exp_c != VIOL_NONE),
            $sformatf("cycle %0d: cause %0d expected %0d", i, viol_cause, exp_c));
      check(!viol_valid_base, "base mode never reports");
    end
    check(n_fwd_nolbl > 0 && n_fwd_label > 0 && n_ret > 0 && n_ok_pairs > 0, "all cases seen");
    $display("forward no-label %0d, forward wrong label %0d, ret %0d, legal pairs %0d",
             n_fwd_nolbl, n_fwd_label, n_ret, n_ok_pairs);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
