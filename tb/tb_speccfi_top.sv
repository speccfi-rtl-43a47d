// tb_speccfi_top -- end-to-end test of the SpecCFI unit at its default sizes
// (16-entry RSB/SCS, 4-entry spill/fill chunks, 224-entry ROB, commit checks on).
//
// The testbench is the host core around the unit. A program generator walks a
// legal correct path: direct and indirect calls, rets, indirect jmps, and each
// indirect branch followed by a cfi_lbl with its label. A model of the host ROB
// receives every micro-op the unit lets through and commits the oldest ones in
// order. Injected events exercise each mechanism:
//   * conditional mispredictions: a wrong path of random micro-ops (calls and
//     rets included) is decoded, then a flush annuls it and the RSB/SCS must be
//     back to its correct-path state;
//   * poisoned BTB targets: an indirect branch whose predicted path starts with
//     a gadget (no cfi_lbl, or a cfi_lbl with another label), which must get an
//     lfence, before the branch resolves and flushes the wrong path;
//   * a hijacked indirect branch on the committed path (wrong cfi_lbl label),
//     which must be fenced at decode and reported as a violation at commit;
//   * corrupted software-stack return addresses, reported at commit;
//   * deep call phases (overflow spills) and deep return phases (underflow
//     fills), and one context save / load / restore.
// Checked: every correct-path ret is predicted with the right address; lfences
// appear exactly where expected; violations appear exactly where expected;
// indirect targets come from the BTB input; every mechanism happened.
module tb_speccfi_top;
  import speccfi_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;

  logic dec_valid, dec_ready, uop_valid, uop_fence, uop_pred_valid, uop_ready;
  dec_uop_t dec_uop, uop;
  addr_t dec_btb_target, uop_pred_target;
  logic [7:0] uop_rob_idx, flush_idx;
  logic commit_valid, viol_valid, flush_valid, flush_ready, recovering;
  label_t commit_label;
  addr_t commit_sw_ret;
  iclass_e commit_cls;
  viol_e viol_cause;
  logic ctx_save, ctx_restore, ctx_done, ctx_load;
  addr_t ctx_ssp_in, ctx_floor_in, ssp, ssp_floor;
  logic mem_req_valid, mem_req_we, mem_req_ready, mem_rsp_valid;
  addr_t mem_req_addr, mem_req_wdata, mem_rsp_rdata;
  logic fence_event, check_pass_event, spill_event, fill_event;
  logic [7:0] rob_count;
  logic [4:0] rsb_tos, rsb_lcp;

  always #5 clk = ~clk;

  speccfi_top dut (.*);

  scs_mem_model #(.WORDS(1024)) u_mem (
    .clk, .req_valid(mem_req_valid), .req_we(mem_req_we), .req_addr(mem_req_addr),
    .req_wdata(mem_req_wdata), .req_ready(mem_req_ready), .rsp_valid(mem_rsp_valid),
    .rsp_rdata(mem_rsp_rdata));

  int checks = 0, failures = 0;
  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 12) $display("FAIL: %s (t=%0t)", what, $time);
    end
  endtask

  // ---- mechanism counters ----
  int n_uops = 0, n_fence = 0, n_fence_exp = 0, n_ret_pred = 0, n_btb_pred = 0;
  int n_flush = 0, n_annul_call = 0, n_annul_ret = 0, n_spill = 0, n_fill = 0, n_ctx = 0;
  int n_viol_fwd = 0, n_viol_ret = 0, n_commit = 0, n_check_pass = 0, n_poison = 0;

  always @(posedge clk) if (rst_n) begin
    if (spill_event) n_spill++;
    if (fill_event) n_fill++;
    if (dut.an_call) n_annul_call++;
    if (dut.an_ret) n_annul_ret++;
    if (check_pass_event) n_check_pass++;
  end

  // ---- host ROB model ----
  typedef struct {
    int      idx;
    bit      fence;
    iclass_e cls;
    label_t  label;
    addr_t   ret_addr;     // correct return address of a correct-path ret
    bit      corrupt;      // software stack corrupted for this ret
    bit      hijack;       // committed forward-edge violation expected here
    bit      wrong;        // wrong-path micro-op
    int      resolve_at;   // >0: mispredicted branch, flush at this cycle
  } rob_t;
  rob_t rob [$];

  // ---- program generator state ----
  addr_t arch_stack [$];    // correct-path call stack at decode
  int    cyc = 0;
  addr_t pc = 32'h1000;
  bit    need_lbl = 0;      // a cfi_lbl must follow (legal indirect target)
  label_t need_label;
  bit    wrong_mode = 0;    // decoding a wrong path
  int    wrong_left = 0;
  bit    gadget_next = 0;   // next wrong-path op is the gadget at a poisoned target
  bit    hijack_next = 0;   // next correct-path op is a cfi_lbl with a wrong label
  int    p_call = 30;
  bit    decode_on = 1;
  int    pend_fence = 0;
  bit    after_wrong = 0;   // the last micro-op in the ROB opened or is on a wrong path

  // the micro-op currently offered to decode and its metadata
  bit    have_op = 0;
  rob_t  cur;

  function automatic label_t lbl_of(addr_t a);
    return label_t'(a[2:0]);          // eight label classes: address mod 8
  endfunction

  task automatic gen_op();
    int r;
    cur = '{idx: 0, fence: 0, cls: IC_OTHER, label: '0, ret_addr: '0, corrupt: 0,
            hijack: 0, wrong: wrong_mode, resolve_at: 0};
    dec_uop = '0;
    dec_btb_target = addr_t'($urandom);
    pc = pc + 4;
    dec_uop.next_pc = pc;
    if (wrong_mode) begin
      if (gadget_next) begin
        // first micro-op at a poisoned BTB target: no cfi_lbl or a wrong one
        gadget_next = 0;
        if ($urandom_range(0, 1) != 0) dec_uop.cls = IC_OTHER;
        else begin dec_uop.cls = IC_CFI_LBL; dec_uop.label = need_label + 1; end
        pend_fence++; n_fence_exp++;
      end else begin
        r = $urandom_range(0, 99);
        if (r < 30) dec_uop.cls = IC_DIR_CALL;
        else if (r < 60) dec_uop.cls = IC_RET;
        else if (r < 65) begin dec_uop.cls = IC_CFI_LBL; dec_uop.label = label_t'(r); end
        else dec_uop.cls = IC_OTHER;
        if (dec_uop.cls == IC_RET) begin
          // a ret on a wrong path: no prediction check
        end
      end
      wrong_left--;
    end else if (need_lbl) begin
      need_lbl = 0;
      dec_uop.cls = IC_CFI_LBL;
      dec_uop.label = need_label;
      if (hijack_next) begin
        hijack_next = 0;
        dec_uop.label = need_label ^ 32'h8000_0000;
        cur.hijack = 1;
        pend_fence++; n_fence_exp++;
      end
    end else begin
      r = $urandom_range(0, 99);
      if (r < p_call / 2) dec_uop.cls = IC_DIR_CALL;
      else if (r < p_call) dec_uop.cls = IC_IND_CALL;
      else if (r < 60 && arch_stack.size() > 0) dec_uop.cls = IC_RET;
      else if (r < 68) dec_uop.cls = IC_IND_JMP;
      else dec_uop.cls = IC_OTHER;
      if (is_indirect(dec_uop.cls)) begin
        dec_uop.label = lbl_of(dec_btb_target);
        need_lbl = 1; need_label = dec_uop.label;
        r = $urandom_range(0, 99);
        if (r < 6) begin
          // poisoned BTB entry: predicted path starts with a gadget
          cur.resolve_at = cyc + $urandom_range(6, 30);
          gadget_next = 1;
          n_poison++;
        end else if (r < 8) hijack_next = 1;
      end else if (dec_uop.cls == IC_OTHER && $urandom_range(0, 99) < 5) begin
        cur.resolve_at = cyc + $urandom_range(4, 40);   // mispredicted conditional branch
      end
      if (is_call(dec_uop.cls)) arch_stack.push_back(pc);
      if (dec_uop.cls == IC_RET) begin
        cur.ret_addr = arch_stack.pop_back();
        cur.corrupt  = ($urandom_range(0, 99) < 3);
      end
    end
    cur.cls = dec_uop.cls;
    cur.label = dec_uop.label;
    if (cur.resolve_at > 0) begin
      wrong_mode = 1;
      wrong_left = $urandom_range(3, 60);
    end
    have_op = 1;
  endtask

  // retire: in order, correct-path, resolved
  task automatic do_commit_drive();
    commit_valid = 0; commit_label = '0; commit_sw_ret = '0;
    if (rob.size() > 0 && rob[0].resolve_at == 0 && !rob[0].wrong && $urandom_range(0, 99) < 60) begin
      commit_valid = 1;
      commit_label = rob[0].label;
      commit_sw_ret = rob[0].corrupt ? (rob[0].ret_addr ^ 32'h10) : rob[0].ret_addr;
    end
  endtask

  task automatic check_commit();
    rob_t e;
    viol_e exp_c;
    if (!commit_valid) return;
    e = rob.pop_front();
    exp_c = VIOL_NONE;
    if (e.hijack) exp_c = VIOL_FWD_LABEL;
    else if (!e.fence && e.cls == IC_RET && e.corrupt) exp_c = VIOL_RET;
    // the ROB entry after a hijacked indirect branch is the cfi_lbl; the fence
    // follows it, so the fence itself commits after a matched-state reset
    check(commit_cls == (e.fence ? IC_OTHER : e.cls), "committed class");
    check(viol_cause == exp_c, $sformatf("commit violation %0d expected %0d (cls %0d)", viol_cause, exp_c, e.cls));
    if (viol_cause == VIOL_RET) n_viol_ret++;
    if (viol_cause == VIOL_FWD_LABEL || viol_cause == VIOL_FWD_NOLBL) n_viol_fwd++;
    n_commit++;
  endtask

  task automatic do_flush_if_due();
    int pos;
    flush_valid = 0; flush_idx = '0;
    pos = -1;
    for (int i = 0; i < rob.size(); i++)
      if (rob[i].resolve_at > 0 && rob[i].resolve_at <= cyc) begin pos = i; break; end
    if (pos < 0 || !flush_ready) return;
    flush_valid = 1;
    flush_idx = 8'(rob[pos].idx);
    rob[pos].resolve_at = 0;
    while (rob.size() > pos + 1) void'(rob.pop_back());
    // refetch the correct path after the branch
    wrong_mode = 0; gadget_next = 0; have_op = 0; pend_fence = 0; after_wrong = 0;
    n_flush++;
  endtask

  // one cycle of the host
  task automatic host_cycle();
    @(negedge clk);
    cyc++;
    ctx_save = 0; ctx_restore = 0; ctx_load = 0;
    do_commit_drive();
    do_flush_if_due();
    if (wrong_mode && wrong_left <= 0 && !flush_valid) begin
      dec_valid = 0;                  // wrong path ends: the fetch waits for the redirect
    end else begin
      if (!have_op && decode_on && !flush_valid) gen_op();
      dec_valid = have_op && decode_on && !flush_valid;
    end
    uop_ready = ($urandom_range(0, 9) != 0);
    #1;
    // observe this cycle's decode-side outcome (before the clock edge)
    if (uop_valid && uop_ready) begin
      rob_t e;
      n_uops++;
      if (uop_fence) begin
        n_fence++;
        check(pend_fence > 0, "lfence only where a check fails");
        if (pend_fence > 0) pend_fence--;
        e = '{idx: int'(uop_rob_idx), fence: 1, cls: IC_OTHER, label: '0, ret_addr: '0,
              corrupt: 0, hijack: 0, wrong: after_wrong, resolve_at: 0};
        rob.push_back(e);
      end else begin
        check(dec_valid && dec_ready, "a passing micro-op is the one offered");
        e = cur;
        e.idx = int'(uop_rob_idx);
        if (!e.wrong && e.cls == IC_RET) begin
          check(uop_pred_valid && uop_pred_target == e.ret_addr,
                $sformatf("ret predicted %h expected %h", uop_pred_target, e.ret_addr));
          n_ret_pred++;
        end
        if (is_indirect(e.cls)) begin
          check(uop_pred_valid && uop_pred_target == dec_btb_target, "indirect target from the BTB");
          n_btb_pred++;
        end
        rob.push_back(e);
        after_wrong = e.wrong || (e.resolve_at > 0);
        have_op = 0;
      end
    end
    check_commit();
  endtask

  task automatic drain();
    int g = 0;
    decode_on = 0;
    while ((rob.size() > 0 || wrong_mode || recovering) && g < 5000) begin host_cycle(); g++; end
    @(negedge clk);            // let the last commit take effect
    commit_valid = 0; flush_valid = 0; dec_valid = 0;
    #1;
    if (rob.size() != 0)
      $display("drain stuck: %0d entries, head idx %0d cls %0d wrong %0d resolve %0d fence %0d wrong_mode %0d rsb tos %0d lcp %0d state %0d",
               rob.size(), rob[0].idx, rob[0].cls, rob[0].wrong, rob[0].resolve_at, rob[0].fence, wrong_mode,
               rsb_tos, rsb_lcp, dut.u_rsb.state_q);
    check(rob.size() == 0, "pipeline drained");
    if (int'(rob_count) != 0) $display("drain: dut count %0d busy %0d head %0d tail %0d", rob_count, recovering, dut.u_trk.head_q, dut.u_trk.tail_q);
    check(int'(rob_count) == 0, "OLD_RS field empty after drain");
    decode_on = 1;
  endtask

  initial begin
    dec_valid = 0; dec_uop = '0; dec_btb_target = '0; uop_ready = 1;
    commit_valid = 0; commit_label = '0; commit_sw_ret = '0;
    flush_valid = 0; flush_idx = '0;
    ctx_save = 0; ctx_restore = 0; ctx_load = 0; ctx_ssp_in = '0; ctx_floor_in = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    ctx_load = 1; ctx_ssp_in = 32'd0; ctx_floor_in = 32'd0;
    @(negedge clk);
    ctx_load = 0;
    for (int ph = 0; ph < 16; ph++) begin
      p_call = (ph % 2 == 0) ? 48 : 14;     // alternate deep calls and deep returns
      for (int c = 0; c < 1500; c++) host_cycle();
      if (ph == 8) begin
        // context switch out and back in, with a live call stack
        int g;
        drain();
        @(negedge clk);
        ctx_save = 1; g = 0;
        while (!ctx_done && g < 2000) begin @(negedge clk); g++; end
        ctx_save = 0;
        check(ctx_done && rsb_tos == 0, "context save spilled the RSB/SCS");
        check(int'(ssp - ssp_floor) == arch_stack.size(), "shadow stack holds the whole call stack");
        @(negedge clk);
        ctx_load = 1; ctx_ssp_in = ssp; ctx_floor_in = ssp_floor;   // same thread back
        @(negedge clk);
        ctx_load = 0; ctx_restore = 1; g = 0;
        while (!ctx_done && g < 2000) begin @(negedge clk); g++; end
        ctx_restore = 0;
        check(ctx_done, "context restore finished");
        n_ctx++;
      end
    end
    drain();
    check(int'(rsb_tos) + int'(ssp - ssp_floor) == arch_stack.size(),
          "RSB/SCS plus shadow stack equal the architectural call stack");
    $display("uops %0d commits %0d fences %0d/%0d poisoned %0d flushes %0d annul call %0d ret %0d",
             n_uops, n_commit, n_fence, n_fence_exp, n_poison, n_flush, n_annul_call, n_annul_ret);
    $display("ret predictions %0d btb predictions %0d label checks passed %0d spills %0d fills %0d ctx %0d viol fwd %0d ret %0d",
             n_ret_pred, n_btb_pred, n_check_pass, n_spill, n_fill, n_ctx, n_viol_fwd, n_viol_ret);
    check(n_fence > 0 && n_poison > 0, "mechanism: lfence insertion on a poisoned target");
    check(n_check_pass > 0, "mechanism: passed label check");
    check(n_flush > 0 && n_annul_call > 0 && n_annul_ret > 0, "mechanism: annulment of calls and rets");
    check(n_spill > 0, "mechanism: overflow spill");
    check(n_fill > 0, "mechanism: underflow fill");
    check(n_ctx > 0, "mechanism: context switch");
    check(n_viol_fwd > 0 && n_viol_ret > 0, "mechanism: commit-stage violations");
    check(n_ret_pred > 0 && n_btb_pred > 0, "mechanism: RSB/SCS and BTB predictions");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
