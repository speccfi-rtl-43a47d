// tb_speccfi_attacks -- directed attack scenarios against the SpecCFI unit at
// its default sizes (16-entry RSB/SCS, 224-entry ROB, commit checks on).
//
// Each scenario replays, at the level of decoded micro-ops, what one class of
// published Spectre proof of concept makes the front end see, and checks that
// the unit responds as the defence requires:
//   1. Spectre-BTB: a poisoned BTB entry sends an indirect call to a gadget
//      that has no cfi_lbl. An lfence must come out before the first gadget
//      micro-op. After the branch resolves, the legal target, which starts
//      with the matching cfi_lbl, must run with no fence.
//   2. SMoTherSpectre with fine-grained labels: the poisoned target begins
//      with a cfi_lbl of another label (L2 instead of L1), then a compare and
//      a conditional jump. An lfence must separate the cfi_lbl from the
//      compare. The resolved path to the legal target is then checked at
//      commit only: the redirect restarts the decode-stage check.
//   3. The same gadget under one shared label, as coarse-grained CFI would
//      assign: the label matches and no fence is inserted. This shows that the
//      protection depends on the precision of the labels.
//   4. Spectre-RSB, same address space: a function overwrites its return
//      address on the software stack. The ret is still predicted to the real
//      call site, and its commit raises a return violation.
//   5. Spectre-RSB, speculative pollution: wrong-path rets and calls push
//      gadget addresses, then a misprediction squashes them. The next
//      correct-path ret must be predicted to the true return address.
//   6. Spectre-RSB, cross address space: an attacker thread fills the
//      RSB/SCS with gadget addresses, deep enough to overflow it, and then a
//      context switch resumes the victim. The victim's rets must be predicted
//      from its own saved entries. A further unmatched ret, with both stacks
//      empty, must get no prediction at all (no fallback to the BTB) and is
//      reported at commit.
// The host ROB is modelled as a queue of the micro-ops the unit lets through;
// commits, flushes and context switches are driven by the scenario.
module tb_speccfi_attacks;
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
      if (failures < 20) $display("FAIL: %s (t=%0t)", what, $time);
    end
  endtask

  // ---- host ROB model: the micro-ops that left the unit, oldest first ----
  typedef struct {
    bit      fence;
    iclass_e cls;
    label_t  label;
    addr_t   next_pc;
    int      idx;
    bit      pred_valid;
    addr_t   pred_target;
  } rec_t;
  rec_t  rob [$];
  addr_t sw_stack [$];           // the program's software stack of return addresses

  int n_fence = 0, n_pass = 0, n_spill = 0, n_fill = 0, n_viol_ret = 0;
  always @(posedge clk) if (rst_n) begin
    if (uop_valid && uop_ready)
      rob.push_back('{fence: uop_fence, cls: uop_fence ? IC_OTHER : uop.cls, label: uop.label,
                      next_pc: uop.next_pc, idx: int'(uop_rob_idx),
                      pred_valid: uop_pred_valid, pred_target: uop_pred_target});
    if (fence_event) n_fence++;
    if (check_pass_event) n_pass++;
    if (spill_event) n_spill++;
    if (fill_event) n_fill++;
  end

  task automatic idle();
    dec_valid = 0; dec_uop = '0; dec_btb_target = '0;
    commit_valid = 0; commit_label = '0; commit_sw_ret = '0;
    flush_valid = 0; flush_idx = '0;
    ctx_save = 0; ctx_restore = 0; ctx_load = 0;
  endtask

  // Offer one decoded micro-op until the unit takes it (called at a negedge).
  task automatic dec(iclass_e c, label_t l, addr_t npc, addr_t btb);
    int g = 0;
    dec_valid = 1; dec_uop = '{cls: c, label: l, next_pc: npc}; dec_btb_target = btb;
    #1;
    while (!dec_ready && g < 1000) begin @(negedge clk); #1; g++; end
    check(dec_ready, "decode accepted the micro-op");
    @(negedge clk);
    idle();
  endtask

  // Let a few cycles pass so that a pending lfence leaves.
  task automatic settle();
    repeat (3) @(negedge clk);
  endtask

  // Retire the oldest micro-op; sw_override replaces the software-stack value
  // a ret reads (an overwritten return address).
  task automatic commit_one(viol_e exp, bit override_ret = 0, addr_t sw_override = '0);
    rec_t e;
    addr_t swr;
    e = rob.pop_front();
    swr = '0;
    if (e.cls == IC_RET) begin
      if (sw_stack.size() > 0) swr = sw_stack.pop_back();
      if (override_ret) swr = sw_override;
    end
    commit_valid = 1; commit_label = e.label; commit_sw_ret = swr;
    #1;
    check(commit_cls == e.cls, $sformatf("committed class %0d expected %0d", commit_cls, e.cls));
    check(viol_cause == exp && viol_valid == (exp != VIOL_NONE),
          $sformatf("commit violation %0d expected %0d (class %0d)", viol_cause, exp, e.cls));
    if (viol_cause == VIOL_RET) n_viol_ret++;
    if (is_call(e.cls)) sw_stack.push_back(e.next_pc);
    @(negedge clk);
    idle();
  endtask

  task automatic commit_all();
    while (rob.size() > 0) commit_one(VIOL_NONE);
  endtask

  // Mispredicted micro-op at queue position pos: everything younger is annulled.
  task automatic flush_at(int pos);
    int g = 0;
    flush_valid = 1; flush_idx = 8'(rob[pos].idx);
    #1;
    check(flush_ready, "flush accepted");
    @(negedge clk);
    idle();
    while (rob.size() > pos + 1) void'(rob.pop_back());
    while (recovering && g < 1000) begin @(negedge clk); g++; end
    @(negedge clk);
  endtask

  task automatic ctx_op(bit save);
    int g = 0;
    idle();
    if (save) ctx_save = 1; else ctx_restore = 1;
    #1;
    while (!ctx_done && g < 2000) begin @(negedge clk); #1; g++; end
    check(ctx_done, "context operation finished");
    @(negedge clk);
    idle();
    @(negedge clk);
  endtask

  task automatic ctx_set(addr_t s, addr_t f);
    idle();
    ctx_load = 1; ctx_ssp_in = s; ctx_floor_in = f;
    @(negedge clk);
    idle();
    @(negedge clk);
  endtask

  // True if an lfence follows entry p before any micro-op other than cfi_lbl.
  function automatic bit fence_before_gadget(int p);
    for (int i = p + 1; i < rob.size(); i++) begin
      if (rob[i].fence) return 1'b1;
      if (rob[i].cls != IC_CFI_LBL) return 1'b0;
    end
    return 1'b0;
  endfunction

  localparam label_t L0 = 32'h0000_C0DE;   // shared label (coarse-grained)
  localparam label_t L1 = 32'h0000_1111;
  localparam label_t L2 = 32'h0000_2222;

  int f0, p0, pos;
  addr_t victim_ssp, victim_floor;

  initial begin
    idle(); uop_ready = 1; ctx_ssp_in = '0; ctx_floor_in = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    ctx_set(32'd0, 32'd0);

    // ---- 1. Spectre-BTB: poisoned target without cfi_lbl ----
    f0 = n_fence;
    dec(IC_IND_CALL, L1, 32'h0103, 32'h0900);          // victim: call *rax, L1
    dec(IC_OTHER, '0, 32'h0901, '0);                   // gadget: load
    dec(IC_OTHER, '0, 32'h0902, '0);                   // gadget: transmit
    settle();
    check(rob.size() == 4, "btb: call, lfence and two gadget micro-ops passed");
    check(rob[0].pred_valid && rob[0].pred_target == 32'h0900, "btb: call predicted from the poisoned BTB");
    check(fence_before_gadget(0), "btb: lfence ahead of the gadget");
    check(n_fence == f0 + 1, "btb: exactly one lfence");
    flush_at(0);                                       // the call resolves to 0x0100
    dec(IC_CFI_LBL, L1, 32'h0101, '0);                 // legal target: cfi_lbl L1
    dec(IC_OTHER, '0, 32'h0102, '0);
    dec(IC_RET, '0, 32'h0103, '0);
    settle();
    check(n_fence == f0 + 1, "btb: no lfence on the legal target");
    check(rob.size() == 4 && !rob[1].fence && !rob[2].fence, "btb: legal path unfenced");
    check(rob[3].pred_valid && rob[3].pred_target == 32'h0103, "btb: ret predicted to the call site");
    commit_all();
    $display("scenario 1 (Spectre-BTB) done");

    // ---- 2. SMoTherSpectre, fine-grained labels ----
    f0 = n_fence;
    dec(IC_IND_CALL, L1, 32'h0003, 32'h0020);          // main: call *rax, L1 (BTB -> bar)
    dec(IC_CFI_LBL, L2, 32'h0021, '0);                 // bar: cfi_lbl L2
    dec(IC_OTHER, '0, 32'h0022, '0);                   // cmp $0, rdx
    dec(IC_OTHER, '0, 32'h0023, '0);                   // je
    settle();
    check(rob.size() == 5, "smother: five micro-ops passed");
    check(rob[1].cls == IC_CFI_LBL && rob[2].fence, "smother: lfence between cfi_lbl L2 and the compare");
    check(n_fence == f0 + 1, "smother: exactly one lfence");
    flush_at(0);                                       // resolves to baz
    p0 = n_pass;
    dec(IC_CFI_LBL, L1, 32'h0011, '0);                 // baz: cfi_lbl L1
    dec(IC_OTHER, '0, 32'h0012, '0);
    dec(IC_RET, '0, 32'h0003, '0);
    settle();
    // the redirect after resolution restarts the decode check, so baz's
    // cfi_lbl is checked at commit (no violation), not again at decode
    check(n_pass == p0 && n_fence == f0 + 1, "smother: resolved path to baz runs unfenced");
    commit_all();
    $display("scenario 2 (SMoTherSpectre, fine-grained) done");

    // ---- 3. the same gadget under a single shared label ----
    f0 = n_fence; p0 = n_pass;
    dec(IC_IND_CALL, L0, 32'h0003, 32'h0020);
    dec(IC_CFI_LBL, L0, 32'h0021, '0);
    dec(IC_OTHER, '0, 32'h0022, '0);
    settle();
    check(n_fence == f0 && n_pass == p0 + 1, "coarse: a shared label lets the gadget through unfenced");
    flush_at(0);
    dec(IC_CFI_LBL, L0, 32'h0011, '0);
    dec(IC_RET, '0, 32'h0003, '0);
    settle();
    commit_all();
    $display("scenario 3 (shared label) done");

    // ---- 4. Spectre-RSB: return address overwritten on the software stack ----
    dec(IC_DIR_CALL, '0, 32'h0200, '0);                // call f; returns to 0x200
    dec(IC_OTHER, '0, 32'h0301, '0);                   // f: overwrite [rsp] with 0x300
    dec(IC_RET, '0, 32'h0302, '0);
    settle();
    check(rob[2].pred_valid && rob[2].pred_target == 32'h0200, "rsb-overwrite: ret predicted to the real call site");
    commit_one(VIOL_NONE);
    commit_one(VIOL_NONE);
    commit_one(VIOL_RET, 1'b1, 32'h0300);              // software stack now says 0x300
    $display("scenario 4 (Spectre-RSB, overwritten return) done");

    // ---- 5. Spectre-RSB: speculative pollution of the stack ----
    dec(IC_DIR_CALL, '0, 32'h0500, '0);
    dec(IC_OTHER, '0, 32'h0501, '0);                   // conditional branch, mispredicted
    dec(IC_RET, '0, 32'h0502, '0);                     // wrong path
    dec(IC_DIR_CALL, '0, 32'h0BAD, '0);
    dec(IC_DIR_CALL, '0, 32'h0BAE, '0);
    dec(IC_RET, '0, 32'h0503, '0);
    settle();
    check(rob[2].pred_target == 32'h0500 && rob[5].pred_target == 32'h0BAE, "pollution: wrong-path predictions");
    flush_at(1);
    dec(IC_OTHER, '0, 32'h0511, '0);
    dec(IC_RET, '0, 32'h0512, '0);
    settle();
    check(rob.size() == 4 && rob[3].pred_valid && rob[3].pred_target == 32'h0500,
          "pollution: correct-path ret predicted to 0x500 after the squash");
    commit_all();
    check(rsb_tos == 0 && rsb_lcp == 0, "pollution: stack empty again");
    $display("scenario 5 (Spectre-RSB, speculative pollution) done");

    // ---- 6. Spectre-RSB across address spaces ----
    dec(IC_DIR_CALL, '0, 32'h0401, '0);                // victim: three nested calls
    dec(IC_DIR_CALL, '0, 32'h0402, '0);
    dec(IC_DIR_CALL, '0, 32'h0403, '0);
    settle();
    commit_all();
    ctx_op(1'b1);                                      // victim switched out
    victim_ssp = ssp; victim_floor = ssp_floor;
    check(rsb_tos == 0 && victim_ssp == victim_floor + 3, "cross: victim saved to its shadow stack");
    ctx_set(32'd512, 32'd512);                         // attacker switched in
    for (int i = 0; i < 22; i++) begin                 // fill the RSB with gadget addresses
      dec(IC_DIR_CALL, '0, 32'h0B00 + addr_t'(i), '0);
      commit_one(VIOL_NONE);
    end
    check(n_spill > 0, "cross: attacker calls overflowed the RSB/SCS");
    ctx_op(1'b1);                                      // attacker switched out
    sw_stack.delete();
    sw_stack.push_back(32'h0401); sw_stack.push_back(32'h0402); sw_stack.push_back(32'h0403);
    ctx_set(victim_ssp, victim_floor);                 // victim switched back in
    ctx_op(1'b0);
    check(rsb_tos == 3 && rsb_lcp == 3, "cross: victim entries restored");
    for (int i = 0; i < 3; i++) begin
      dec(IC_RET, '0, '0, 32'h0B05);                   // BTB holds an attacker target
      settle();
      pos = rob.size() - 1;
      check(rob[pos].pred_valid && rob[pos].pred_target == 32'h0403 - addr_t'(i),
            $sformatf("cross: victim ret %0d predicted %h", i, rob[pos].pred_target));
      commit_one(VIOL_NONE);
    end
    dec(IC_RET, '0, '0, 32'h0B05);                     // unmatched ret, both stacks empty
    settle();
    check(!rob[0].pred_valid, "cross: unmatched ret gets no prediction, not the BTB's");
    commit_one(VIOL_RET, 1'b1, 32'h0777);
    $display("scenario 6 (Spectre-RSB, cross address space) done");

    $display("fences %0d label passes %0d spills %0d fills %0d ret violations %0d",
             n_fence, n_pass, n_spill, n_fill, n_viol_ret);
    check(n_fence == 2 && n_viol_ret == 2 && n_fill > 0, "every scenario's mechanism happened");
    check(int'(rob_count) == 0, "OLD_RS field empty at the end");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
