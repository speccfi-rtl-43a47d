// speccfi_top -- SpecCFI for one hardware thread of a speculative core.
//
// SpecCFI uses the labels of a label-based CFI scheme to keep speculation on
// control-flow edges the program's CFG allows:
//   * forward edges (indirect call/jmp): decode_cfi_check requires the first
//     micro-op after an indirect branch to be a cfi_lbl with the branch's
//     label, and inserts an lfence micro-op otherwise, so a poisoned BTB target
//     cannot run a gadget speculatively;
//   * backward edges (ret): rsb_scs is a return stack kept precise under
//     speculation (push/pop at decode, LCP moved at commit, exact undo on
//     squash through the OLD_RS values held by rob_rs_track, spill/fill to an
//     in-memory shadow stack), so return predictions come from a shadow call
//     stack that other code cannot poison;
//   * committed path ("full" mode, COMMIT_CHECK = 1): commit_cfi_check raises a
//     CFI violation for illegal committed indirect branches and returns.
// The predicted target of a control-flow micro-op is chosen as in the branch
// predictor drawing of the paper: the RSB/SCS top for a ret (is_return = 1),
// the BTB's target otherwise. The BTB and direction predictor stay in the host
// front end; their target comes in on dec_btb_target.
//
// Interface (one micro-op per cycle at decode and at commit):
//   dec_*    -- decoded micro-ops from the host decoder (valid/ready);
//   uop_*    -- micro-ops towards rename/ROB, with inserted lfences, ROB index
//               and predicted target (valid/ready). A call or ret only leaves
//               when the RSB/SCS can take it; this block allocates the OLD_RS
//               entry of every micro-op it lets through, so the host ROB must
//               allocate exactly these, in this order;
//   commit_* -- retirement of the oldest micro-op, with the label of a
//               committing indirect branch or cfi_lbl and, for a ret, the
//               return address read from the software stack;
//   flush_*  -- misprediction at ROB index flush_idx: younger micro-ops are
//               annulled and the RSB/SCS restored, one per cycle (recovering);
//   ctx_*    -- context switch: save spills the RSB/SCS to the shadow stack,
//               load sets the next thread's shadow stack pointer, restore
//               refills;
//   mem_*    -- port to the protected in-memory shadow call stack.
// The uop output bus is the decoded micro-op itself (wired through from
// dec_uop); this unit adds fences, the ROB index and the predicted target.
// Everything is synchronous to clk with a synchronous active-low reset.
module speccfi_top
  import speccfi_pkg::*;
#(
  parameter int unsigned RSB_DEPTH    = 16,
  parameter int unsigned RSB_CHUNK    = 4,
  parameter int unsigned ROB_DEPTH    = 224,
  parameter bit          COMMIT_CHECK = 1'b1
) (
  input  logic     clk,
  input  logic     rst_n,

  // decode
  input  logic     dec_valid,
  input  dec_uop_t dec_uop,
  input  addr_t    dec_btb_target,
  output logic     dec_ready,

  // to rename / ROB
  output logic     uop_valid,
  output logic     uop_fence,
  output dec_uop_t uop,
  output logic [$clog2(ROB_DEPTH)-1:0] uop_rob_idx,
  output logic     uop_pred_valid,
  output addr_t    uop_pred_target,
  input  logic     uop_ready,

  // commit
  input  logic     commit_valid,
  input  label_t   commit_label,
  input  addr_t    commit_sw_ret,
  output iclass_e  commit_cls,
  output logic     viol_valid,
  output viol_e    viol_cause,

  // misprediction recovery
  input  logic     flush_valid,
  input  logic [$clog2(ROB_DEPTH)-1:0] flush_idx,
  output logic     flush_ready,
  output logic     recovering,

  // context switch
  input  logic     ctx_save,
  input  logic     ctx_restore,
  output logic     ctx_done,
  input  logic     ctx_load,
  input  addr_t    ctx_ssp_in,
  input  addr_t    ctx_floor_in,
  output addr_t    ssp,
  output addr_t    ssp_floor,

  // in-memory shadow call stack
  output logic     mem_req_valid,
  output logic     mem_req_we,
  output addr_t    mem_req_addr,
  output addr_t    mem_req_wdata,
  input  logic     mem_req_ready,
  input  logic     mem_rsp_valid,
  input  addr_t    mem_rsp_rdata,

  // status
  output logic     fence_event,
  output logic     check_pass_event,
  output logic [$clog2(ROB_DEPTH+1)-1:0] rob_count,
  output logic     spill_event,
  output logic     fill_event,
  output logic [$clog2(RSB_DEPTH+1)-1:0] rsb_tos,
  output logic [$clog2(RSB_DEPTH+1)-1:0] rsb_lcp
);

  // ---- decode-stage forward-edge check -------------------------------------
  logic     chk_out_valid, chk_out_fence, chk_out_ready;
  dec_uop_t chk_out_uop;

  logic trk_alloc_ready, trk_busy;
  logic rsb_push_ready, rsb_pop_ready, rsb_pop_hit;
  addr_t rsb_pop_addr;

  logic out_is_call, out_is_ret, down_ok, fire;

  decode_cfi_check u_dec_chk (
    .clk, .rst_n,
    .flush      (flush_valid || trk_busy),
    .in_valid   (dec_valid),
    .in_uop     (dec_uop),
    .in_ready   (dec_ready),
    .out_valid  (chk_out_valid),
    .out_fence  (chk_out_fence),
    .out_uop    (chk_out_uop),
    .out_ready  (chk_out_ready),
    .fence_event(fence_event),
    .check_pass (check_pass_event)
  );

  assign out_is_call = !chk_out_fence && is_call(chk_out_uop.cls);
  assign out_is_ret  = !chk_out_fence && (chk_out_uop.cls == IC_RET);
  // everything below decode except the host can take this micro-op
  assign down_ok = trk_alloc_ready &&
                   (out_is_call ? rsb_push_ready : out_is_ret ? rsb_pop_ready : 1'b1);
  assign chk_out_ready = down_ok && uop_ready;
  assign fire          = chk_out_valid && chk_out_ready;

  assign uop_valid = chk_out_valid && down_ok;
  assign uop_fence = chk_out_fence;
  assign uop       = chk_out_uop;

  // predicted target: RSB/SCS for a return, BTB otherwise
  assign uop_pred_target = out_is_ret ? rsb_pop_addr : dec_btb_target;
  assign uop_pred_valid  = out_is_ret ? rsb_pop_hit
                                      : (!chk_out_fence && is_indirect(chk_out_uop.cls));

  // ---- ROB OLD_RS field ------------------------------------------------------
  iclass_e head_cls;
  addr_t   head_old_rs;
  logic    head_hit, head_valid;
  logic    an_call, an_ret, an_ret_hit;
  addr_t   an_addr;

  rob_rs_track #(.DEPTH(ROB_DEPTH)) u_trk (
    .clk, .rst_n,
    .alloc_valid  (fire),
    .alloc_cls    (chk_out_fence ? IC_OTHER : chk_out_uop.cls),
    .alloc_old_rs (out_is_call ? chk_out_uop.next_pc : rsb_pop_addr),
    .alloc_hit    (rsb_pop_hit),
    .alloc_ready  (trk_alloc_ready),
    .alloc_idx    (uop_rob_idx),
    .commit_valid (commit_valid),
    .head_valid   (head_valid),
    .head_cls     (head_cls),
    .head_old_rs  (head_old_rs),
    .head_hit     (head_hit),
    .flush_valid  (flush_valid),
    .flush_idx    (flush_idx),
    .flush_ready  (flush_ready),
    .busy         (trk_busy),
    .annul_call   (an_call),
    .annul_ret    (an_ret),
    .annul_ret_hit(an_ret_hit),
    .annul_addr   (an_addr),
    .count        (rob_count)
  );

  assign recovering = trk_busy;
  assign commit_cls = head_cls;

  // ---- RSB/SCS ---------------------------------------------------------------
  rsb_scs #(.DEPTH(RSB_DEPTH), .CHUNK(RSB_CHUNK), .MAX_INFLIGHT(ROB_DEPTH)) u_rsb (
    .clk, .rst_n,
    .push_valid    (chk_out_valid && out_is_call && trk_alloc_ready && uop_ready),
    .push_addr     (chk_out_uop.next_pc),
    .push_ready    (rsb_push_ready),
    .pop_valid     (chk_out_valid && out_is_ret && trk_alloc_ready && uop_ready),
    .pop_ready     (rsb_pop_ready),
    .pop_addr      (rsb_pop_addr),
    .pop_hit       (rsb_pop_hit),
    .commit_call   (commit_valid && is_call(head_cls)),
    .commit_ret    (commit_valid && (head_cls == IC_RET)),
    .commit_ret_hit(head_hit),
    .annul_call    (an_call),
    .annul_ret     (an_ret),
    .annul_ret_hit (an_ret_hit),
    .annul_addr    (an_addr),
    .ctx_save, .ctx_restore, .ctx_done, .ctx_load, .ctx_ssp_in, .ctx_floor_in,
    .ssp, .ssp_floor,
    .mem_req_valid, .mem_req_we, .mem_req_addr, .mem_req_wdata, .mem_req_ready,
    .mem_rsp_valid, .mem_rsp_rdata,
    .tos_cnt       (rsb_tos),
    .lcp_cnt       (rsb_lcp),
    .spill_event, .fill_event
  );

  // ---- commit-stage CFI ------------------------------------------------------
  commit_cfi_check #(.ENABLE(COMMIT_CHECK)) u_cmt_chk (
    .clk, .rst_n,
    .commit_valid  (commit_valid),
    .commit_cls    (head_cls),
    .commit_label  (commit_label),
    .commit_old_rs (head_old_rs),
    .commit_ret_hit(head_hit),
    .commit_sw_ret (commit_sw_ret),
    .viol_valid, .viol_cause
  );

  a_commit_has_entry: assert property (@(posedge clk) disable iff (!rst_n)
    commit_valid |-> head_valid);

endmodule
