// tb_decode_cfi_check -- self-checking test of the decode-stage CFI check.
//
// Random micro-op streams (indirect calls/jmps, cfi_lbl with matching and
// non-matching labels, other micro-ops) are fed with random valid and ready
// gaps. A sequence model written independently of the state machine predicts
// the output stream: after an indirect branch, a following non-cfi_lbl gets an
// lfence in front of it, and a cfi_lbl whose label differs gets an lfence right
// after it. The test compares the output stream item by item; checks that with
// no gaps a legal path costs no cycle and each lfence costs its slot plus one
// detection cycle (cycles = micro-ops + 2 x fences); and checks that a flush
// cancels a pending check.
module tb_decode_cfi_check;
  import speccfi_pkg::*;

  localparam int N = 4000;

  logic clk = 1'b0, rst_n = 1'b0, flush = 1'b0;
  logic in_valid, in_ready, out_valid, out_fence, out_ready, fence_event, check_pass;
  dec_uop_t in_uop, out_uop;

  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  decode_cfi_check dut (.*);

  // stimulus and expected output, as item codes: uop index, or -1 for lfence
  dec_uop_t prog [N];
  int       exp_q [$];
  int       n_fence_exp;

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL: %s (t=%0t)", what, $time);
    end
  endtask

  function automatic void build_program(int kind_mix);
    logic pend;
    label_t plabel;
    exp_q.delete();
    n_fence_exp = 0;
    pend = 1'b0;
    plabel = '0;
    for (int i = 0; i < N; i++) begin
      int r;
      r = $urandom_range(0, 99);
      prog[i].next_pc = addr_t'(i);
      prog[i].label   = label_t'($urandom_range(0, 3));
      if (pend && r < 70 - kind_mix) begin
        prog[i].cls = IC_CFI_LBL;
        if ($urandom_range(0, 3) != 0) prog[i].label = plabel;
      end else if (r < 30) prog[i].cls = ($urandom_range(0, 1) != 0) ? IC_IND_CALL : IC_IND_JMP;
      else if (r < 40) prog[i].cls = IC_CFI_LBL;
      else if (r < 50) prog[i].cls = IC_RET;
      else if (r < 55) prog[i].cls = IC_DIR_CALL;
      else prog[i].cls = IC_OTHER;
      // reference model
      if (pend) begin
        if (prog[i].cls == IC_CFI_LBL) begin
          exp_q.push_back(i);
          if (prog[i].label != plabel) begin exp_q.push_back(-1); n_fence_exp++; end
          pend = 1'b0;
          continue;
        end else begin
          exp_q.push_back(-1); n_fence_exp++;
          pend = 1'b0;
        end
      end
      exp_q.push_back(i);
      if (prog[i].cls == IC_IND_CALL || prog[i].cls == IC_IND_JMP) begin
        pend = 1'b1;
        plabel = prog[i].label;
      end
    end
  endfunction

  int in_ptr;
  bit gaps;
  int got_items, fences_seen, cycles;

  // drive inputs
  always_comb begin
    in_valid = 1'b0;
    in_uop   = '0;
    if (in_ptr < N && (!gaps || gate_v)) begin
      in_valid = 1'b1;
      in_uop   = prog[in_ptr];
    end
    out_ready = !gaps || gate_r;
  end
  logic gate_v, gate_r;

  always @(posedge clk) begin
    gate_v <= ($urandom_range(0, 3) != 0);
    gate_r <= ($urandom_range(0, 3) != 0);
    if (rst_n && !flush) begin
      if (in_valid && in_ready) in_ptr <= in_ptr + 1;
      if (out_valid && out_ready) begin
        int e;
        got_items <= got_items + 1;
        if (exp_q.size() == 0) check(1'b0, "output beyond the expected stream");
        else begin
          e = exp_q.pop_front();
          if (e < 0) check(out_fence, $sformatf("lfence expected at item %0d", got_items));
          else check(!out_fence && out_uop.next_pc == addr_t'(e),
                     $sformatf("uop %0d expected at item %0d (fence=%0d pc=%0d)", e, got_items,
                               out_fence, out_uop.next_pc));
        end
      end
      if (fence_event) fences_seen <= fences_seen + 1;
    end
  end

  task automatic run(bit with_gaps, int mix);
    build_program(mix);
    gaps = with_gaps;
    flush = 1'b1;             // start each run from the initial state
    @(negedge clk);
    flush = 1'b0;
    in_ptr = 0; got_items = 0; fences_seen = 0;
    cycles = 0;
    while (exp_q.size() != 0 && cycles < 20 * N) begin
      @(negedge clk);
      cycles++;
    end
    check(exp_q.size() == 0, "stream completed");
    check(fences_seen == n_fence_exp, $sformatf("fence count %0d vs %0d", fences_seen, n_fence_exp));
    if (!with_gaps)
      check(cycles == N + 2 * n_fence_exp,
            $sformatf("no-gap cycle count %0d, expected %0d", cycles, N + 2 * n_fence_exp));
    $display("run gaps=%0d: %0d uops, %0d fences, %0d cycles", with_gaps, N, n_fence_exp, cycles);
  endtask

  initial begin
    in_ptr = N; gaps = 0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    run(1'b0, 0);
    run(1'b1, 0);
    run(1'b0, 40);
    // flush cancels a pending check: ind jmp, flush, then a plain micro-op
    build_program(0);
    prog[0] = '{cls: IC_IND_JMP, label: 7, next_pc: 0};
    prog[1] = '{cls: IC_OTHER,   label: 0, next_pc: 1};
    exp_q.delete();
    exp_q.push_back(0);
    @(negedge clk);
    gaps = 0; in_ptr = 0;
    @(negedge clk);                     // ind jmp accepted
    in_ptr = N;
    flush = 1'b1;
    @(negedge clk);
    flush = 1'b0;
    check(dut.state_q == 2'd0, "flush returns the check to its initial state");
    in_ptr = 1;
    #1;
    check(in_ready && out_valid && !out_fence, "after flush a plain micro-op passes without lfence");
    in_ptr = N;
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
