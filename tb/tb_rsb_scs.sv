// tb_rsb_scs -- self-checking test of the combined RSB/SCS.
//
// The testbench plays the part of the pipeline. It keeps its own list of calls
// and rets in flight (a model of the ROB's OLD_RS field) and drives random
// decode-time pushes and pops, in-order commits, and mispredictions that annul
// the youngest in-flight entries one per cycle. Two golden stacks, kept in SV
// queues without any size limit, give the expected behaviour: the speculative
// stack (changed at decode and by annulment) must supply every predicted
// return address and hit flag, and the committed stack (changed at commit)
// must equal the in-processor entries plus the in-memory shadow stack whenever
// nothing is in flight. Phases that favour calls or rets drive the stack past
// its 16 entries and back below zero, so spills and fills happen, and two
// context switches between two threads check save and restore. A directed
// replay of the paper's worked example (return addresses 0x10, 0x25, 0x26,
// 0x27) runs first and checks the speculative count, LCP and top entry after
// each of its six steps. Every mechanism is counted and must have happened.
module tb_rsb_scs;
  import speccfi_pkg::*;

  localparam int DEPTH = 16;
  localparam int CHUNK = 4;

  logic clk = 1'b0, rst_n = 1'b0;

  logic  push_valid, push_ready, pop_valid, pop_ready, pop_hit;
  addr_t push_addr, pop_addr;
  logic  commit_call, commit_ret, commit_ret_hit;
  logic  annul_call, annul_ret, annul_ret_hit;
  addr_t annul_addr;
  logic  ctx_save, ctx_restore, ctx_done, ctx_load;
  addr_t ctx_ssp_in, ctx_floor_in, ssp, ssp_floor;
  logic  mem_req_valid, mem_req_we, mem_req_ready, mem_rsp_valid;
  addr_t mem_req_addr, mem_req_wdata, mem_rsp_rdata;
  logic [4:0] tos_cnt, lcp_cnt;
  logic  spill_event, fill_event;

  always #5 clk = ~clk;

  rsb_scs #(.DEPTH(DEPTH), .CHUNK(CHUNK)) dut (.*);

  scs_mem_model #(.WORDS(1024)) u_mem (
    .clk, .req_valid(mem_req_valid), .req_we(mem_req_we), .req_addr(mem_req_addr),
    .req_wdata(mem_req_wdata), .req_ready(mem_req_ready), .rsp_valid(mem_rsp_valid),
    .rsp_rdata(mem_rsp_rdata));

  int checks = 0, failures = 0;
  int n_push = 0, n_pop_hit = 0, n_pop_miss = 0, n_commit = 0, n_annul_call = 0,
      n_annul_ret = 0, n_spill = 0, n_fill = 0, n_ctx = 0, n_stall = 0, n_lcp4 = 0;

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL: %s (t=%0t)", what, $time);
    end
  endtask

  typedef struct { bit is_call; addr_t v; bit hit; } ifl_t;
  ifl_t  ifl [$];          // in flight, oldest first
  addr_t spec [$];         // golden speculative stack (bottom first)
  addr_t comm [$];         // golden committed stack

  always @(posedge clk) if (rst_n) begin
    if (spill_event) n_spill++;
    if (fill_event) n_fill++;
    if ((spill_event || fill_event) && dut.n_q == 5'(CHUNK)) n_lcp4++;
  end

  task automatic idle_inputs();
    push_valid = 0; pop_valid = 0; push_addr = '0;
    commit_call = 0; commit_ret = 0; commit_ret_hit = 0;
    annul_call = 0; annul_ret = 0; annul_ret_hit = 0; annul_addr = '0;
    ctx_save = 0; ctx_restore = 0; ctx_load = 0; ctx_ssp_in = '0; ctx_floor_in = '0;
  endtask

  // Compare committed golden stack with DUT storage + memory. Nothing in flight.
  task automatic check_committed(string where);
    int nm;
    check(ifl.size() == 0, "check_committed needs a drained pipeline");
    check(tos_cnt == lcp_cnt, $sformatf("%s: TOS %0d equals LCP %0d when drained", where, tos_cnt, lcp_cnt));
    nm = int'(ssp - ssp_floor);
    check(nm + int'(lcp_cnt) == comm.size(),
          $sformatf("%s: %0d in memory + %0d in RSB vs %0d committed", where, nm, lcp_cnt, comm.size()));
    for (int i = 0; i < comm.size(); i++) begin
      addr_t got;
      if (i < nm) got = u_mem.mem[(int'(ssp_floor) + i) % 1024];
      else got = dut.stack_q[4'(int'(dut.base_q) + i - nm)];
      check(got == comm[i], $sformatf("%s: committed entry %0d", where, i));
    end
  endtask

  // one cycle of random pipeline activity
  task automatic cycle_random(int p_call, bit allow_flush);
    int r;
    idle_inputs();
    r = $urandom_range(0, 99);
    if (allow_flush && r < 4 && ifl.size() > 0) begin
      int k;
      k = $urandom_range(1, ifl.size());
      for (int j = 0; j < k; j++) begin
        ifl_t e;
        e = ifl.pop_back();
        idle_inputs();
        if (e.is_call) begin
          annul_call = 1;
          void'(spec.pop_back());
          n_annul_call++;
        end else begin
          annul_ret = 1; annul_ret_hit = e.hit; annul_addr = e.v;
          if (e.hit) spec.push_back(e.v);
          n_annul_ret++;
        end
        @(negedge clk);
      end
      idle_inputs();
      return;
    end
    // commit the oldest in-flight op
    if (ifl.size() > 0 && $urandom_range(0, 99) < 45) begin
      ifl_t e;
      e = ifl.pop_front();
      if (e.is_call) begin commit_call = 1; comm.push_back(e.v); end
      else begin
        commit_ret = 1; commit_ret_hit = e.hit;
        if (e.hit) begin
          check(comm.size() > 0 && comm[comm.size()-1] == e.v, "committed ret pops the committed top");
          void'(comm.pop_back());
        end
      end
      n_commit++;
    end
    // decode
    r = $urandom_range(0, 99);
    if (r < p_call) begin
      push_valid = 1; push_addr = addr_t'($urandom);
    end else if (r < 90) begin
      pop_valid = 1;
    end
    #1;
    if (push_valid && push_ready) begin
      spec.push_back(push_addr);
      ifl.push_back('{is_call: 1, v: push_addr, hit: 1});
      n_push++;
    end else if (pop_valid && pop_ready) begin
      if (spec.size() == 0) begin
        check(!pop_hit, "pop on an empty stack reports no hit");
        ifl.push_back('{is_call: 0, v: pop_addr, hit: 0});
        n_pop_miss++;
      end else begin
        check(pop_hit && pop_addr == spec[spec.size()-1],
              $sformatf("predicted return %h expected %h (hit %0d)", pop_addr, spec[spec.size()-1], pop_hit));
        ifl.push_back('{is_call: 0, v: pop_addr, hit: 1});
        void'(spec.pop_back());
        n_pop_hit++;
      end
    end else if (push_valid || pop_valid) n_stall++;
    @(negedge clk);
  endtask

  task automatic drain();
    int guard = 0;
    while (ifl.size() > 0 && guard < 1000) begin
      ifl_t e;
      idle_inputs();
      e = ifl.pop_front();
      if (e.is_call) begin commit_call = 1; comm.push_back(e.v); end
      else begin
        commit_ret = 1; commit_ret_hit = e.hit;
        if (e.hit) void'(comm.pop_back());
      end
      @(negedge clk);
      guard++;
    end
    idle_inputs();
    @(negedge clk);
  endtask

  task automatic ctx_op(bit save);
    int guard = 0;
    idle_inputs();
    if (save) ctx_save = 1; else ctx_restore = 1;
    while (!ctx_done && guard < 2000) begin @(negedge clk); guard++; end
    check(ctx_done, "context save/restore finished");
    idle_inputs();
    @(negedge clk);
    n_ctx++;
  endtask

  task automatic load_ctx(addr_t s, addr_t f);
    idle_inputs();
    ctx_load = 1; ctx_ssp_in = s; ctx_floor_in = f;
    @(negedge clk);
    idle_inputs();
    @(negedge clk);
  endtask

  // Directed replay of the worked example of the RSB/SCS paper figure: two
  // committed calls (0x10, 0x25), a ret that pops 0x25 and commits, a call
  // pushing 0x26 before a conditional branch (jz), then on the wrong path a
  // ret (OLD_RS 0x26) and a call pushing 0x27, which the jz misprediction
  // annuls youngest first. Checked after each numbered step: speculative
  // count, LCP and top entry.
  task automatic fig_step(int n, int tos, int lcp, addr_t top);
    idle_inputs();
    #1;
    check(tos_cnt == 5'(tos), $sformatf("example step %0d: TOS %0d expected %0d", n, tos_cnt, tos));
    check(lcp_cnt == 5'(lcp), $sformatf("example step %0d: LCP %0d expected %0d", n, lcp_cnt, lcp));
    check(pop_hit && pop_addr == top, $sformatf("example step %0d: top %h expected %h", n, pop_addr, top));
  endtask

  task automatic fig_example();
    // step 1: call (0x10), call (0x25), both commit
    idle_inputs(); push_valid = 1; push_addr = 32'h10; @(negedge clk);
    idle_inputs(); push_valid = 1; push_addr = 32'h25; @(negedge clk);
    idle_inputs(); commit_call = 1; @(negedge clk);
    idle_inputs(); commit_call = 1; @(negedge clk);
    fig_step(1, 2, 2, 32'h25);
    // step 2: ret pops 0x25 into OLD_RS; LCP unchanged until it commits
    idle_inputs(); pop_valid = 1; #1;
    check(pop_ready && pop_hit && pop_addr == 32'h25, "example step 2: ret predicts 0x25");
    @(negedge clk);
    fig_step(2, 1, 2, 32'h10);
    idle_inputs(); commit_ret = 1; commit_ret_hit = 1; @(negedge clk);
    fig_step(2, 1, 1, 32'h10);
    // step 3: call pushes 0x26 (jz follows, no stack operation)
    idle_inputs(); push_valid = 1; push_addr = 32'h26; @(negedge clk);
    fig_step(3, 2, 1, 32'h26);
    // step 4: wrong path: ret pops 0x26, call pushes 0x27
    idle_inputs(); pop_valid = 1; #1;
    check(pop_ready && pop_hit && pop_addr == 32'h26, "example step 4: ret predicts 0x26");
    @(negedge clk);
    idle_inputs(); push_valid = 1; push_addr = 32'h27; @(negedge clk);
    fig_step(4, 2, 1, 32'h27);
    // step 5: jz mispredicted; the youngest call is annulled (pop)
    idle_inputs(); annul_call = 1; @(negedge clk);
    fig_step(5, 1, 1, 32'h10);
    // step 6: the ret is annulled; its OLD_RS 0x26 is pushed back
    idle_inputs(); annul_ret = 1; annul_ret_hit = 1; annul_addr = 32'h26; @(negedge clk);
    fig_step(6, 2, 1, 32'h26);
    // the call before jz commits; the stack is back to the correct path
    idle_inputs(); commit_call = 1; @(negedge clk);
    fig_step(7, 2, 2, 32'h26);
    idle_inputs(); @(negedge clk);
    comm.delete(); comm.push_back(32'h10); comm.push_back(32'h26);
    spec = comm;
    check_committed("example");
  endtask

  addr_t t0_ssp, t0_floor;
  addr_t spec0 [$], comm0 [$];

  initial begin
    idle_inputs();
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    load_ctx(addr_t'(0), addr_t'(0));
    fig_example();
    // thread 0: deep, shallow, mixed phases
    for (int ph = 0; ph < 12; ph++) begin
      int pc;
      pc = (ph % 3 == 0) ? 75 : (ph % 3 == 1) ? 20 : 48;
      for (int c = 0; c < 600; c++) cycle_random(pc, 1'b1);
      drain();
      check_committed($sformatf("phase %0d", ph));
      spec = comm;     // drained: speculative equals committed
    end
    // context switch to thread 1 and back
    ctx_op(1'b1);
    check(tos_cnt == 0, "save empties the in-processor stack");
    check_committed("after save");
    t0_ssp = ssp; t0_floor = ssp_floor;
    spec0 = spec; comm0 = comm;
    load_ctx(addr_t'(512), addr_t'(512));
    spec.delete(); comm.delete();
    for (int c = 0; c < 800; c++) cycle_random(60, 1'b1);
    drain();
    check_committed("thread 1");
    ctx_op(1'b1);
    load_ctx(t0_ssp, t0_floor);
    spec = spec0; comm = comm0;
    ctx_op(1'b0);
    check(int'(tos_cnt) == ((comm.size() < DEPTH) ? comm.size() : DEPTH), "restore refills the stack");
    check_committed("after restore");
    for (int c = 0; c < 2000; c++) cycle_random(35, 1'b1);
    drain();
    check_committed("thread 0 again");
    $display("push %0d pop-hit %0d pop-miss %0d commit %0d annul call %0d annul ret %0d",
             n_push, n_pop_hit, n_pop_miss, n_commit, n_annul_call, n_annul_ret);
    $display("spill chunks %0d fill chunks %0d (full-size %0d) ctx ops %0d stalls %0d",
             n_spill, n_fill, n_lcp4, n_ctx, n_stall);
    check(n_push > 0 && n_pop_hit > 0 && n_pop_miss > 0, "push, pop hit and pop miss seen");
    check(n_annul_call > 0 && n_annul_ret > 0, "annulment of calls and rets seen");
    check(n_spill > 0 && n_fill > 0 && n_lcp4 > 0, "overflow spill and underflow fill seen");
    check(n_ctx == 3 && n_stall > 0, "context switches and stalls seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
