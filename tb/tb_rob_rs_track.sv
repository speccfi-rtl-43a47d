// tb_rob_rs_track -- self-checking test of the ROB OLD_RS extension.
//
// The buffer runs at its full 224-entry depth. A queue model of the in-flight
// micro-ops checks: the ROB index given at allocation, the head entry shown at
// commit, that allocation stops when all entries are used, and that a flush at
// a random in-flight index annuls exactly the younger entries, youngest first,
// one per cycle (the walk over k entries keeps busy high for k + 1 cycles),
// with annul_call for calls, annul_ret with OLD_RS and hit flag for rets, and
// nothing for other micro-ops. Commits of older entries go on during the walk.
module tb_rob_rs_track;
  import speccfi_pkg::*;

  localparam int DEPTH = 224;

  logic clk = 1'b0, rst_n = 1'b0;
  logic alloc_valid, alloc_hit, alloc_ready, commit_valid, head_valid, head_hit;
  iclass_e alloc_cls, head_cls;
  addr_t alloc_old_rs, head_old_rs, annul_addr;
  logic [7:0] alloc_idx, flush_idx;
  logic flush_valid, flush_ready, busy, annul_call, annul_ret, annul_ret_hit;
  logic [7:0] count;

  always #5 clk = ~clk;

  rob_rs_track dut (.*);

  int checks = 0, failures = 0;
  int n_alloc = 0, n_commit = 0, n_flush = 0, n_annul = 0, n_full = 0, n_commit_walk = 0;

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL: %s (t=%0t)", what, $time);
    end
  endtask

  typedef struct { int idx; iclass_e cls; addr_t v; bit hit; } ent_t;
  ent_t q [$];
  int   next_idx;

  function automatic iclass_e rnd_cls();
    int r;
    r = $urandom_range(0, 5);
    return iclass_e'(r);
  endfunction

  task automatic idle();
    alloc_valid = 0; alloc_cls = IC_OTHER; alloc_old_rs = '0; alloc_hit = 0;
    commit_valid = 0; flush_valid = 0; flush_idx = '0;
  endtask

  task automatic do_commit();
    ent_t e;
    e = q.pop_front();
    commit_valid = 1;
    check(head_valid && head_cls == e.cls && head_old_rs == e.v && head_hit == e.hit,
          "head entry matches the oldest in-flight micro-op");
    n_commit++;
  endtask

  task automatic cycle(int p_alloc);
    int sz0;
    idle();
    sz0 = q.size();   // a slot freed by this cycle's commit is reusable next cycle
    if (q.size() > 0 && $urandom_range(0, 99) < 100 - p_alloc) do_commit();
    if ($urandom_range(0, 99) < p_alloc) begin
      alloc_valid = 1; alloc_cls = rnd_cls(); alloc_old_rs = addr_t'($urandom);
      alloc_hit = ($urandom_range(0, 7) != 0);
    end
    #1;
    if (alloc_valid) begin
      if (sz0 == DEPTH) begin
        check(!alloc_ready, "no allocation when full");
        n_full++;
      end else begin
        check(alloc_ready && int'(alloc_idx) == next_idx, "allocation index");
        q.push_back('{idx: next_idx, cls: alloc_cls, v: alloc_old_rs, hit: alloc_hit});
        next_idx = (next_idx + 1) % DEPTH;
        n_alloc++;
      end
    end
    @(negedge clk);
  endtask

  task automatic do_flush();
    int pos, k, cyc;
    pos = $urandom_range(0, q.size() - 1);      // mispredicted micro-op
    k = q.size() - 1 - pos;                     // younger ones to annul
    idle();
    flush_valid = 1; flush_idx = 8'(q[pos].idx);
    #1 check(flush_ready, "flush accepted when idle");
    @(negedge clk);
    idle();
    cyc = 0;
    while (busy && cyc < 2 * DEPTH) begin
      bit commit_now;
      commit_now = (pos > 0) && ($urandom_range(0, 3) == 0);
      if (commit_now) begin do_commit(); pos--; n_commit_walk++; end
      #1;
      if (cyc < k) begin
        ent_t e;
        e = q[q.size()-1];
        check(annul_call == is_call(e.cls) && annul_ret == (e.cls == IC_RET),
              $sformatf("annul step %0d kind", cyc));
        if (e.cls == IC_RET) check(annul_addr == e.v && annul_ret_hit == e.hit, "annul OLD_RS");
        check(!alloc_ready, "no allocation while annulling");
        void'(q.pop_back());
        n_annul++;
      end else check(!annul_call && !annul_ret, "no annul after the last younger entry");
      @(negedge clk);
      idle();
      cyc++;
    end
    check(cyc == k + 1, $sformatf("walk over %0d entries took %0d busy cycles", k, cyc));
    next_idx = (q.size() == 0) ? next_idx : (q[q.size()-1].idx + 1) % DEPTH;
    n_flush++;
  endtask

  initial begin
    idle();
    next_idx = 0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    for (int round = 0; round < 60; round++) begin
      int pa;
      pa = (round % 4 == 0) ? 97 : 60;
      for (int c = 0; c < 400; c++) cycle(pa);
      if (q.size() > 0) do_flush();
      check(int'(count) == q.size(), "occupancy count");
    end
    $display("alloc %0d commit %0d (during walks %0d) flushes %0d annulled %0d full-stalls %0d",
             n_alloc, n_commit, n_commit_walk, n_flush, n_annul, n_full);
    check(n_full > 0 && n_annul > 0 && n_commit_walk > 0, "full buffer, annulment, commit during walk seen");
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
