// rob_rs_track -- reorder-buffer extension carrying OLD_RS (SpecCFI).
//
// SpecCFI keeps the speculative state of the RSB/SCS in the reorder buffer:
// every call records the return address it pushed and every ret records the
// address it popped, in an extra ROB field called OLD_RS. This block is that
// field, kept as a side array that is allocated, retired and squashed in
// lockstep with the host ROB (same depth, same in-order allocation):
//   allocate -- one entry per micro-op leaving decode (calls, rets, everything
//               else, inserted lfences too); alloc_idx is its ROB index;
//   commit   -- the oldest entry retires; its class, OLD_RS and hit flag are
//               shown on head_* for the commit-stage checks;
//   flush    -- on a misprediction at ROB index flush_idx, every younger entry
//               is annulled, youngest first, one per cycle. For each annulled
//               call the RSB/SCS is told to pop (annul_call); for each annulled
//               ret it is told to push OLD_RS back (annul_ret, annul_addr).
// Walking one entry per cycle from the youngest back to the mispredicted one is
// how the paper describes annulment; the single-cycle step is this design's
// choice. While the walk runs (busy) no new micro-op is allocated and a new
// flush is not accepted (flush_ready low); commits of older entries go on.
// The "Spec bit" of the paper's ROB illustrations corresponds here to an entry
// being present (allocated and not yet retired).
//
// Timing: alloc_idx and head_* are combinational from registers; allocation,
// retirement and each annul step take effect at the next clock edge. The
// reset is synchronous and active low and empties the buffer.
module rob_rs_track
  import speccfi_pkg::*;
#(
  parameter int unsigned DEPTH = 224   // ROB entries of the simulated core
) (
  input  logic    clk,
  input  logic    rst_n,

  input  logic    alloc_valid,
  input  iclass_e alloc_cls,
  input  addr_t   alloc_old_rs,
  input  logic    alloc_hit,        // for a ret: its pop found an entry
  output logic    alloc_ready,
  output logic [$clog2(DEPTH)-1:0] alloc_idx,

  input  logic    commit_valid,     // retire the oldest entry
  output logic    head_valid,
  output iclass_e head_cls,
  output addr_t   head_old_rs,
  output logic    head_hit,

  input  logic    flush_valid,
  input  logic [$clog2(DEPTH)-1:0] flush_idx,  // the mispredicted micro-op (kept)
  output logic    flush_ready,
  output logic    busy,

  output logic    annul_call,
  output logic    annul_ret,
  output logic    annul_ret_hit,
  output addr_t   annul_addr,

  output logic [$clog2(DEPTH+1)-1:0] count
);

  localparam int unsigned IDX_W = $clog2(DEPTH);
  localparam int unsigned CNT_W = $clog2(DEPTH+1);
  typedef logic [IDX_W-1:0] idx_t;
  typedef logic [CNT_W-1:0] cnt_t;

  iclass_e cls_q    [DEPTH];
  addr_t   old_rs_q [DEPTH];
  logic    hit_q    [DEPTH];

  idx_t head_q, tail_q, end_q;
  cnt_t cnt_q;
  logic walk_q;

  function automatic idx_t inc(idx_t i);
    return (i == idx_t'(DEPTH-1)) ? '0 : i + idx_t'(1);
  endfunction
  function automatic idx_t dec(idx_t i);
    return (i == '0) ? idx_t'(DEPTH-1) : i - idx_t'(1);
  endfunction

  idx_t    last;
  logic    step;       // one annul step this cycle
  logic    alloc_acc;
  logic    retire;
  iclass_e last_cls;

  assign last        = dec(tail_q);
  assign step        = walk_q && (tail_q != end_q);
  assign busy        = walk_q;
  assign flush_ready = !walk_q;
  assign alloc_ready = !walk_q && !flush_valid && (cnt_q != cnt_t'(DEPTH));
  assign alloc_acc   = alloc_valid && alloc_ready;
  assign alloc_idx   = tail_q;
  assign retire      = commit_valid && (cnt_q != '0);

  assign head_valid  = (cnt_q != '0);
  assign head_cls    = cls_q[head_q];
  assign head_old_rs = old_rs_q[head_q];
  assign head_hit    = hit_q[head_q];

  assign last_cls      = cls_q[last];
  assign annul_call    = step && is_call(last_cls);
  assign annul_ret     = step && (last_cls == IC_RET);
  assign annul_ret_hit = hit_q[last];
  assign annul_addr    = old_rs_q[last];

  assign count = cnt_q;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      head_q <= '0;
      tail_q <= '0;
      end_q  <= '0;
      cnt_q  <= '0;
      walk_q <= 1'b0;
    end else begin
      if (retire) head_q <= inc(head_q);
      if (alloc_acc) tail_q <= inc(tail_q);
      else if (step) tail_q <= last;
      cnt_q <= cnt_q + cnt_t'(alloc_acc) - cnt_t'(retire) - cnt_t'(step);

      if (flush_valid && flush_ready) begin
        walk_q <= 1'b1;
        end_q  <= inc(flush_idx);
      end else if (walk_q && !step) begin
        walk_q <= 1'b0;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (alloc_acc) begin
      cls_q[tail_q]    <= alloc_cls;
      old_rs_q[tail_q] <= alloc_old_rs;
      hit_q[tail_q]    <= alloc_hit;
    end
  end

  a_commit_not_empty: assert property (@(posedge clk) disable iff (!rst_n)
    commit_valid |-> (cnt_q != '0));
  a_no_commit_of_walked: assert property (@(posedge clk) disable iff (!rst_n)
    (retire && step) |-> (cnt_q > cnt_t'(1)));

endmodule
