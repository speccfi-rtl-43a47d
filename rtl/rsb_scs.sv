// rsb_scs -- combined return stack buffer / shadow call stack (SpecCFI).
//
// One hardware stack serves both as the return predictor and as the
// in-processor part of a precise shadow call stack. Two counts describe it:
//   tos_cnt -- speculative top: entries as seen by the front end;
//   lcp_cnt -- last committed pointer (LCP): entries as seen by committed code.
// A call pushes its return address at decode (tos_cnt+1) and a ret pops the
// top at decode to predict its target (tos_cnt-1); the LCP is left alone.
// When the call commits the LCP moves up by one; when the ret commits it moves
// down by one. The value each call pushed and each ret popped is kept in the
// ROB as OLD_RS (see rob_rs_track); when a misprediction squashes younger
// micro-ops, they are annulled youngest first and each one is undone here: an
// annulled call pops the top, an annulled ret pushes its OLD_RS back. After the
// last undo the stack holds exactly what it held before the mispredicted
// branch, so a poisoned or stale return prediction cannot survive.
//
// The stack spills to and fills from an in-memory shadow stack:
//   overflow  -- a call finds all DEPTH entries used: the CHUNK oldest entries
//                are written to memory and tos_cnt/LCP move down by CHUNK;
//   underflow -- a ret finds the stack empty while memory still holds entries:
//                CHUNK entries (fewer if memory holds fewer) are read back below
//                the current ones and tos_cnt/LCP move up by that many;
//   context switch -- ctx_save spills every entry, ctx_restore refills the
//                stack from the (newly loaded) shadow stack pointer.
// Storage is circular (base marks logical entry 0), so a spill or fill only
// moves base; the array has two write ports (decode push / annul push-back and
// fill) and two read ports (prediction and spill), as the paper provisions.
// This design starts a spill or fill only when no call or ret is in flight
// (inflight count zero): then tos_cnt equals the LCP and every entry is
// committed, so only committed state ever reaches memory. Until then the
// call/ret asking for it is held (push_ready / pop_ready low); the ROB drains,
// so this always ends. A ret that finds both the stack and memory empty is
// accepted with pop_hit = 0 (no prediction).
//
// Interface and timing: pop_addr/pop_hit are combinational from the top of the
// stack, so a ret gets its predicted target in its decode cycle. Commit and
// annul inputs are single-cycle strobes and are always accepted. Memory
// requests use a valid/ready handshake; read data returns later with
// mem_rsp_valid, one request outstanding. Addresses on the memory port count
// entries, not bytes. DEPTH must be a power of two.
module rsb_scs
  import speccfi_pkg::*;
#(
  parameter int unsigned DEPTH        = 16,   // in-processor entries
  parameter int unsigned CHUNK        = 4,    // entries moved per spill/fill
  parameter int unsigned MAX_INFLIGHT = 224   // ROB entries (bounds calls/rets in flight)
) (
  input  logic  clk,
  input  logic  rst_n,

  // decode stage
  input  logic  push_valid,       // call: push return address
  input  addr_t push_addr,
  output logic  push_ready,
  input  logic  pop_valid,        // ret: pop predicted target
  output logic  pop_ready,
  output addr_t pop_addr,
  output logic  pop_hit,          // the stack had an entry to give

  // commit stage
  input  logic  commit_call,
  input  logic  commit_ret,
  input  logic  commit_ret_hit,   // the committing ret's pop had found an entry

  // annulment (misprediction recovery), youngest first
  input  logic  annul_call,
  input  logic  annul_ret,
  input  logic  annul_ret_hit,
  input  addr_t annul_addr,       // OLD_RS of the annulled ret

  // context switch
  input  logic  ctx_save,         // request: spill everything to memory
  input  logic  ctx_restore,      // request: refill from memory
  output logic  ctx_done,         // pulse: the requested save/restore has finished
  input  logic  ctx_load,         // load a new shadow stack pointer and floor
  input  addr_t ctx_ssp_in,
  input  addr_t ctx_floor_in,
  output addr_t ssp,              // next free in-memory shadow stack slot
  output addr_t ssp_floor,        // lowest slot of this thread's shadow stack

  // in-memory shadow call stack
  output logic  mem_req_valid,
  output logic  mem_req_we,
  output addr_t mem_req_addr,
  output addr_t mem_req_wdata,
  input  logic  mem_req_ready,
  input  logic  mem_rsp_valid,
  input  addr_t mem_rsp_rdata,

  // status
  output logic [$clog2(DEPTH+1)-1:0] tos_cnt,
  output logic [$clog2(DEPTH+1)-1:0] lcp_cnt,
  output logic  spill_event,      // pulse: a spill chunk finished
  output logic  fill_event        // pulse: a fill chunk finished
);

  localparam int unsigned IDX_W = $clog2(DEPTH);
  localparam int unsigned CNT_W = $clog2(DEPTH+1);
  localparam int unsigned IF_W  = $clog2(MAX_INFLIGHT+1);

  typedef logic [IDX_W-1:0] idx_t;
  typedef logic [CNT_W-1:0] cnt_t;

  typedef enum logic [1:0] {S_IDLE, S_SPILL, S_FILL_REQ, S_FILL_WAIT} state_e;

  addr_t            stack_q [DEPTH];
  idx_t             base_q;
  cnt_t             tos_q, lcp_q;
  logic [IF_W-1:0]  inflight_q;
  addr_t            ssp_q, floor_q;
  state_e           state_q;
  cnt_t             k_q;          // entries moved in the current chunk
  cnt_t             n_q;          // size of the current chunk
  logic             ctx_mode_q;   // the current chunk belongs to a ctx save/restore

  logic  quiescent;
  logic  ctx_req;
  logic  annul_any;
  logic  push_acc, pop_acc;
  idx_t  top_idx, push_idx;
  cnt_t  spill_n, fill_n;
  addr_t mem_avail;

  assign quiescent = (inflight_q == '0);
  assign ctx_req   = ctx_save || ctx_restore;
  assign annul_any = annul_call || annul_ret;

  assign top_idx  = idx_t'(base_q + idx_t'(tos_q) - idx_t'(1));
  assign push_idx = idx_t'(base_q + idx_t'(tos_q));

  assign push_ready = (state_q == S_IDLE) && !ctx_req && !annul_any && (tos_q != cnt_t'(DEPTH));
  assign pop_ready  = (state_q == S_IDLE) && !ctx_req && !annul_any &&
                      ((tos_q != '0) || (ssp_q == floor_q));
  assign push_acc   = push_valid && push_ready;
  assign pop_acc    = pop_valid && pop_ready;
  assign pop_hit    = (tos_q != '0);
  assign pop_addr   = stack_q[top_idx];

  // chunk sizes
  assign mem_avail = ssp_q - floor_q;
  always_comb begin
    spill_n = (tos_q < cnt_t'(CHUNK)) ? tos_q : cnt_t'(CHUNK);
    fill_n  = cnt_t'(CHUNK);
    if (cnt_t'(DEPTH) - tos_q < fill_n) fill_n = cnt_t'(DEPTH) - tos_q;
    if (mem_avail < addr_t'(fill_n))    fill_n = cnt_t'(mem_avail);
  end

  // memory port
  always_comb begin
    mem_req_valid = 1'b0;
    mem_req_we    = 1'b0;
    mem_req_addr  = '0;
    mem_req_wdata = '0;
    if (state_q == S_SPILL) begin
      mem_req_valid = 1'b1;
      mem_req_we    = 1'b1;
      mem_req_addr  = ssp_q + addr_t'(k_q);
      mem_req_wdata = stack_q[idx_t'(base_q + idx_t'(k_q))];      // read port B
    end else if (state_q == S_FILL_REQ) begin
      mem_req_valid = 1'b1;
      mem_req_addr  = ssp_q - addr_t'(k_q) - addr_t'(1);
    end
  end

  assign ssp       = ssp_q;
  assign ssp_floor = floor_q;
  assign tos_cnt   = tos_q;
  assign lcp_cnt   = lcp_q;

  logic spill_last, fill_last;
  assign spill_last = (state_q == S_SPILL) && mem_req_ready && (k_q + cnt_t'(1) == n_q);
  assign fill_last  = (state_q == S_FILL_WAIT) && mem_rsp_valid && (k_q + cnt_t'(1) == n_q);
  assign spill_event = spill_last;
  assign fill_event  = fill_last;

  // Does a context request still have work after the chunk that just ended?
  logic save_more, restore_more;
  assign save_more    = (tos_q - n_q) != '0;
  assign restore_more = ((tos_q + n_q) != cnt_t'(DEPTH)) && ((ssp_q - addr_t'(n_q)) != floor_q);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      base_q     <= '0;
      tos_q      <= '0;
      lcp_q      <= '0;
      inflight_q <= '0;
      ssp_q      <= '0;
      floor_q    <= '0;
      state_q    <= S_IDLE;
      k_q        <= '0;
      n_q        <= '0;
      ctx_mode_q <= 1'b0;
      ctx_done   <= 1'b0;
    end else begin
      ctx_done <= 1'b0;

      // speculative top: decode and annulment (never in the same cycle)
      tos_q <= tos_q + cnt_t'(push_acc) - cnt_t'(pop_acc && pop_hit)
                     - cnt_t'(annul_call) + cnt_t'(annul_ret && annul_ret_hit);
      // committed top
      lcp_q <= lcp_q + cnt_t'(commit_call) - cnt_t'(commit_ret && commit_ret_hit);
      // calls and rets between decode and commit/annulment
      inflight_q <= inflight_q + IF_W'(push_acc) + IF_W'(pop_acc)
                    - IF_W'(commit_call) - IF_W'(commit_ret)
                    - IF_W'(annul_call) - IF_W'(annul_ret);

      unique case (state_q)
        S_IDLE: begin
          k_q <= '0;
          if (ctx_load) begin
            ssp_q   <= ctx_ssp_in;
            floor_q <= ctx_floor_in;
          end else if (quiescent && ctx_save) begin
            if (tos_q == '0) ctx_done <= 1'b1;
            else begin
              state_q <= S_SPILL; n_q <= spill_n; ctx_mode_q <= 1'b1;
            end
          end else if (quiescent && ctx_restore) begin
            if (fill_n == '0) ctx_done <= 1'b1;
            else begin
              state_q <= S_FILL_REQ; n_q <= fill_n; ctx_mode_q <= 1'b1;
            end
          end else if (quiescent && !ctx_req && push_valid && (tos_q == cnt_t'(DEPTH))) begin
            state_q <= S_SPILL; n_q <= cnt_t'(CHUNK); ctx_mode_q <= 1'b0;        // overflow
          end else if (quiescent && !ctx_req && pop_valid && (tos_q == '0) && (ssp_q != floor_q)) begin
            state_q <= S_FILL_REQ; n_q <= fill_n; ctx_mode_q <= 1'b0;            // underflow
          end
        end
        S_SPILL: begin
          if (mem_req_ready) begin
            k_q <= k_q + cnt_t'(1);
            if (spill_last) begin
              base_q <= idx_t'(base_q + idx_t'(n_q));
              tos_q  <= tos_q - n_q;
              lcp_q  <= lcp_q - n_q;
              ssp_q  <= ssp_q + addr_t'(n_q);
              k_q    <= '0;
              if (ctx_mode_q && save_more) begin
                n_q <= ((tos_q - n_q) < cnt_t'(CHUNK)) ? (tos_q - n_q) : cnt_t'(CHUNK);
              end else begin
                state_q <= S_IDLE;
                if (ctx_mode_q) ctx_done <= 1'b1;
              end
            end
          end
        end
        S_FILL_REQ: begin
          if (mem_req_ready) state_q <= S_FILL_WAIT;
        end
        S_FILL_WAIT: begin
          if (mem_rsp_valid) begin
            k_q     <= k_q + cnt_t'(1);
            state_q <= S_FILL_REQ;
            if (fill_last) begin
              base_q <= idx_t'(base_q - idx_t'(n_q));
              tos_q  <= tos_q + n_q;
              lcp_q  <= lcp_q + n_q;
              ssp_q  <= ssp_q - addr_t'(n_q);
              k_q    <= '0;
              if (ctx_mode_q && restore_more) begin
                // next chunk: limited by free entries and by what memory still holds
                n_q <= next_fill(tos_q + n_q, ssp_q - addr_t'(n_q) - floor_q);
              end else begin
                state_q <= S_IDLE;
                if (ctx_mode_q) ctx_done <= 1'b1;
              end
            end
          end
        end
        default: state_q <= S_IDLE;
      endcase
    end
  end

  // Storage, not reset: an entry is only read once it has been written.
  // Write port A: decode push, or push-back of an annulled ret's OLD_RS.
  // Write port B: fill from the in-memory shadow stack.
  always_ff @(posedge clk) begin
    if (push_acc)                        stack_q[push_idx] <= push_addr;
    else if (annul_ret && annul_ret_hit) stack_q[push_idx] <= annul_addr;
    if (state_q == S_FILL_WAIT && mem_rsp_valid)
      stack_q[idx_t'(base_q - idx_t'(k_q) - idx_t'(1))] <= mem_rsp_rdata;
  end

  function automatic cnt_t next_fill(cnt_t tos_after, addr_t avail);
    cnt_t n;
    n = cnt_t'(CHUNK);
    if (cnt_t'(DEPTH) - tos_after < n) n = cnt_t'(DEPTH) - tos_after;
    if (avail < addr_t'(n)) n = cnt_t'(avail);
    return n;
  endfunction

  // ---- protocol rules -------------------------------------------------------
  a_one_decode_op: assert property (@(posedge clk) disable iff (!rst_n)
    !(push_valid && pop_valid));
  a_one_commit_op: assert property (@(posedge clk) disable iff (!rst_n)
    !(commit_call && commit_ret));
  a_one_annul_op: assert property (@(posedge clk) disable iff (!rst_n)
    !(annul_call && annul_ret));
  a_annul_call_has_entry: assert property (@(posedge clk) disable iff (!rst_n)
    annul_call |-> (tos_q != '0));
  a_lcp_in_range: assert property (@(posedge clk) disable iff (!rst_n)
    lcp_q <= cnt_t'(DEPTH));
  a_no_ops_while_moving: assert property (@(posedge clk) disable iff (!rst_n)
    (state_q != S_IDLE) |-> !(commit_call || commit_ret || annul_any));

  initial begin
    if ((1 << IDX_W) != DEPTH) $error("rsb_scs: DEPTH must be a power of two");
    if (CHUNK == 0 || CHUNK > DEPTH) $error("rsb_scs: CHUNK out of range");
  end

endmodule
