// decode_cfi_check -- decode-stage forward-edge CFI check (SpecCFI).
//
// Every indirect call or jmp that leaves decode loads its label into the
// decode-stage CFI_REG. The micro-op decoded right after it, which is the first
// one on the (possibly mispredicted) target path, must be a cfi_lbl whose label
// equals CFI_REG. If it is not a cfi_lbl, or the labels differ, an lfence
// micro-op is put into the pipeline ahead of the next instruction, so that
// nothing on a target path the CFG does not allow runs before the branch is
// resolved.
//
// The state machine has the four states of the published state diagram:
//   INITIAL  -- indirect call/jmp          --> WAITING   (CFI_REG <= its label)
//   INITIAL  -- any other micro-op         --> INITIAL
//   WAITING  -- cfi_lbl                    --> CHECK     (its label is latched)
//   WAITING  -- any micro-op but cfi_lbl   --> FENCE     (that micro-op is held)
//   CHECK    -- labels match               --> INITIAL   (the comparator runs here)
//   CHECK    -- labels differ              --> FENCE
//   FENCE    -- lfence emitted             --> INITIAL   (this design's choice; the
//                                               diagram draws no edge out of it)
// CHECK costs no cycle on the legal path: while the comparator runs, the next
// micro-op is already accepted and handled as INITIAL would handle it. A
// failed check costs two cycles: the cycle in which WAITING or CHECK finds the
// fault (nothing leaves) and the slot of the inserted lfence. A pipeline flush puts
// the machine back to INITIAL (a choice of this design: the branch that opened
// the check has then been squashed or resolved).
//
// Interface: a valid/ready stream in and a valid/ready stream out; the output
// carries the input micro-op unchanged, or, when out_fence is set, an lfence.
// out_uop is therefore wired straight from in_uop (its 67 bits are a plain
// pass-through by design); the block acts only on valid, ready and out_fence.
// in_ready depends on in_valid and its class (never the other way round).
// The path from input to output is combinational; only the state, CFI_REG and
// the latched cfi_lbl label are registers.
module decode_cfi_check
  import speccfi_pkg::*;
(
  input  logic     clk,
  input  logic     rst_n,
  input  logic     flush,        // pipeline redirect: abandon a pending check

  input  logic     in_valid,
  input  dec_uop_t in_uop,
  output logic     in_ready,

  output logic     out_valid,
  output logic     out_fence,    // 1: this output slot is an inserted lfence
  output dec_uop_t out_uop,
  input  logic     out_ready,

  output logic     fence_event,  // one-cycle pulse per inserted lfence
  output logic     check_pass    // one-cycle pulse per passed label check
);

  typedef enum logic [1:0] {S_INITIAL, S_WAITING, S_CHECK, S_FENCE} state_e;

  state_e state_q, state_d;
  label_t cfi_reg_q, cfi_reg_d;   // CFI_REG of the decode stage
  label_t lbl_q, lbl_d;           // label of the cfi_lbl being checked

  logic match;
  logic pass;                     // the input micro-op may go through this cycle
  logic accept;

  assign match = (cfi_reg_q == lbl_q);

  always_comb begin
    unique case (state_q)
      S_INITIAL: pass = 1'b1;
      S_WAITING: pass = (in_uop.cls == IC_CFI_LBL);
      S_CHECK:   pass = match;
      default:   pass = 1'b0;
    endcase
  end

  assign in_ready    = out_ready && pass && !flush;
  assign accept      = in_valid && in_ready;
  assign out_fence   = (state_q == S_FENCE);
  assign out_valid   = out_fence ? !flush : (in_valid && pass && !flush);
  assign out_uop     = in_uop;
  assign fence_event = out_fence && out_ready && !flush;
  assign check_pass  = (state_q == S_CHECK) && match && !flush;

  always_comb begin
    state_d   = state_q;
    cfi_reg_d = cfi_reg_q;
    lbl_d     = lbl_q;
    unique case (state_q)
      S_INITIAL: begin
        if (accept && is_indirect(in_uop.cls)) begin
          cfi_reg_d = in_uop.label;
          state_d   = S_WAITING;
        end
      end
      S_WAITING: begin
        if (in_valid) begin
          if (in_uop.cls == IC_CFI_LBL) begin
            if (accept) begin
              lbl_d   = in_uop.label;
              state_d = S_CHECK;
            end
          end else begin
            state_d = S_FENCE;  // the micro-op waits behind the lfence
          end
        end
      end
      S_CHECK: begin
        if (!match) begin
          state_d = S_FENCE;
        end else if (accept && is_indirect(in_uop.cls)) begin
          cfi_reg_d = in_uop.label;
          state_d   = S_WAITING;
        end else begin
          state_d = S_INITIAL;
        end
      end
      S_FENCE: begin
        if (out_ready) state_d = S_INITIAL;
      end
      default: state_d = S_INITIAL;
    endcase
    if (flush) state_d = S_INITIAL;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state_q   <= S_INITIAL;
      cfi_reg_q <= '0;
      lbl_q     <= '0;
    end else begin
      state_q   <= state_d;
      cfi_reg_q <= cfi_reg_d;
      lbl_q     <= lbl_d;
    end
  end

  // An inserted lfence is offered until it is taken.
  a_fence_held: assert property (@(posedge clk) disable iff (!rst_n)
    (out_fence && !out_ready && !flush) |=> out_fence);

endmodule
