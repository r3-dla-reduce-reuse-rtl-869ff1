// mt_hint_ctrl: the main thread's (MT) consumer of the BOQ and FQ.
//
// MT's fetch unit asks for a direction each time it meets a conditional branch
// (br_req). The head of the BOQ answers it (br_grant, br_taken) and is popped;
// if the BOQ is empty, br_grant stays low and fetch stalls. MT's own branch
// predictor is not used for directions. br_seq is the BOQ tag of the last
// granted branch; it labels the instructions that follow it, which is how
// reused values find their instruction.
//
// If the popped entry has its footnote bit set, the controller enters DRAIN
// and pops the FQ entries tagged with that branch, one per cycle:
//   L1/L2/TLB prefetch -> released now on pf_* (just-in-time prefetching),
//   indirect target    -> latched, handed to the next indirect branch (ind_*),
//   value              -> pushed into the value prediction table (vp_*).
// An FQ head older than the branch is discarded; a newer one ends DRAIN.
// While draining, no new direction or indirect target is granted, so that a
// hint is always in place before the branch after it is fetched.
//
// Timing: grants are combinational from registered state and the queue heads;
// pops and state changes happen at the clock edge.
// Follows the paper: BOQ directions, stall on empty BOQ, footnote-driven FQ
// reads acting on content type, prefetch release at BOQ dequeue, target hint
// used instead of the BTB. Own choices: one branch per cycle, the DRAIN
// state, one FQ entry per cycle, use-once target hints.
module mt_hint_ctrl
  import r3dla_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       hold,          // reboot in progress: grant nothing, read nothing
  input  logic       flush,         // reboot start: forget latched hints
  // fetch interface
  input  logic       br_req,        // fetch needs a direction for a conditional branch
  output logic       br_grant,      // direction available this cycle (else stall)
  output logic       br_taken,
  output seq_t       br_seq,        // tag of the most recently granted branch
  input  logic       ind_req,       // fetch needs a target for an indirect branch
  output logic       ind_grant,     // answer available (else stall)
  output logic       ind_hint_valid,// use ind_hint instead of the BTB
  output addr_t      ind_hint,
  // BOQ read side
  input  logic       boq_empty,
  input  boq_entry_t boq_head,
  input  seq_t       boq_head_seq,
  output logic       boq_pop,
  // FQ read side
  input  logic       fq_empty,
  input  fq_entry_t  fq_head,
  output logic       fq_pop,
  // released prefetches
  output logic       pf_valid,
  output fn_kind_e   pf_kind,
  output addr_t      pf_addr,
  input  logic       pf_ready,
  // reused values to the VPT
  output logic       vp_valid,
  output seq_t       vp_seq,
  output off_t       vp_off,
  output addr_t      vp_value,
  input  logic       vp_ready,
  // statistics
  output logic [31:0] fn_drained,
  output logic [31:0] fetch_stalls
);
  typedef enum logic {S_IDLE, S_DRAIN} state_e;
  state_e state;
  seq_t   drain_seq, last_seq;
  logic   tgt_valid;
  addr_t  tgt;
  logic   fq_mine, fq_stale, fq_accept, ind_take;

  assign br_grant = br_req && !hold && state == S_IDLE && !boq_empty;
  assign br_taken = boq_head.taken;
  assign boq_pop  = br_grant;
  assign br_seq   = last_seq;

  assign ind_grant      = ind_req && !hold && state == S_IDLE;
  assign ind_hint_valid = ind_grant && tgt_valid;
  assign ind_hint       = tgt;
  assign ind_take       = ind_grant && tgt_valid;

  // FQ head classification while draining.
  assign fq_mine  = state == S_DRAIN && !hold && !fq_empty && fq_head.seq == drain_seq;
  assign fq_stale = state == S_DRAIN && !hold && !fq_empty && seq_older(fq_head.seq, drain_seq);

  always_comb begin
    pf_valid  = 1'b0;
    vp_valid  = 1'b0;
    fq_accept = 1'b0;
    unique case (fq_head.kind)
      FN_L1_PREF, FN_L2_PREF, FN_TLB_PREF: begin
        pf_valid  = fq_mine;
        fq_accept = pf_ready;
      end
      FN_VALUE: begin
        vp_valid  = fq_mine;
        fq_accept = vp_ready;
      end
      default: fq_accept = 1'b1;   // FN_IND_TGT latched below; anything else ignored
    endcase
  end
  assign pf_kind  = fq_head.kind;
  assign pf_addr  = fq_head.data;
  assign vp_seq   = fq_head.seq;
  assign vp_off   = fq_head.off;
  assign vp_value = fq_head.data;
  assign fq_pop   = fq_stale || (fq_mine && fq_accept);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state        <= S_IDLE;
      drain_seq    <= '0;
      last_seq     <= '0;
      tgt_valid    <= 1'b0;
      tgt          <= '0;
      fn_drained   <= '0;
      fetch_stalls <= '0;
    end else if (flush) begin
      state     <= S_IDLE;
      tgt_valid <= 1'b0;
    end else begin
      if (br_req && !br_grant) fetch_stalls <= fetch_stalls + 1;
      if (ind_take) tgt_valid <= 1'b0;
      unique case (state)
        S_IDLE: if (br_grant) begin
          last_seq <= boq_head_seq;
          if (boq_head.footnote) begin
            state     <= S_DRAIN;
            drain_seq <= boq_head_seq;
          end
        end
        S_DRAIN: if (!hold) begin
          if (fq_mine && fq_accept) begin
            fn_drained <= fn_drained + 1;
            if (fq_head.kind == FN_IND_TGT) begin
              tgt_valid <= 1'b1;
              tgt       <= fq_head.data;
            end
          end else if (!fq_stale && !fq_mine) begin
            state <= S_IDLE;   // FQ empty or head belongs to a later branch
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
