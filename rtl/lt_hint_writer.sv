// lt_hint_writer: the look-ahead thread's (LT) side of the hint queues.
//
// At LT commit it writes the outcome of each conditional branch into the BOQ.
// When the BOQ is full it holds LT's commit (commit_ready low), which is what
// keeps LT from running away from the main thread (MT). Miss hints from LT's
// pipeline (L1/L2/TLB prefetch addresses, indirect branch targets after a BTB
// miss) go into the FQ, and the footnote bit of the most recent BOQ entry is
// set. For a committed instruction whose PC hits in the Slow Instruction
// Filter (SIF), the result value goes into the FQ as a value-reuse entry with
// its offset from the preceding conditional branch.
//
// One committed instruction per cycle is presented. The FQ has one write port:
// if a miss hint and a value entry meet in the same cycle, commit waits a cycle
// and the miss hint goes first. A hint whose branch has already been consumed
// by MT (footnote not acknowledged) or that finds the FQ full is dropped and
// counted. Everything is registered at the clock edge; the SIF lookup is
// combinational (sif_pc -> sif_hit).
// Follows the paper: branch outcomes at commit, footnote on the most recent
// BOQ entry, SIF check at commit, value + offset entries. Own choices: one
// instruction per cycle, PC-based offset, arbitration and drop rules.
module lt_hint_writer
  import r3dla_pkg::*;
(
  input  logic     clk,
  input  logic     rst_n,
  input  logic     hold,           // reboot in progress: write nothing
  // LT commit stream
  input  logic     commit_valid,
  output logic     commit_ready,   // low when BOQ full or FQ port busy
  input  addr_t    commit_pc,
  input  logic     commit_is_cond_br,
  input  logic     commit_taken,
  input  logic     commit_has_dest,
  input  addr_t    commit_value,   // result written to the destination register
  // miss hints from LT's memory pipeline and fetch
  input  logic     hint_valid,
  input  fn_kind_e hint_kind,      // FN_L1_PREF, FN_L2_PREF, FN_TLB_PREF or FN_IND_TGT
  input  addr_t    hint_addr,
  // SIF lookup
  output addr_t    sif_pc,
  input  logic     sif_hit,
  // BOQ write side
  output logic     boq_push,
  output logic     boq_push_taken,
  input  logic     boq_full,
  output logic     boq_set_fn,
  input  logic     boq_set_fn_ack,
  input  seq_t     boq_tail_seq,
  // FQ write side
  output logic     fq_push,
  output fq_entry_t fq_push_data,
  input  logic     fq_full,
  // statistics
  output logic [31:0] branches_sent,
  output logic [31:0] hints_sent,
  output logic [31:0] values_sent,
  output logic [31:0] hints_dropped
);
  addr_t last_br_pc;       // PC of the most recent committed conditional branch
  logic  want_value, fire_commit, hint_ok, value_ok;

  assign sif_pc      = commit_pc;
  assign want_value  = commit_valid && commit_has_dest && !commit_is_cond_br && sif_hit;
  // Commit waits for BOQ space and for the FQ port when a hint takes it.
  assign commit_ready = !hold && !boq_full && !(want_value && hint_valid);
  assign fire_commit  = commit_valid && commit_ready;

  assign boq_push       = fire_commit && commit_is_cond_br;
  assign boq_push_taken = commit_taken;

  // FQ write: hint first, value otherwise. The footnote must be acknowledged.
  always_comb begin
    boq_set_fn   = 1'b0;
    fq_push      = 1'b0;
    fq_push_data = '{kind: FN_VALUE, seq: boq_tail_seq, off: '0, data: '0};
    hint_ok      = 1'b0;
    value_ok     = 1'b0;
    if (!hold && hint_valid) begin
      boq_set_fn        = !fq_full;
      hint_ok           = boq_set_fn_ack && !fq_full;
      fq_push           = hint_ok;
      fq_push_data.kind = hint_kind;
      fq_push_data.data = hint_addr;
    end else if (fire_commit && want_value) begin
      boq_set_fn        = !fq_full;
      value_ok          = boq_set_fn_ack && !fq_full;
      fq_push           = value_ok;
      fq_push_data.kind = FN_VALUE;
      fq_push_data.off  = pc_offset(commit_pc, last_br_pc);
      fq_push_data.data = commit_value;
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      last_br_pc    <= '0;
      branches_sent <= '0;
      hints_sent    <= '0;
      values_sent   <= '0;
      hints_dropped <= '0;
    end else begin
      if (boq_push) begin
        last_br_pc    <= commit_pc;
        branches_sent <= branches_sent + 1;
      end
      if (hint_ok)  hints_sent  <= hints_sent + 1;
      if (value_ok) values_sent <= values_sent + 1;
      if ((!hold && hint_valid && !hint_ok) || (fire_commit && want_value && !hint_valid && !value_ok))
        hints_dropped <= hints_dropped + 1;
    end
  end
endmodule
