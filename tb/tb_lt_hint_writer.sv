// tb_lt_hint_writer: randomized self-checking test of the look-ahead side hint
// writer. The testbench plays the BOQ, FQ and SIF (random full flags,
// footnote acknowledges and SIF hits) and a reference model predicts, every
// cycle, commit_ready, the BOQ push, the footnote request, the FQ entry (kind,
// tag, offset from the preceding branch, payload) and the statistics.
module tb_lt_hint_writer;
  import r3dla_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic hold = 0, commit_valid = 0, commit_is_cond_br = 0, commit_taken = 0, commit_has_dest = 0;
  addr_t commit_pc = '0, commit_value = '0, hint_addr = '0;
  logic hint_valid = 0;
  fn_kind_e hint_kind = FN_L1_PREF;
  logic commit_ready, boq_push, boq_push_taken, boq_set_fn, fq_push;
  addr_t sif_pc;
  logic sif_hit, boq_full = 0, boq_set_fn_ack, fq_full = 0;
  logic ack_allow = 1;
  seq_t boq_tail_seq = '0;
  fq_entry_t fq_push_data;
  logic [31:0] branches_sent, hints_sent, values_sent, hints_dropped;

  // SIF model: PCs whose bit 4 is set are "slow"
  assign sif_hit = sif_pc[4];
  assign boq_set_fn_ack = boq_set_fn && ack_allow;

  lt_hint_writer dut (.*);

  task automatic check(input logic ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL @%0t: %s", $time, msg); end
  endtask

  initial begin : watchdog
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  addr_t m_last_br = '0;
  int m_br = 0, m_hint = 0, m_val = 0, m_drop = 0;
  int n_value_pairs = 0, n_stall_full = 0;

  initial begin
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    for (int i = 0; i < 20000; i++) begin
      bit e_ready, want_val, e_setfn, e_fqp, is_hint_path;
      fq_entry_t e_data;
      hold              = ($urandom % 50) == 0;
      commit_valid      = ($urandom % 100) < 80;
      commit_pc         = {32'h0, 20'h0, 10'($urandom), 2'b00};
      commit_is_cond_br = ($urandom % 5) == 0;
      commit_taken      = $urandom;
      commit_has_dest   = ($urandom % 3) != 0;
      commit_value      = {$urandom, $urandom};
      hint_valid        = ($urandom % 6) == 0;
      hint_kind         = fn_kind_e'(1 + $urandom % 4);
      hint_addr         = {$urandom, $urandom};
      boq_full          = ($urandom % 10) == 0;
      fq_full           = ($urandom % 10) == 0;
      ack_allow         = ($urandom % 8) != 0;
      boq_tail_seq      = seq_t'($urandom);
      #1;
      // reference
      want_val = commit_valid && commit_has_dest && !commit_is_cond_br && commit_pc[4];
      e_ready  = !hold && !boq_full && !(want_val && hint_valid);
      is_hint_path = !hold && hint_valid;
      e_setfn  = (is_hint_path || (commit_valid && e_ready && want_val)) && !fq_full;
      e_fqp    = e_setfn && ack_allow;
      check(commit_ready == e_ready, "commit_ready");
      check(boq_push == (commit_valid && e_ready && commit_is_cond_br), "boq_push");
      if (boq_push) check(boq_push_taken == commit_taken, "boq_push_taken");
      check(boq_set_fn == e_setfn, "set_fn");
      check(fq_push == e_fqp, "fq_push");
      if (want_val && hint_valid) n_value_pairs++;
      if (boq_full && commit_valid) n_stall_full++;
      if (e_fqp) begin
        check(fq_push_data.seq == boq_tail_seq, "fq seq = tail seq");
        if (is_hint_path) begin
          check(fq_push_data.kind == hint_kind && fq_push_data.data == hint_addr, "hint entry");
        end else begin
          check(fq_push_data.kind == FN_VALUE && fq_push_data.data == commit_value, "value entry");
          check(fq_push_data.off == off_t'((commit_pc - m_last_br) >> 2), "value offset");
        end
      end
      @(posedge clk);
      if (commit_valid && e_ready && commit_is_cond_br) begin m_last_br = commit_pc; m_br++; end
      if (e_fqp && is_hint_path) m_hint++;
      if (e_fqp && !is_hint_path) m_val++;
      if ((is_hint_path && !e_fqp) || (commit_valid && e_ready && want_val && !hint_valid && !e_fqp)) m_drop++;
      #1;
      check(branches_sent == 32'(m_br) && hints_sent == 32'(m_hint) && values_sent == 32'(m_val)
            && hints_dropped == 32'(m_drop), "counters");
    end
    check(n_value_pairs > 0 && n_stall_full > 0 && m_val > 0 && m_drop > 0, "coverage");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
