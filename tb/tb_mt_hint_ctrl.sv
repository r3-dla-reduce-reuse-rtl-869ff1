// tb_mt_hint_ctrl: self-checking test of the main thread's BOQ/FQ reader.
// The testbench fills a real BOQ and FQ with batches of random branch outcomes
// and footnotes (L1/L2/TLB prefetches, values, indirect targets, plus stale
// entries of un-footnoted branches), then lets a random fetch unit request
// directions and indirect targets while the prefetch and value sinks apply
// random back-pressure. Expected outcome, prefetch, value and target sequences
// are computed from the generated batch. Also checks the stall on an empty
// BOQ and that no direction is granted while footnotes are drained.
module tb_mt_hint_ctrl;
  import r3dla_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  // queues
  logic q_flush = 0, b_push = 0, b_tk = 0, b_setfn = 0, b_full, b_ack, b_empty, b_pop;
  seq_t b_tail, b_hseq;
  boq_entry_t b_head;
  logic [9:0] b_cnt;
  logic f_push = 0, f_full, f_drop, f_pop, f_empty;
  fq_entry_t f_data, f_head;
  logic [7:0] f_cnt;
  boq u_boq (.clk, .rst_n, .flush(q_flush), .push(b_push), .push_taken(b_tk), .full(b_full),
             .set_fn(b_setfn), .set_fn_ack(b_ack), .tail_seq(b_tail), .pop(b_pop),
             .empty(b_empty), .head(b_head), .head_seq(b_hseq), .count(b_cnt));
  fq  u_fq  (.clk, .rst_n, .flush(q_flush), .push(f_push), .push_data(f_data), .full(f_full),
             .push_drop(f_drop), .pop(f_pop), .empty(f_empty), .head(f_head), .count(f_cnt));

  logic hold = 0, br_req = 0, ind_req = 0, pf_ready = 1, vp_ready = 1;
  logic br_grant, br_taken, ind_grant, ind_hint_valid, pf_valid, vp_valid;
  seq_t br_seq, vp_seq;
  addr_t ind_hint, pf_addr, vp_value;
  fn_kind_e pf_kind;
  off_t vp_off;
  logic [31:0] fn_drained, fetch_stalls;

  mt_hint_ctrl dut (.clk, .rst_n, .hold, .flush(q_flush),
    .br_req, .br_grant, .br_taken, .br_seq, .ind_req, .ind_grant, .ind_hint_valid, .ind_hint,
    .boq_empty(b_empty), .boq_head(b_head), .boq_head_seq(b_hseq), .boq_pop(b_pop),
    .fq_empty(f_empty), .fq_head(f_head), .fq_pop(f_pop),
    .pf_valid, .pf_kind, .pf_addr, .pf_ready, .vp_valid, .vp_seq, .vp_off, .vp_value, .vp_ready,
    .fn_drained, .fetch_stalls);

  task automatic check(input logic ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL @%0t: %s", $time, msg); end
  endtask

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // expected streams
  bit        e_taken[$];
  fq_entry_t e_pf[$], e_vp[$];
  addr_t     br_tgt[int];     // branch index -> last indirect target attached
  int n_stall = 0, n_drain_block = 0, n_ind_hint = 0, n_stale = 0;

  task automatic load_batch(input int nbr);
    for (int b = 0; b < nbr; b++) begin
      bit tk, fn;
      int nf;
      tk = $urandom; fn = ($urandom % 3) == 0;
      b_push = 1; b_tk = tk; @(posedge clk); #1 b_push = 0;
      e_taken.push_back(tk);
      if (!fn && ($urandom % 8) == 0) begin
        // stale entry: footnote data without a footnote bit
        f_push = 1;
        f_data = '{kind: FN_L1_PREF, seq: b_tail, off: '0, data: 64'hDEAD};
        @(posedge clk); #1 f_push = 0;
        n_stale++;
      end
      if (fn) begin
        nf = 1 + $urandom % 3;
        for (int k = 0; k < nf; k++) begin
          fq_entry_t e;
          e.kind = fn_kind_e'($urandom % 5);
          e.seq = b_tail; e.off = off_t'($urandom); e.data = {$urandom, $urandom};
          b_setfn = 1; f_push = 1; f_data = e;
          @(posedge clk); #1 b_setfn = 0; f_push = 0;
          case (e.kind)
            FN_VALUE: e_vp.push_back(e);
            FN_IND_TGT: br_tgt[e_taken.size()-1] = e.data;
            default: e_pf.push_back(e);
          endcase
        end
      end
    end
  endtask

  initial begin
    int granted;
    bit m_tgt_v;
    addr_t m_tgt;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    // empty BOQ: fetch must stall
    br_req = 1; #1;
    check(!br_grant, "no grant on empty BOQ");
    @(posedge clk); #1;
    check(fetch_stalls == 1, "stall counted");
    br_req = 0;
    for (int batch = 0; batch < 6; batch++) begin
      e_taken.delete(); e_pf.delete(); e_vp.delete(); br_tgt.delete();
      load_batch(40);
      granted = 0; m_tgt_v = 0;
      for (int c = 0; c < 3000 && (granted < 40 || e_pf.size() > 0 || e_vp.size() > 0); c++) begin
        br_req   = ($urandom % 3) != 0;
        ind_req  = ($urandom % 5) == 0;
        pf_ready = ($urandom % 4) != 0;
        vp_ready = ($urandom % 4) != 0;
        hold     = ($urandom % 30) == 0;
        #1;
        if (br_req && !br_grant && !b_empty && !hold) n_drain_block++;
        if (br_grant) begin
          check(granted < 40, "extra grant");
          check(br_taken == e_taken[granted], $sformatf("taken of branch %0d", granted));
        end
        if (ind_grant) begin
          check(ind_hint_valid == m_tgt_v, "indirect hint valid");
          if (m_tgt_v) begin check(ind_hint == m_tgt, "indirect hint value"); n_ind_hint++; end
        end
        if (pf_valid && pf_ready) begin
          check(e_pf.size() > 0 && pf_addr == e_pf[0].data && pf_kind == e_pf[0].kind, "prefetch");
          if (e_pf.size() > 0) void'(e_pf.pop_front());
        end
        if (vp_valid && vp_ready) begin
          check(e_vp.size() > 0 && vp_value == e_vp[0].data && vp_off == e_vp[0].off
                && vp_seq == e_vp[0].seq, "value");
          if (e_vp.size() > 0) void'(e_vp.pop_front());
        end
        check(!(pf_valid && pf_addr == 64'hDEAD), "stale entry released");
        @(posedge clk);
        if (ind_grant && m_tgt_v) m_tgt_v = 0;
        if (br_grant) begin
          if (br_tgt.exists(granted)) begin m_tgt_v = 1; m_tgt = br_tgt[granted]; end
          granted++;
        end
        #1;
      end
      check(granted == 40 && e_pf.size() == 0 && e_vp.size() == 0, "batch fully consumed");
      br_req = 0; ind_req = 0; hold = 0;
      repeat (4) @(posedge clk);
      #1 q_flush = 1; @(posedge clk); #1 q_flush = 0;
    end
    check(n_drain_block > 0 && n_ind_hint > 0 && n_stale > 0, "coverage");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
