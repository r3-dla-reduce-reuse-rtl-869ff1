// tb_r3dla_top: end-to-end test of the R3-DLA support structures at their
// default sizes (BOQ 512, FQ 128, fetch buffer 32, VPT 32, T1 16, LCT 16,
// 10,000-instruction recycle windows, 64-cycle reboot).
//
// A small loop (line 0x1000: i0 r1<-imm, i1 r2<-load, i2 r4<-r1 op r2,
// i3 the loop branch) is run by both threads, modelled here:
//   LT commit  commits the loop's instructions, 1 per cycle, and now and then
//              a prefetch hint (every 4th iteration) or an indirect target
//              hint (every 11th iteration);
//   MT fetch   fetches one iteration per group, asking the BOQ for the
//              branch direction, which must equal LT's outcome in order; it
//              pauses for 1200 cycles once (LT runs ahead, the FQ fills and
//              hints are dropped) and asks for an indirect target after
//              some groups;
//   MT decode  pops the fetch buffer at a random rate, with a pause that
//              fills it; every reused value must equal the value LT
//              committed for that very instruction (iteration, PC);
//   MT backend executes i0..i2 with 30-cycle latency (SIF training), feeds
//              T1 the strided load and loop branch, commits 4 instructions a
//              cycle and its loop branch every 20 cycles: loop A, then loop
//              B, then A again (recycle search, LCT inserts, LCT hit);
//   LT front   an I-cache miss fetches the line and its mask bits; the
//              skeleton then deletes i1 and i2 from LT's fetch groups;
//   LT caches  dirty evictions, which must be discarded.
// At the end a wrong BOQ prediction starts a reboot: MT's 64 registers must
// reach LT and LT restarts no sooner than 64 cycles later.
// Every mechanism is counted and one that never happened is a failure:
// BOQ stall, footnote drain, prefetch release, indirect hint, value reuse
// hit, validation skip, reboot, T1 prefetch and steady state, LCT insert and
// hit, mask deletion, fetch buffer full, containment discard, hint drop.
module tb_r3dla_top;
  import r3dla_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  localparam int FW = 4, N = 1600;
  localparam addr_t LOOP = 64'h1000, PF_BASE = 64'h5000_0000, TGT_BASE = 64'hABC0_0000;

  // ---------------- DUT signals ----------------
  logic [FW-1:0] lt_fetch_valid = '0, lt_dec_valid;
  logic [31:0] lt_fetch_inst [FW], lt_dec_inst [FW];
  addr_t lt_fetch_pc [FW], lt_dec_pc [FW];
  logic [8:0] lt_fetch_line = '0;
  logic lt_miss_valid = 0, lt_miss_ready, lt_l2_req_valid, lt_l2_req_ready = 1, lt_l2_req_is_mask;
  addr_t lt_miss_addr = '0, lt_l2_req_addr;
  logic [8:0] lt_miss_line = '0, lt_l2_req_line, lt_mresp_line = '0;
  logic lt_mresp_valid = 0;
  logic [127:0] lt_mresp_data = '0;
  logic lt_commit_valid = 0, lt_commit_ready, lt_commit_is_cond_br = 0, lt_commit_taken = 0;
  logic lt_commit_has_dest = 0, lt_hint_valid = 0;
  addr_t lt_commit_pc = '0, lt_commit_value = '0, lt_hint_addr = '0;
  fn_kind_e lt_hint_kind = FN_L2_PREF;
  logic lt_evict_valid = 0, lt_evict_dirty = 0, lt_wb_valid, lt_snoop_hit = 0, lt_snoop_dirty = 0;
  logic lt_snoop_supply, lt_snoop_inval_only;
  addr_t lt_evict_addr = '0, lt_wb_addr;
  logic lt_reg_we, lt_restart, reboot_busy;
  logic [5:0] lt_reg_idx, mt_reg_idx;
  addr_t lt_reg_data, lt_restart_pc, mt_reg_data;
  logic mt_br_req = 0, mt_br_grant, mt_br_taken, mt_ind_req = 0, mt_ind_grant, mt_ind_hint_valid;
  addr_t mt_br_pc = LOOP + 12, mt_ind_hint;
  logic mt_br_resolve_valid = 0, mt_br_pred_taken = 0, mt_br_actual_taken = 0;
  addr_t mt_restart_pc = '0;
  logic mt_flush = 0;
  logic [2:0] mt_fetch_cnt = '0, mt_dec_pop_cnt = '0;
  logic [31:0] mt_fetch_inst [FW], mt_dec_inst [FW];
  addr_t mt_fetch_pc [FW], mt_dec_pc [FW];
  logic [8:0] mt_fetch_line = 9'h040;
  logic mt_fetch_ready;
  logic mt_miss_valid = 0, mt_miss_ready, mt_l2_req_valid, mt_l2_req_ready = 1, mt_l2_req_is_mask;
  addr_t mt_miss_addr = '0, mt_l2_req_addr;
  logic [8:0] mt_miss_line = '0, mt_l2_req_line, mt_mresp_line = '0;
  logic mt_mresp_valid = 0;
  logic [127:0] mt_mresp_data = '0;
  logic [5:0] mt_fb_count;
  logic [FW-1:0] mt_dec_sbit, mt_dec_is_alu = '0, mt_dec_has_dest = '0, mt_dec_vp_hit, mt_dec_skip_validate;
  logic [5:0] mt_dec_dest [FW];
  logic [1:0] mt_dec_src_used [FW];
  logic [5:0] mt_dec_src [FW][2];
  addr_t mt_dec_vp_value [FW];
  logic mt_exec_valid = 0, mt_vp_wrong_valid = 0, mt_s_mem_valid = 0, mt_s_loop_valid = 0;
  logic mt_s_loop_taken = 0, mt_loop_br_valid = 0;
  addr_t mt_exec_pc = '0, mt_vp_wrong_pc = '0, mt_s_mem_pc = '0, mt_s_mem_addr = '0;
  addr_t mt_s_loop_pc = '0, mt_loop_br_pc = '0;
  logic [15:0] mt_exec_lat = '0, mt_avg_mem_lat = 16'd200;
  logic [2:0] mt_commit_cnt = '0;
  logic fn_pf_valid, fn_pf_ready = 1, t1_pf_valid, t1_pf_ready = 1;
  fn_kind_e fn_pf_kind;
  addr_t fn_pf_addr, t1_pf_addr;
  skt_t skt_id;
  logic [9:0] lookahead_depth;
  logic [31:0] stat_reboots, stat_fetch_stalls, stat_fn_drained, stat_vp_hits, stat_vp_skipped;
  logic [31:0] stat_t1_prefetches, stat_t1_steady, stat_lct_inserts, stat_lct_hits;
  logic [31:0] stat_hints_dropped, stat_fb_full_cycles, stat_lt_deleted;
  logic [31:0] stat_lt_discarded, stat_vpt_stale, stat_sif_inserts, stat_recycle_windows;
  logic recycle_searching;

  r3dla_top dut (.*);

  assign mt_reg_data = {32'hCAFE_0000, 26'd0, mt_reg_idx};

  task automatic check(input logic ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL @%0t: %s", $time, msg); end
  endtask

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog: lt_it=%0d mt_j=%0d dec_n=%0d be=%0d", lt_it, mt_j, dec_n, be_cycles);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // program: per iteration i, instruction k
  function automatic addr_t value_of(int i, int k);
    return {16'h7A00 + 16'(k), 16'h0, 32'(i)};
  endfunction
  function automatic bit taken_of(int i);
    return (i % 9) != 8;   // an exit every 9 iterations, then the loop starts over
  endfunction

  int lt_it, mt_j, dec_n, be_cycles;
  bit lt_done, mt_done, dec_done, be_done;
  int n_pf_release, n_ind_hint, n_vp_hit, n_discard, n_mask_del_groups, n_dir;

  // ---------------- LT commit ----------------
  task automatic lt_commit(input addr_t pc, input bit br, input bit tk, input bit hd, input addr_t v);
    bit ok;
    lt_commit_valid = 1; lt_commit_pc = pc; lt_commit_is_cond_br = br; lt_commit_taken = tk;
    lt_commit_has_dest = hd; lt_commit_value = v;
    do begin #7 ok = lt_commit_ready; @(posedge clk); #1; end while (!ok);
    lt_commit_valid = 0;
  endtask
  task automatic lt_hint(input fn_kind_e k, input addr_t a);
    lt_hint_valid = 1; lt_hint_kind = k; lt_hint_addr = a;
    @(posedge clk); #1 lt_hint_valid = 0;
  endtask

  initial begin : lt_proc
    lt_done = 0;
    @(posedge rst_n); repeat (40) @(posedge clk); #1;    // MT starts first: BOQ stall
    for (lt_it = 0; lt_it < N; lt_it++) begin
      if (lt_it % 4 == 0)  lt_hint(FN_L2_PREF, PF_BASE + 64'(lt_it) * 64);
      if (lt_it % 11 == 4) lt_hint(FN_IND_TGT, TGT_BASE + 64'(lt_it));
      for (int k = 0; k < 3; k++) lt_commit(LOOP + 64'(4 * k), 0, 0, 1, value_of(lt_it, k));
      lt_commit(LOOP + 12, 1, taken_of(lt_it), 0, '0);
    end
    lt_done = 1;
  end

  // ---------------- MT fetch ----------------
  initial begin : mt_fetch_proc
    mt_done = 0; n_dir = 0;
    for (int k = 0; k < FW; k++) begin
      mt_fetch_inst[k] = 32'h13 + 32'(k << 7); mt_fetch_pc[k] = LOOP + 64'(4 * k);
      lt_fetch_inst[k] = 32'h13 + 32'(k << 7); lt_fetch_pc[k] = LOOP + 64'(4 * k);
    end
    @(posedge rst_n); @(posedge clk); #1;
    for (mt_j = 0; mt_j < N; mt_j++) begin
      bit got;
      if (mt_j == 300) begin repeat (1200) @(posedge clk); #1; end
      got = 0;
      while (!got) begin
        mt_fetch_cnt = 3'd4;
        #1 mt_br_req = mt_fetch_ready;
        #1 if (mt_br_grant) begin
          got = 1; n_dir++;
          check(mt_br_taken == taken_of(mt_j), $sformatf("branch %0d direction from the BOQ", mt_j));
        end else mt_fetch_cnt = 3'd0;
        @(posedge clk); #1 mt_br_req = 0; mt_fetch_cnt = 3'd0;
      end
      if (mt_j % 11 == 6) begin
        bit g;
        g = 0;
        mt_ind_req = 1;
        while (!g) begin
          #2 g = mt_ind_grant;
          if (g && mt_ind_hint_valid) begin
            n_ind_hint++;
            check(mt_ind_hint >= TGT_BASE && (mt_ind_hint - TGT_BASE) % 11 == 4 && mt_ind_hint < TGT_BASE + N,
                  $sformatf("indirect target hint %h", mt_ind_hint));
          end
          @(posedge clk); #1;
        end
        mt_ind_req = 0;
      end
    end
    mt_done = 1;
  end

  // ---------------- MT decode ----------------
  initial begin : mt_dec_proc
    dec_done = 0; dec_n = 0;
    for (int s = 0; s < FW; s++) begin
      mt_dec_dest[s] = '0; mt_dec_src_used[s] = '0; mt_dec_src[s][0] = '0; mt_dec_src[s][1] = '0;
    end
    @(posedge rst_n); @(posedge clk); #1;
    while (dec_n < 4 * N) begin
      int p;
      p = (dec_n > 4 * 800 && dec_n < 4 * 800 + 8) ? 0 : $urandom % 5;   // one long pause
      if (dec_n >= 4 * 800 && dec_n < 4 * 800 + 8 && mt_fb_count < 32) p = 0;
      else if (dec_n >= 4 * 800 && dec_n < 4 * 800 + 8) p = 4;
      if (p > int'(mt_fb_count)) p = mt_fb_count;
      mt_dec_pop_cnt = 3'(p);
      for (int s = 0; s < FW; s++) begin
        int k;
        k = (dec_n + s) % 4;
        check(s >= p || mt_dec_pc[s] == LOOP + 64'(4 * k), "decode order");
        mt_dec_is_alu[s]   = k != 1 && k != 3;
        mt_dec_has_dest[s] = k != 3;
        mt_dec_dest[s]     = (k == 0) ? 6'd1 : (k == 1) ? 6'd2 : 6'd4;
        mt_dec_src_used[s] = (k == 2) ? 2'b11 : 2'b00;
        mt_dec_src[s][0]   = 6'd1; mt_dec_src[s][1] = 6'd2;
      end
      #3;
      for (int s = 0; s < p; s++) if (mt_dec_vp_hit[s]) begin
        int it, k;
        it = (dec_n + s) / 4; k = (dec_n + s) % 4;
        n_vp_hit++;
        check(mt_dec_vp_value[s] == value_of(it, k),
              $sformatf("reused value for iteration %0d inst %0d: %h", it, k, mt_dec_vp_value[s]));
      end
      dec_n += p;
      @(posedge clk); #1 mt_dec_pop_cnt = '0;
    end
    dec_done = 1;
  end

  // ---------------- MT backend: SIF training, T1, recycle ----------------
  initial begin : be_proc
    int it;
    be_done = 0; it = 0;
    @(posedge rst_n); @(posedge clk); #1;
    for (be_cycles = 0; be_cycles < 45000; be_cycles++) begin
      addr_t lpc;
      int ph;
      ph = be_cycles % 20;
      lpc = (be_cycles < 16000 || be_cycles >= 32000) ? 64'h1000 + 12 : 64'h8000 + 12;
      mt_commit_cnt = 3'd4;
      mt_exec_valid = ph < 3; mt_exec_pc = LOOP + 64'(4 * ph); mt_exec_lat = 16'd30;
      mt_s_mem_valid = ph == 5; mt_s_mem_pc = lpc - 8; mt_s_mem_addr = 64'h9000_0000 + 64'(it) * 64;
      mt_s_loop_valid = ph == 19; mt_s_loop_pc = lpc; mt_s_loop_taken = (be_cycles % 4000) < 3980;
      mt_loop_br_valid = ph == 19; mt_loop_br_pc = lpc;
      if (ph == 19) it++;
      // LT cache evictions
      lt_evict_valid = (be_cycles % 97) == 0; lt_evict_dirty = 1; lt_evict_addr = 64'(be_cycles) << 6;
      #3 if (lt_evict_valid) begin
        check(!lt_wb_valid, "dirty line from the look-ahead core is not written back");
        n_discard++;
      end
      @(posedge clk); #1;
    end
    mt_exec_valid = 0; mt_s_mem_valid = 0; mt_s_loop_valid = 0; mt_loop_br_valid = 0;
    mt_commit_cnt = '0; lt_evict_valid = 0;
    be_done = 1;
  end

  // ---------------- prefetch outputs ----------------
  addr_t last_pf;
  always @(posedge clk) if (rst_n && fn_pf_valid && fn_pf_ready) begin
    n_pf_release++;
    check(fn_pf_kind == FN_L2_PREF && fn_pf_addr >= PF_BASE && fn_pf_addr > last_pf,
          $sformatf("released prefetch %h in order", fn_pf_addr));
    last_pf = fn_pf_addr;
  end

  // ---------------- LT front end: mask fetch and deletion ----------------
  initial begin : lt_front_proc
    int code_seen, mask_seen;
    code_seen = 0; mask_seen = 0;
    @(posedge rst_n); @(posedge clk); #1;
    lt_fetch_line = 9'h040;
    lt_fetch_valid = 4'hF; #1;
    check(lt_dec_valid == 4'hF, "no mask yet: all instructions kept");
    lt_miss_valid = 1; lt_miss_addr = LOOP; lt_miss_line = 9'h040;
    do begin #2; end while (!lt_miss_ready);
    if (lt_l2_req_valid && !lt_l2_req_is_mask) begin
      code_seen++;
      check(lt_l2_req_addr == LOOP, "code line address");
    end
    @(posedge clk); #1 lt_miss_valid = 0;
    for (int c = 0; c < 20 && mask_seen == 0; c++) begin
      #2 if (lt_l2_req_valid) begin
        if (lt_l2_req_is_mask) begin
          mask_seen++;
          check(lt_l2_req_addr == 64'h0000_4000_0000_0000 + ((LOOP >> 6) << 4), "mask address f(A)");
        end else begin
          code_seen++;
          check(lt_l2_req_addr == LOOP, "code line address");
        end
      end
      @(posedge clk); #1;
    end
    check(code_seen == 1 && mask_seen == 1, "two L2 reads for one miss");
    repeat (10) @(posedge clk); #1;
    // side bits: i0 in every skeleton, i1/i2 in none (i1 has the S bit), i3 in all + S
    lt_mresp_valid = 1; lt_mresp_line = 9'h040;
    lt_mresp_data = '0;
    lt_mresp_data[7:0] = 8'h3F; lt_mresp_data[15:8] = 8'h40; lt_mresp_data[23:16] = 8'h00;
    lt_mresp_data[31:24] = 8'h7F;
    @(posedge clk); #1 lt_mresp_valid = 0;
    repeat (100) begin
      #1 if (lt_dec_valid == 4'b0011 && lt_dec_pc[0] == LOOP && lt_dec_pc[1] == LOOP + 12)
        n_mask_del_groups++;
      @(posedge clk); #1;
    end
    lt_fetch_valid = '0;
  end

  // ---------------- main ----------------
  initial begin
    int t0, nwe;
    bit regs_ok;
    n_pf_release = 0; n_ind_hint = 0; n_vp_hit = 0; n_discard = 0; n_mask_del_groups = 0;
    last_pf = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    wait (lt_done && mt_done && dec_done && be_done);
    @(posedge clk); #1;
    check(n_dir == N, "every branch direction delivered");
    // reboot: MT finds a wrong BOQ prediction
    mt_br_resolve_valid = 1; mt_br_pred_taken = 1; mt_br_actual_taken = 0; mt_restart_pc = 64'h2000;
    @(posedge clk); #1 mt_br_resolve_valid = 0;
    t0 = 0; nwe = 0; regs_ok = 1;
    while (!lt_restart && t0 < 500) begin
      #2 if (lt_reg_we) begin
        nwe++;
        if (lt_reg_data != {32'hCAFE_0000, 26'd0, lt_reg_idx}) regs_ok = 0;
      end
      @(posedge clk); #1 t0++;
    end
    check(lt_restart && lt_restart_pc == 64'h2000, "LT restarted at MT's PC");
    check(t0 >= 64, $sformatf("reboot took %0d cycles (>= 64)", t0));
    check(nwe == 64 && regs_ok, $sformatf("64 registers copied (%0d)", nwe));
    check(lookahead_depth == 0, "BOQ empty after reboot");

    // mechanisms
    $display("mechanisms: stall=%0d drain=%0d pf_release=%0d ind_hint=%0d vp_hit=%0d skip=%0d reboot=%0d",
             stat_fetch_stalls, stat_fn_drained, n_pf_release, n_ind_hint, stat_vp_hits, stat_vp_skipped,
             stat_reboots);
    $display("mechanisms: t1_pf=%0d t1_steady=%0d lct_ins=%0d lct_hit=%0d mask_del=%0d fb_full=%0d discard=%0d hint_drop=%0d",
             stat_t1_prefetches, stat_t1_steady, stat_lct_inserts, stat_lct_hits, stat_lt_deleted,
             stat_fb_full_cycles, n_discard, stat_hints_dropped);
    check(stat_fetch_stalls > 0, "mechanism: BOQ stall");
    check(stat_fn_drained > 0, "mechanism: footnote drain");
    check(n_pf_release > 0, "mechanism: prefetch release");
    check(n_ind_hint > 0, "mechanism: indirect target hint");
    check(stat_vp_hits > 0 && n_vp_hit == int'(stat_vp_hits), "mechanism: value reuse hit");
    check(stat_vp_skipped > 0, "mechanism: validation skip");
    check(stat_reboots == 1, "mechanism: reboot");
    check(stat_t1_prefetches > 0, "mechanism: T1 prefetch");
    check(stat_t1_steady > 0, "mechanism: T1 steady state");
    check(stat_lct_inserts >= 2, "mechanism: LCT insert");
    check(stat_lct_hits > 0, "mechanism: LCT hit");
    check(stat_lt_deleted > 0 && n_mask_del_groups > 0, "mechanism: skeleton mask deletion");
    check(stat_fb_full_cycles > 0, "mechanism: fetch buffer full");
    check(n_discard > 0 && stat_lt_discarded == 32'(n_discard), "mechanism: containment discard");
    check(stat_sif_inserts > 0, "SIF trained");
    check(stat_recycle_windows == 12 && !recycle_searching, $sformatf("two searches of six windows (%0d)", stat_recycle_windows));
    check(stat_hints_dropped > 0, "mechanism: hint drop");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
