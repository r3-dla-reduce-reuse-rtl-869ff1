// r3dla_top: the support structures of an R3-DLA decoupled look-ahead system,
// wired between a look-ahead core (LT) and a main core (MT).
//
// The two out-of-order cores, their caches and predictors are outside; their
// signals are this module's ports (prefix lt_ for the look-ahead core, mt_ for
// the main core). Inside:
//   LT side  skeleton mask fetch and decoder (deletes non-skeleton
//            instructions of the version chosen by the recycle controller),
//            hint writer (BOQ outcomes, FQ hints, value-reuse entries selected
//            by the SIF), speculation containment for its private caches.
//   queues   BOQ (512 x 2 bits) and FQ (128 x 64-bit payload).
//   MT side  hint controller (BOQ directions, stall on empty BOQ, footnote
//            draining, prefetch release, indirect target hints), mask fetch
//            and decoder for the S bits, 32-entry fetch buffer, value
//            prediction table and validation-skip scoreboard at decode, T1
//            stride prefetcher, SIF training, recycle controller.
//   reboot   on a wrong BOQ prediction: flush, copy MT's registers to LT
//            through the FQ, restart LT after at least 64 cycles.
//
// Port groups, in order: LT fetch, LT I-cache miss/mask, LT commit and hints,
// LT cache containment, LT reboot; MT branch prediction, MT resolution and
// registers, MT fetch, MT decode, MT execute/T1, MT commit, prefetch outputs,
// statistics. Timing of each group is that of the block behind it; no port
// is registered twice. FETCH_W = decode width = 4 as in the paper's 4-wide
// cores; the fetch groups are assumed to lie within one I-cache line, and an
// MT fetch group ends at a conditional branch.
module r3dla_top
  import r3dla_pkg::*;
#(
  parameter int FETCH_W = 4,
  parameter int LINES   = 512
) (
  input  logic clk,
  input  logic rst_n,
  // ---- LT fetch (after the I-cache) ----
  input  logic [FETCH_W-1:0] lt_fetch_valid,
  input  logic [31:0]        lt_fetch_inst [FETCH_W],
  input  addr_t              lt_fetch_pc   [FETCH_W],
  input  logic [$clog2(LINES)-1:0] lt_fetch_line,
  output logic [FETCH_W-1:0] lt_dec_valid,          // skeleton instructions, packed
  output logic [31:0]        lt_dec_inst [FETCH_W],
  output addr_t              lt_dec_pc   [FETCH_W],
  // ---- LT I-cache miss, L2 requests and mask responses ----
  input  logic  lt_miss_valid,
  output logic  lt_miss_ready,
  input  addr_t lt_miss_addr,
  input  logic [$clog2(LINES)-1:0] lt_miss_line,
  output logic  lt_l2_req_valid,
  input  logic  lt_l2_req_ready,
  output addr_t lt_l2_req_addr,
  output logic  lt_l2_req_is_mask,
  output logic [$clog2(LINES)-1:0] lt_l2_req_line,
  input  logic  lt_mresp_valid,
  input  logic [$clog2(LINES)-1:0] lt_mresp_line,
  input  logic [16*MASKB_W-1:0] lt_mresp_data,
  // ---- LT commit and miss hints ----
  input  logic     lt_commit_valid,
  output logic     lt_commit_ready,
  input  addr_t    lt_commit_pc,
  input  logic     lt_commit_is_cond_br,
  input  logic     lt_commit_taken,
  input  logic     lt_commit_has_dest,
  input  addr_t    lt_commit_value,
  input  logic     lt_hint_valid,
  input  fn_kind_e lt_hint_kind,
  input  addr_t    lt_hint_addr,
  // ---- LT private cache containment ----
  input  logic  lt_evict_valid,
  input  logic  lt_evict_dirty,
  input  addr_t lt_evict_addr,
  output logic  lt_wb_valid,
  output addr_t lt_wb_addr,
  input  logic  lt_snoop_hit,
  input  logic  lt_snoop_dirty,
  output logic  lt_snoop_supply,
  output logic  lt_snoop_inval_only,
  // ---- LT reboot ----
  output logic  lt_reg_we,
  output logic [5:0] lt_reg_idx,
  output addr_t lt_reg_data,
  output logic  lt_restart,
  output addr_t lt_restart_pc,
  output logic  reboot_busy,
  // ---- MT branch prediction ----
  input  logic  mt_br_req,
  input  addr_t mt_br_pc,
  output logic  mt_br_grant,
  output logic  mt_br_taken,
  input  logic  mt_ind_req,
  output logic  mt_ind_grant,
  output logic  mt_ind_hint_valid,
  output addr_t mt_ind_hint,
  // ---- MT branch resolution and architectural registers ----
  input  logic  mt_br_resolve_valid,
  input  logic  mt_br_pred_taken,
  input  logic  mt_br_actual_taken,
  input  addr_t mt_restart_pc,
  output logic [5:0] mt_reg_idx,
  input  addr_t mt_reg_data,
  // ---- MT fetch into the fetch buffer ----
  input  logic  mt_flush,                   // MT pipeline redirect
  input  logic [$clog2(FETCH_W):0] mt_fetch_cnt,
  input  logic [31:0] mt_fetch_inst [FETCH_W],
  input  addr_t mt_fetch_pc [FETCH_W],
  input  logic [$clog2(LINES)-1:0] mt_fetch_line,
  output logic  mt_fetch_ready,
  input  logic  mt_miss_valid,
  output logic  mt_miss_ready,
  input  addr_t mt_miss_addr,
  input  logic [$clog2(LINES)-1:0] mt_miss_line,
  output logic  mt_l2_req_valid,
  input  logic  mt_l2_req_ready,
  output addr_t mt_l2_req_addr,
  output logic  mt_l2_req_is_mask,
  output logic [$clog2(LINES)-1:0] mt_l2_req_line,
  input  logic  mt_mresp_valid,
  input  logic [$clog2(LINES)-1:0] mt_mresp_line,
  input  logic [16*MASKB_W-1:0] mt_mresp_data,
  // ---- MT decode (from the fetch buffer) ----
  output logic [$clog2(32):0] mt_fb_count,
  output logic [31:0] mt_dec_inst [FETCH_W],
  output addr_t mt_dec_pc [FETCH_W],
  output logic [FETCH_W-1:0] mt_dec_sbit,
  input  logic [$clog2(FETCH_W):0] mt_dec_pop_cnt,
  input  logic [FETCH_W-1:0] mt_dec_is_alu,
  input  logic [FETCH_W-1:0] mt_dec_has_dest,
  input  logic [5:0] mt_dec_dest [FETCH_W],
  input  logic [1:0] mt_dec_src_used [FETCH_W],
  input  logic [5:0] mt_dec_src [FETCH_W][2],
  output logic [FETCH_W-1:0] mt_dec_vp_hit,      // reused value available
  output addr_t mt_dec_vp_value [FETCH_W],
  output logic [FETCH_W-1:0] mt_dec_skip_validate,
  // ---- MT execute: SIF training, value mispredictions, T1 ----
  input  logic  mt_exec_valid,
  input  addr_t mt_exec_pc,
  input  logic [15:0] mt_exec_lat,
  input  logic  mt_vp_wrong_valid,
  input  addr_t mt_vp_wrong_pc,
  input  logic  mt_s_mem_valid,
  input  addr_t mt_s_mem_pc,
  input  addr_t mt_s_mem_addr,
  input  logic  mt_s_loop_valid,
  input  addr_t mt_s_loop_pc,
  input  logic  mt_s_loop_taken,
  input  logic [15:0] mt_avg_mem_lat,
  // ---- MT commit (recycle controller) ----
  input  logic [2:0] mt_commit_cnt,
  input  logic  mt_loop_br_valid,
  input  addr_t mt_loop_br_pc,
  // ---- prefetch outputs into MT's memory system ----
  output logic     fn_pf_valid,           // released look-ahead prefetch
  output fn_kind_e fn_pf_kind,
  output addr_t    fn_pf_addr,
  input  logic     fn_pf_ready,
  output logic     t1_pf_valid,           // T1 stride prefetch
  output addr_t    t1_pf_addr,
  input  logic     t1_pf_ready,
  // ---- status ----
  output skt_t  skt_id,
  output logic [$clog2(BOQ_DEPTH):0] lookahead_depth,
  output logic [31:0] stat_reboots,
  output logic [31:0] stat_fetch_stalls,
  output logic [31:0] stat_fn_drained,
  output logic [31:0] stat_vp_hits,
  output logic [31:0] stat_vp_skipped,
  output logic [31:0] stat_t1_prefetches,
  output logic [31:0] stat_t1_steady,
  output logic [31:0] stat_lct_inserts,
  output logic [31:0] stat_lct_hits,
  output logic [31:0] stat_hints_dropped,
  output logic [31:0] stat_fb_full_cycles,
  output logic [31:0] stat_lt_deleted,
  output logic [31:0] stat_lt_discarded,    // dirty LT lines dropped by containment
  output logic [31:0] stat_vpt_stale,       // reuse entries dropped unmatched
  output logic [31:0] stat_sif_inserts,
  output logic [31:0] stat_recycle_windows, // IPC windows measured by the search
  output logic        recycle_searching
);
  // ---------------- reboot ----------------
  logic rb_flush, rb_hold;
  logic rb_fq_push, rb_fq_pop;
  fq_entry_t rb_fq_data;

  // ---------------- queues ----------------
  logic boq_push, boq_push_taken, boq_full, boq_set_fn, boq_set_fn_ack, boq_pop, boq_empty;
  seq_t boq_tail_seq, boq_head_seq;
  boq_entry_t boq_head;

  logic fq_push, fq_full, fq_drop, fq_pop, fq_empty;
  fq_entry_t fq_push_data, fq_head;
  logic [$clog2(128):0] fq_count;

  logic hw_fq_push, mh_fq_pop;
  fq_entry_t hw_fq_data;

  assign fq_push      = rb_hold ? rb_fq_push : hw_fq_push;
  assign fq_push_data = rb_hold ? rb_fq_data : hw_fq_data;
  assign fq_pop       = rb_hold ? rb_fq_pop  : mh_fq_pop;

  boq u_boq (
    .clk, .rst_n, .flush(rb_flush),
    .push(boq_push), .push_taken(boq_push_taken), .full(boq_full),
    .set_fn(boq_set_fn), .set_fn_ack(boq_set_fn_ack), .tail_seq(boq_tail_seq),
    .pop(boq_pop), .empty(boq_empty), .head(boq_head), .head_seq(boq_head_seq),
    .count(lookahead_depth));

  fq u_fq (
    .clk, .rst_n, .flush(rb_flush),
    .push(fq_push), .push_data(fq_push_data), .full(fq_full), .push_drop(fq_drop),
    .pop(fq_pop), .empty(fq_empty), .head(fq_head), .count(fq_count));

  // ---------------- LT side ----------------
  addr_t sif_q_pc;
  logic  sif_q_hit;
  logic [31:0] hw_br, hw_hints, hw_vals;

  lt_hint_writer u_hw (
    .clk, .rst_n, .hold(rb_hold),
    .commit_valid(lt_commit_valid), .commit_ready(lt_commit_ready),
    .commit_pc(lt_commit_pc), .commit_is_cond_br(lt_commit_is_cond_br),
    .commit_taken(lt_commit_taken), .commit_has_dest(lt_commit_has_dest),
    .commit_value(lt_commit_value),
    .hint_valid(lt_hint_valid), .hint_kind(lt_hint_kind), .hint_addr(lt_hint_addr),
    .sif_pc(sif_q_pc), .sif_hit(sif_q_hit),
    .boq_push, .boq_push_taken, .boq_full, .boq_set_fn, .boq_set_fn_ack, .boq_tail_seq,
    .fq_push(hw_fq_push), .fq_push_data(hw_fq_data), .fq_full,
    .branches_sent(hw_br), .hints_sent(hw_hints), .values_sent(hw_vals),
    .hints_dropped(stat_hints_dropped));

  logic lt_mask_valid;
  logic [16*MASKB_W-1:0] lt_line_mask;
  mask_fetch_ctrl #(.LINES(LINES)) u_lt_mask (
    .clk, .rst_n,
    .miss_valid(lt_miss_valid), .miss_ready(lt_miss_ready), .miss_addr(lt_miss_addr),
    .miss_line(lt_miss_line),
    .req_valid(lt_l2_req_valid), .req_ready(lt_l2_req_ready), .req_addr(lt_l2_req_addr),
    .req_is_mask(lt_l2_req_is_mask), .req_line(lt_l2_req_line),
    .mresp_valid(lt_mresp_valid), .mresp_line(lt_mresp_line), .mresp_data(lt_mresp_data),
    .rd_line(lt_fetch_line), .rd_valid(lt_mask_valid), .rd_mask(lt_line_mask));

  logic [MASKB_W-1:0] lt_imask [FETCH_W];
  always_comb
    for (int i = 0; i < FETCH_W; i++)
      lt_imask[i] = lt_line_mask[lt_fetch_pc[i][5:2]*MASKB_W +: MASKB_W];

  logic [FETCH_W-1:0] lt_sbit_unused;
  logic [$clog2(FETCH_W):0] lt_deleted;
  skeleton_mask_decoder #(.FETCH_W(FETCH_W)) u_lt_smd (
    .lt_mode(1'b1), .skt_sel(skt_id), .mask_valid(lt_mask_valid),
    .in_valid(lt_fetch_valid), .in_inst(lt_fetch_inst), .in_pc(lt_fetch_pc), .in_mask(lt_imask),
    .out_valid(lt_dec_valid), .out_inst(lt_dec_inst), .out_pc(lt_dec_pc),
    .s_bit(lt_sbit_unused), .deleted(lt_deleted));

  always_ff @(posedge clk) begin
    if (!rst_n) stat_lt_deleted <= '0;
    else        stat_lt_deleted <= stat_lt_deleted + 32'(lt_deleted);
  end

  spec_containment u_spec (
    .clk, .rst_n, .la_mode(1'b1),
    .evict_valid(lt_evict_valid), .evict_dirty(lt_evict_dirty), .evict_addr(lt_evict_addr),
    .wb_valid(lt_wb_valid), .wb_addr(lt_wb_addr),
    .snoop_hit(lt_snoop_hit), .snoop_dirty(lt_snoop_dirty),
    .snoop_supply(lt_snoop_supply), .snoop_inval_only(lt_snoop_inval_only),
    .discarded(stat_lt_discarded));

  // ---------------- reboot ----------------
  reboot_ctrl u_rb (
    .clk, .rst_n,
    .br_resolve_valid(mt_br_resolve_valid), .br_pred_taken(mt_br_pred_taken),
    .br_taken(mt_br_actual_taken), .mt_restart_pc,
    .flush(rb_flush), .hold(rb_hold), .busy(reboot_busy),
    .mt_reg_idx, .mt_reg_data,
    .fq_push(rb_fq_push), .fq_push_data(rb_fq_data), .fq_full, .fq_empty, .fq_head,
    .fq_pop(rb_fq_pop),
    .lt_reg_we, .lt_reg_idx, .lt_reg_data, .lt_restart, .lt_restart_pc,
    .reboots(stat_reboots));

  // ---------------- MT side ----------------
  seq_t  br_seq;
  logic  vp_valid, vp_ready;
  seq_t  vp_seq;
  off_t  vp_off;
  addr_t vp_value;

  mt_hint_ctrl u_mh (
    .clk, .rst_n, .hold(rb_hold), .flush(rb_flush),
    .br_req(mt_br_req), .br_grant(mt_br_grant), .br_taken(mt_br_taken), .br_seq,
    .ind_req(mt_ind_req), .ind_grant(mt_ind_grant), .ind_hint_valid(mt_ind_hint_valid),
    .ind_hint(mt_ind_hint),
    .boq_empty, .boq_head, .boq_head_seq, .boq_pop,
    .fq_empty(fq_empty || rb_hold), .fq_head, .fq_pop(mh_fq_pop),
    .pf_valid(fn_pf_valid), .pf_kind(fn_pf_kind), .pf_addr(fn_pf_addr), .pf_ready(fn_pf_ready),
    .vp_valid, .vp_seq, .vp_off, .vp_value, .vp_ready,
    .fn_drained(stat_fn_drained), .fetch_stalls(stat_fetch_stalls));

  // PC of the most recent granted conditional branch, for value offsets.
  // The branch's own group was fetched before the grant took effect, so the
  // group carries the previous branch's tag and PC, as LT's commit does.
  addr_t mt_last_br_pc;
  seq_t  fetch_seq;
  always_ff @(posedge clk) begin
    if (!rst_n) mt_last_br_pc <= '0;
    else if (mt_br_grant) mt_last_br_pc <= mt_br_pc;
  end
  assign fetch_seq = br_seq;

  // MT mask (S bits)
  logic mt_mask_valid;
  logic [16*MASKB_W-1:0] mt_line_mask;
  mask_fetch_ctrl #(.LINES(LINES)) u_mt_mask (
    .clk, .rst_n,
    .miss_valid(mt_miss_valid), .miss_ready(mt_miss_ready), .miss_addr(mt_miss_addr),
    .miss_line(mt_miss_line),
    .req_valid(mt_l2_req_valid), .req_ready(mt_l2_req_ready), .req_addr(mt_l2_req_addr),
    .req_is_mask(mt_l2_req_is_mask), .req_line(mt_l2_req_line),
    .mresp_valid(mt_mresp_valid), .mresp_line(mt_mresp_line), .mresp_data(mt_mresp_data),
    .rd_line(mt_fetch_line), .rd_valid(mt_mask_valid), .rd_mask(mt_line_mask));

  logic [MASKB_W-1:0] mt_imask [FETCH_W];
  logic [FETCH_W-1:0] mt_in_valid, mt_sm_valid, mt_sbits;
  logic [31:0] mt_sm_inst [FETCH_W];
  addr_t mt_sm_pc [FETCH_W];
  logic [$clog2(FETCH_W):0] mt_deleted_unused;
  always_comb
    for (int i = 0; i < FETCH_W; i++) begin
      mt_imask[i]    = mt_line_mask[mt_fetch_pc[i][5:2]*MASKB_W +: MASKB_W];
      mt_in_valid[i] = i < int'(mt_fetch_cnt);
    end

  skeleton_mask_decoder #(.FETCH_W(FETCH_W)) u_mt_smd (
    .lt_mode(1'b0), .skt_sel('0), .mask_valid(mt_mask_valid),
    .in_valid(mt_in_valid), .in_inst(mt_fetch_inst), .in_pc(mt_fetch_pc), .in_mask(mt_imask),
    .out_valid(mt_sm_valid), .out_inst(mt_sm_inst), .out_pc(mt_sm_pc),
    .s_bit(mt_sbits), .deleted(mt_deleted_unused));

  // fetch buffer
  localparam int FBW = $bits(fb_entry_t);
  logic [FBW-1:0] fb_in [FETCH_W];
  logic [FBW-1:0] fb_out [FETCH_W];
  fb_entry_t fb_e [FETCH_W];
  always_comb
    for (int i = 0; i < FETCH_W; i++)
      fb_in[i] = FBW'(fb_entry_t'{inst: mt_sm_inst[i], pc: mt_sm_pc[i], s_bit: mt_sbits[i],
                                  seq: fetch_seq, off: pc_offset(mt_sm_pc[i], mt_last_br_pc)});

  fetch_buffer #(.DEPTH(32), .W_IN(FETCH_W), .W_OUT(FETCH_W), .ENTRY_W(FBW)) u_fb (
    .clk, .rst_n, .flush(mt_flush || rb_flush),
    .push_cnt(mt_fetch_cnt), .push_data(fb_in), .push_ready(mt_fetch_ready),
    .out_data(fb_out), .count(mt_fb_count), .pop_cnt(mt_dec_pop_cnt),
    .full_cycles(stat_fb_full_cycles));

  // decode: value prediction table and validation-skip scoreboard
  logic [FETCH_W-1:0] dec_valid;
  seq_t lk_seq [FETCH_W];
  off_t lk_off [FETCH_W];
  always_comb
    for (int i = 0; i < FETCH_W; i++) begin
      fb_e[i]        = fb_entry_t'(fb_out[i]);
      mt_dec_inst[i] = fb_e[i].inst;
      mt_dec_pc[i]   = fb_e[i].pc;
      mt_dec_sbit[i] = fb_e[i].s_bit && (i < int'(mt_fb_count));
      dec_valid[i]   = i < int'(mt_dec_pop_cnt) && i < int'(mt_fb_count);
      lk_seq[i]      = fb_e[i].seq;
      lk_off[i]      = fb_e[i].off;
    end

  vpt #(.DEPTH(32), .DW(FETCH_W)) u_vpt (
    .clk, .rst_n, .flush(rb_flush || mt_flush),
    .push_valid(vp_valid), .push_ready(vp_ready), .push_seq(vp_seq), .push_off(vp_off),
    .push_value(vp_value),
    .lk_valid(dec_valid), .lk_seq, .lk_off, .lk_hit(mt_dec_vp_hit), .lk_value(mt_dec_vp_value),
    .hits(stat_vp_hits), .stale_drops(stat_vpt_stale));

  vp_scoreboard #(.DW(FETCH_W), .NUM_REGS(64)) u_sb (
    .clk, .rst_n, .flush(mt_flush),
    .d_valid(dec_valid), .d_is_alu(mt_dec_is_alu), .d_has_vp(mt_dec_vp_hit),
    .d_has_dest(mt_dec_has_dest), .d_dest(mt_dec_dest), .d_src_used(mt_dec_src_used),
    .d_src(mt_dec_src), .skip(mt_dec_skip_validate), .skipped(stat_vp_skipped));

  // SIF, trained in MT, read at LT commit
  logic rc_new_loop, rc_loop_iter, sif_training;
  sif u_sif (
    .clk, .rst_n, .new_loop(rc_new_loop), .loop_iter(rc_loop_iter),
    .exec_valid(mt_exec_valid), .exec_pc(mt_exec_pc), .exec_lat(mt_exec_lat),
    .del_valid(mt_vp_wrong_valid), .del_pc(mt_vp_wrong_pc),
    .q_pc(sif_q_pc), .q_hit(sif_q_hit), .training(sif_training), .inserts(stat_sif_inserts));

  // T1
  logic [31:0] t1_cleared;
  t1_prefetcher u_t1 (
    .clk, .rst_n,
    .inst_valid(mt_s_mem_valid), .inst_pc(mt_s_mem_pc), .inst_addr(mt_s_mem_addr),
    .loop_br_valid(mt_s_loop_valid), .loop_br_pc(mt_s_loop_pc), .loop_br_taken(mt_s_loop_taken),
    .avg_mem_lat(mt_avg_mem_lat),
    .pf_valid(t1_pf_valid), .pf_addr(t1_pf_addr), .pf_ready(t1_pf_ready),
    .pf_issued(stat_t1_prefetches), .steady_reached(stat_t1_steady), .loops_cleared(t1_cleared));

  // recycle controller
  recycle_ctrl u_rc (
    .clk, .rst_n, .commit_cnt(mt_commit_cnt),
    .loop_br_valid(mt_loop_br_valid), .loop_br_pc(mt_loop_br_pc),
    .skt_id, .new_loop(rc_new_loop), .loop_iter(rc_loop_iter), .searching(recycle_searching),
    .lct_hits(stat_lct_hits), .lct_inserts(stat_lct_inserts), .windows(stat_recycle_windows));
endmodule
