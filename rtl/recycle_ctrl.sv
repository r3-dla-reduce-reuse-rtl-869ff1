// recycle_ctrl: the recycle controller, which picks, per loop, the skeleton
// version the look-ahead thread should run.
//
// Execution is cut into loops, identified by the PC of their backward loop
// branch as it commits in the main thread. The Loop Register (LR) holds
// LoopBr, Loop Iter., Inst Cnt., Cycles, testSktID, maxIPC and bestSktID; the
// Loop-Config Table (LCT) holds (loop PC, sktID) pairs.
//   * A committed loop branch whose PC differs from LoopBr starts a new loop:
//     LoopBr is replaced, the counters reset, new_loop pulses (the Slow
//     Instruction Filter restarts its training) and the LCT is searched. On a
//     hit the stored skeleton is used at once. On a miss a runtime search
//     starts with skeleton 0.
//   * During a search, each loop branch with the same PC counts one iteration;
//     Inst Cnt. and Cycles count committed instructions and clock cycles. When
//     Loop Iter. exceeds LOOP_THRESH and at least MIN_INSTS instructions were
//     committed, the window's IPC (Inst Cnt. * 256 / Cycles) is compared with
//     maxIPC, the counters reset and the next skeleton is tried. After the last
//     of NUM_SKT versions the best one is written into the LCT (round-robin
//     replacement) and used from then on.
// skt_id is registered and changes the cycle after the deciding loop branch.
// Follows the paper: LR fields, LCT with 16 entries of (loop PC, sktID), the
// search flow of its flow chart, six versions, windows of at least 10,000
// instructions. Own choices: LOOP_THRESH, fixed-point IPC, replacement.
module recycle_ctrl
  import r3dla_pkg::*;
#(
  parameter int LCT_ENTRIES = 16,
  parameter int NUM_VER     = NUM_SKT,
  parameter int LOOP_THRESH = 8,
  parameter int MIN_INSTS   = 10000
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic [2:0] commit_cnt,     // instructions MT committed this cycle
  input  logic       loop_br_valid,  // MT committed a loop branch
  input  addr_t      loop_br_pc,
  output skt_t       skt_id,         // skeleton version for the look-ahead thread
  output logic       new_loop,       // pulse: a different loop started
  output logic       loop_iter,      // pulse: an iteration of the current loop ended
  output logic       searching,
  output logic [31:0] lct_hits,
  output logic [31:0] lct_inserts,
  output logic [31:0] windows
);
  localparam int LW = $clog2(LCT_ENTRIES);

  // Loop Register
  addr_t       lr_loop_br;
  logic [15:0] lr_iter;
  logic [31:0] lr_inst, lr_cycles, lr_max_ipc;
  skt_t        lr_test, lr_best;

  // Loop-Config Table
  logic [LCT_ENTRIES-1:0] lct_v;
  addr_t lct_pc  [LCT_ENTRIES];
  skt_t  lct_skt [LCT_ENTRIES];
  logic [LW-1:0] rr;

  logic lct_hit;
  skt_t lct_hit_skt;
  always_comb begin
    lct_hit = 1'b0;
    lct_hit_skt = '0;
    for (int i = 0; i < LCT_ENTRIES; i++)
      if (lct_v[i] && lct_pc[i] == loop_br_pc) begin
        lct_hit = 1'b1;
        lct_hit_skt = lct_skt[i];
      end
  end

  logic same, win_end, better;
  logic [39:0] ipc_q;
  skt_t best_now;
  assign same    = loop_br_pc == lr_loop_br;
  assign win_end = searching && loop_br_valid && same
                   && (lr_iter + 16'd1) > 16'(LOOP_THRESH) && lr_inst >= 32'(MIN_INSTS);
  assign ipc_q   = (lr_cycles == '0) ? '0 : ({lr_inst, 8'h00} / 40'(lr_cycles));
  assign better  = ipc_q[31:0] > lr_max_ipc;
  assign best_now = better ? lr_test : lr_best;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      lr_loop_br <= '0; lr_iter <= '0; lr_inst <= '0; lr_cycles <= '0;
      lr_max_ipc <= '0; lr_test <= '0; lr_best <= '0;
      lct_v <= '0; rr <= '0;
      skt_id <= '0; searching <= 1'b0; new_loop <= 1'b0; loop_iter <= 1'b0;
      lct_hits <= '0; lct_inserts <= '0; windows <= '0;
      for (int i = 0; i < LCT_ENTRIES; i++) begin
        lct_pc[i]  <= '0;
        lct_skt[i] <= '0;
      end
    end else begin
      new_loop  <= 1'b0;
      loop_iter <= 1'b0;
      lr_inst   <= lr_inst + 32'(commit_cnt);
      lr_cycles <= lr_cycles + 1;
      if (loop_br_valid && !same) begin
        lr_loop_br <= loop_br_pc;
        lr_iter    <= '0;
        lr_inst    <= '0;
        lr_cycles  <= '0;
        new_loop   <= 1'b1;
        if (lct_hit) begin
          skt_id    <= lct_hit_skt;
          searching <= 1'b0;
          lct_hits  <= lct_hits + 1;
        end else begin
          skt_id     <= '0;
          searching  <= 1'b1;
          lr_test    <= '0;
          lr_best    <= '0;
          lr_max_ipc <= '0;
        end
      end else if (loop_br_valid && same) begin
        loop_iter <= 1'b1;
        if (searching) lr_iter <= lr_iter + 1'b1;
        if (win_end) begin
          windows   <= windows + 1;
          lr_iter   <= '0;
          lr_inst   <= '0;
          lr_cycles <= '0;
          if (better) lr_max_ipc <= ipc_q[31:0];
          lr_best <= best_now;
          if (lr_test == SKT_W'(NUM_VER - 1)) begin
            lct_v[rr]   <= 1'b1;
            lct_pc[rr]  <= lr_loop_br;
            lct_skt[rr] <= best_now;
            rr          <= rr + 1'b1;
            skt_id      <= best_now;
            searching   <= 1'b0;
            lct_inserts <= lct_inserts + 1;
          end else begin
            lr_test <= lr_test + 1'b1;
            skt_id  <= lr_test + 1'b1;
          end
        end
      end
    end
  end
endmodule
