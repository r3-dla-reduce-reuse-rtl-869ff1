// t1_prefetcher: T1, a small state machine in the main thread's (MT) core
// that prefetches for strided loads inside loops, so that the look-ahead
// thread does not have to execute their address arithmetic.
//
// The offline tools mark each such load and its loop branch with an S bit; T1
// does no stride detection of its own beyond the marked instructions. For
// every executed S-marked memory instruction (inst_valid, its PC and effective
// address) T1 finds or allocates an entry with the fields of the paper's
// prefetch register: state, loop PC, instruction PC, effective address,
// stride, current time and prefetch distance. The entry moves through
//   INVALID -> FIRST   first address recorded;
//   FIRST   -> STRIDE  second instance: stride = A2 - A1; start prefetching
//                      DEGREE strides ahead;
//   STRIDE  -> STEADY  third instance with the same stride: the iteration time
//                      t = now - cur_time gives the distance
//                      n = ceil(avg_mem_lat / t) (limited to MAX_DIST), and T1
//                      catches up to n strides ahead;
//   STEADY:            each instance moves the window by one stride, so one
//                      prefetch per iteration keeps it n strides ahead.
// A stride that changes sends the entry back to STRIDE (guards against
// addresses seen out of order). When the S-marked loop branch resolves
// not-taken the loop has ended and every entry is cleared.
//
// Each entry also keeps its last prefetched address and how many strides that
// is ahead of the current address; the difference to the target (DEGREE or n)
// is the number of prefetches it still owes. One prefetch leaves per cycle on
// pf_* (valid/ready), lowest entry first. Table updates take one cycle.
// Follows the paper: fields, fixed initial degree, distance = latency /
// iteration time, catch-up, one per iteration, clearing at loop end, 16
// entries. Own choices: the state names, DEGREE, MAX_DIST, the catch-up
// bookkeeping fields and replacement (round robin).
module t1_prefetcher
  import r3dla_pkg::*;
#(
  parameter int ENTRIES  = 16,
  parameter int DEGREE   = 4,
  parameter int MAX_DIST = 64
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   inst_valid,      // an S-marked load/store executed in MT
  input  addr_t  inst_pc,
  input  addr_t  inst_addr,       // its effective address
  input  logic   loop_br_valid,   // an S-marked loop branch resolved
  input  addr_t  loop_br_pc,
  input  logic   loop_br_taken,   // not taken: the loop has ended
  input  logic [15:0] avg_mem_lat,// average memory access latency, cycles
  output logic   pf_valid,
  output addr_t  pf_addr,
  input  logic   pf_ready,
  output logic [31:0] pf_issued,
  output logic [31:0] steady_reached,
  output logic [31:0] loops_cleared
);
  typedef enum logic [1:0] {T_INVALID, T_FIRST, T_STRIDE, T_STEADY} t1_state_e;
  localparam int DW = $clog2(MAX_DIST + 1);
  localparam int EW = $clog2(ENTRIES);

  typedef struct packed {
    t1_state_e   state;
    addr_t       loop_pc;
    addr_t       inst_pc;
    addr_t       eff_addr;
    addr_t       stride;      // two's complement
    logic [15:0] cur_time;
    logic [DW-1:0] pf_dist;
    addr_t       pf_last;     // last prefetched address
    logic [DW-1:0] pf_ahead;  // pf_last = eff_addr + pf_ahead * stride
  } t1_entry_t;

  t1_entry_t tab [ENTRIES];
  addr_t cur_loop;
  logic [15:0] now;
  logic [EW-1:0] victim;

  // lookup
  logic hit, has_free;
  logic [EW-1:0] hit_idx, free_idx;
  always_comb begin
    hit = 1'b0; hit_idx = '0; has_free = 1'b0; free_idx = '0;
    for (int i = ENTRIES - 1; i >= 0; i--) begin
      if (tab[i].state != T_INVALID && tab[i].inst_pc == inst_pc) begin
        hit = 1'b1; hit_idx = EW'(i);
      end
      if (tab[i].state == T_INVALID) begin
        has_free = 1'b1; free_idx = EW'(i);
      end
    end
  end

  // entry update on an instance
  t1_entry_t e, e_new;
  addr_t delta;
  logic [15:0] interval;
  logic [16:0] pdist_raw;
  logic [DW-1:0] pdist;
  always_comb begin
    e        = tab[hit_idx];
    e_new    = e;
    delta    = inst_addr - e.eff_addr;
    interval = now - e.cur_time;
    pdist_raw = (interval == '0) ? 17'(MAX_DIST)
             : 17'((32'(avg_mem_lat) + 32'(interval) - 1) / 32'(interval));
    if (pdist_raw > 17'(MAX_DIST)) pdist = DW'(MAX_DIST);
    else if (pdist_raw == '0)      pdist = DW'(1);
    else                          pdist = DW'(pdist_raw);
    if (delta != '0) begin
      e_new.eff_addr = inst_addr;
      e_new.cur_time = now;
      if (e.state == T_FIRST || delta != e.stride) begin
        // new or changed stride: restart the window at this address
        e_new.state    = T_STRIDE;
        e_new.stride   = delta;
        e_new.pf_last  = inst_addr;
        e_new.pf_ahead = '0;
      end else begin
        if (e.state == T_STRIDE) begin
          e_new.state   = T_STEADY;
          e_new.pf_dist = pdist;
        end
        if (e.pf_ahead != '0) e_new.pf_ahead = e.pf_ahead - 1'b1;
        else                  e_new.pf_last  = inst_addr;
      end
    end
  end

  // prefetch selection
  logic [ENTRIES-1:0] owes;
  logic [EW-1:0] sel;
  always_comb begin
    for (int i = 0; i < ENTRIES; i++) begin
      logic [DW-1:0] target;
      target  = (tab[i].state == T_STEADY) ? tab[i].pf_dist : DW'(DEGREE);
      owes[i] = (tab[i].state == T_STRIDE || tab[i].state == T_STEADY)
                && tab[i].pf_ahead < target
                && !(inst_valid && hit && hit_idx == EW'(i));
    end
    sel = '0;
    for (int i = ENTRIES - 1; i >= 0; i--) if (owes[i]) sel = EW'(i);
  end
  assign pf_valid = |owes && !(loop_br_valid && !loop_br_taken);
  assign pf_addr  = tab[sel].pf_last + tab[sel].stride;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int i = 0; i < ENTRIES; i++) tab[i] <= '0;
      cur_loop       <= '0;
      now            <= '0;
      victim         <= '0;
      pf_issued      <= '0;
      steady_reached <= '0;
      loops_cleared  <= '0;
    end else begin
      now <= now + 1'b1;
      if (loop_br_valid && !loop_br_taken) begin
        for (int i = 0; i < ENTRIES; i++) tab[i].state <= T_INVALID;
        loops_cleared <= loops_cleared + 1;
      end else begin
        if (loop_br_valid && loop_br_taken) cur_loop <= loop_br_pc;
        if (pf_valid && pf_ready) begin
          tab[sel].pf_last  <= pf_addr;
          tab[sel].pf_ahead <= tab[sel].pf_ahead + 1'b1;
          pf_issued <= pf_issued + 1;
        end
        if (inst_valid) begin
          if (hit) begin
            tab[hit_idx] <= e_new;
            if (e.state == T_STRIDE && e_new.state == T_STEADY) steady_reached <= steady_reached + 1;
          end else begin
            logic [EW-1:0] a;
            a = has_free ? free_idx : victim;
            if (!has_free) victim <= victim + 1'b1;
            tab[a]          <= '0;
            tab[a].state    <= T_FIRST;
            tab[a].loop_pc  <= cur_loop;
            tab[a].inst_pc  <= inst_pc;
            tab[a].eff_addr <= inst_addr;
            tab[a].cur_time <= now;
          end
        end
      end
    end
  end
endmodule
