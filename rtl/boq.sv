// boq: Branch Outcome Queue between the look-ahead thread (LT) and the main
// thread (MT).
//
// LT pushes the outcome of every committed conditional branch; MT's fetch pops
// the head and uses it as its direction prediction. Each entry also carries a
// footnote bit, set by LT after the push when it attaches Footnote Queue hints
// to its most recent branch. The number of occupied entries is how many basic
// blocks LT runs ahead of MT; a full queue stalls LT, an empty one stalls MT.
//
// Every entry has a sequence tag: the low SEQ_W bits of its write count. The
// storage index is the low log2(DEPTH) bits of the tag. Hints in the FQ name
// their branch by this tag.
//
// Timing: push, pop and set_fn take effect at the clock edge; head_* shows the
// oldest entry combinationally from registers. set_fn marks the entry that is
// newest before this cycle's push, and is acknowledged (set_fn_ack) only if
// that entry exists and is not popped in the same cycle.
// Follows the paper: 2-bit entries, 512 entries, FIFO order, footnote bit on
// the most recent entry. Own choices: the sequence tag, the acknowledge rule,
// synchronous flush on reboot.
module boq
  import r3dla_pkg::*;
#(
  parameter int DEPTH = 512
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       flush,        // reboot: drop every entry
  input  logic       push,         // LT commits a conditional branch
  input  logic       push_taken,   // its outcome
  output logic       full,         // LT commit must stall
  input  logic       set_fn,       // set footnote bit of the most recent entry
  output logic       set_fn_ack,   // that entry existed and was marked
  output seq_t       tail_seq,     // tag of the most recent entry
  input  logic       pop,          // MT fetch consumes the head
  output logic       empty,        // MT fetch must stall
  output boq_entry_t head,         // oldest entry
  output seq_t       head_seq,     // its tag
  output logic [$clog2(DEPTH):0] count  // look-ahead depth in basic blocks
);
  localparam int IW = $clog2(DEPTH);
  // DEPTH must be a power of two no larger than half the tag range.
  if (DEPTH != (1 << IW) || IW >= SEQ_W) begin : g_bad_depth
    $error("boq: DEPTH must be a power of two below 2**(SEQ_W-1)");
  end

  boq_entry_t mem [DEPTH];
  seq_t wr_cnt, rd_cnt;
  logic do_push, do_pop;

  assign count    = (IW+1)'(wr_cnt - rd_cnt);
  assign full     = (count == (IW+1)'(DEPTH));
  assign empty    = (count == '0);
  assign do_push  = push && !full;
  assign do_pop   = pop && !empty;
  assign head     = mem[rd_cnt[IW-1:0]];
  assign head_seq = rd_cnt;
  assign tail_seq = wr_cnt - 1'b1;
  assign set_fn_ack = set_fn && (count > (do_pop ? (IW+1)'(1) : (IW+1)'(0)));

  always_ff @(posedge clk) begin
    if (!rst_n || flush) begin
      wr_cnt <= '0;
      rd_cnt <= '0;
    end else begin
      if (do_push) wr_cnt <= wr_cnt + 1'b1;
      if (do_pop)  rd_cnt <= rd_cnt + 1'b1;
    end
  end

  // Storage has no reset: an entry is always written before it is read.
  always_ff @(posedge clk) begin
    if (set_fn_ack) mem[tail_seq[IW-1:0]].footnote <= 1'b1;
    if (do_push)    mem[wr_cnt[IW-1:0]] <= '{taken: push_taken, footnote: 1'b0};
  end

  // A pop of an empty queue or a push into a full one is a protocol error.
  a_no_pop_empty: assert property (@(posedge clk) disable iff (!rst_n || flush) pop |-> !empty);
endmodule
