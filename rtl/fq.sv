// fq: Footnote Queue, the wide side channel from the look-ahead thread (LT)
// to the main thread (MT).
//
// A synchronous FIFO of fq_entry_t. In normal operation LT pushes prefetch
// addresses, TLB hints, indirect branch targets and reused values, each tagged
// with the BOQ entry it belongs to; MT pops them when it dequeues that BOQ
// entry. During a reboot the same storage carries MT's architectural
// registers to LT (the reboot controller drives both ends then).
//
// Timing: push and pop take effect at the clock edge; head is the oldest entry,
// read combinationally from the array. A push into a full queue is dropped
// (hints are only hints) and reported on push_drop.
// Follows the paper: 128 entries with a 64-bit payload. Own choices: the
// side-band kind/tag/offset fields and dropping on overflow.
module fq
  import r3dla_pkg::*;
#(
  parameter int DEPTH = 128
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      flush,       // reboot: drop every entry
  input  logic      push,        // write an entry
  input  fq_entry_t push_data,
  output logic      full,
  output logic      push_drop,   // push refused because the queue was full
  input  logic      pop,         // consume the head
  output logic      empty,
  output fq_entry_t head,
  output logic [$clog2(DEPTH):0] count
);
  localparam int IW = $clog2(DEPTH);
  if (DEPTH != (1 << IW)) begin : g_bad_depth
    $error("fq: DEPTH must be a power of two");
  end

  fq_entry_t mem [DEPTH];
  logic [IW:0] wr_ptr, rd_ptr;
  logic do_push, do_pop;

  assign count     = wr_ptr - rd_ptr;
  assign full      = (count == (IW+1)'(DEPTH));
  assign empty     = (count == '0);
  assign do_push   = push && !full;
  assign do_pop    = pop && !empty;
  assign push_drop = push && full;
  assign head      = mem[rd_ptr[IW-1:0]];

  always_ff @(posedge clk) begin
    if (!rst_n || flush) begin
      wr_ptr <= '0;
      rd_ptr <= '0;
    end else begin
      if (do_push) wr_ptr <= wr_ptr + 1'b1;
      if (do_pop)  rd_ptr <= rd_ptr + 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (do_push) mem[wr_ptr[IW-1:0]] <= push_data;
  end

  a_no_pop_empty: assert property (@(posedge clk) disable iff (!rst_n || flush) pop |-> !empty);
endmodule
