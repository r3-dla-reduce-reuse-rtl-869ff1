// vpt: Value Prediction Table of the main thread (MT): the reused values
// delivered by the look-ahead thread, waiting for their instructions.
//
// Values arrive in program order through the footnote queue, each tagged with
// the BOQ sequence number of its preceding conditional branch and its
// instruction offset from that branch. The table is a FIFO of DEPTH entries.
// At decode, up to DW instructions per cycle present their own (seq, offset)
// in program order; slot i gets a prediction if it matches the entry after
// those matched by slots before it, and matched entries leave the table. A
// head entry whose branch is older than slot 0's branch can no longer match
// and is dropped (one per cycle). flush empties the table (reboot or MT
// pipeline flush).
//
// Timing: lookup is combinational; push, pop and drop happen at the clock
// edge. push_ready is low when the table is full.
// Follows the paper: 32 entries of 64-bit values read in FIFO order. Own
// choices: the tag, in-order matching of a decode group, stale drop.
module vpt
  import r3dla_pkg::*;
#(
  parameter int DEPTH = 32,
  parameter int DW    = 4
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  flush,
  input  logic  push_valid,
  output logic  push_ready,
  input  seq_t  push_seq,
  input  off_t  push_off,
  input  addr_t push_value,
  input  logic [DW-1:0] lk_valid,   // decode slots, program order
  input  seq_t  lk_seq [DW],
  input  off_t  lk_off [DW],
  output logic [DW-1:0] lk_hit,
  output addr_t lk_value [DW],
  output logic [31:0] hits,
  output logic [31:0] stale_drops
);
  localparam int IW = $clog2(DEPTH);
  typedef struct packed { seq_t seq; off_t off; addr_t value; } vpt_entry_t;

  vpt_entry_t mem [DEPTH];
  logic [IW:0] wr_ptr, rd_ptr, cnt;
  logic [$clog2(DW+1)-1:0] nhit;
  logic drop;

  assign cnt        = wr_ptr - rd_ptr;
  assign push_ready = cnt != (IW+1)'(DEPTH);

  always_comb begin
    logic [IW:0] p;
    p = rd_ptr;
    nhit = '0;
    for (int i = 0; i < DW; i++) begin
      lk_hit[i]   = 1'b0;
      lk_value[i] = mem[p[IW-1:0]].value;
      if (lk_valid[i] && (p != wr_ptr) && mem[p[IW-1:0]].seq == lk_seq[i]
          && mem[p[IW-1:0]].off == lk_off[i]) begin
        lk_hit[i] = 1'b1;
        p = p + 1'b1;
        nhit = nhit + 1'b1;
      end
    end
    drop = (nhit == '0) && lk_valid[0] && (cnt != '0)
           && seq_older(mem[rd_ptr[IW-1:0]].seq, lk_seq[0]);
  end

  always_ff @(posedge clk) begin
    if (!rst_n || flush) begin
      wr_ptr <= '0;
      rd_ptr <= '0;
    end else begin
      if (push_valid && push_ready) wr_ptr <= wr_ptr + 1'b1;
      rd_ptr <= rd_ptr + (IW+1)'(nhit) + (IW+1)'(drop);
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      hits        <= '0;
      stale_drops <= '0;
    end else begin
      hits        <= hits + 32'(nhit);
      stale_drops <= stale_drops + 32'(drop);
    end
  end

  always_ff @(posedge clk) begin
    if (push_valid && push_ready)
      mem[wr_ptr[IW-1:0]] <= '{seq: push_seq, off: push_off, value: push_value};
  end
endmodule
