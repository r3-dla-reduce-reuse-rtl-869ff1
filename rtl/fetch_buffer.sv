// fetch_buffer: the enlarged buffer between the main thread's (MT) fetch and
// decode stages.
//
// Because MT's branch directions come from the look-ahead thread and are
// almost always right, fetch can run far ahead of decode: whenever decode
// stalls, fetch keeps filling this buffer, and the buffered instructions hide
// later I-cache misses. The buffer is a circular FIFO of DEPTH entries with a
// W_IN-wide write port and a W_OUT-wide read port.
//
// Write: push_cnt entries from push_data[0..push_cnt-1], accepted as a whole
// when they fit (push_ready), else fetch holds the group. Read: out_data[k] is
// the k-th oldest entry, valid for k < count; decode removes pop_cnt of them
// (no more than are present). Both take effect at the clock edge; flush
// empties the buffer (MT redirect).
// Follows the paper: 32 entries of 64 bits, decoupling of fetch from decode.
// Own choices: widths of the ports and whole-group acceptance.
module fetch_buffer #(
  parameter int DEPTH   = 32,
  parameter int W_IN    = 4,
  parameter int W_OUT   = 4,
  parameter int ENTRY_W = 64
) (
  input  logic clk,
  input  logic rst_n,
  input  logic flush,
  input  logic [$clog2(W_IN):0]  push_cnt,
  input  logic [ENTRY_W-1:0]     push_data [W_IN],
  output logic                   push_ready,
  output logic [ENTRY_W-1:0]     out_data [W_OUT],
  output logic [$clog2(DEPTH):0] count,
  input  logic [$clog2(W_OUT):0] pop_cnt,
  output logic [31:0]            full_cycles
);
  localparam int IW = $clog2(DEPTH);
  logic [ENTRY_W-1:0] mem [DEPTH];
  logic [IW:0] wr_ptr, rd_ptr;
  logic do_push;
  logic [IW:0] npop;

  assign count      = wr_ptr - rd_ptr;
  assign push_ready = (count + (IW+1)'(push_cnt)) <= (IW+1)'(DEPTH);
  assign do_push    = push_ready && push_cnt != '0;
  assign npop       = ((IW+1)'(pop_cnt) > count) ? count : (IW+1)'(pop_cnt);

  always_comb begin
    for (int k = 0; k < W_OUT; k++) begin
      logic [IW:0] p;
      p = rd_ptr + (IW+1)'(k);
      out_data[k] = mem[p[IW-1:0]];
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n || flush) begin
      wr_ptr <= '0;
      rd_ptr <= '0;
    end else begin
      if (do_push) wr_ptr <= wr_ptr + (IW+1)'(push_cnt);
      rd_ptr <= rd_ptr + npop;
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) full_cycles <= '0;
    else if (count == (IW+1)'(DEPTH)) full_cycles <= full_cycles + 1;
  end

  always_ff @(posedge clk) begin
    if (do_push) begin
      for (int k = 0; k < W_IN; k++) begin
        logic [IW:0] p;
        p = wr_ptr + (IW+1)'(k);
        if (k < int'(push_cnt)) mem[p[IW-1:0]] <= push_data[k];
      end
    end
  end

  a_pop_le_count: assert property (@(posedge clk) disable iff (!rst_n || flush)
                                   (IW+1)'(pop_cnt) <= count);
endmodule
