// mask_fetch_ctrl: fetches skeleton mask bits next to instructions and keeps
// them beside the I-cache.
//
// The binary keeps the mask bits apart from the code, so an I-cache miss
// needs two L2 reads: the instruction line at A_i and its mask bits at
// A_m = f(A_i). Here f(A_i) = MASK_BASE + line_number(A_i) * INSTS_PER_LINE
// bytes (one byte of side bits per instruction). On a miss (miss_valid) the
// controller issues the code read, then the mask read, on the single L2
// request port, and clears the line's mask-valid bit; until the mask data
// returns, readers see mask_valid = 0 and treat the mask as all ones. A mask
// response writes the line's side bits and sets its valid bit.
// The read port (rd_line -> rd_mask, rd_valid) is combinational.
//
// Requests carry the I-cache line index (req_line) and the L2 returns it on
// the response. A miss is accepted (miss_ready) only when no mask read is
// still waiting for the request port.
// Follows the paper: two L2 reads per miss, asynchronous mask arrival,
// all-ones default. Own choices: f(A_i), the storage layout, one pending miss.
module mask_fetch_ctrl
  import r3dla_pkg::*;
#(
  parameter int    LINES          = 512,
  parameter int    INSTS_PER_LINE = 16,
  parameter addr_t MASK_BASE      = 64'h0000_4000_0000_0000
) (
  input  logic   clk,
  input  logic   rst_n,
  // I-cache miss
  input  logic   miss_valid,
  output logic   miss_ready,
  input  addr_t  miss_addr,          // A_i
  input  logic [$clog2(LINES)-1:0] miss_line,   // line the refill goes to
  // L2 request port
  output logic   req_valid,
  input  logic   req_ready,
  output addr_t  req_addr,
  output logic   req_is_mask,        // 1: mask read at A_m, 0: code read at A_i
  output logic [$clog2(LINES)-1:0] req_line,
  // mask response from L2
  input  logic   mresp_valid,
  input  logic [$clog2(LINES)-1:0] mresp_line,
  input  logic [INSTS_PER_LINE*MASKB_W-1:0] mresp_data,
  // read port for the mask decoder
  input  logic [$clog2(LINES)-1:0] rd_line,
  output logic   rd_valid,
  output logic [INSTS_PER_LINE*MASKB_W-1:0] rd_mask
);
  localparam int LW   = $clog2(LINES);
  localparam int LINE_BYTES = INSTS_PER_LINE * 4;
  localparam int LSH  = $clog2(LINE_BYTES);
  localparam int MSH  = $clog2(INSTS_PER_LINE * MASKB_W / 8);

  logic [INSTS_PER_LINE*MASKB_W-1:0] masks [LINES];
  logic [LINES-1:0] mvalid;

  logic  pend;          // mask read still to be issued
  addr_t pend_addr;
  logic [LW-1:0] pend_line;

  function automatic addr_t mask_addr(input addr_t a);
    return MASK_BASE + ((a >> LSH) << MSH);
  endfunction

  assign miss_ready  = !pend;
  assign req_valid   = pend || miss_valid;
  assign req_is_mask = pend;
  assign req_addr    = pend ? pend_addr : {miss_addr[XLEN-1:LSH], {LSH{1'b0}}};
  assign req_line    = pend ? pend_line : miss_line;

  assign rd_valid = mvalid[rd_line];
  assign rd_mask  = masks[rd_line];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      pend      <= 1'b0;
      pend_addr <= '0;
      pend_line <= '0;
      mvalid    <= '0;
    end else begin
      if (pend) begin
        if (req_ready) pend <= 1'b0;
      end else if (miss_valid && req_ready) begin
        pend      <= 1'b1;
        pend_addr <= mask_addr(miss_addr);
        pend_line <= miss_line;
      end
      if (mresp_valid) mvalid[mresp_line] <= 1'b1;
      // A new miss on a line invalidates its old masks (takes priority).
      if (!pend && miss_valid && req_ready) mvalid[miss_line] <= 1'b0;
    end
  end

  always_ff @(posedge clk) begin
    if (mresp_valid) masks[mresp_line] <= mresp_data;
  end
endmodule
