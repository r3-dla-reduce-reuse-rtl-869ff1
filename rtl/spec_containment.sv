// spec_containment: keeps the look-ahead thread's speculative stores from
// leaving its private caches.
//
// The look-ahead thread runs a reduced program that may compute wrong values,
// so its core must never update memory that other cores see. In look-ahead
// mode (la_mode = 1) the private L1 and L2 caches only take data in:
//   * a dirty line that is evicted is dropped instead of written back;
//   * a coherence request that hits a dirty line gets no data, so it is served
//     from the shared levels as if the line were clean.
// In normal mode both paths pass unchanged. The block sits on the cache's
// eviction and snoop-response paths; it is combinational, apart from the
// count of discarded lines.
// Follows the paper: no data supplied, no writeback, dirty lines discarded.
// Own choice: the snoop is answered "no data" rather than stalled.
module spec_containment
  import r3dla_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  la_mode,          // this core runs the look-ahead thread
  // eviction path of the private cache
  input  logic  evict_valid,
  input  logic  evict_dirty,
  input  addr_t evict_addr,
  output logic  wb_valid,         // write the line back to the next level
  output addr_t wb_addr,
  // coherence snoop path
  input  logic  snoop_hit,        // snoop found the line here
  input  logic  snoop_dirty,      // ... and it is dirty
  output logic  snoop_supply,     // this cache supplies the data
  output logic  snoop_inval_only, // answer without data
  output logic [31:0] discarded
);
  assign wb_valid         = evict_valid && evict_dirty && !la_mode;
  assign wb_addr          = evict_addr;
  assign snoop_supply     = snoop_hit && snoop_dirty && !la_mode;
  assign snoop_inval_only = snoop_hit && !snoop_supply;

  always_ff @(posedge clk) begin
    if (!rst_n) discarded <= '0;
    else if (la_mode && evict_valid && evict_dirty) discarded <= discarded + 1;
  end
endmodule
