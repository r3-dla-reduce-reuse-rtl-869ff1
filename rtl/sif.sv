// sif: Slow Instruction Filter, the Bloom filter that decides which results
// the look-ahead thread (LT) sends to the main thread (MT) for value reuse.
//
// When a new loop starts (new_loop, from the recycle controller) the filter is
// cleared and MT trains it for the next TRAIN_ITERS iterations (loop_iter
// pulses): every instruction whose dispatch-to-execute latency is at least
// SLOW_LAT cycles has its PC inserted. LT queries the filter at commit
// (q_pc -> q_hit, combinational). When MT finds a reused value wrong, the PC is
// deleted (its hashed bits cleared), so LT stops sending it.
//
// The filter is BITS bits with two hash functions, both XOR folds of PC[63:2]
// (the second over the PC rotated by 5 bits). Updates take effect at the clock
// edge; a clear wins over an insert in the same cycle, a delete over an insert.
// Follows the paper: Bloom filter, 8 training iterations, 20-cycle threshold,
// clear on a new loop, delete on misprediction. Own choices: size and hashes.
module sif
  import r3dla_pkg::*;
#(
  parameter int BITS        = 1024,
  parameter int TRAIN_ITERS = 8,
  parameter int SLOW_LAT    = 20
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  new_loop,       // entering a new loop: clear and start training
  input  logic  loop_iter,      // one iteration of the current loop completed
  input  logic  exec_valid,     // an MT instruction began execution
  input  addr_t exec_pc,
  input  logic [15:0] exec_lat, // its dispatch-to-execute latency in cycles
  input  logic  del_valid,      // value misprediction: remove this PC
  input  addr_t del_pc,
  input  addr_t q_pc,           // LT commit lookup
  output logic  q_hit,
  output logic  training,
  output logic [31:0] inserts
);
  localparam int HW = $clog2(BITS);

  function automatic logic [HW-1:0] fold(input addr_t v);
    logic [HW-1:0] h;
    h = '0;
    for (int i = 2; i < XLEN; i += HW) h ^= HW'(v >> i);
    return h;
  endfunction
  function automatic logic [HW-1:0] h0(input addr_t pc);
    return fold(pc);
  endfunction
  function automatic logic [HW-1:0] h1(input addr_t pc);
    return fold({pc[4:0], pc[XLEN-1:5]}) ^ HW'(5'h15);
  endfunction

  logic [BITS-1:0] filt;
  logic [$clog2(TRAIN_ITERS+1)-1:0] iters;
  logic ins;

  assign q_hit    = filt[h0(q_pc)] && filt[h1(q_pc)];
  assign training = iters != '0;
  assign ins      = training && exec_valid && exec_lat >= 16'(SLOW_LAT);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      filt    <= '0;
      iters   <= '0;
      inserts <= '0;
    end else if (new_loop) begin
      filt  <= '0;
      iters <= ($clog2(TRAIN_ITERS+1))'(TRAIN_ITERS);
    end else begin
      if (loop_iter && training) iters <= iters - 1'b1;
      if (ins) begin
        filt[h0(exec_pc)] <= 1'b1;
        filt[h1(exec_pc)] <= 1'b1;
        inserts <= inserts + 1;
      end
      if (del_valid) begin
        filt[h0(del_pc)] <= 1'b0;
        filt[h1(del_pc)] <= 1'b0;
      end
    end
  end
endmodule
