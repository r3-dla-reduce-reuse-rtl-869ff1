// tb_t1_prefetcher: self-checking test of the T1 strided prefetch FSM.
// A loop with two S-marked strided loads (strides +64 and -8 bytes) runs with
// an iteration time of T = 12 cycles and an average memory latency of 200
// cycles, so the prefetch distance must become ceil(200/12) = 17 strides.
// Checked: no prefetch after the first instance; exactly DEGREE = 4
// prefetches after the second; catch-up to 17 strides ahead after the third
// (one prefetch port, so both streams are caught up by iteration 6); then exactly one prefetch per iteration; every
// prefetched address is the next one of its stream (no gaps, no repeats).
// When the loop branch is not taken, all entries are cleared: nothing more is
// issued and a new instance starts over. A second loop run with a changed
// stride checks the return to the transient state.
module tb_t1_prefetcher;
  import r3dla_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic inst_valid = 0, loop_br_valid = 0, loop_br_taken = 0, pf_ready = 1, pf_valid;
  addr_t inst_pc = '0, inst_addr = '0, loop_br_pc = 64'h1240, pf_addr;
  logic [15:0] avg_mem_lat = 16'd200;
  logic [31:0] pf_issued, steady_reached, loops_cleared;

  t1_prefetcher dut (.*);

  task automatic check(input logic ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL @%0t: %s", $time, msg); end
  endtask

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  localparam int T = 12, N = 17, K = 40;
  localparam addr_t BA = 64'h10_0000, BB = 64'h20_0000;
  addr_t next_a, next_b;     // next address each stream's prefetch must have
  int cnt_a, cnt_b;
  addr_t sa;                 // stride of stream A in the current run

  // collect prefetches
  always @(posedge clk) if (rst_n && pf_valid && pf_ready) begin
    if (pf_addr >= BB - 64'h1_0000 && pf_addr < BB + 64'h1_0000) begin
      check(pf_addr == next_b, $sformatf("stream B address %h expected %h", pf_addr, next_b));
      next_b = next_b - 8; cnt_b++;
    end else begin
      check(pf_addr == next_a, $sformatf("stream A address %h expected %h", pf_addr, next_a));
      next_a = next_a + sa; cnt_a++;
    end
  end

  task automatic run_loop(input addr_t stride_a, input int iters, input bit check_counts);
    sa = stride_a;
    next_a = BA + 2 * stride_a; next_b = BB - 16; cnt_a = 0; cnt_b = 0;
    for (int i = 0; i < iters; i++) begin
      // expected count just before instance i (i >= 1)
      if (check_counts) begin
        if (i == 1) check(cnt_a == 0 && cnt_b == 0, "no prefetch after one instance");
        if (i == 2) check(cnt_a == 4 && cnt_b == 4, $sformatf("degree 4 after two instances (%0d,%0d)", cnt_a, cnt_b));
        if (i >= 6) check(cnt_a == (i - 2) + N && cnt_b == (i - 2) + N,
                          $sformatf("steady: %0d strides ahead at iteration %0d (%0d,%0d)", N, i, cnt_a, cnt_b));
      end
      inst_valid = 1; inst_pc = 64'h1200; inst_addr = BA + addr_t'(i) * stride_a;
      @(posedge clk); #1;
      inst_pc = 64'h1210; inst_addr = BB - addr_t'(i) * 8;
      @(posedge clk); #1;
      inst_valid = 0;
      repeat (T - 3) begin pf_ready = ($urandom % 8) != 0; @(posedge clk); #1; end
      pf_ready = 1;
      loop_br_valid = 1; loop_br_taken = 1;
      @(posedge clk); #1 loop_br_valid = 0;
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    run_loop(64, K, 1);
    check(steady_reached == 2, "both entries reached the steady state");
    check(cnt_a == K - 2 + N, "total prefetches of stream A");
    // loop ends
    loop_br_valid = 1; loop_br_taken = 0;
    @(posedge clk); #1 loop_br_valid = 0;
    check(loops_cleared == 1, "loop end seen");
    repeat (30) begin check(!pf_valid, "nothing after the loop ended"); @(posedge clk); #1; end
    // a new run: the table starts over from the invalid state
    run_loop(64, 3, 1);
    // change stride of stream A in the middle: back to the transient state
    loop_br_valid = 1; loop_br_taken = 0; @(posedge clk); #1 loop_br_valid = 0;
    run_loop(128, 10, 1);
    check(pf_issued > 0, "prefetches counted");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
