// tb_recycle_ctrl: self-checking test of the recycle controller.
// Small windows (LOOP_THRESH = 4 iterations, MIN_INSTS = 200) keep the run
// short; the flow is the same as at full size. The main thread's commit rate
// depends on the skeleton in use, so each loop has a known best version.
// Checked: a new loop pulses new_loop and starts the search at skeleton 0;
// the versions are tried in order 0..5, one per window; after the last window
// the version with the highest IPC is used and written into the LCT; a
// return to a known loop hits in the LCT and uses the stored version at once,
// without a search; loop_iter pulses once per iteration.
module tb_recycle_ctrl;
  import r3dla_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [2:0] commit_cnt = '0;
  logic loop_br_valid = 0, new_loop, loop_iter, searching;
  addr_t loop_br_pc = '0;
  skt_t skt_id;
  logic [31:0] lct_hits, lct_inserts, windows;

  recycle_ctrl #(.LOOP_THRESH(4), .MIN_INSTS(200)) dut (.*);

  task automatic check(input logic ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL @%0t: %s", $time, msg); end
  endtask

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int n_new, n_iter;
  always @(posedge clk) if (rst_n) begin n_new += new_loop; n_iter += loop_iter; end

  // commit rate of each skeleton version, per loop
  int rate_a [6] = '{1, 2, 5, 3, 2, 1};   // best: 2
  int rate_b [6] = '{2, 1, 1, 3, 4, 6};   // best: 5

  // one loop iteration of 20 cycles ending with the loop branch
  task automatic iteration(input addr_t pc, input int rate [6]);
    repeat (19) begin commit_cnt = 3'(rate[skt_id]); @(posedge clk); #1; end
    commit_cnt = 3'(rate[skt_id]);
    loop_br_valid = 1; loop_br_pc = pc;
    @(posedge clk); #1 loop_br_valid = 0; commit_cnt = '0;
  endtask

  task automatic search(input addr_t pc, input int rate [6], input int best);
    int seen [$];
    int last;
    iteration(pc, rate);
    check(searching && skt_id == 0, "a new loop starts the search at skeleton 0");
    seen.push_back(0); last = 0;
    for (int it = 0; it < 400 && searching; it++) begin
      iteration(pc, rate);
      if (searching && int'(skt_id) != last) begin
        check(int'(skt_id) == last + 1, $sformatf("versions tried in order: %0d after %0d", skt_id, last));
        last = skt_id; seen.push_back(last);
      end
    end
    check(!searching, "search finished");
    check(seen.size() == 6, $sformatf("all 6 versions tried (%0d)", seen.size()));
    check(int'(skt_id) == best, $sformatf("best version %0d chosen, expected %0d", skt_id, best));
  endtask

  initial begin
    n_new = 0; n_iter = 0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    search(64'h1000, rate_a, 2);
    check(lct_inserts == 1 && windows == 6, "one LCT insert after six windows");
    repeat (5) iteration(64'h1000, rate_a);
    check(skt_id == 2 && !searching, "the chosen version stays");
    search(64'h2000, rate_b, 5);
    check(lct_inserts == 2, "second loop inserted");
    // back to loop A: LCT hit, no search
    iteration(64'h1000, rate_a);
    check(lct_hits == 1, "LCT hit on a known loop");
    check(!searching && skt_id == 2, "stored version used at once");
    iteration(64'h2000, rate_b);
    check(lct_hits == 2 && skt_id == 5 && !searching, "LCT hit on loop B");
    @(posedge clk); #1;
    check(n_new == 4, $sformatf("new_loop pulses %0d", n_new));
    check(n_iter > 50, "loop_iter pulses");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
