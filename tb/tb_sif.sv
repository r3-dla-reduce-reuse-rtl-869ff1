// tb_sif: self-checking test of the slow-instruction bloom filter.
// Checked against a set model: during the 8 training iterations of a loop,
// every instruction whose dispatch-to-execute latency is >= 20 cycles is
// inserted and hits afterwards (a bloom filter has no false negatives);
// instructions faster than 20 cycles are not inserted (the PCs are few and
// spread, so a false positive would show as a failure); after training ends
// nothing more is inserted; a deleted PC no longer hits; a new loop clears
// the filter and restarts training.
module tb_sif;
  import r3dla_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic new_loop = 0, loop_iter = 0, exec_valid = 0, del_valid = 0, q_hit, training;
  addr_t exec_pc = '0, del_pc = '0, q_pc = '0;
  logic [15:0] exec_lat = '0;
  logic [31:0] inserts;

  sif dut (.*);

  task automatic check(input logic ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL @%0t: %s", $time, msg); end
  endtask

  initial begin : watchdog
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  addr_t pcs [24];
  bit    slow [24];
  bit    in_model [24];

  task automatic exec(input int k, input logic [15:0] lat);
    exec_valid = 1; exec_pc = pcs[k]; exec_lat = lat;
    @(posedge clk); #1 exec_valid = 0;
  endtask

  task automatic query_all(input string when);
    for (int k = 0; k < 24; k++) begin
      q_pc = pcs[k]; #1;
      check(q_hit == in_model[k], $sformatf("%s: pc %h hit=%0b model=%0b", when, pcs[k], q_hit, in_model[k]));
    end
  endtask

  initial begin
    for (int k = 0; k < 24; k++) begin
      pcs[k] = 64'h40_0000 + 64'(k) * 64'h34 + 64'(($urandom % 4) * 4) * 64'h100;
      slow[k] = k % 3 == 0;
    end
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    for (int round = 0; round < 3; round++) begin
      new_loop = 1; @(posedge clk); #1 new_loop = 0;
      for (int k = 0; k < 24; k++) in_model[k] = 0;
      check(training, "training after a new loop");
      query_all("after clear");
      for (int it = 0; it < 12; it++) begin
        for (int k = 0; k < 24; k++) begin
          logic [15:0] lat;
          lat = slow[k] ? 16'(20 + $urandom % 200) : 16'($urandom % 20);
          if (($urandom % 4) == 0) continue;   // not every instruction runs every iteration
          exec(k, lat);
          if (it < 8 && slow[k]) in_model[k] = 1;
        end
        check(training == (it < 8), $sformatf("training flag in iteration %0d", it));
        loop_iter = 1; @(posedge clk); #1 loop_iter = 0;
        query_all($sformatf("round %0d iteration %0d", round, it));
      end
      check(!training, "training over after 8 iterations");
      // mispredictions delete PCs
      for (int k = 0; k < 24; k += 6) if (in_model[k]) begin
        del_valid = 1; del_pc = pcs[k]; @(posedge clk); #1 del_valid = 0;
        in_model[k] = 0;
        q_pc = pcs[k]; #1 check(!q_hit, "deleted PC no longer hits");
      end
    end
    check(inserts > 0, "inserts counted");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
