// tb_reboot_ctrl: self-checking test of the reboot sequence. The testbench
// connects the controller to a real FQ, models MT's register file (value =
// f(index)) and LT's register file, and checks for each injected wrong BOQ
// prediction: one flush pulse, hold for the whole sequence, every one of the
// 64 registers copied to LT with the right value, the restart PC, the number
// of reboots, and the reboot time of at least REBOOT_CYCLES = 64 cycles.
// Correct predictions and mismatches during a reboot must start nothing.
module tb_reboot_ctrl;
  import r3dla_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic br_resolve_valid = 0, br_pred_taken = 0, br_taken = 0;
  addr_t mt_restart_pc = '0;
  logic flush, hold, busy, fq_push, fq_full, fq_empty, fq_pop, lt_reg_we, lt_restart;
  logic [5:0] mt_reg_idx, lt_reg_idx;
  addr_t mt_reg_data, lt_reg_data, lt_restart_pc;
  fq_entry_t fq_push_data, fq_head;
  logic [31:0] reboots;
  logic fq_drop;
  logic [7:0] fq_count;

  assign mt_reg_data = {32'hA5A5_0000, 26'h0, mt_reg_idx};
  reboot_ctrl dut (.*);
  fq u_fq (.clk, .rst_n, .flush, .push(fq_push), .push_data(fq_push_data), .full(fq_full),
           .push_drop(fq_drop), .pop(fq_pop), .empty(fq_empty), .head(fq_head), .count(fq_count));

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

  addr_t lt_rf [64];
  always @(posedge clk) if (lt_reg_we) lt_rf[lt_reg_idx] <= lt_reg_data;

  initial begin
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    // correct predictions: nothing happens
    for (int i = 0; i < 20; i++) begin
      br_resolve_valid = 1; br_pred_taken = $urandom; br_taken = br_pred_taken;
      @(posedge clk); #1;
      check(!busy && !flush, "no reboot on a correct prediction");
    end
    for (int r = 0; r < 4; r++) begin
      int t, nflush;
      addr_t pc;
      for (int k = 0; k < 64; k++) lt_rf[k] = '0;
      pc = {$urandom, $urandom} & ~64'h3;
      br_resolve_valid = 1; br_pred_taken = 1; br_taken = 0; mt_restart_pc = pc;
      @(posedge clk); #1;
      br_resolve_valid = 0; mt_restart_pc = '0;
      t = 1; nflush = 0;
      while (!lt_restart && t < 500) begin
        check(hold, "hold during reboot");
        if (flush) nflush++;
        // a second mismatch during the reboot is ignored
        br_resolve_valid = (t == 10); br_pred_taken = 0; br_taken = 1;
        @(posedge clk); #1; t++;
        br_resolve_valid = 0;
      end
      check(nflush == 1, "one flush pulse");
      check(lt_restart && lt_restart_pc == pc, "restart PC");
      check(t >= 64, $sformatf("reboot took %0d cycles, at least 64", t));
      check(t <= 80, $sformatf("reboot took %0d cycles, not much over copy time", t));
      @(posedge clk); #1;
      check(!busy && !hold, "idle after restart");
      for (int k = 0; k < 64; k++)
        check(lt_rf[k] == {32'hA5A5_0000, 26'h0, 6'(k)}, $sformatf("LT reg %0d copied", k));
      check(reboots == 32'(r + 1), "reboot count");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
