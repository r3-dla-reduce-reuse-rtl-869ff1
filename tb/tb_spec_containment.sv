// tb_spec_containment: self-checking test of the speculation containment rule.
// All input combinations are tried in both modes: in look-ahead mode a
// dirty eviction is discarded (no write-back, counted) and a snoop that
// hits a dirty line is answered without data; in normal mode dirty lines
// are written back and supplied as usual.
module tb_spec_containment;
  import r3dla_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic la_mode = 0, evict_valid = 0, evict_dirty = 0, wb_valid;
  logic snoop_hit = 0, snoop_dirty = 0, snoop_supply, snoop_inval_only;
  addr_t evict_addr = '0, wb_addr;
  logic [31:0] discarded;

  spec_containment dut (.*);

  task automatic check(input logic ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL @%0t: %s", $time, msg); end
  endtask

  initial begin : watchdog
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int exp_disc;
  initial begin
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    exp_disc = 0;
    for (int c = 0; c < 2000; c++) begin
      {la_mode, evict_valid, evict_dirty, snoop_hit, snoop_dirty} = 5'($urandom);
      evict_addr = {$urandom, $urandom};
      #1;
      check(wb_valid == (evict_valid && evict_dirty && !la_mode), "write-back only outside look-ahead mode");
      check(!wb_valid || wb_addr == evict_addr, "write-back address");
      check(snoop_supply == (snoop_hit && snoop_dirty && !la_mode), "supply dirty data only outside look-ahead mode");
      check(snoop_inval_only == (snoop_hit && !(snoop_dirty && !la_mode)), "data-less snoop answer");
      if (la_mode && evict_valid && evict_dirty) exp_disc++;
      @(posedge clk); #1;
      check(discarded == 32'(exp_disc), "discard counter");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
