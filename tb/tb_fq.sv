// tb_fq: self-checking test of the Footnote Queue at its full 128-entry depth.
// A queue model predicts the head entry (all fields), the count, full/empty
// and the drop signal for pushes into a full queue; flush is also covered.
module tb_fq;
  import r3dla_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic flush = 0, push = 0, pop = 0;
  fq_entry_t push_data, head;
  logic full, push_drop, empty;
  logic [7:0] count;
  fq dut (.*);

  fq_entry_t q[$];

  task automatic check(input logic ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic fq_entry_t rnd();
    fq_entry_t e;
    e.kind = fn_kind_e'($urandom % 6);
    e.seq  = seq_t'($urandom);
    e.off  = off_t'($urandom);
    e.data = {$urandom, $urandom};
    return e;
  endfunction

  task automatic cyc(input logic pu, input logic po);
    po = po && q.size() > 0;
    push = pu; pop = po; push_data = rnd();
    #1;
    check(count == 8'(q.size()), "count");
    check(empty == (q.size() == 0) && full == (q.size() == 128), "flags");
    check(push_drop == (pu && q.size() == 128), "drop");
    if (q.size() > 0) check(head == q[0], "head");
    @(posedge clk);
    if (po && q.size() > 0) void'(q.pop_front());
    if (pu && !full) q.push_back(push_data);
    #1;
  endtask

  initial begin
    repeat (3) @(posedge clk);
    #1 rst_n = 1; #1;
    for (int i = 0; i < 2000; i++) cyc(($urandom % 100) < 55, ($urandom % 100) < 45);
    while (q.size() < 128) cyc(1, 0);
    cyc(1, 0);
    check(q.size() == 128, "full holds");
    flush = 1; @(posedge clk); #1 flush = 0; #1; q.delete();
    check(empty, "flush");
    for (int i = 0; i < 300; i++) cyc($urandom, $urandom);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
