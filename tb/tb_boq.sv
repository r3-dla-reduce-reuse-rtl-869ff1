// tb_boq: self-checking test of the Branch Outcome Queue at its full 512-entry
// depth. A queue model in the testbench predicts every head entry, footnote
// bit, sequence tag and count. Covers random push/pop traffic, filling to
// full (push refused), the footnote acknowledge rule (empty queue, entry being
// popped) and flush.
module tb_boq;
  import r3dla_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic flush = 0, push = 0, push_taken = 0, set_fn = 0, pop = 0;
  logic full, set_fn_ack, empty;
  seq_t tail_seq, head_seq;
  boq_entry_t head;
  logic [9:0] count;

  boq dut (.*);

  // reference model
  logic q_t[$], q_f[$];
  int unsigned wr_seq = 0;

  task automatic check(input logic ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // one cycle with the given controls; checks outputs before the edge
  task automatic cyc(input logic pu, input logic tk, input logic sf, input logic po);
    bit exp_ack;
    po = po && q_t.size() > 0;
    push = pu; push_taken = tk; set_fn = sf; pop = po;
    #1;
    check(count == 10'(q_t.size()), $sformatf("count %0d vs %0d", count, q_t.size()));
    check(empty == (q_t.size() == 0), "empty");
    check(full == (q_t.size() == 512), "full");
    if (q_t.size() > 0) begin
      check(head.taken == q_t[0] && head.footnote == q_f[0], "head entry");
      check(head_seq == seq_t'(wr_seq - q_t.size()), "head seq");
      check(tail_seq == seq_t'(wr_seq - 1), "tail seq");
    end
    exp_ack = sf && (q_t.size() > (po ? 1 : 0));
    check(set_fn_ack == exp_ack, "set_fn_ack");
    @(posedge clk);
    if (exp_ack) q_f[q_f.size()-1] = 1'b1;
    if (po && q_t.size() > 0) begin void'(q_t.pop_front()); void'(q_f.pop_front()); end
    if (pu && !full) begin q_t.push_back(tk); q_f.push_back(1'b0); wr_seq++; end
    #1;
  endtask

  initial begin
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    #1;
    // footnote on empty queue: refused
    cyc(0, 0, 1, 0);
    // random traffic
    for (int i = 0; i < 3000; i++)
      cyc(($urandom % 100) < 55, $urandom, ($urandom % 10) == 0, ($urandom % 100) < 45);
    // fill to full, then try one more push
    while (q_t.size() < 512) cyc(1, $urandom, 0, 0);
    check(full, "full after 512 pushes");
    cyc(1, 1, 0, 0);
    check(q_t.size() == 512, "push refused when full");
    // footnote on the only entry while it is popped: refused
    while (q_t.size() > 1) cyc(0, 0, 0, 1);
    cyc(0, 0, 1, 1);
    // flush
    cyc(1, 1, 0, 0); cyc(1, 0, 1, 0);
    flush = 1; @(posedge clk); #1 flush = 0; #1;
    q_t.delete(); q_f.delete(); wr_seq = 0;
    check(empty && count == 0, "flush empties");
    for (int i = 0; i < 200; i++) cyc($urandom, $urandom, $urandom, $urandom);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
