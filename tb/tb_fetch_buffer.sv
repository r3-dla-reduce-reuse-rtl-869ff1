// tb_fetch_buffer: self-checking test of the 32-entry fetch buffer.
// Random groups of 0..4 entries are pushed and 0..4 popped each cycle
// against a queue model: a group is accepted only whole (push_ready when it
// fits), the first four entries are always visible in order on out_data,
// count follows the model, full cycles are counted, and a flush empties it.
module tb_fetch_buffer;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  localparam int D = 32, W = 4, EW = 64;

  logic flush = 0, push_ready;
  logic [2:0] push_cnt = '0, pop_cnt = '0;
  logic [EW-1:0] push_data [W];
  logic [EW-1:0] out_data [W];
  logic [5:0] count;
  logic [31:0] full_cycles;

  fetch_buffer dut (.*);

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

  logic [EW-1:0] model [$];
  int exp_full;

  initial begin
    for (int k = 0; k < W; k++) push_data[k] = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    exp_full = 0;
    for (int c = 0; c < 20000; c++) begin
      int pc, pp;
      // phases: fill-heavy, drain-heavy, balanced
      pc = $urandom % 5;
      pp = ((c / 500) % 3 == 0) ? $urandom % 2 : $urandom % 5;
      if (pp > model.size()) pp = model.size();
      push_cnt = 3'(pc); pop_cnt = 3'(pp);
      for (int k = 0; k < W; k++) push_data[k] = {$urandom, $urandom};
      flush = ($urandom % 1000) == 0;
      #1;
      check(count == 6'(model.size()), $sformatf("count %0d model %0d", count, model.size()));
      check(push_ready == (model.size() + pc <= D), "push_ready");
      for (int k = 0; k < W; k++)
        if (k < model.size()) check(out_data[k] == model[k], $sformatf("out_data[%0d]", k));
      if (model.size() == D) exp_full++;
      if (flush) model.delete();
      else begin
        for (int k = 0; k < pp; k++) void'(model.pop_front());
        if (push_ready) for (int k = 0; k < pc; k++) model.push_back(push_data[k]);
      end
      @(posedge clk); #1;
    end
    push_cnt = '0; pop_cnt = '0; #1;
    check(full_cycles == 32'(exp_full) && exp_full > 0, $sformatf("full cycles %0d (%0d)", full_cycles, exp_full));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
