// tb_vp_scoreboard: self-checking test of the validation-skip scoreboard.
// First the example of Fig. 4 as one decode group: i1 and i2 are ALU
// instructions with predicted values (r1, r2), i3 is a load (r3), i4 = r1 op
// r2 with a prediction must skip validation, i5 = r4 op r3 with a prediction
// must not (r3 has no predicted value). Then random decode groups of 0..4
// instructions against a sequential model: an ALU instruction with a
// predicted value marks its destination validated, any other writer clears
// the mark, and an ALU instruction with a prediction whose used sources are
// all marked skips. Marks carry across groups and a flush clears them.
module tb_vp_scoreboard;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  localparam int DW = 4, NR = 64;

  logic flush = 0;
  logic [DW-1:0] d_valid = '0, d_is_alu = '0, d_has_vp = '0, d_has_dest = '0, skip;
  logic [5:0] d_dest [DW];
  logic [1:0] d_src_used [DW];
  logic [5:0] d_src [DW][2];
  logic [31:0] skipped;

  vp_scoreboard dut (.*);

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

  bit mark [NR];
  int exp_skips;

  task automatic set_slot(input int s, input bit v, input bit alu, input bit vp, input bit hd,
                          input int dst, input bit [1:0] used, input int s0, input int s1);
    d_valid[s] = v; d_is_alu[s] = alu; d_has_vp[s] = vp; d_has_dest[s] = hd;
    d_dest[s] = 6'(dst); d_src_used[s] = used; d_src[s][0] = 6'(s0); d_src[s][1] = 6'(s1);
  endtask

  initial begin
    for (int s = 0; s < DW; s++) set_slot(s, 0, 0, 0, 0, 0, 0, 0, 0);
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    // Fig. 4 example: group 1 = i1, i2, i3; group 2 = i4, i5
    set_slot(0, 1, 1, 1, 1, 1, 2'b00, 0, 0);   // i1: r1 <- imm, predicted
    set_slot(1, 1, 1, 1, 1, 2, 2'b00, 0, 0);   // i2: r2 <- imm, predicted
    set_slot(2, 1, 0, 0, 1, 3, 2'b01, 9, 0);   // i3: r3 <- load
    set_slot(3, 0, 0, 0, 0, 0, 2'b00, 0, 0);
    #1 check(skip == 4'b0011, "i1, i2 have no sources: their predictions need no check");
    @(posedge clk); #1;
    set_slot(0, 1, 1, 1, 1, 4, 2'b11, 1, 2);   // i4: r4 <- r1 op r2, predicted
    set_slot(1, 1, 1, 1, 1, 5, 2'b11, 4, 3);   // i5: r5 <- r4 op r3, predicted
    set_slot(2, 0, 0, 0, 0, 0, 2'b00, 0, 0);
    #1 check(skip[0] == 1'b1, "Fig. 4: i4 skips validation");
    check(skip[1] == 1'b0, "Fig. 4: i5 must be validated");
    @(posedge clk); #1;
    flush = 1; d_valid = '0; @(posedge clk); #1 flush = 0;
    for (int r = 0; r < NR; r++) mark[r] = 0;
    exp_skips = 0;
    for (int c = 0; c < 20000; c++) begin
      int n;
      n = $urandom % (DW + 1);
      for (int s = 0; s < DW; s++)
        set_slot(s, s < n, ($urandom % 3) != 0, ($urandom % 3) != 0, ($urandom % 5) != 0,
                 $urandom % 8, 2'($urandom), $urandom % 8, $urandom % 8);
      if ($urandom % 200 == 0) flush = 1;
      #1;
      for (int s = 0; s < DW; s++) begin
        bit e;
        e = d_valid[s] && d_is_alu[s] && d_has_vp[s]
            && (!d_src_used[s][0] || mark[d_src[s][0]]) && (!d_src_used[s][1] || mark[d_src[s][1]]);
        check(skip[s] == e, $sformatf("cycle %0d slot %0d skip=%0b expected %0b", c, s, skip[s], e));
        exp_skips += e;
        if (d_valid[s] && d_has_dest[s]) mark[d_dest[s]] = d_is_alu[s] && d_has_vp[s];
      end
      if (flush) for (int r = 0; r < NR; r++) mark[r] = 0;
      @(posedge clk); #1 flush = 0;
    end
    check(skipped == 32'(exp_skips + 3), "skip counter");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
