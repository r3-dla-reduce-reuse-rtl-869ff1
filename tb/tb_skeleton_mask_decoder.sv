// tb_skeleton_mask_decoder: exhaustive-by-random self-checking test of the
// mask decoder. For random fetch groups, masks, skeleton versions and modes,
// the testbench computes the expected packed group (kept instructions in
// order, low slots), the number deleted and the S bits, and compares. Includes
// the case of masks not yet arrived (nothing deleted) and main-thread mode.
module tb_skeleton_mask_decoder;
  import r3dla_pkg::*;
  int checks = 0, failures = 0;
  localparam int W = 4;
  logic lt_mode, mask_valid;
  skt_t skt_sel;
  logic [W-1:0] in_valid, out_valid, s_bit;
  logic [31:0] in_inst [W], out_inst [W];
  addr_t in_pc [W], out_pc [W];
  logic [MASKB_W-1:0] in_mask [W];
  logic [2:0] deleted;

  skeleton_mask_decoder dut (.*);

  task automatic check(input logic ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin : watchdog
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int n_del_total = 0;
    for (int t = 0; t < 5000; t++) begin
      int k, nd;
      lt_mode    = (t % 4) != 0;
      mask_valid = (t % 7) != 0;
      skt_sel    = skt_t'($urandom % NUM_SKT);
      in_valid   = W'($urandom);
      for (int i = 0; i < W; i++) begin
        in_inst[i] = $urandom; in_pc[i] = {$urandom, $urandom}; in_mask[i] = MASKB_W'($urandom);
      end
      #1;
      k = 0; nd = 0;
      for (int i = 0; i < W; i++) begin
        bit keep;
        keep = in_valid[i] && (!lt_mode || !mask_valid || in_mask[i][skt_sel]);
        if (keep) begin
          check(out_valid[k] && out_inst[k] == in_inst[i] && out_pc[k] == in_pc[i], "packed slot");
          check(s_bit[k] == (!lt_mode && mask_valid && in_mask[i][6]), "S bit");
          k++;
        end else if (in_valid[i]) nd++;
      end
      for (int j = k; j < W; j++) check(!out_valid[j], "unused slot invalid");
      check(deleted == 3'(nd), "deleted count");
      if (!lt_mode || !mask_valid) check(deleted == 0, "nothing deleted without masks / in MT");
      n_del_total += nd;
    end
    // the paper's Fig. 4 mask column (1,1,0,1,1,1) on a 4-wide group: i3 is removed
    lt_mode = 1; mask_valid = 1; skt_sel = 0; in_valid = 4'b1111;
    for (int i = 0; i < W; i++) begin in_inst[i] = 32'(i + 1); in_pc[i] = 64'(4 * i); end
    in_mask[0] = 8'h01; in_mask[1] = 8'h01; in_mask[2] = 8'h00; in_mask[3] = 8'h01;
    #1;
    check(out_valid == 4'b0111 && out_inst[0] == 1 && out_inst[1] == 2 && out_inst[2] == 4, "Fig. 4 group");
    check(n_del_total > 0, "coverage");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
