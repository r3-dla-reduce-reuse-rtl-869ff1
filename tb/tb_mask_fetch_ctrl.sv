// tb_mask_fetch_ctrl: self-checking test of the mask fetch controller. For a
// series of I-cache misses it checks the two L2 requests (code line address,
// then the mask address MASK_BASE + line_number * 16), their order under
// random request-port back-pressure, miss_ready while a mask read is pending,
// the mask-valid bit cleared by a miss and set by the (delayed) mask response,
// and the stored mask bits on the read port.
module tb_mask_fetch_ctrl;
  import r3dla_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  localparam addr_t MB = 64'h0000_4000_0000_0000;

  logic miss_valid = 0, req_ready = 1, mresp_valid = 0;
  logic miss_ready, req_valid, req_is_mask, rd_valid;
  addr_t miss_addr = '0, req_addr;
  logic [8:0] miss_line = '0, req_line, mresp_line = '0, rd_line = '0;
  logic [127:0] mresp_data = '0, rd_mask;

  mask_fetch_ctrl dut (.*);

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

  logic [127:0] model [512];
  bit mvalid [512];

  initial begin
    repeat (3) @(posedge clk);
    #1 rst_n = 1; #1;
    for (int i = 0; i < 512; i++) mvalid[i] = 0;
    for (int m = 0; m < 300; m++) begin
      addr_t a;
      logic [8:0] ln;
      logic [127:0] md;
      a  = {16'h0, 32'($urandom), 16'($urandom)};
      ln = 9'($urandom);
      md = {$urandom, $urandom, $urandom, $urandom};
      // issue the miss; wait for the code request to be taken
      miss_valid = 1; miss_addr = a; miss_line = ln;
      req_ready = ($urandom % 3) != 0;
      #1;
      while (!req_ready) begin
        check(req_valid && !req_is_mask && miss_ready, "code request waits");
        @(posedge clk); #1 req_ready = ($urandom % 3) != 0; #1;
      end
      check(req_valid && !req_is_mask && req_addr == {a[63:6], 6'b0} && req_line == ln, "code request");
      @(posedge clk); #1;
      miss_valid = 0; mvalid[ln] = 0;
      rd_line = ln; #1;
      check(!rd_valid, "mask invalid after miss (defaults to all ones)");
      // mask request
      req_ready = ($urandom % 2);
      #1;
      while (!req_ready) begin
        check(req_valid && req_is_mask && !miss_ready, "mask request pending");
        @(posedge clk); #1 req_ready = $urandom; #1;
      end
      check(req_valid && req_is_mask && req_addr == MB + ((a >> 6) << 4) && req_line == ln, "mask request");
      @(posedge clk); #1;
      check(miss_ready, "ready after both requests");
      req_ready = 1;
      // the mask data arrives some cycles later
      repeat ($urandom % 4) @(posedge clk);
      #1 mresp_valid = 1; mresp_line = ln; mresp_data = md;
      @(posedge clk); #1 mresp_valid = 0;
      model[ln] = md; mvalid[ln] = 1;
      // check a random known line
      rd_line = ln; #1;
      check(rd_valid && rd_mask == md, "mask stored");
    end
    for (int i = 0; i < 512; i++) begin
      rd_line = 9'(i); #1;
      check(rd_valid == mvalid[i], "valid bits");
      if (mvalid[i]) check(rd_mask == model[i], "contents");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
