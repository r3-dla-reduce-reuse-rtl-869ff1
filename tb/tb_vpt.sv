// tb_vpt: self-checking test of the value prediction table (VPT).
// The look-ahead side pushes (sequence tag, offset, value) entries in program
// order; a few are stale (their instruction never reaches the MT decode).
// The MT side presents up to 4 decode slots per cycle in program order.
// A queue model gives the expected per-slot hit and value: a slot hits when
// the model head has its tag and offset, and an unmatched head older than
// slot 0 is dropped. The LT is kept ahead of decode, and the producer stalls
// at random to fill the 32-entry table. A flush empties it.
module tb_vpt;
  import r3dla_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  localparam int DW = 4, N = 3000;

  logic flush = 0, push_valid = 0, push_ready;
  seq_t push_seq = '0;
  off_t push_off = '0;
  addr_t push_value = '0;
  logic [DW-1:0] lk_valid = '0, lk_hit;
  seq_t lk_seq [DW];
  off_t lk_off [DW];
  addr_t lk_value [DW];
  logic [31:0] hits, stale_drops;

  vpt dut (.*);

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

  typedef struct { seq_t seq; off_t off; addr_t value; int pos; } ent_t;
  seq_t  iseq [N];
  off_t  ioff [N];
  ent_t  plist [$];   // what the LT pushes, in order
  ent_t  model [$];
  int    pi, di, exp_hits;

  initial begin
    for (int s = 0; s < DW; s++) begin lk_seq[s] = '0; lk_off[s] = '0; end
    // program: sequence tag bumps every few instructions, offsets increase
    begin
      seq_t s; off_t o;
      s = seq_t'(5); o = '0;
      for (int i = 0; i < N; i++) begin
        if ($urandom % 4 == 0) begin s = s + 1'b1; o = '0; end
        o = o + off_t'(1 + $urandom % 2);
        if (o > 40) begin s = s + 1'b1; o = off_t'(1); end
        iseq[i] = s; ioff[i] = o;
        if ($urandom % 20 == 0) plist.push_back('{s, off_t'(63), 64'hdead_0000 + 64'(i), i});  // stale
        if ($urandom % 3 == 0)  plist.push_back('{s, o, {$urandom, $urandom}, i});
      end
    end
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    pi = 0; di = 0; exp_hits = 0;
    while (di < N) begin
      int nd, nh, pre;
      bit stall_dec;
      // producer: push the next entry if allowed
      push_valid = pi < plist.size() && ($urandom % 5 != 0);
      if (push_valid) begin
        push_seq = plist[pi].seq; push_off = plist[pi].off; push_value = plist[pi].value;
      end
      // consumer: decode only what the LT has already pushed past; stall sometimes
      stall_dec = ($urandom % 6 == 0) && (model.size() < 30);
      nd = 0;
      for (int s = 0; s < DW; s++) begin
        int idx;
        idx = di + s;
        lk_valid[s] = !stall_dec && idx < N && (pi >= plist.size() || plist[pi].pos > idx);
        if (lk_valid[s]) begin lk_seq[s] = iseq[idx]; lk_off[s] = ioff[idx]; end
        else for (int t = s; t < DW; t++) lk_valid[t] = 0;
        if (!lk_valid[s]) break;
        nd++;
      end
      #1;
      // model
      nh = 0; pre = model.size();
      for (int s = 0; s < DW; s++) begin
        bit e;
        e = lk_valid[s] && model.size() > nh && model[nh].seq == lk_seq[s] && model[nh].off == lk_off[s];
        check(lk_hit[s] == e, $sformatf("slot %0d hit=%0b expected %0b", s, lk_hit[s], e));
        if (e) begin
          check(lk_value[s] == model[nh].value, "reused value");
          nh++;
        end
      end
      exp_hits += nh;
      for (int k = 0; k < nh; k++) void'(model.pop_front());
      if (nh == 0 && lk_valid[0] && model.size() > 0 && seq_older(model[0].seq, lk_seq[0]))
        void'(model.pop_front());
      if (push_valid) begin
        check(push_ready == (pre < 32), "push_ready follows the fill level");
        if (push_ready) begin model.push_back(plist[pi]); pi++; end
      end
      di += nd;
      @(posedge clk); #1;
    end
    check(hits == 32'(exp_hits), $sformatf("hit counter %0d vs %0d", hits, exp_hits));
    check(stale_drops > 0, "stale entries were dropped");
    // fill up and flush
    push_valid = 1; lk_valid = '0;
    repeat (40) begin push_seq = push_seq + 1'b1; @(posedge clk); #1; end
    check(!push_ready, "full after 32 pushes");
    push_valid = 0; flush = 1; @(posedge clk); #1 flush = 0;
    check(push_ready, "empty after flush");
    lk_valid = 4'b0001; lk_seq[0] = push_seq; lk_off[0] = push_off; #1;
    check(!lk_hit[0], "no hit after flush");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
