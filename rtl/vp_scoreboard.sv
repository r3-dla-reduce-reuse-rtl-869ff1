// vp_scoreboard: decides at the main thread's (MT) decode which
// value-predicted instructions need not be executed to validate their
// prediction.
//
// One bit per architectural register says "validated": the register's latest
// writer is an ALU instruction that received a reused value from the
// look-ahead thread. Such a writer sets the bit; any other writer (a load, an
// instruction without a reused value) clears it. A value-predicted ALU
// instruction whose source registers are all validated can take its predicted
// value as final (skip = 1): if an input were wrong, the instruction that
// produced it would itself fail validation and trigger recovery.
//
// A decode group of DW instructions is handled in program order in one cycle:
// each slot sees the marks left by the slots before it. The marks are updated
// at the clock edge and cleared by flush.
// Follows the paper: the marking and skipping rules, at decode. Own choices:
// group handling, clear on flush, 64 registers.
module vp_scoreboard #(
  parameter int DW       = 4,
  parameter int NUM_REGS = 64
) (
  input  logic clk,
  input  logic rst_n,
  input  logic flush,
  input  logic [DW-1:0] d_valid,
  input  logic [DW-1:0] d_is_alu,
  input  logic [DW-1:0] d_has_vp,     // a reused value was attached
  input  logic [DW-1:0] d_has_dest,
  input  logic [$clog2(NUM_REGS)-1:0] d_dest [DW],
  input  logic [1:0]    d_src_used [DW],
  input  logic [$clog2(NUM_REGS)-1:0] d_src [DW][2],
  output logic [DW-1:0] skip,          // take the prediction, do not execute
  output logic [31:0]   skipped
);
  logic [NUM_REGS-1:0] vld, vld_next;

  always_comb begin
    vld_next = vld;
    for (int i = 0; i < DW; i++) begin
      logic ok;
      ok = 1'b1;
      for (int s = 0; s < 2; s++)
        if (d_src_used[i][s] && !vld_next[d_src[i][s]]) ok = 1'b0;
      skip[i] = d_valid[i] && d_is_alu[i] && d_has_vp[i] && ok;
      if (d_valid[i] && d_has_dest[i])
        vld_next[d_dest[i]] = d_is_alu[i] && d_has_vp[i];
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      vld     <= '0;
      skipped <= '0;
    end else begin
      vld     <= flush ? '0 : vld_next;
      skipped <= skipped + 32'($countones(skip));
    end
  end
endmodule
