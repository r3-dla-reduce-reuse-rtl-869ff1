// reboot_ctrl: restarts the look-ahead thread (LT) from the main thread's (MT)
// state when LT is found on a wrong path.
//
// Every conditional branch MT resolves was predicted from the BOQ. If the
// resolved direction differs from that prediction (br_mismatch), LT has gone
// down a wrong path. The controller then
//   1. FLUSH: clears the BOQ, the FQ and the hint state in MT (flush pulse),
//      and holds LT commit and MT's hint reader (hold) until the end;
//   2. COPY:  reads MT's architectural registers one per cycle (mt_reg_idx ->
//      mt_reg_data, combinational) and pushes them into the FQ, while at the
//      other end it pops them and writes LT's registers (lt_reg_*);
//   3. WAIT:  pads the sequence to REBOOT_CYCLES cycles after the mismatch;
//   4. pulses lt_restart with MT's restart PC and returns to IDLE.
// A mismatch during a reboot is ignored.
// Follows the paper: reboot on a wrong BOQ prediction, register copy through
// the FQ, 64-cycle reboot time. Own choices: one register per cycle, the
// 64 architectural registers, the state sequence.
module reboot_ctrl
  import r3dla_pkg::*;
#(
  parameter int NUM_ARCH_REGS = 64,
  parameter int REBOOT_CYCLES = 64
) (
  input  logic      clk,
  input  logic      rst_n,
  // MT branch resolution (branches whose direction came from the BOQ)
  input  logic      br_resolve_valid,
  input  logic      br_pred_taken,   // direction given by the BOQ
  input  logic      br_taken,        // direction computed by MT
  input  addr_t     mt_restart_pc,   // MT's correct next PC after that branch
  // control of the queues and threads
  output logic      flush,           // one cycle: clear BOQ, FQ, VPT, hint state
  output logic      hold,            // LT commit and MT hint reading paused
  output logic      busy,
  // MT architectural register read
  output logic [5:0] mt_reg_idx,
  input  addr_t     mt_reg_data,
  // FQ, both ends, used only while busy
  output logic      fq_push,
  output fq_entry_t fq_push_data,
  input  logic      fq_full,
  input  logic      fq_empty,
  input  fq_entry_t fq_head,
  output logic      fq_pop,
  // LT architectural register write and restart
  output logic      lt_reg_we,
  output logic [5:0] lt_reg_idx,
  output addr_t     lt_reg_data,
  output logic      lt_restart,
  output addr_t     lt_restart_pc,
  output logic [31:0] reboots
);
  typedef enum logic [1:0] {R_IDLE, R_FLUSH, R_COPY, R_WAIT} state_e;
  state_e state;
  logic [6:0]  sent, rcvd;
  logic [15:0] cyc;
  logic mismatch;

  assign mismatch   = br_resolve_valid && (br_pred_taken != br_taken);
  assign busy       = state != R_IDLE;
  assign hold       = busy;
  assign flush      = state == R_FLUSH;
  assign mt_reg_idx = sent[5:0];

  assign fq_push      = state == R_COPY && sent < 7'(NUM_ARCH_REGS) && !fq_full;
  assign fq_push_data = '{kind: FN_ARCH_REG, seq: '0, off: OFF_W'(sent), data: mt_reg_data};
  assign fq_pop       = (state == R_COPY || state == R_WAIT) && !fq_empty;
  assign lt_reg_we    = fq_pop && fq_head.kind == FN_ARCH_REG;
  assign lt_reg_idx   = 6'(fq_head.off);
  assign lt_reg_data  = fq_head.data;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state         <= R_IDLE;
      sent          <= '0;
      rcvd          <= '0;
      cyc           <= '0;
      lt_restart    <= 1'b0;
      lt_restart_pc <= '0;
      reboots       <= '0;
    end else begin
      lt_restart <= 1'b0;
      if (state != R_IDLE) cyc <= cyc + 1;
      unique case (state)
        R_IDLE: if (mismatch) begin
          state         <= R_FLUSH;
          lt_restart_pc <= mt_restart_pc;
          sent          <= '0;
          rcvd          <= '0;
          cyc           <= 16'd1;
          reboots       <= reboots + 1;
        end
        R_FLUSH: state <= R_COPY;
        R_COPY: begin
          if (fq_push) sent <= sent + 1;
          if (lt_reg_we) rcvd <= rcvd + 1;
          if (sent == 7'(NUM_ARCH_REGS)) state <= R_WAIT;
        end
        R_WAIT: begin
          if (lt_reg_we) rcvd <= rcvd + 1;
          if (rcvd == 7'(NUM_ARCH_REGS) && cyc >= 16'(REBOOT_CYCLES - 1)) begin
            state      <= R_IDLE;
            lt_restart <= 1'b1;
          end
        end
        default: state <= R_IDLE;
      endcase
    end
  end
endmodule
