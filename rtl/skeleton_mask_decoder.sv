// skeleton_mask_decoder: applies the skeleton masks to a fetch group.
//
// Every instruction of the program binary has MASKB_W side bits fetched
// alongside it: bit k (k < NUM_SKT) says whether it belongs to skeleton
// version k, bit NUM_SKT is the S bit that marks T1's loop branches and strided
// loads. In look-ahead mode (lt_mode = 1) the decoder drops the instructions
// that are not in the selected skeleton (skt_sel) and packs the survivors to
// the low slots, in order. Until a line's mask bits have arrived
// (mask_valid = 0) every instruction is kept, as if the mask were all ones.
// In main-thread mode nothing is dropped and s_bit reports each instruction's
// S bit (cleared when the masks have not arrived).
//
// Purely combinational: one fetch group in, the packed group out in the same
// cycle.
// Follows the paper: deletion upon fetch, default of all ones, one mask per
// skeleton version, S bit for MT. Own choices: the bit layout and packing.
module skeleton_mask_decoder
  import r3dla_pkg::*;
#(
  parameter int FETCH_W = 4,
  parameter int INST_W  = 32
) (
  input  logic                 lt_mode,      // 1: look-ahead core, 0: main core
  input  skt_t                 skt_sel,      // skeleton version in use
  input  logic                 mask_valid,   // the group's mask bits have arrived
  input  logic [FETCH_W-1:0]   in_valid,
  input  logic [INST_W-1:0]    in_inst [FETCH_W],
  input  addr_t                in_pc   [FETCH_W],
  input  logic [MASKB_W-1:0]   in_mask [FETCH_W],
  output logic [FETCH_W-1:0]   out_valid,    // packed: valid slots are the low ones
  output logic [INST_W-1:0]    out_inst [FETCH_W],
  output addr_t                out_pc   [FETCH_W],
  output logic [FETCH_W-1:0]   s_bit,        // per output slot, main-thread mode
  output logic [$clog2(FETCH_W):0] deleted   // instructions removed from this group
);
  logic [FETCH_W-1:0] keep;

  always_comb begin
    for (int i = 0; i < FETCH_W; i++) begin
      keep[i] = in_valid[i] && (!lt_mode || !mask_valid || in_mask[i][skt_sel]);
    end
  end

  always_comb begin
    int unsigned k;
    k = 0;
    out_valid = '0;
    s_bit     = '0;
    deleted   = '0;
    for (int i = 0; i < FETCH_W; i++) begin
      out_inst[i] = '0;
      out_pc[i]   = '0;
    end
    for (int i = 0; i < FETCH_W; i++) begin
      if (keep[i]) begin
        out_valid[k] = 1'b1;
        out_inst[k]  = in_inst[i];
        out_pc[k]    = in_pc[i];
        s_bit[k]     = !lt_mode && mask_valid && in_mask[i][NUM_SKT];
        k++;
      end else if (in_valid[i]) begin
        deleted = deleted + 1'b1;
      end
    end
  end
endmodule
