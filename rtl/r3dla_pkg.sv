// r3dla_pkg: types and constants shared by the decoupled look-ahead support
// structures.
//
// The look-ahead thread (LT) talks to the main thread (MT) through two
// queues. The Branch Outcome Queue (BOQ) holds one 2-bit entry per committed
// conditional branch: the outcome and a footnote bit. The Footnote Queue (FQ)
// holds rarer, wider hints: a 64-bit payload plus a kind, the sequence tag of
// the BOQ entry the hint belongs to, and for reused values an offset from that
// branch. The 2-bit BOQ entry, the 64-bit FQ payload and the hint kinds
// (value, L1/L2/TLB prefetch, indirect branch target) follow the paper; the
// sequence tag, the offset encoding and the register-copy kind used on reboot
// are this design's own choices.
package r3dla_pkg;

  localparam int XLEN    = 64;                 // address / data width (64-bit ISA)
  localparam int BOQ_DEPTH = 512;              // BOQ entries
  localparam int SEQ_W   = $clog2(BOQ_DEPTH) + 1; // BOQ sequence tag width
  localparam int OFF_W   = 6;                  // value-entry offset width (instructions)
  localparam int NUM_SKT = 6;                  // skeleton versions cycled by the recycle controller
  localparam int SKT_W   = 3;                  // skeleton id width
  localparam int MASKB_W = 8;                  // side bits per instruction: [5:0] masks, [6] S bit

  typedef logic [XLEN-1:0]  addr_t;
  typedef logic [SEQ_W-1:0] seq_t;
  typedef logic [OFF_W-1:0] off_t;
  typedef logic [SKT_W-1:0] skt_t;

  // Footnote kinds: the columns of the footnote queue plus the reboot copy.
  typedef enum logic [2:0] {
    FN_VALUE    = 3'd0,   // reused register value
    FN_L2_PREF  = 3'd1,   // L2 prefetch address
    FN_TLB_PREF = 3'd2,   // TLB prefetch (page) address
    FN_IND_TGT  = 3'd3,   // indirect branch target
    FN_L1_PREF  = 3'd4,   // L1 prefetch address
    FN_ARCH_REG = 3'd5    // architectural register copied on reboot (offset = reg index)
  } fn_kind_e;

  typedef struct packed {
    logic taken;          // branch outcome
    logic footnote;       // FQ entries belong to this branch
  } boq_entry_t;

  typedef struct packed {
    fn_kind_e kind;
    seq_t     seq;        // BOQ entry this footnote is attached to
    off_t     off;        // value entries: offset from that branch; reboot: register index
    addr_t    data;       // 64-bit payload
  } fq_entry_t;

  // Main-thread fetch buffer entry: the instruction, its PC, its S bit and
  // the position used to match reused values (preceding branch tag, offset).
  typedef struct packed {
    logic [31:0] inst;
    addr_t       pc;
    logic        s_bit;
    seq_t        seq;
    off_t        off;
  } fb_entry_t;

  // Is sequence tag a older than b (modulo 2^SEQ_W)?
  function automatic logic seq_older(input seq_t a, input seq_t b);
    seq_t d;
    d = a - b;
    return d[SEQ_W-1];
  endfunction

  // Offset of an instruction from its preceding conditional branch, in
  // instructions, computed from PCs so that LT and MT agree on it even though
  // LT deletes non-skeleton instructions.
  function automatic off_t pc_offset(input addr_t pc, input addr_t br_pc);
    addr_t d;
    d = pc - br_pc;
    return d[OFF_W+1:2];
  endfunction

endpackage
