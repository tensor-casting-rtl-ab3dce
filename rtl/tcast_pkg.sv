// tcast_pkg: types and constants shared by the near-memory tensor
// gather-scatter design.
//
// One DRAM access moves one 64-byte beat. That matches the rank's minimum
// access granularity, and the 64-byte figure comes from the paper. A beat
// holds LANES elements of ELEM_W bits. Embedding rows are row_beats beats
// long (a 64-dim row of 32-bit elements is 4 beats). All addresses in the
// instruction and on the memory request path are beat addresses: a byte
// address divided by 64.
//
// These choices are this design's own, because the paper is silent on them:
// the 32-bit two's-complement element format, the instruction encoding, the
// index-pair packing (8 pairs of 32-bit src/dst per beat) and the mapping of
// a beat address onto DDR4 bank/row/column.
package tcast_pkg;

  // ---- data beat -------------------------------------------------------
  localparam int unsigned BEAT_BYTES = 64;                 // paper: 64 B per rank access
  localparam int unsigned ELEM_W     = 32;
  localparam int unsigned LANES      = BEAT_BYTES * 8 / ELEM_W;  // 16
  localparam int unsigned BEAT_W     = BEAT_BYTES * 8;     // 512

  typedef logic [BEAT_W-1:0] beat_t;

  // ---- addressing --------------------------------------------------------
  // 128 GB per rank (paper: one 128 GB LR-DIMM per rank) = 2^31 beats.
  localparam int unsigned BADDR_W = 31;
  typedef logic [BADDR_W-1:0] baddr_t;

  // DDR4 rank of x8 devices: 16 banks (4 bank groups x 4), 8 KB rank row
  // = 128 beats per row, 2^20 rows per bank.
  localparam int unsigned COL_W  = 7;
  localparam int unsigned BANK_W = 4;
  localparam int unsigned ROW_W  = BADDR_W - COL_W - BANK_W;  // 20
  localparam int unsigned NBANKS = 1 << BANK_W;

  typedef logic [COL_W-1:0]  col_t;
  typedef logic [BANK_W-1:0] bank_t;
  typedef logic [ROW_W-1:0]  row_t;

  // ---- index pairs ----------------------------------------------------------
  localparam int unsigned ID_W          = 32;
  localparam int unsigned PAIRS_PER_BEAT = BEAT_W / (2 * ID_W);  // 8
  typedef logic [ID_W-1:0] id_t;

  // ---- CISC instruction ----------------------------------------------------
  typedef enum logic [1:0] {
    OP_NOP           = 2'd0,
    OP_GATHER_REDUCE = 2'd1,   // out[dst] = (new dst run ? 0 : out[dst]) + in[src]
    OP_SCATTER       = 2'd2    // out[dst] = out[dst] + in[src]
  } opcode_e;

  localparam int unsigned RANK_ID_W = 5;   // up to 32 ranks per node (paper: 32)
  localparam int unsigned COUNT_W   = 32;
  localparam int unsigned VLEN_W    = 8;   // row length in beats, 1..255

  typedef struct packed {
    opcode_e               op;
    logic [RANK_ID_W-1:0]  rank;      // used by the node to pick a core
    logic [VLEN_W-1:0]     row_beats; // embedding row length in 64 B beats
    logic [COUNT_W-1:0]    count;     // number of (src,dst) pairs
    baddr_t                idx_base;  // packed (src,dst) index array
    baddr_t                in_base;   // table gathered from (rows by src)
    baddr_t                out_base;  // table reduced/scattered into (rows by dst)
  } instr_t;

  // ---- memory request path (sequencer -> DRAM command scheduler) -----------
  typedef enum logic [1:0] {
    TAG_IDX = 2'd0,   // index-array beat -> index buffer
    TAG_I1  = 2'd1,   // gathered row -> Input Q (I1)
    TAG_I2  = 2'd2,   // destination row -> Input Q (I2)
    TAG_HOST = 2'd3   // host read through the normal DIMM path
  } rtag_e;

  typedef struct packed {
    logic   we;
    baddr_t addr;
    rtag_e  tag;
    beat_t  wdata;
  } mem_req_t;

  // ---- DRAM command bus (controller -> DDR PHY) -----------------------------
  typedef enum logic [2:0] {
    CMD_NOP = 3'd0,
    CMD_ACT = 3'd1,
    CMD_RD  = 3'd2,
    CMD_WR  = 3'd3,
    CMD_PRE = 3'd4
  } dram_cmd_e;

  typedef struct packed {
    dram_cmd_e cmd;
    bank_t     bank;
    row_t      row;
    col_t      col;
    beat_t     wdata;   // valid with CMD_WR
  } dram_cmd_t;

  // ---- event pulses, for performance counters ------------------------------
  typedef struct packed {
    logic act;          // row activate issued
    logic pre;          // precharge issued (row conflict)
    logic rd;           // column read issued
    logic wr;           // column write issued
    logic idx_fetch;    // index-array beat requested
    logic zero_init;    // pair started a new output row with a zero operand
    logic rmw;          // pair read its destination row into I2
    logic chain;        // pair continued a run with the partial sum kept on chip
    logic credit_stall; // read held back: input queue has no free slot
    logic host_acc;     // host access passed through to DRAM
  } nmp_ev_t;

  function automatic bank_t addr_bank(baddr_t a);
    return a[COL_W +: BANK_W];
  endfunction
  function automatic row_t addr_row(baddr_t a);
    return a[COL_W+BANK_W +: ROW_W];
  endfunction
  function automatic col_t addr_col(baddr_t a);
    return a[0 +: COL_W];
  endfunction

endpackage
