// hercules_pkg: types and constants shared by the transactional cache
// hierarchy, the transaction controller and the memory controller.
//
// Widths that follow the paper: a 21-bit TxID, a 1-bit TxState, 64-byte
// cache lines, a 4-byte TxLen, a 64-bit eWPQ entry made of TxState plus three
// 21-bit fields (TxID, partial home address, log entry index), 512 eWPQ
// entries, an eWPQ extension ten times that size, a 256 MB log zone and a
// 512 GB pmem.  The layout of the log zone inside pmem (where each area
// starts, how a log entry's metadata is packed) is this design's own choice;
// the paper only names the areas.
//
// Tool warning left on purpose: TXLEN_W, EXT_ENTRIES, LOG_ENTRIES and
// EMG_SLOTS document sizes of the log zone map and are not used by every
// block, so they are reported as unused parameters.
package hercules_pkg;

  // ---------------------------------------------------------------- sizes
  localparam int TXID_W     = 21;               // TxID width (paper)
  localparam int TXLEN_W    = 32;               // in-pmem TxLen, 4 bytes (paper)
  localparam int LINE_BYTES = 64;
  localparam int LINE_W     = LINE_BYTES * 8;
  localparam int WORD_W     = 64;               // core store granule
  localparam int LADDR_W    = 33;               // line address: 512 GB / 64 B
  localparam int PART_W     = 21;               // partial home address in eWPQ
  localparam int LOGIDX_W   = 21;               // log entry index in eWPQ

  typedef logic [TXID_W-1:0]   txid_t;
  typedef logic [LADDR_W-1:0]  laddr_t;
  typedef logic [LINE_W-1:0]   line_t;
  typedef logic [WORD_W-1:0]   word_t;
  typedef logic [LOGIDX_W-1:0] logidx_t;

  // --------------------------------------------- cache / memory requests
  // One request format is used on every link of the hierarchy:
  // core -> L1D -> L2 -> L3 -> memory controller.
  typedef enum logic [1:0] {
    OP_RD    = 2'd0,   // read a line
    OP_WR    = 2'd1,   // core store of one 64-bit word
    OP_WB    = 2'd2,   // write back a whole line (eviction or flush)
    OP_EMERG = 2'd3    // power-off dump of an uncommitted transactional line
  } op_e;

  typedef struct packed {
    op_e         op;
    laddr_t      addr;     // line address
    line_t       data;     // OP_WB/OP_EMERG: line; OP_WR: word in [63:0]
    logic [2:0]  word;     // OP_WR: word index in the line
    logic        tx;       // RD/WR: issued inside a transaction
                           // WB/EMERG: the line carries a TransTag
    txid_t       txid;     // RD/WR: running TxID; WB/EMERG: line's TxID
    logic        txstate;  // WB/EMERG: line's TxState (1 = uncommitted)
    logic        dirty;    // WB: line differs from its home copy
  } mreq_t;

  typedef struct packed {
    line_t       data;
    logic        tx;        // returned line is handed over as transactional
    txid_t       txid;
    logic        txstate;
    logic        dirty;     // returned line must be written back home later
    logic        conflict;  // isolation violation: the transaction must abort
    logic        nocache;   // older committed copy served past an uncommitted
                            // line (read committed): do not allocate it
  } mrsp_t;

  // State reset broadcast (commit clears TxState, abort invalidates).
  typedef struct packed {
    logic  is_abort;
    txid_t txid;
  } sreset_t;

  // ----------------------------------------------------------- TransTag
  typedef struct packed {
    logic        valid;
    logic [3:0]  wayno;    // up to 16 ways (L3)
    txid_t       txid;
    logic        txstate;
  } transtag_t;

  // ---------------------------------------------------------- eWPQ entry
  typedef struct packed {
    logic                txstate;
    txid_t               txid;
    logic [PART_W-1:0]   home;
    logidx_t             logidx;
  } ewpq_entry_t;   // 64 bits, 512 entries = 4 KB (paper)

  localparam int EWPQ_ENTRIES = 512;
  localparam int EXT_ENTRIES  = 10 * EWPQ_ENTRIES;   // "ten times larger"

  // ------------------------------------------------------- pmem requests
  typedef struct packed {
    logic        we;
    laddr_t      addr;
    line_t       data;
    logic [LINE_BYTES-1:0] be;   // byte enables for writes
  } preq_t;

  // ------------------------------------------------------- log zone map
  // All offsets are in lines from LZ_BASE.  The log zone sits at the top
  // of the 512 GB pmem and spans 256 MB = 2^22 lines.
  localparam laddr_t LZ_BASE      = laddr_t'(33'h1_FFC0_0000);
  localparam int     LOG_ENTRIES  = 1 << LOGIDX_W;               // 2^21
  // transaction profiles: 2^21 TxLens x 4 B = 2^17 lines
  localparam laddr_t PROF_BASE    = LZ_BASE;
  // log entry metadata: 2^21 x 8 B = 2^18 lines
  localparam laddr_t LMETA_BASE   = LZ_BASE + laddr_t'(1 << 17);
  // log entry data: 2^21 x 64 B = 2^21 lines
  localparam laddr_t LDATA_BASE   = LMETA_BASE + laddr_t'(1 << 18);
  // eWPQ extension: 5120 x 8 B = 640 lines (1024 reserved)
  localparam laddr_t EXT_BASE     = LDATA_BASE + laddr_t'(1 << 21);
  // area of emergency use: header line, bitmap line, 64 lines of eWPQ
  // entries, then metadata (8 B each) and data of dumped lines
  localparam laddr_t EMG_BASE     = EXT_BASE + laddr_t'(1024);
  localparam laddr_t EMG_HDR      = EMG_BASE;
  localparam laddr_t EMG_BITMAP   = EMG_BASE + laddr_t'(1);
  localparam laddr_t EMG_EWPQ     = EMG_BASE + laddr_t'(2);
  localparam laddr_t EMG_META     = EMG_BASE + laddr_t'(128);
  localparam int     EMG_SLOTS    = 1 << 17;
  localparam laddr_t EMG_DATA     = EMG_META + laddr_t'(1 << 14);

  // Metadata word of a log entry or an emergency entry:
  // [63] valid, [62] TxState, [61:41] TxID, [32:0] full home line address.
  function automatic word_t pack_meta(logic st, txid_t id, laddr_t home);
    word_t w;
    w = '0;
    w[63]    = 1'b1;
    w[62]    = st;
    w[61:41] = id;
    w[32:0]  = home;
    return w;
  endfunction

  // Write one 64-bit word into word slot `slot` of a line image with the
  // matching byte enables.
  function automatic preq_t word_write(laddr_t a, logic [2:0] slot, word_t w);
    preq_t p;
    p      = '0;
    p.we   = 1'b1;
    p.addr = a;
    p.data = line_t'(w) << (64 * slot);
    p.be   = 64'hFF << (8 * slot);
    return p;
  endfunction

endpackage
