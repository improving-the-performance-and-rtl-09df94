// loc_pkg: types and constants shared by the Loose-Ordering Consistency (LOC)
// blocks.
//
// Field widths follow the paper's log format and storage table: a BLK-TAG is
// CID(3) TID(1) TxID(8) TxCnt(16) ADDR(32) RESV(4) = 64 bits, the META block
// of a block group is SID(64) followed by seven BLK-TAGs, and a Tx State Table
// entry is CID TID TxID TxCnt State Phase Wrts = 3+1+8+16+2+2+16 = 48 bits.
// State and Phase encodings are the paper's (state 0 invalid, 1 active,
// 2 committed, 3 aborted; phase 0 log write, 1 in-place write, 2 complete).
//
// Own choices: bit order inside the packed structs (first-listed field in the
// most significant bits), RESV bit 0 used as a "tag valid" flag so that a
// partially filled block group can be closed, the layout of the log head
// block, and the 32-bit packing of a dependency pair (Ta 8, Tb 8, n 16).
package loc_pkg;

  localparam int CID_W   = 3;
  localparam int TID_W   = 1;
  localparam int TXID_W  = 8;
  localparam int TXCNT_W = 16;
  localparam int ADDR_W  = 32;    // block address (64-byte blocks)
  localparam int RESV_W  = 4;
  localparam int SID_W   = 64;
  localparam int BLK_W   = 512;   // one 64-byte block
  localparam int GROUP_DATA = 7;  // data blocks per block group
  localparam int GROUP_BLKS = 8;  // data blocks plus the META block
  localparam int PAIRS_PER_BLK = BLK_W / 32;

  typedef logic [CID_W-1:0]   cid_t;
  typedef logic [TID_W-1:0]   tid_t;
  typedef logic [TXID_W-1:0]  txid_t;
  typedef logic [TXCNT_W-1:0] txcnt_t;
  typedef logic [ADDR_W-1:0]  baddr_t;
  typedef logic [BLK_W-1:0]   blk_t;

  typedef enum logic [1:0] {
    TX_INVALID   = 2'd0,
    TX_ACTIVE    = 2'd1,
    TX_COMMITTED = 2'd2,
    TX_ABORTED   = 2'd3
  } tx_state_e;

  typedef enum logic [1:0] {
    PH_LOG_WRITE = 2'd0,
    PH_IN_PLACE  = 2'd1,
    PH_COMPLETE  = 2'd2
  } tx_phase_e;

  // One BLK-TAG of a META block (64 bits).
  typedef struct packed {
    cid_t                cid;
    tid_t                tid;
    txid_t               txid;
    txcnt_t              txcnt;
    baddr_t              addr;
    logic [RESV_W-1:0]   resv;   // resv[0] = tag valid
  } blk_tag_t;

  // META block: SID in the top 64 bits, BLK-TAG i in bits [64*i +: 64].
  typedef struct packed {
    logic [SID_W-1:0]            sid;
    blk_tag_t [GROUP_DATA-1:0]   tags;
  } meta_blk_t;

  // Tx State Table entry (48 bits).
  typedef struct packed {
    cid_t       cid;
    tid_t       tid;
    txid_t      txid;
    txcnt_t     txcnt;
    tx_state_e  state;
    tx_phase_e  phase;
    txcnt_t     wrts;
  } txst_entry_t;

  // Transaction Dependency Pair <Ta, Tb, n>: Ta has n writes overwritten by Tb.
  typedef struct packed {
    txid_t   ta;
    txid_t   tb;
    txcnt_t  n;
  } dep_pair_t;

  // Log head block (block 0 of the memory log area).
  localparam logic [31:0] LOG_MAGIC = 32'h10C0_1065;
  typedef struct packed {
    logic [31:0]   magic;
    logic [31:0]   start_group;   // first live block group
    logic [63:0]   start_sid;     // SID expected in that group's META
    txid_t         win_base;      // first TxID of the logged speculation window
    logic [15:0]   dep_count;     // dependency pairs written for that window
    logic [BLK_W-32-32-64-TXID_W-16-1:0] pad;
  } log_head_t;

  // A block leaving the cache for the memory log (before TxCnt stamping).
  typedef struct packed {
    cid_t    cid;
    tid_t    tid;
    txid_t   txid;
    baddr_t  addr;
    blk_t    data;
  } log_blk_t;

  // Circular TxID order: 256 TxID slots, at most 128 consecutive ones live,
  // so a is later than b when the 8-bit difference a-b is in [1,127].
  function automatic logic txid_newer(txid_t a, txid_t b);
    txid_t d;
    d = a - b;
    return (d != '0) && !d[TXID_W-1];
  endfunction

endpackage
