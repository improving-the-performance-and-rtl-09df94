// tx_cache: last-level cache with the LOC Tx Dirty Block Table, multi-version
// lines and the Flusher.
//
// What it does. Each tag entry carries, besides address tag, valid and the
// ordinary dirty flag, the LLC extension fields of the paper: CID, TID, TxID
// and TxDirty. TxDirty means "not yet written to the memory log"; dirty means
// "not yet written to its home location". A transactional store by TxID T to
// block X updates T's own version of X if there is one; otherwise it
// allocates a new version, so the versions of X written by older transactions
// stay in the set (multi-versioning). The victim for a new line is chosen in
// this order:
//   0. for a transactional store, a plain copy of the same block (written
//      home first if dirty), so that no stale plain copy outlives the version
//   1. an invalid way
//   2. a clean non-transactional line
//   3. a superseded version: TxDirty, and a later version of the same block
//      from a committed transaction is present. It is dropped without being
//      written anywhere (write coalescing across transactions) and an
//      ev_super <Ta, Tb> event is raised for the dependency-pair count.
//   4. a dirty non-transactional line, written home (home_out)
//   5. version overflow: the oldest TxDirty version that has a later version
//      of the same block in the set is written to the memory log (log_out)
//   6. none: the store stalls and need_flush is raised until the
//      Commit/Recovery controller completes the speculation window.
// A committed transaction is one with TxID not later than last_committed.
// Aborted versions are removed by the abort sweep, so every TxDirty version
// present belongs to an active or committed transaction of the current
// window.
//
// Flusher sweeps (sweep_valid/sweep_op, one (set, way) per cycle, plus a
// wait whenever a write-back port is not ready; sweep_done pulses at the end):
//   SW_DROP   drop superseded committed versions (case 3 above)
//   SW_LOG    write every TxDirty version of a committed transaction to the
//             log, clear TxDirty
//   SW_HOME   write every logged (TxDirty clear) transactional version home
//             if dirty, then turn it into an ordinary clean line; a version
//             that a still running transaction has superseded is dropped
//             after its home write instead
//   SW_ABORT  invalidate the TxDirty versions of sweep_txid and of every
//             later transaction
// Versions of a still active transaction are left alone by DROP/LOG/HOME.
//
// CPU port: one request at a time, full 64-byte blocks (the paper assumes
// 64-byte update granularity). Stores complete in the cycle req_ready is
// high. A load returns, one cycle later, the newest version of the block
// (ordinary line oldest, then by TxID); a load miss returns resp_hit = 0, the
// fill path of a conventional cache being outside this block. Requests are not
// accepted during a sweep.
//
// From the paper: the tag fields, TxDirty meaning, multi-versioning, removal
// of a version once a later version commits, eviction of the oldest version on
// version overflow, merging of overlapped writes. Own choices: the victim
// order, first-match choice within a class instead of LRU, the sweep
// implementation of the Flusher, the stall when a set holds only unique
// versions, loads without fill. A transaction can hold at most WAYS blocks
// of one set; non-transactional stores to a block that has transactional
// versions are not ordered against them.
module tx_cache
  import loc_pkg::*;
#(
  parameter int SETS = 1024,   // 1 MB, 16-way, 64 B blocks (Table 1 LLC)
  parameter int WAYS = 16
) (
  input  logic      clk,
  input  logic      rst_n,
  // CPU side
  input  logic      req_valid,
  output logic      req_ready,
  input  logic      req_we,
  input  logic      req_tx,
  input  baddr_t    req_addr,
  input  blk_t      req_wdata,
  input  txid_t     req_txid,
  input  cid_t      req_cid,
  input  tid_t      req_tid,
  output logic      resp_valid,
  output logic      resp_hit,
  output blk_t      resp_rdata,
  // commit state
  input  txid_t     last_committed,
  // flusher control
  input  logic      sweep_valid,
  input  logic [1:0] sweep_op,
  input  txid_t     sweep_txid,
  output logic      sweep_busy,
  output logic      sweep_done,
  // write-back ports
  output logic      log_valid,
  input  logic      log_ready,
  output log_blk_t  log_blk,
  output logic      home_valid,
  input  logic      home_ready,
  output baddr_t    home_addr,
  output blk_t      home_data,
  // events
  output logic      ev_alloc,
  output txid_t     ev_alloc_txid,
  output logic      ev_super,
  output txid_t     ev_super_ta,
  output txid_t     ev_super_tb,
  output logic      ev_overflow,
  output logic      need_flush
);
  localparam int SW  = $clog2(SETS);
  localparam int WW  = $clog2(WAYS);
  localparam int TW  = ADDR_W - SW;
  localparam logic [1:0] SW_DROP = 2'd0, SW_LOG = 2'd1, SW_HOME = 2'd2, SW_ABORT = 2'd3;

  typedef struct packed {
    logic          dirty;
    logic          txv;      // line is a transactional version
    logic          txdirty;
    logic [TW-1:0] tag;
    cid_t          cid;
    tid_t          tid;
    txid_t         txid;
  } line_t;

  line_t                   lines [SETS][WAYS];
  logic [SETS*WAYS-1:0]    valid_q;
  blk_t                    data_q [SETS*WAYS];

  // sweep state
  logic          sweeping;
  logic [1:0]    sw_op;
  txid_t         sw_txid;
  logic [SW-1:0] sw_set;
  logic [WW-1:0] sw_way;

  function automatic logic committed(txid_t t);
    return !txid_newer(t, last_committed);
  endfunction

  // ---------------------------------------------------------------- set view
  logic [SW-1:0] cur_set;
  logic [TW-1:0] req_tag;
  assign req_tag = req_addr[ADDR_W-1:SW];
  assign cur_set = sweeping ? sw_set : req_addr[SW-1:0];

  line_t            L   [WAYS];
  logic [WAYS-1:0]  V;
  logic [WAYS-1:0]  sup;          // superseded committed version
  txid_t            sup_tb [WAYS];
  logic [WAYS-1:0]  has_newer;    // some later version of the block present
  logic [WAYS-1:0]  newer_any;    // a later version exists (logged or not)

  always_comb begin
    for (int i = 0; i < WAYS; i++) begin
      L[i] = lines[cur_set][i];
      V[i] = valid_q[int'(cur_set) * WAYS + i];
    end
    for (int i = 0; i < WAYS; i++) begin
      sup[i]       = 1'b0;
      sup_tb[i]    = '0;
      has_newer[i] = 1'b0;
      newer_any[i] = 1'b0;
      for (int j = 0; j < WAYS; j++) begin
        if (j != i && V[i] && V[j] && L[i].txv && L[j].txv &&
            L[j].tag == L[i].tag && txid_newer(L[j].txid, L[i].txid))
          newer_any[i] = 1'b1;
        if (j != i && V[i] && V[j] && L[i].txv && L[j].txv && L[i].txdirty &&
            L[j].tag == L[i].tag && txid_newer(L[j].txid, L[i].txid)) begin
          has_newer[i] = 1'b1;
          if (committed(L[j].txid) && committed(L[i].txid)) begin
            if (!sup[i] || txid_newer(sup_tb[i], L[j].txid)) sup_tb[i] = L[j].txid;
            sup[i] = 1'b1;
          end
        end
      end
    end
  end

  // ------------------------------------------------------------ CPU lookup
  logic [WAYS-1:0] own_hit;       // store target: own version / plain line
  logic            hit_any;
  logic [WW-1:0]   hit_way;
  logic [WW-1:0]   rd_way;        // newest version for loads
  logic            rd_hit;

  always_comb begin
    own_hit = '0;
    for (int i = 0; i < WAYS; i++)
      own_hit[i] = V[i] && L[i].tag == req_tag &&
                   (req_tx ? (L[i].txv && L[i].txid == req_txid) : !L[i].txv);
    hit_any = |own_hit;
    hit_way = '0;
    for (int i = WAYS - 1; i >= 0; i--) if (own_hit[i]) hit_way = WW'(i);
    rd_hit = 1'b0;
    rd_way = '0;
    for (int i = 0; i < WAYS; i++) begin
      if (V[i] && L[i].tag == req_tag) begin
        if (!rd_hit) begin
          rd_hit = 1'b1; rd_way = WW'(i);
        end else if (L[i].txv && (!L[rd_way].txv || txid_newer(L[i].txid, L[rd_way].txid))) begin
          rd_way = WW'(i);
        end
      end
    end
  end

  // --------------------------------------------------------- victim choice
  typedef enum logic [2:0] {V_INVALID, V_CLEAN, V_SUPER, V_HOME, V_OVERFLOW, V_NONE} vclass_e;
  vclass_e       vcls;
  logic [WW-1:0] vway;

  always_comb begin
    logic found;
    vcls  = V_NONE;
    vway  = '0;
    found = 1'b0;
    // a plain copy of the block a transaction writes is replaced first, so
    // that no stale plain copy outlives the new version
    for (int i = 0; i < WAYS; i++)
      if (!found && req_tx && V[i] && !L[i].txv && L[i].tag == req_tag) begin
        found = 1'b1; vcls = L[i].dirty ? V_HOME : V_CLEAN; vway = WW'(i);
      end
    for (int i = 0; i < WAYS; i++)
      if (!found && !V[i]) begin found = 1'b1; vcls = V_INVALID; vway = WW'(i); end
    for (int i = 0; i < WAYS; i++)
      if (!found && !L[i].txv && !L[i].dirty) begin found = 1'b1; vcls = V_CLEAN; vway = WW'(i); end
    for (int i = 0; i < WAYS; i++)
      if (!found && sup[i]) begin found = 1'b1; vcls = V_SUPER; vway = WW'(i); end
    for (int i = 0; i < WAYS; i++)
      if (!found && !L[i].txv) begin found = 1'b1; vcls = V_HOME; vway = WW'(i); end
    // oldest TxDirty version that has a later version in the set
    for (int i = 0; i < WAYS; i++)
      if (L[i].txv && L[i].txdirty && has_newer[i] &&
          (vcls != V_OVERFLOW || txid_newer(L[vway].txid, L[i].txid)) && !found) begin
        vcls = V_OVERFLOW; vway = WW'(i);
      end
  end

  // ------------------------------------------------------------ sweep line
  line_t         SL;
  logic          sl_v;
  typedef enum logic [2:0] {A_NONE, A_DROP, A_LOG, A_HOME, A_CLEAR, A_INVAL} sact_e;
  sact_e         sact;

  always_comb begin
    SL   = L[sw_way];
    sl_v = V[sw_way];
    sact = A_NONE;
    if (sweeping && sl_v && SL.txv) begin
      unique case (sw_op)
        SW_DROP:  if (sup[sw_way]) sact = A_DROP;
        SW_LOG:   if (SL.txdirty && committed(SL.txid)) sact = A_LOG;
        // a version with a later one (of a still running transaction) is
        // written home and then dropped instead of becoming a plain line
        SW_HOME:  if (!SL.txdirty) sact = SL.dirty ? A_HOME : (newer_any[sw_way] ? A_INVAL : A_CLEAR);
        SW_ABORT: if (SL.txdirty && (SL.txid == sw_txid || txid_newer(SL.txid, sw_txid)))
                    sact = A_INVAL;
        default: ;
      endcase
    end
  end

  // --------------------------------------------------------- write-back ports
  logic cpu_alloc;      // store needs a new line
  assign cpu_alloc = req_valid && req_we && !sweeping && !hit_any;

  always_comb begin
    int vidx;
    int sidx;
    vidx = int'(cur_set) * WAYS + int'(vway);
    sidx = int'(cur_set) * WAYS + int'(sw_way);
    log_valid  = 1'b0;
    log_blk    = '0;
    home_valid = 1'b0;
    home_addr  = '0;
    home_data  = '0;
    if (sweeping) begin
      if (sact == A_LOG) begin
        log_valid = 1'b1;
        log_blk   = '{cid: SL.cid, tid: SL.tid, txid: SL.txid,
                      addr: {SL.tag, sw_set}, data: data_q[sidx]};
      end
      if (sact == A_HOME) begin
        home_valid = 1'b1;
        home_addr  = {SL.tag, sw_set};
        home_data  = data_q[sidx];
      end
    end else if (cpu_alloc) begin
      if (vcls == V_OVERFLOW) begin
        log_valid = 1'b1;
        log_blk   = '{cid: L[vway].cid, tid: L[vway].tid, txid: L[vway].txid,
                      addr: {L[vway].tag, cur_set}, data: data_q[vidx]};
      end
      if (vcls == V_HOME) begin
        home_valid = 1'b1;
        home_addr  = {L[vway].tag, cur_set};
        home_data  = data_q[vidx];
      end
    end
  end

  // -------------------------------------------------------------- handshake
  logic [WW-1:0] alloc_way;
  assign alloc_way = hit_any ? hit_way : vway;
  logic alloc_go;
  always_comb begin
    unique case (vcls)
      V_INVALID, V_CLEAN, V_SUPER: alloc_go = 1'b1;
      V_HOME:                      alloc_go = home_ready;
      V_OVERFLOW:                  alloc_go = log_ready;
      default:                     alloc_go = 1'b0;
    endcase
  end

  assign req_ready  = !sweeping && req_valid && (!req_we || hit_any || alloc_go);
  assign need_flush = cpu_alloc && vcls == V_NONE;
  assign sweep_busy = sweeping;

  logic sweep_step;   // current sweep line finished this cycle
  always_comb begin
    unique case (sact)
      A_LOG:   sweep_step = log_ready;
      A_HOME:  sweep_step = home_ready;
      default: sweep_step = 1'b1;
    endcase
    sweep_step = sweeping && sweep_step;
  end

  always_comb begin
    ev_alloc      = req_ready && req_we && req_tx && !hit_any;
    ev_alloc_txid = req_txid;
    ev_super      = 1'b0;
    ev_super_ta   = '0;
    ev_super_tb   = '0;
    if (sweeping && sact == A_DROP) begin
      ev_super = 1'b1; ev_super_ta = SL.txid; ev_super_tb = sup_tb[sw_way];
    end else if (req_ready && req_we && !hit_any && vcls == V_SUPER) begin
      ev_super = 1'b1; ev_super_ta = L[vway].txid; ev_super_tb = sup_tb[vway];
    end
    ev_overflow = req_ready && req_we && !hit_any && vcls == V_OVERFLOW;
  end

  // ------------------------------------------------------------ state update
  always_ff @(posedge clk) begin
    if (!sweeping && req_ready && req_we) begin
      logic [WW-1:0] w;
      w = hit_any ? hit_way : vway;
      data_q[int'(cur_set) * WAYS + int'(w)] <= req_wdata;
      lines[cur_set][w] <= '{dirty: 1'b1, txv: req_tx, txdirty: req_tx, tag: req_tag,
                             cid: req_cid, tid: req_tid, txid: req_txid};
    end else if (sweep_step) begin
      unique case (sact)
        A_LOG:   lines[sw_set][sw_way].txdirty <= 1'b0;
        A_HOME:  begin lines[sw_set][sw_way].dirty <= 1'b0; lines[sw_set][sw_way].txv <= 1'b0; end
        A_CLEAR: lines[sw_set][sw_way].txv <= 1'b0;
        default: ;
      endcase
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid_q    <= '0;
      sweeping   <= 1'b0;
      sw_op      <= SW_DROP;
      sw_txid    <= '0;
      sw_set     <= '0;
      sw_way     <= '0;
      sweep_done <= 1'b0;
      resp_valid <= 1'b0;
      resp_hit   <= 1'b0;
      resp_rdata <= '0;
    end else begin
      sweep_done <= 1'b0;
      resp_valid <= req_ready && !req_we;
      if (req_ready && !req_we) begin
        resp_hit   <= rd_hit;
        resp_rdata <= data_q[int'(cur_set) * WAYS + int'(rd_way)];
      end
      if (!sweeping && req_ready && req_we)
        valid_q[int'(cur_set) * WAYS + int'(alloc_way)] <= 1'b1;
      if (sweeping) begin
        if (sweep_step) begin
          if (sact == A_DROP || sact == A_INVAL || (sact == A_HOME && newer_any[sw_way]))
            valid_q[int'(sw_set) * WAYS + int'(sw_way)] <= 1'b0;
          sw_way <= sw_way + 1'b1;
          if (sw_way == WW'(WAYS - 1)) begin
            sw_set <= sw_set + 1'b1;
            if (sw_set == SW'(SETS - 1)) begin
              sweeping   <= 1'b0;
              sweep_done <= 1'b1;
            end
          end
        end
      end else if (sweep_valid) begin
        sweeping <= 1'b1;
        sw_op    <= sweep_op;
        sw_txid  <= sweep_txid;
        sw_set   <= '0;
        sw_way   <= '0;
      end
    end
  end

  // A write-back request must stay up until it is taken.
  assert property (@(posedge clk) disable iff (!rst_n)
                   (log_valid && !log_ready && sweeping) |=> log_valid);

endmodule
