// crl: Commit/Recovery controller, normal-operation part (the recovery scan
// after a crash is recovery_engine).
//
// What it does.
//  * Receives the transactional instructions TxBegin, TxCommit, TxAbort and
//    TxFlush from the core, hands out TxIDs in sequence (8-bit, circular) and
//    keeps each transaction's entry in the Tx State Table (txst, inside).
//  * Keeps the LastCommittedTxID register, read by CheckMaxCommit: a
//    transaction's commit sets it to its own TxID. Transactions run one after
//    another on the single supported thread, so all earlier ones have then
//    committed or aborted.
//  * Tracks the speculation window: up to SD transactions (default 16, the
//    paper's setting) may persist out of order. TxBegin stalls (cmd_ready low)
//    when SD transactions have begun in the window, until it completes.
//  * Stamps TxCnt on every block going to the log: the block that brings the
//    transaction's Wrts (blocks logged or coalesced so far) up to its TxCnt
//    (blocks it wrote), the transaction being committed, carries TxCnt; all
//    other blocks carry 0 (the count-based commit of Eager Commit).
//  * Counts coalesced versions <Ta,Tb> in an SD x SD matrix and, when the
//    window completes, turns every non-zero entry into a Transaction
//    Dependency Pair <Ta,Tb,n> in the 32 KB pair buffer (dep_pair_buffer,
//    inside), ordered by Ta so recovery can walk them tail to head.
//
// Window completion (TxCommit of the SD-th transaction, TxFlush, TxAbort, or
// a store the cache cannot place) runs these steps, holding the core's cache
// requests (cpu_hold):
//   ABORT   (TxAbort only) cache sweep removing the aborted versions
//   DROP    cache sweep dropping superseded committed versions
//   LOG     cache sweep writing committed versions to the log (phase: log write)
//   CLOSE   close the partly filled block group
//   PAIRS   matrix -> pair buffer; DEPW pair buffer -> log
//   HEAD    log head with window base and pair count: the window is durable
//   INPLACE Phase of the window's transactions := in-place write
//   HOME    cache sweep writing the logged versions home
//   TRUNC   log head with start moved to the end: log truncated
//   FREE    Phase := complete, entries freed
// A transaction still active at that point (only after TxFlush or a full
// set) keeps its versions in the cache and becomes the first transaction of
// the next window.
//
// From the paper: the instructions, TxST fields and transitions, SD,
// LastCommittedTxID, stalling new transactions until the window completes,
// the pair buffer and its write-back at window end, logging before in-place
// writes. Own choices: the exact step order above, eager in-place write-back
// at the end of each window (so at most one window is live in the log), the
// SD x SD pair matrix, closing the window on an abort, single-thread
// sequential transactions (no nested TxBegin).
// Known limitation: if a transaction aborts after one of its writes pushed an
// older committed version out of the cache by version overflow (into the log
// only), that older version never reaches its home location once the log is
// truncated.
module crl
  import loc_pkg::*;
#(
  parameter int SD        = 16,
  parameter int NTX       = 128,
  parameter int DEP_DEPTH = 8192,
  parameter int DEP_BLKS  = 512
) (
  input  logic        clk,
  input  logic        rst_n,
  // transactional instructions
  input  logic        cmd_valid,
  output logic        cmd_ready,
  input  logic [1:0]  cmd_op,        // 0 TxBegin, 1 TxCommit, 2 TxAbort, 3 TxFlush
  input  cid_t        cmd_cid,
  input  tid_t        cmd_tid,
  output logic        tx_active,
  output txid_t       cur_txid,
  output txid_t       last_committed, // LastCommittedTxID (CheckMaxCommit)
  output logic        cpu_hold,
  output logic        err,
  // start values after recovery
  input  logic        init_valid,
  input  txid_t       init_txid,
  // cache
  output logic        sweep_valid,
  output logic [1:0]  sweep_op,
  output txid_t       sweep_txid,
  input  logic        sweep_done,
  input  logic        ev_alloc,
  input  txid_t       ev_alloc_txid,
  input  logic        ev_super,
  input  txid_t       ev_super_ta,
  input  txid_t       ev_super_tb,
  input  logic        need_flush,
  input  logic        clog_valid,
  output logic        clog_ready,
  input  log_blk_t    clog_blk,
  // log writer
  output logic        lw_valid,
  input  logic        lw_ready,
  output blk_tag_t    lw_tag,
  output blk_t        lw_data,
  output logic        lw_flush,
  input  logic        lw_idle,
  output logic        lw_dep_valid,
  input  logic        lw_dep_ready,
  output logic [$clog2(DEP_BLKS)-1:0] lw_dep_idx,
  output blk_t        lw_dep_data,
  output logic        lw_head_valid,
  input  logic        lw_head_ready,
  output logic        lw_head_trunc,
  output txid_t       lw_head_win_base,
  output logic [15:0] lw_head_dep_count,
  // status
  output logic [31:0] windows_done,
  output logic [31:0] begin_stalls,
  output logic [31:0] pairs_total
);
  localparam logic [1:0] OP_BEGIN = 2'd0, OP_COMMIT = 2'd1, OP_ABORT = 2'd2, OP_FLUSH = 2'd3;
  localparam logic [1:0] SW_DROP = 2'd0, SW_LOG = 2'd1, SW_HOME = 2'd2, SW_ABORT = 2'd3;
  localparam logic [2:0] TXST_BEGIN = 3'd0, TXST_COMMIT = 3'd1, TXST_ABORT = 3'd2,
                         TXST_PHASE = 3'd3, TXST_FREE = 3'd4;
  localparam int SDW = $clog2(SD);
  localparam int DW  = $clog2(DEP_DEPTH);

  typedef enum logic [3:0] {
    C_IDLE, C_ABORT, C_DROP, C_LOG, C_CLOSE, C_PAIRS, C_DEPW, C_HEAD,
    C_INPLACE, C_HOME, C_TRUNC, C_FREE
  } cstate_e;

  cstate_e      cs;
  logic         sweep_issued;
  txid_t        next_txid;
  txid_t        win_base;
  logic [SDW:0] win_n;
  logic [SDW:0] k;              // loop index over window slots
  logic [2*SDW:0] pk;           // loop index over matrix
  logic         free_step;      // FREE: 0 = set phase complete, 1 = free
  logic [DW:0]  dk;             // dep block index
  logic [15:0]  pm [SD][SD];    // coalesced-version counts <a, b>

  // ------------------------------------------------------------- TxST
  logic        t_cmd_valid;
  logic [2:0]  t_cmd_op;
  txid_t       t_cmd_txid;
  tx_phase_e   t_cmd_phase;
  logic        t_inc_wrts;
  txid_t       t_inc_wrts_txid;
  txst_entry_t st_log, st_k;
  logic        t_err;
  txid_t       k_txid;

  assign k_txid = win_base + txid_t'(k);

  txst #(.NTX(NTX)) u_txst (
    .clk, .rst_n,
    .cmd_valid(t_cmd_valid), .cmd_op(t_cmd_op), .cmd_txid(t_cmd_txid),
    .cmd_cid, .cmd_tid, .cmd_phase(t_cmd_phase),
    .inc_cnt(ev_alloc), .inc_cnt_txid(ev_alloc_txid),
    .inc_wrts(t_inc_wrts), .inc_wrts_txid(t_inc_wrts_txid),
    .rd_a_txid(clog_blk.txid), .rd_a(st_log),
    .rd_b_txid(k_txid), .rd_b(st_k),
    .err(t_err)
  );

  // ------------------------------------------------------ pair buffer
  logic        d_clear, d_push;
  dep_pair_t   d_pair;
  logic [DW:0] d_count;
  logic        d_full, d_overflow;
  blk_t        d_blk;

  dep_pair_buffer #(.DEPTH(DEP_DEPTH)) u_dep (
    .clk, .rst_n, .clear(d_clear), .push(d_push), .push_pair(d_pair),
    .count(d_count), .full(d_full), .overflow(d_overflow),
    .rd_blk_idx(dk[DW-1:0]), .rd_blk(d_blk)
  );

  // ---------------------------------------------------- TxCnt stamping
  always_comb begin
    lw_valid   = clog_valid;
    clog_ready = lw_ready;
    lw_data    = clog_blk.data;
    lw_tag     = '0;
    lw_tag.cid  = clog_blk.cid;
    lw_tag.tid  = clog_blk.tid;
    lw_tag.txid = clog_blk.txid;
    lw_tag.addr = clog_blk.addr;
    lw_tag.txcnt = (st_log.state == TX_COMMITTED && st_log.wrts + 1'b1 == st_log.txcnt)
                   ? st_log.txcnt : '0;
    t_inc_wrts      = (clog_valid && lw_ready) || ev_super;
    t_inc_wrts_txid = (clog_valid && lw_ready) ? clog_blk.txid : ev_super_ta;
  end

  // ---------------------------------------------------- command decode
  logic win_full;
  logic start_complete;
  assign win_full  = (win_n == (SDW+1)'(SD));
  assign cmd_ready = (cs == C_IDLE) && !(cmd_op == OP_BEGIN && (win_full || tx_active)) &&
                     !(cmd_op inside {OP_COMMIT, OP_ABORT} && !tx_active);
  assign cpu_hold  = (cs != C_IDLE);
  assign err       = t_err || d_overflow;

  always_comb begin
    t_cmd_valid = 1'b0;
    t_cmd_op    = TXST_BEGIN;
    t_cmd_txid  = cur_txid;
    t_cmd_phase = PH_LOG_WRITE;
    if (cs == C_IDLE && cmd_valid && cmd_ready && cmd_op != OP_FLUSH) begin
      t_cmd_valid = 1'b1;
      unique case (cmd_op)
        OP_BEGIN:  begin t_cmd_op = TXST_BEGIN; t_cmd_txid = next_txid; end
        OP_COMMIT: t_cmd_op = TXST_COMMIT;
        default:   t_cmd_op = TXST_ABORT;
      endcase
    end else if (cs == C_INPLACE && k < win_n && st_k.state == TX_COMMITTED) begin
      t_cmd_valid = 1'b1; t_cmd_op = TXST_PHASE; t_cmd_txid = k_txid; t_cmd_phase = PH_IN_PLACE;
    end else if (cs == C_FREE && k < win_n && st_k.state != TX_ACTIVE) begin
      t_cmd_valid = 1'b1; t_cmd_txid = k_txid;
      if (!free_step) begin t_cmd_op = TXST_PHASE; t_cmd_phase = PH_COMPLETE; end
      else            t_cmd_op = TXST_FREE;
    end
  end

  // sweeps
  always_comb begin
    sweep_valid = 1'b0;
    sweep_op    = SW_DROP;
    sweep_txid  = cur_txid;
    unique case (cs)
      C_ABORT: begin sweep_valid = !sweep_issued; sweep_op = SW_ABORT; end
      C_DROP:  begin sweep_valid = !sweep_issued; sweep_op = SW_DROP;  end
      C_LOG:   begin sweep_valid = !sweep_issued; sweep_op = SW_LOG;   end
      C_HOME:  begin sweep_valid = !sweep_issued; sweep_op = SW_HOME;  end
      default: ;
    endcase
  end

  // pair matrix -> buffer
  logic [SDW-1:0] pa, pb;
  assign pa = pk[2*SDW-1:SDW];
  assign pb = pk[SDW-1:0];
  always_comb begin
    d_push = (cs == C_PAIRS) && !pk[2*SDW] && pm[pa][pb] != '0;
    d_pair = '{ta: win_base + txid_t'(pa), tb: win_base + txid_t'(pb), n: pm[pa][pb]};
  end

  logic [DW:0] dep_blks;
  assign dep_blks = (d_count + (DW+1)'(PAIRS_PER_BLK - 1)) / (DW+1)'(PAIRS_PER_BLK);

  assign lw_flush          = (cs == C_CLOSE) && !sweep_issued;
  assign lw_dep_valid      = (cs == C_DEPW) && dk < dep_blks;
  assign lw_dep_idx        = dk[$clog2(DEP_BLKS)-1:0];
  assign lw_dep_data       = d_blk;
  assign lw_head_valid     = (cs == C_HEAD) || (cs == C_TRUNC);
  assign lw_head_trunc     = (cs == C_TRUNC);
  assign lw_head_win_base  = win_base;
  assign lw_head_dep_count = (cs == C_TRUNC) ? 16'd0 : 16'(d_count);
  assign d_clear           = (cs == C_FREE) && k == win_n;

  assign start_complete = (win_full && !tx_active) || need_flush;

  // ------------------------------------------------------ sequencing
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cs             <= C_IDLE;
      sweep_issued   <= 1'b0;
      next_txid      <= '0;
      cur_txid       <= '0;
      tx_active      <= 1'b0;
      last_committed <= '1;
      win_base       <= '0;
      win_n          <= '0;
      k              <= '0;
      pk             <= '0;
      dk             <= '0;
      free_step      <= 1'b0;
      windows_done   <= '0;
      begin_stalls   <= '0;
      pairs_total    <= '0;
      for (int a = 0; a < SD; a++)
        for (int b = 0; b < SD; b++) pm[a][b] <= '0;
    end else begin
      if (init_valid) begin
        next_txid      <= init_txid;
        win_base       <= init_txid;
        last_committed <= init_txid - 1'b1;
      end
      if (ev_super) begin
        pm[SDW'(ev_super_ta - win_base)][SDW'(ev_super_tb - win_base)] <=
          pm[SDW'(ev_super_ta - win_base)][SDW'(ev_super_tb - win_base)] + 1'b1;
      end
      if (cmd_valid && !cmd_ready && cmd_op == OP_BEGIN)
        begin_stalls <= begin_stalls + 1'b1;
      unique case (cs)
        C_IDLE: begin
          sweep_issued <= 1'b0;
          if (cmd_valid && cmd_ready) begin
            unique case (cmd_op)
              OP_BEGIN: begin
                cur_txid  <= next_txid;
                next_txid <= next_txid + 1'b1;
                tx_active <= 1'b1;
                win_n     <= win_n + 1'b1;
              end
              OP_COMMIT: begin
                tx_active      <= 1'b0;
                last_committed <= cur_txid;
              end
              OP_ABORT: begin
                tx_active <= 1'b0;
                cs        <= C_ABORT;
              end
              default: cs <= C_DROP;     // TxFlush
            endcase
          end else if (start_complete) begin
            cs <= C_DROP;
          end
        end
        C_ABORT, C_DROP, C_LOG, C_HOME: begin
          if (sweep_valid) sweep_issued <= 1'b1;
          if (sweep_issued && sweep_done) begin
            sweep_issued <= 1'b0;
            unique case (cs)
              C_ABORT: cs <= C_DROP;
              C_DROP:  cs <= C_LOG;
              C_LOG:   cs <= C_CLOSE;
              default: begin cs <= C_TRUNC; end
            endcase
          end
        end
        C_CLOSE: begin
          sweep_issued <= 1'b1;
          if (sweep_issued && lw_idle) begin
            sweep_issued <= 1'b0;
            cs <= C_PAIRS;
            pk <= '0;
          end
        end
        C_PAIRS: begin
          if (pk[2*SDW]) begin
            cs <= C_DEPW;
            dk <= '0;
          end else begin
            pk <= pk + 1'b1;
            if (d_push) pairs_total <= pairs_total + 1'b1;
          end
        end
        C_DEPW: begin
          if (dk >= dep_blks) cs <= C_HEAD;
          else if (lw_dep_ready) dk <= dk + 1'b1;
        end
        C_HEAD: if (lw_head_ready) begin cs <= C_INPLACE; k <= '0; end
        C_INPLACE: begin
          if (k == win_n) cs <= C_HOME;
          else k <= k + 1'b1;
        end
        C_TRUNC: if (lw_head_ready) begin cs <= C_FREE; k <= '0; free_step <= 1'b0; end
        C_FREE: begin
          if (k == win_n) begin
            cs           <= C_IDLE;
            windows_done <= windows_done + 1'b1;
            win_base     <= tx_active ? cur_txid : next_txid;
            win_n        <= tx_active ? (SDW+1)'(1) : '0;
            for (int a = 0; a < SD; a++)
              for (int b = 0; b < SD; b++) pm[a][b] <= '0;
          end else if (st_k.state == TX_ACTIVE || free_step) begin
            k         <= k + 1'b1;
            free_step <= 1'b0;
          end else begin
            free_step <= 1'b1;
          end
        end
        default: cs <= C_IDLE;
      endcase
    end
  end

  // Coalescing only happens between transactions of the current window.
  assert property (@(posedge clk) disable iff (!rst_n)
                   ev_super |-> (txid_t'(ev_super_ta - win_base) < txid_t'(SD) &&
                                 txid_t'(ev_super_tb - win_base) < txid_t'(SD)));

endmodule
