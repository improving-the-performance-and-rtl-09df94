// loc_top: Loose-Ordering Consistency (LOC) subsystem between a core and a
// persistent main memory.
//
// It joins the LOC-extended last-level cache (tx_cache, with the Tx Dirty
// Block Table and Flusher), the Commit/Recovery controller (crl, holding the
// Tx State Table, the dependency-pair buffer and LastCommittedTxID), the
// memory-controller extension that lays out the memory log area
// (log_group_writer) and the crash-recovery engine (recovery_engine).
//
// Ports. The core side has a transactional command port (TxBegin, TxCommit,
// TxAbort, TxFlush) and a 64-byte block load/store port; req_tx marks a store
// inside the running transaction, which is tagged with the current TxID. The
// memory side is a single in-order write port (a write is taken as persistent
// once accepted) and a read port with one outstanding read, in front of the
// persistent memory, which is outside this design. The core, the upper cache
// levels and the conventional memory controller are outside too.
//
// Modes. After reset the subsystem is not ready. A pulse on recover_start
// runs the recovery engine, which owns the memory ports until it finishes;
// it then loads the log pointers and the next TxID and ready goes high. In
// normal mode, memory writes from the log writer take precedence over home
// write-backs from the cache; the controller's sequencing already orders log
// writes before the in-place writes of the same window.
//
// Status outputs count the mechanisms at work: completed speculation windows,
// stalled TxBegin cycles, dependency pairs, coalesced versions (writes merged
// across transactions), version-overflow evictions, full-set stalls and
// block groups written.
module loc_top
  import loc_pkg::*;
#(
  parameter int          SETS     = 1024,
  parameter int          WAYS     = 16,
  parameter int          SD       = 16,
  parameter int          NTX      = 128,
  parameter logic [31:0] LOG_BASE = 32'hFFF8_0000,
  parameter int          LOG_BLKS = 524288,
  parameter int          DEP_BLKS = 512
) (
  input  logic        clk,
  input  logic        rst_n,
  // mode
  input  logic        recover_start,
  output logic        ready,
  output logic        recovering,
  // core: transactional instructions
  input  logic        tx_cmd_valid,
  output logic        tx_cmd_ready,
  input  logic [1:0]  tx_cmd_op,       // 0 TxBegin 1 TxCommit 2 TxAbort 3 TxFlush
  input  cid_t        core_cid,
  input  tid_t        core_tid,
  output logic        tx_active,
  output txid_t       cur_txid,
  output txid_t       last_committed,  // CheckMaxCommit
  // core: loads and stores
  input  logic        req_valid,
  output logic        req_ready,
  input  logic        req_we,
  input  logic        req_tx,
  input  baddr_t      req_addr,
  input  blk_t        req_wdata,
  output logic        resp_valid,
  output logic        resp_hit,
  output blk_t        resp_rdata,
  // persistent memory
  output logic        mem_wvalid,
  input  logic        mem_wready,
  output baddr_t      mem_waddr,
  output blk_t        mem_wdata,
  output logic        mem_rvalid,
  input  logic        mem_rready,
  output baddr_t      mem_raddr,
  input  logic        mem_rresp_valid,
  input  blk_t        mem_rresp_data,
  // status
  output logic        err,
  output logic [31:0] windows_done,
  output logic [31:0] begin_stalls,
  output logic [31:0] pairs_total,
  output logic [31:0] coalesced,
  output logic [31:0] overflows,
  output logic [31:0] full_stalls,
  output logic [31:0] groups_written,
  output logic [15:0] rec_committed,
  output logic [15:0] rec_discarded,
  output logic [31:0] rec_restored
);
  localparam int DEP_DEPTH = DEP_BLKS * PAIRS_PER_BLK;

  // ------------------------------------------------------------- mode
  logic rec_busy, rec_done;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) ready <= 1'b0;
    else if (rec_done) ready <= 1'b1;
  end
  assign recovering = rec_busy;

  // ------------------------------------------------------------ wiring
  logic       cpu_hold;
  logic       sweep_valid, sweep_done, sweep_busy;
  logic [1:0] sweep_op;
  txid_t      sweep_txid;
  logic       ev_alloc, ev_super, ev_overflow, need_flush;
  txid_t      ev_alloc_txid, ev_super_ta, ev_super_tb;
  logic       clog_valid, clog_ready;
  log_blk_t   clog_blk;
  logic       home_valid, home_ready;
  baddr_t     home_addr;
  blk_t       home_data;
  logic       lw_valid, lw_ready, lw_flush, lw_idle;
  blk_tag_t   lw_tag;
  blk_t       lw_data;
  logic       lw_dep_valid, lw_dep_ready;
  logic [$clog2(DEP_BLKS)-1:0] lw_dep_idx;
  blk_t       lw_dep_data;
  logic       lw_head_valid, lw_head_ready, lw_head_trunc;
  txid_t      lw_head_win_base;
  logic [15:0] lw_head_dep_count;
  logic       lw_mvalid, lw_mready;
  baddr_t     lw_maddr;
  blk_t       lw_mdata;
  logic       rec_wvalid, rec_wready;
  baddr_t     rec_waddr;
  blk_t       rec_wdata;
  logic       rec_rvalid;
  baddr_t     rec_raddr;
  logic [31:0] load_group;
  logic [63:0] load_sid;
  txid_t      load_txid;
  logic [31:0] lw_next_group, lw_start_group;
  logic [63:0] lw_next_sid, lw_start_sid;
  logic       crl_err;
  logic       c_req_valid;

  assign c_req_valid = req_valid && ready && !cpu_hold;

  tx_cache #(.SETS(SETS), .WAYS(WAYS)) u_cache (
    .clk, .rst_n,
    .req_valid(c_req_valid), .req_ready, .req_we, .req_tx, .req_addr, .req_wdata,
    .req_txid(cur_txid), .req_cid(core_cid), .req_tid(core_tid),
    .resp_valid, .resp_hit, .resp_rdata,
    .last_committed,
    .sweep_valid, .sweep_op, .sweep_txid, .sweep_busy, .sweep_done,
    .log_valid(clog_valid), .log_ready(clog_ready), .log_blk(clog_blk),
    .home_valid, .home_ready, .home_addr, .home_data,
    .ev_alloc, .ev_alloc_txid, .ev_super, .ev_super_ta, .ev_super_tb,
    .ev_overflow, .need_flush
  );

  crl #(.SD(SD), .NTX(NTX), .DEP_DEPTH(DEP_DEPTH), .DEP_BLKS(DEP_BLKS)) u_crl (
    .clk, .rst_n,
    .cmd_valid(tx_cmd_valid && ready), .cmd_ready(tx_cmd_ready), .cmd_op(tx_cmd_op),
    .cmd_cid(core_cid), .cmd_tid(core_tid),
    .tx_active, .cur_txid, .last_committed, .cpu_hold, .err(crl_err),
    .init_valid(rec_done), .init_txid(load_txid),
    .sweep_valid, .sweep_op, .sweep_txid, .sweep_done,
    .ev_alloc, .ev_alloc_txid, .ev_super, .ev_super_ta, .ev_super_tb, .need_flush,
    .clog_valid, .clog_ready, .clog_blk,
    .lw_valid, .lw_ready, .lw_tag, .lw_data, .lw_flush, .lw_idle,
    .lw_dep_valid, .lw_dep_ready, .lw_dep_idx, .lw_dep_data,
    .lw_head_valid, .lw_head_ready, .lw_head_trunc, .lw_head_win_base, .lw_head_dep_count,
    .windows_done, .begin_stalls, .pairs_total
  );

  log_group_writer #(.LOG_BASE(LOG_BASE), .LOG_BLKS(LOG_BLKS), .DEP_BLKS(DEP_BLKS)) u_lw (
    .clk, .rst_n,
    .blk_valid(lw_valid), .blk_ready(lw_ready), .blk_tag(lw_tag), .blk_data(lw_data),
    .flush(lw_flush), .idle(lw_idle),
    .dep_valid(lw_dep_valid), .dep_ready(lw_dep_ready), .dep_idx(lw_dep_idx), .dep_data(lw_dep_data),
    .head_valid(lw_head_valid), .head_ready(lw_head_ready), .head_trunc(lw_head_trunc),
    .head_win_base(lw_head_win_base), .head_dep_count(lw_head_dep_count),
    .load_valid(rec_done), .load_group, .load_sid,
    .next_group(lw_next_group), .next_sid(lw_next_sid),
    .start_group(lw_start_group), .start_sid(lw_start_sid), .groups_written,
    .mem_wvalid(lw_mvalid), .mem_wready(lw_mready), .mem_waddr(lw_maddr), .mem_wdata(lw_mdata)
  );

  recovery_engine #(.LOG_BASE(LOG_BASE), .LOG_BLKS(LOG_BLKS), .DEP_BLKS(DEP_BLKS), .SD(SD)) u_rec (
    .clk, .rst_n, .start(recover_start && !ready), .busy(rec_busy), .done(rec_done),
    .rd_valid(rec_rvalid), .rd_ready(mem_rready), .rd_addr(rec_raddr),
    .rresp_valid(mem_rresp_valid), .rresp_data(mem_rresp_data),
    .wvalid(rec_wvalid), .wready(rec_wready), .waddr(rec_waddr), .wdata(rec_wdata),
    .load_group, .load_sid, .load_txid,
    .n_committed(rec_committed), .n_discarded(rec_discarded), .n_restored(rec_restored)
  );

  // ------------------------------------------------- memory write port
  always_comb begin
    rec_wready = 1'b0;
    lw_mready  = 1'b0;
    home_ready = 1'b0;
    if (rec_busy) begin
      mem_wvalid = rec_wvalid; mem_waddr = rec_waddr; mem_wdata = rec_wdata;
      rec_wready = mem_wready;
    end else if (lw_mvalid) begin
      mem_wvalid = 1'b1; mem_waddr = lw_maddr; mem_wdata = lw_mdata;
      lw_mready  = mem_wready;
    end else begin
      mem_wvalid = home_valid; mem_waddr = home_addr; mem_wdata = home_data;
      home_ready = mem_wready;
    end
  end

  assign mem_rvalid = rec_busy && rec_rvalid;
  assign mem_raddr  = rec_raddr;

  // ------------------------------------------------------------ status
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      coalesced   <= '0;
      overflows   <= '0;
      full_stalls <= '0;
    end else begin
      if (ev_super)    coalesced   <= coalesced + 1'b1;
      if (ev_overflow) overflows   <= overflows + 1'b1;
      if (need_flush && !cpu_hold) full_stalls <= full_stalls + 1'b1;
    end
  end
  assign err = crl_err;

  // A transactional store needs a running transaction.
  assert property (@(posedge clk) disable iff (!rst_n)
                   (req_valid && req_ready && req_we && req_tx) |-> tx_active);

endmodule
