// recovery_engine: the recovery half of the Commit/Recovery Logic. After a
// system crash it brings persistent memory back to a consistent state from the
// memory log area, without any commit record (Eager Commit).
//
// Steps (the paper's, in its order):
//   HEAD   read the log head: start group, its SID, the window's first TxID
//          and how many dependency pairs were written. A head without the
//          magic word means an empty log: a fresh head is written.
//   SCAN1  read the META block of each block group from start on, as long as
//          its SID is the expected one (a group whose META never reached
//          memory ends the log). For every valid BLK-TAG count one logged block
//          for its TxID and remember a non-zero TxCnt.
//   DEP    read the dependency pairs <Ta,Tb,n> from tail to head. If Tb is
//          committed, add n to Ta's count, otherwise Ta cannot commit.
//   CUT    walk the window's TxIDs in order. A transaction is committed when
//          logged + added blocks equal its TxCnt and no pair failed; one with
//          no TxCnt-bearing block (all its blocks coalesced into later ones)
//          is committed when it has pairs and none failed. From the first
//          transaction that is in the log but not committed on, all are
//          discarded (in-order commit).
//   SCAN2  read the groups again and copy every data block of a committed
//          transaction to its home address (ADDR), in log order.
//   TRUNC  write a head that starts after the last group: log empty.
// The log pointers and the next free TxID are then given to the log writer
// and the controller (load outputs, valid with done).
//
// Interfaces: one memory read outstanding at a time (rd_valid/rd_ready, then
// rresp_valid with data), writes on an in-order port (wvalid/wready).
// Timing: about 2 reads per META, 1 read + 1 write per restored block, one
// cycle per tag and per pair.
//
// From the paper: the three recovery steps, count-based commit, reverse pair
// order, in-order cut, copy to home, discard. Own choices: log layout and head
// (see log_group_writer), the rule for transactions without a TxCnt-bearing
// block, one live window in the log (the controller checkpoints every window
// before starting the next), next TxID = window base + SD.
module recovery_engine
  import loc_pkg::*;
#(
  parameter logic [31:0] LOG_BASE = 32'hFFF8_0000,
  parameter int          LOG_BLKS = 524288,
  parameter int          DEP_BLKS = 512,
  parameter int          SD       = 16
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  output logic        busy,
  output logic        done,           // pulse
  // memory read
  output logic        rd_valid,
  input  logic        rd_ready,
  output baddr_t      rd_addr,
  input  logic        rresp_valid,
  input  blk_t        rresp_data,
  // memory write
  output logic        wvalid,
  input  logic        wready,
  output baddr_t      waddr,
  output blk_t        wdata,
  // results
  output logic [31:0] load_group,
  output logic [63:0] load_sid,
  output txid_t       load_txid,
  output logic [15:0] n_committed,
  output logic [15:0] n_discarded,
  output logic [31:0] n_restored
);
  localparam int NGROUPS = (LOG_BLKS - 1 - DEP_BLKS) / GROUP_BLKS;
  localparam logic [31:0] GROUP_BASE = LOG_BASE + 32'(1 + DEP_BLKS);

  typedef enum logic [3:0] {
    R_IDLE, R_HEAD, R_FRESH, R_CLR, R_SCAN1, R_TAGS1, R_DEP, R_CUT,
    R_SCAN2, R_TAGS2, R_DATA, R_HOME, R_TRUNC, R_DONE
  } rstate_e;

  rstate_e     rs;
  logic        rd_pend;            // read issued, waiting for data
  log_head_t   head;
  meta_blk_t   meta;
  blk_t        dblk;
  logic [31:0] g, end_group;
  logic [63:0] sid, end_sid;
  logic [2:0]  ti;
  logic [15:0] pi;                 // pairs left to process
  logic [8:0]  ci;                 // clear / cut index

  logic [TXCNT_W-1:0] cnt   [256];
  logic [TXCNT_W-1:0] total [256];
  logic [TXCNT_W-1:0] add   [256];
  logic [255:0] has_total, has_pair, pfail, present, final_c;
  logic         cut;

  function automatic baddr_t gaddr(logic [31:0] grp, logic [2:0] s);
    return GROUP_BASE + grp * GROUP_BLKS + 32'(s);
  endfunction

  function automatic logic comm(txid_t t);
    if (pfail[t]) return 1'b0;
    if (has_total[t]) return (cnt[t] + add[t]) == total[t];
    return has_pair[t];
  endfunction

  logic        dblk_ok;
  logic [15:0] dblk_idx, pblk;
  assign pblk = (pi - 1'b1) / 16'(PAIRS_PER_BLK);
  log_head_t rhead;
  meta_blk_t rmeta;
  assign rhead = rresp_data;
  assign rmeta = rresp_data;
  blk_tag_t  tg;
  dep_pair_t pr;
  txid_t     ct;
  assign tg = meta.tags[ti];
  assign pr = dblk[32*((pi - 16'd1) % 16'(PAIRS_PER_BLK)) +: 32];
  assign ct = head.win_base + txid_t'(ci);

  assign busy = (rs != R_IDLE);

  // read requests
  always_comb begin
    rd_valid = 1'b0;
    rd_addr  = '0;
    if (!rd_pend) begin
      unique case (rs)
        R_HEAD:           begin rd_valid = 1'b1; rd_addr = LOG_BASE; end
        R_SCAN1:          begin rd_valid = 1'b1; rd_addr = gaddr(g, 3'd7); end
        R_SCAN2:          if (!(g == end_group && sid == end_sid)) begin
                            rd_valid = 1'b1; rd_addr = gaddr(g, 3'd7);
                          end
        R_DEP:            if (pi != 0 && (!dblk_ok || dblk_idx != pblk)) begin
                            rd_valid = 1'b1;
                            rd_addr  = LOG_BASE + 32'd1 + 32'(pblk);
                          end
        R_DATA:           begin rd_valid = 1'b1; rd_addr = gaddr(g, ti); end
        default: ;
      endcase
    end
  end

  // writes
  always_comb begin
    log_head_t h;
    h = '0;
    h.magic       = LOG_MAGIC;
    h.start_group = end_group;
    h.start_sid   = end_sid;
    h.win_base    = (head.magic == LOG_MAGIC) ? head.win_base + txid_t'(SD) : '0;
    h.dep_count   = '0;
    wvalid = 1'b0;
    waddr  = '0;
    wdata  = '0;
    if (rs == R_HOME) begin
      wvalid = 1'b1; waddr = tg.addr; wdata = dblk;
    end else if (rs == R_TRUNC || rs == R_FRESH) begin
      wvalid = 1'b1; waddr = LOG_BASE; wdata = h;
    end
  end


  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rs <= R_IDLE; rd_pend <= 1'b0; done <= 1'b0;
      head <= '0; meta <= '0; dblk <= '0;
      g <= '0; sid <= '0; end_group <= '0; end_sid <= 64'd1;
      ti <= '0; pi <= '0; ci <= '0; cut <= 1'b0; dblk_ok <= 1'b0; dblk_idx <= '0;
      load_group <= '0; load_sid <= 64'd1; load_txid <= '0;
      n_committed <= '0; n_discarded <= '0; n_restored <= '0;
      has_total <= '0; has_pair <= '0; pfail <= '0; present <= '0; final_c <= '0;
    end else begin
      done <= 1'b0;
      if (rresp_valid) rd_pend <= 1'b0;
      if (rd_valid && rd_ready) rd_pend <= 1'b1;
      unique case (rs)
        R_IDLE: if (start) begin
          rs <= R_HEAD;
          n_committed <= '0; n_discarded <= '0; n_restored <= '0;
        end
        R_HEAD: if (rd_pend && rresp_valid) begin
          head <= rresp_data;
          if (rhead.magic != LOG_MAGIC) begin
            end_group <= '0; end_sid <= 64'd1; load_txid <= '0;
            rs <= R_FRESH;
          end else begin
            ci <= '0;
            rs <= R_CLR;
          end
        end
        R_FRESH: if (wready) rs <= R_DONE;
        R_CLR: begin
          cnt[ci[7:0]] <= '0; total[ci[7:0]] <= '0; add[ci[7:0]] <= '0;
          has_total <= '0; has_pair <= '0; pfail <= '0; present <= '0; final_c <= '0;
          if (ci == 9'd255) begin
            g <= head.start_group; sid <= head.start_sid; rs <= R_SCAN1;
          end
          ci <= ci + 1'b1;
        end
        R_SCAN1: if (rd_pend && rresp_valid) begin
          if (rmeta.sid != sid) begin
            end_group <= g; end_sid <= sid;
            pi <= head.dep_count;
            dblk_ok <= 1'b0;
            rs <= R_DEP;
          end else begin
            meta <= rresp_data; ti <= '0; rs <= R_TAGS1;
          end
        end
        R_TAGS1: begin
          if (tg.resv[0]) begin
            cnt[tg.txid] <= cnt[tg.txid] + 1'b1;
            present[tg.txid] <= 1'b1;
            if (tg.txcnt != 0) begin
              total[tg.txid] <= tg.txcnt; has_total[tg.txid] <= 1'b1;
            end
          end
          ti <= ti + 1'b1;
          if (ti == 3'(GROUP_DATA - 1)) begin
            g   <= (g == 32'(NGROUPS - 1)) ? '0 : g + 1'b1;
            sid <= sid + 1'b1;
            rs  <= R_SCAN1;
          end
        end
        R_DEP: begin
          if (pi == 0) begin
            ci <= '0; cut <= 1'b0; rs <= R_CUT;
          end else if (!dblk_ok || dblk_idx != pblk) begin
            if (rd_pend && rresp_valid) begin
              dblk <= rresp_data; dblk_ok <= 1'b1; dblk_idx <= pblk;
            end
          end else begin
            has_pair[pr.ta] <= 1'b1;
            if (comm(pr.tb)) add[pr.ta] <= add[pr.ta] + pr.n;
            else             pfail[pr.ta] <= 1'b1;
            pi <= pi - 1'b1;
          end
        end
        R_CUT: begin
          if (ci == 9'(SD)) begin
            g <= head.start_group; sid <= head.start_sid; rs <= R_SCAN2;
          end else begin
            if (present[ct] || has_pair[ct]) begin
              if (!cut && comm(ct)) begin
                final_c[ct] <= 1'b1; n_committed <= n_committed + 1'b1;
              end else begin
                cut <= 1'b1; n_discarded <= n_discarded + 1'b1;
              end
            end
            ci <= ci + 1'b1;
          end
        end
        R_SCAN2: begin
          if (g == end_group && sid == end_sid) rs <= R_TRUNC;
          else if (rd_pend && rresp_valid) begin
            meta <= rresp_data; ti <= '0; rs <= R_TAGS2;
          end
        end
        R_TAGS2: begin
          if (tg.resv[0] && final_c[tg.txid]) rs <= R_DATA;
          else if (ti == 3'(GROUP_DATA - 1)) begin
            g   <= (g == 32'(NGROUPS - 1)) ? '0 : g + 1'b1;
            sid <= sid + 1'b1;
            rs  <= R_SCAN2;
          end else ti <= ti + 1'b1;
        end
        R_DATA: if (rd_pend && rresp_valid) begin dblk <= rresp_data; rs <= R_HOME; end
        R_HOME: if (wready) begin
          n_restored <= n_restored + 1'b1;
          if (ti == 3'(GROUP_DATA - 1)) begin
            g   <= (g == 32'(NGROUPS - 1)) ? '0 : g + 1'b1;
            sid <= sid + 1'b1;
            rs  <= R_SCAN2;
          end else begin
            ti <= ti + 1'b1;
            rs <= R_TAGS2;
          end
        end
        R_TRUNC: if (wready) rs <= R_DONE;
        R_DONE: begin
          load_group <= end_group;
          load_sid   <= end_sid;
          if (head.magic == LOG_MAGIC) load_txid <= head.win_base + txid_t'(SD);
          done <= 1'b1;
          rs   <= R_IDLE;
        end
        default: rs <= R_IDLE;
      endcase
    end
  end

endmodule
