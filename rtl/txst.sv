// txst: Tx State Table (TxST) of the Commit/Recovery Logic.
//
// Holds one 48-bit entry per running transaction: CID, TID, TxID, TxCnt,
// State, Phase and Wrts (the paper's fields and widths). 128 entries, one per
// live TxID; the entry of TxID t is slot t mod NTX, which works because at most
// 128 consecutive TxIDs are live at a time.
//
// Commands (one per cycle, cmd_valid):
//   TXST_BEGIN   invalid -> active, loads CID/TID/TxID, clears TxCnt and Wrts,
//                phase = log write
//   TXST_COMMIT  active  -> committed
//   TXST_ABORT   active or committed -> aborted (a committed transaction of
//                the current speculation window can be aborted because an
//                earlier one aborted)
//   TXST_PHASE   sets Phase (cmd_phase) and clears Wrts, which counts blocks
//                written back "in each phase"
//   TXST_FREE    entry back to invalid once its write-back is complete
// An illegal transition leaves the entry unchanged and pulses err for a cycle.
// inc_cnt / inc_wrts add one to TxCnt / Wrts of the named transaction in the
// same cycle as any command. Two combinational read ports.
//
// The state transitions follow the paper; the abort-of-committed transition,
// the FREE command and the error pulse are this design's choices.
module txst
  import loc_pkg::*;
#(
  parameter int NTX = 128
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        cmd_valid,
  input  logic [2:0]  cmd_op,
  input  txid_t       cmd_txid,
  input  cid_t        cmd_cid,
  input  tid_t        cmd_tid,
  input  tx_phase_e   cmd_phase,
  input  logic        inc_cnt,
  input  txid_t       inc_cnt_txid,
  input  logic        inc_wrts,
  input  txid_t       inc_wrts_txid,
  input  txid_t       rd_a_txid,
  output txst_entry_t rd_a,
  input  txid_t       rd_b_txid,
  output txst_entry_t rd_b,
  output logic        err
);
  localparam int IW = $clog2(NTX);
  localparam logic [2:0] TXST_BEGIN = 3'd0, TXST_COMMIT = 3'd1, TXST_ABORT = 3'd2,
                         TXST_PHASE = 3'd3, TXST_FREE = 3'd4;

  txst_entry_t tab [NTX];

  function automatic logic [IW-1:0] slot(txid_t t);
    return t[IW-1:0];
  endfunction

  assign rd_a = tab[slot(rd_a_txid)];
  assign rd_b = tab[slot(rd_b_txid)];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NTX; i++) tab[i] <= '0;
      err <= 1'b0;
    end else begin
      err <= 1'b0;
      if (inc_cnt)  tab[slot(inc_cnt_txid)].txcnt <= tab[slot(inc_cnt_txid)].txcnt + 1'b1;
      if (inc_wrts) tab[slot(inc_wrts_txid)].wrts <= tab[slot(inc_wrts_txid)].wrts + 1'b1;
      if (cmd_valid) begin
        unique case (cmd_op)
          TXST_BEGIN:
            if (tab[slot(cmd_txid)].state == TX_INVALID) begin
              tab[slot(cmd_txid)] <= '{cid: cmd_cid, tid: cmd_tid, txid: cmd_txid,
                                       txcnt: '0, state: TX_ACTIVE,
                                       phase: PH_LOG_WRITE, wrts: '0};
            end else err <= 1'b1;
          TXST_COMMIT:
            if (tab[slot(cmd_txid)].state == TX_ACTIVE)
              tab[slot(cmd_txid)].state <= TX_COMMITTED;
            else err <= 1'b1;
          TXST_ABORT:
            if (tab[slot(cmd_txid)].state inside {TX_ACTIVE, TX_COMMITTED})
              tab[slot(cmd_txid)].state <= TX_ABORTED;
            else err <= 1'b1;
          TXST_PHASE: begin
            tab[slot(cmd_txid)].phase <= cmd_phase;
            tab[slot(cmd_txid)].wrts  <= '0;
          end
          TXST_FREE:
            tab[slot(cmd_txid)].state <= TX_INVALID;
          default: err <= 1'b1;
        endcase
      end
    end
  end

endmodule
