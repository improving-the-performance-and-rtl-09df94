// tb_crl: self-checking test of the Commit/Recovery controller with a
// speculation depth of 4. The testbench plays the cache and the log writer:
// it answers every sweep after a few cycles, sends log blocks during the LOG
// sweep, raises coalescing events during the DROP sweep, and records the
// sweep order, the log tags, the dependency blocks and the head writes.
// Checks: TxIDs handed out in order, LastCommittedTxID, TxBegin stalling
// once SD transactions are in the window, the window-completion order
// (DROP, LOG, close, pairs, head, HOME, truncating head), TxCnt stamped only
// on the block that completes a committed transaction (counting coalesced
// versions), the pair <Ta,Tb,n> written to the log, a TxAbort running the
// ABORT sweep for the aborted TxID first, and TxFlush with a running
// transaction carrying it into the next window.
//
// From the paper: the instructions, the TxST behaviour, TxCnt counting
// coalesced versions, and dependency pairs. Own choices: the completion-step
// order that is checked, the stand-in timing, and the scenario itself.
module tb_crl;
  import loc_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  localparam int SD = 4;
  logic        cmd_valid = 0, cmd_ready;
  logic [1:0]  cmd_op = 0;
  cid_t        cmd_cid = 3'd3;
  tid_t        cmd_tid = 1'b1;
  logic        tx_active, cpu_hold, err;
  txid_t       cur_txid, last_committed;
  logic        init_valid = 0;
  txid_t       init_txid = 0;
  logic        sweep_valid, sweep_done = 0;
  logic [1:0]  sweep_op;
  txid_t       sweep_txid;
  logic        ev_alloc = 0, ev_super = 0, need_flush = 0;
  txid_t       ev_alloc_txid = 0, ev_super_ta = 0, ev_super_tb = 0;
  logic        clog_valid = 0, clog_ready;
  log_blk_t    clog_blk = '0;
  logic        lw_valid, lw_ready = 1, lw_flush, lw_idle = 1;
  blk_tag_t    lw_tag;
  blk_t        lw_data;
  logic        lw_dep_valid, lw_dep_ready = 1;
  logic [8:0]  lw_dep_idx;
  blk_t        lw_dep_data;
  logic        lw_head_valid, lw_head_ready = 1, lw_head_trunc;
  txid_t       lw_head_win_base;
  logic [15:0] lw_head_dep_count;
  logic [31:0] windows_done, begin_stalls, pairs_total;
  int checks = 0, failures = 0;

  crl #(.SD(SD)) dut (.*);

  task automatic check(bit c, string what);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ------------------------------------------------ cache / writer stand-in
  string    ev_q[$];                 // event order
  blk_tag_t tag_q[$];
  blk_t     dep_q[$];
  txid_t    log_plan_tx[$];          // blocks to send in the next LOG sweep
  baddr_t   log_plan_a[$];
  txid_t    sup_plan_ta[$], sup_plan_tb[$];
  always @(posedge clk) if (rst_n) begin
    if (lw_valid && lw_ready) tag_q.push_back(lw_tag);
    if (lw_flush) ev_q.push_back("CLOSE");
    if (lw_dep_valid && lw_dep_ready) begin dep_q.push_back(lw_dep_data); ev_q.push_back("DEP"); end
    if (lw_head_valid && lw_head_ready)
      ev_q.push_back(lw_head_trunc ? "TRUNC" : $sformatf("HEAD%0d", lw_head_dep_count));
  end

  initial begin
    forever begin
      @(posedge clk);
      if (rst_n && sweep_valid) begin
        logic [1:0] op;
        op = sweep_op;
        ev_q.push_back(op == 0 ? "DROP" : op == 1 ? "LOG" : op == 2 ? "HOME" :
                       $sformatf("ABORT%0d", sweep_txid));
        @(negedge clk);
        if (op == 0)
          while (sup_plan_ta.size() > 0) begin
            ev_super = 1; ev_super_ta = sup_plan_ta.pop_front(); ev_super_tb = sup_plan_tb.pop_front();
            @(negedge clk); ev_super = 0;
          end
        if (op == 1)
          while (log_plan_tx.size() > 0) begin
            clog_valid = 1;
            clog_blk = '{cid: 3'd3, tid: 1'b1, txid: log_plan_tx[0], addr: log_plan_a[0],
                         data: {16{log_plan_a[0]}}};
            do @(posedge clk); while (!clog_ready);
            void'(log_plan_tx.pop_front()); void'(log_plan_a.pop_front());
            @(negedge clk); clog_valid = 0;
          end
        repeat (3) @(negedge clk);
        sweep_done = 1;
        @(negedge clk); sweep_done = 0;
      end
    end
  end

  task automatic cmd(logic [1:0] op);
    @(negedge clk);
    cmd_valid = 1; cmd_op = op;
    do @(posedge clk); while (!cmd_ready);
    #1 cmd_valid = 0;
  endtask

  task automatic alloc(txid_t t, int n);
    repeat (n) begin
      @(negedge clk); ev_alloc = 1; ev_alloc_txid = t;
      @(negedge clk); ev_alloc = 0;
    end
  endtask

  function automatic string join_q(string q[$]);
    string r;
    r = "";
    foreach (q[i]) r = {r, (i == 0) ? "" : " ", q[i]};
    return r;
  endfunction

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    check(!tx_active && last_committed == 8'hFF && cmd_ready, "reset state");
    // T0 writes 3 blocks (A, B, C); T1 writes 2 (A again: T0's A is coalesced, D)
    cmd(2'd0);
    check(tx_active && cur_txid == 8'd0, "TxBegin hands out TxID 0");
    alloc(8'd0, 3);
    cmd(2'd1);
    check(!tx_active && last_committed == 8'd0, "TxCommit sets LastCommittedTxID");
    cmd(2'd0);
    check(cur_txid == 8'd1, "TxIDs in order");
    alloc(8'd1, 2);
    cmd(2'd1);
    cmd(2'd0); alloc(8'd2, 1); cmd(2'd1);
    cmd(2'd0); alloc(8'd3, 1);
    check(dut.win_n == 3'd4, "four transactions in the window");
    // a fifth TxBegin is not taken while the window is full
    sup_plan_ta = '{8'd0};  sup_plan_tb = '{8'd1};
    log_plan_tx = '{8'd0, 8'd0, 8'd1, 8'd1, 8'd2, 8'd3};
    log_plan_a  = '{32'h0B, 32'h0C, 32'h0A, 32'h0D, 32'h0E, 32'h0F};
    cmd(2'd1);                                       // T3 commits: window full
    @(negedge clk);
    cmd_valid = 1; cmd_op = 2'd0;
    repeat (2) @(posedge clk);
    #1 check(!cmd_ready, "TxBegin stalls while the window completes");
    do @(posedge clk); while (!cmd_ready);
    #1 cmd_valid = 0;
    check(begin_stalls > 0 && windows_done == 1, "stall counted, window completed");
    check(cur_txid == 8'd4, "next window starts at TxID 4");
    check(join_q(ev_q) == "DROP LOG CLOSE DEP HEAD1 HOME TRUNC",
          $sformatf("completion order: %s", join_q(ev_q)));
    // TxCnt: T0 has 3 blocks, one coalesced, so its 2nd logged block carries 3
    check(tag_q.size() == 6, "six log blocks");
    if (tag_q.size() == 6) begin
      check(tag_q[0].txcnt == 0 && tag_q[1].txcnt == 16'd3, "T0: TxCnt on its completing block");
      check(tag_q[2].txcnt == 0 && tag_q[3].txcnt == 16'd2, "T1: TxCnt 2 on its last block");
      check(tag_q[4].txcnt == 16'd1 && tag_q[5].txcnt == 16'd1, "T2, T3: single-block TxCnt");
      check(tag_q[0].txid == 8'd0 && tag_q[0].cid == 3'd3 && tag_q[0].tid == 1'b1 &&
            tag_q[0].addr == 32'h0B, "tag fields");
    end
    check(dep_q.size() == 1 && dep_q[0][31:0] == {8'd0, 8'd1, 16'd1} && dep_q[0][63:32] == '0,
          "pair <T0,T1,1> written");
    check(pairs_total == 1, "one pair");
    // abort: T4 is running
    ev_q.delete(); tag_q.delete(); dep_q.delete();
    alloc(8'd4, 2);
    cmd(2'd2);
    do @(posedge clk); while (cpu_hold);
    check(ev_q.size() > 0 && ev_q[0] == "ABORT4", $sformatf("abort sweep first: %s", join_q(ev_q)));
    check(last_committed == 8'd3 && windows_done == 2, "abort closes the window, nothing committed");
    check(join_q(ev_q) == "ABORT4 DROP LOG CLOSE HEAD0 HOME TRUNC", $sformatf("abort order: %s", join_q(ev_q)));
    // flush with a running transaction: it stays in the next window
    cmd(2'd0);
    check(cur_txid == 8'd5, "TxID after abort");
    alloc(8'd5, 1);
    cmd(2'd3);
    repeat (2) @(posedge clk);
    do @(posedge clk); while (cpu_hold);
    check(tx_active && windows_done == 3 && dut.win_base == 8'd5 && dut.win_n == 1,
          "running transaction carried into the next window");
    cmd(2'd1);
    check(last_committed == 8'd5 && !err, "commit after flush");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
