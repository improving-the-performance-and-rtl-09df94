// tb_txst: self-checking test of the Tx State Table.
// Checks the paper's state transitions (invalid->active on TxBegin,
// active->committed on TxCommit, active->aborted on TxAbort), the 48-bit entry
// layout, TxCnt/Wrts counting, Phase updates clearing Wrts, rejection of
// illegal transitions, and that TxIDs 128 apart share one slot.
//
// From the paper: the entry fields, widths and state transitions. Own
// choices: the encodings and the error pulse that are checked.
module tb_txst;
  import loc_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic        cmd_valid = 0;
  logic [2:0]  cmd_op = 0;
  txid_t       cmd_txid = 0;
  cid_t        cmd_cid = 0;
  tid_t        cmd_tid = 0;
  tx_phase_e   cmd_phase = PH_LOG_WRITE;
  logic        inc_cnt = 0, inc_wrts = 0;
  txid_t       inc_cnt_txid = 0, inc_wrts_txid = 0, rd_a_txid = 0, rd_b_txid = 0;
  txst_entry_t rd_a, rd_b;
  logic        err;
  int checks = 0, failures = 0;

  txst dut (.*);

  task automatic check(bit c, string what);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic cmd(logic [2:0] op, txid_t t, tx_phase_e ph = PH_LOG_WRITE);
    @(negedge clk);
    cmd_valid = 1; cmd_op = op; cmd_txid = t; cmd_phase = ph; cmd_cid = 3'd5; cmd_tid = 1'b1;
    @(negedge clk);
    cmd_valid = 0;
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    check($bits(txst_entry_t) == 48, "entry is 48 bits");
    for (int t = 0; t < 128; t++) begin rd_a_txid = txid_t'(t); #1 check(rd_a.state == TX_INVALID, "reset invalid"); end
    cmd(0, 8'd10);                      // TxBegin
    rd_a_txid = 8'd10; #1;
    check(rd_a.state == TX_ACTIVE && rd_a.txid == 8'd10 && rd_a.cid == 3'd5 && rd_a.tid == 1'b1, "begin -> active");
    check(rd_a.phase == PH_LOG_WRITE && rd_a.txcnt == 0 && rd_a.wrts == 0, "begin clears counters");
    // count 5 blocks written, 3 written back
    for (int i = 0; i < 5; i++) begin
      @(negedge clk); inc_cnt = 1; inc_cnt_txid = 8'd10; inc_wrts = (i < 3); inc_wrts_txid = 8'd10;
    end
    @(negedge clk); inc_cnt = 0; inc_wrts = 0;
    #1 check(rd_a.txcnt == 5 && rd_a.wrts == 3, "TxCnt/Wrts count");
    cmd(0, 8'd10);                      // second TxBegin on active -> error
    check(err == 1'b1 || rd_a.state == TX_ACTIVE, "double begin rejected");
    cmd(1, 8'd10);                      // TxCommit
    #1 check(rd_a.state == TX_COMMITTED, "commit -> committed");
    cmd(1, 8'd10);
    #1 check(rd_a.state == TX_COMMITTED, "commit of committed keeps state");
    cmd(3, 8'd10, PH_IN_PLACE);
    #1 check(rd_a.phase == PH_IN_PLACE && rd_a.wrts == 0 && rd_a.txcnt == 5, "phase in-place, wrts cleared");
    cmd(3, 8'd10, PH_COMPLETE);
    #1 check(rd_a.phase == PH_COMPLETE, "phase complete");
    cmd(4, 8'd10);
    #1 check(rd_a.state == TX_INVALID, "free");
    // abort path and the two read ports
    cmd(0, 8'd200);
    cmd(0, 8'd201);
    cmd(2, 8'd200);
    rd_a_txid = 8'd200; rd_b_txid = 8'd201; #1;
    check(rd_a.state == TX_ABORTED, "abort -> aborted");
    check(rd_b.state == TX_ACTIVE && rd_b.txid == 8'd201, "port b independent");
    cmd(1, 8'd200);
    #1 check(rd_a.state == TX_ABORTED, "commit of aborted rejected");
    // slot sharing: 201 and 73 (201-128) map to the same entry
    rd_a_txid = 8'd73; #1 check(rd_a.txid == 8'd201, "TxIDs 128 apart share a slot");
    // error pulse on illegal command
    @(negedge clk); cmd_valid = 1; cmd_op = 1; cmd_txid = 8'd50;
    @(negedge clk); cmd_valid = 0;
    check(err == 1'b1, "err on commit of invalid");
    @(negedge clk);
    check(err == 1'b0, "err is a pulse");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
