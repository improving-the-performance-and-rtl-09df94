// tb_loc_top: end-to-end test of the LOC subsystem at reduced sizes
// (16 sets x 4 ways, speculation depth 4, a 4096-block log) against the
// persistent-memory model with random write back-pressure and a short read
// latency. Three power failures at random points, each followed by recovery
// and a check of the recovered memory image.
//
// From the paper: the consistency guarantee that is checked (recovery yields
// a prefix of the committed transactions) and the mechanisms that are
// counted. Own choices: the reduced sizes, the random program and the crash
// points.
module tb_loc_top;
  import loc_pkg::*;
  localparam int SETS = 16, WAYS = 4, SD = 4;
  localparam int NADDR = 40, NTXS = 120, CRASHES = 3, READ_LAT = 6, STALL_PCT = 20;
  localparam int CRASH_MIN = 2000, CRASH_MAX = 11000, WATCHDOG = 2000000;

  loc_top #(.SETS(SETS), .WAYS(WAYS), .SD(SD), .NTX(128), .LOG_BASE(32'h0001_0000),
            .LOG_BLKS(4096), .DEP_BLKS(16)) dut (.*);

  // Program and checks, the same in tb_loc_top and tb_loc_top_full; the
  // sizes are the localparams above.
  //
// A random single-thread program runs transactions of 1..6 stores to NADDR
// block addresses (chosen so that sets overflow), with random loads, TxAbort
// and TxFlush mixed in. A reference model keeps the memory image after every
// committed transaction. Loads that hit must return the newest value of the
// running program. CRASHES times the design is reset at a random cycle while
// the persistent-memory model keeps its contents (a power failure); recovery
// is then run and the home locations must equal the image after some prefix
// of the committed transactions that includes at least every transaction of
// the last completed speculation window. The program then goes on with the
// recovered image.
//
// Mechanism counters: TxBegin stalls, coalesced versions, version overflows,
// full-set stalls, window completions, aborts, flushes, recoveries that kept
// committed transactions. Each one that never happened counts a failure.

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic        recover_start = 0, ready, recovering;
  logic        tx_cmd_valid = 0, tx_cmd_ready;
  logic [1:0]  tx_cmd_op = 0;
  cid_t        core_cid = 3'd1;
  tid_t        core_tid = 1'b0;
  logic        tx_active;
  txid_t       cur_txid, last_committed;
  logic        req_valid = 0, req_ready, req_we = 0, req_tx = 0;
  baddr_t      req_addr = 0;
  blk_t        req_wdata = 0;
  logic        resp_valid, resp_hit;
  blk_t        resp_rdata;
  logic        mem_wvalid, mem_wready, mem_rvalid, mem_rready, mem_rresp_valid;
  baddr_t      mem_waddr, mem_raddr;
  blk_t        mem_wdata, mem_rresp_data;
  logic        err;
  logic [31:0] windows_done, begin_stalls, pairs_total, coalesced, overflows, full_stalls,
               groups_written, rec_restored;
  logic [15:0] rec_committed, rec_discarded;

  nvm_model #(.READ_LAT(READ_LAT), .STALL_PCT(STALL_PCT)) u_nvm (
    .clk, .wvalid(mem_wvalid), .wready(mem_wready), .waddr(mem_waddr), .wdata(mem_wdata),
    .rvalid(mem_rvalid), .rready(mem_rready), .raddr(mem_raddr),
    .rresp_valid(mem_rresp_valid), .rresp_data(mem_rresp_data)
  );

  int checks = 0, failures = 0;
  task automatic check(bit c, string what);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("watchdog expired: cs=%0d cmd_valid=%0d op=%0d req_valid=%0d we=%0d need_flush=%0d tx_active=%0d sweeping=%0d rec=%0d ready=%0d",
             dut.u_crl.cs, tx_cmd_valid, tx_cmd_op, req_valid, req_we, dut.need_flush, tx_active,
             dut.u_cache.sweeping, recovering, ready);
    $display("  sw_op=%0d sact=%0d set=%0d way=%0d log_v=%0d log_r=%0d home_v=%0d home_r=%0d lw_state=%0d", dut.u_cache.sw_op, dut.u_cache.sact, dut.u_cache.sw_set, dut.u_cache.sw_way, dut.clog_valid, dut.clog_ready, dut.home_valid, dut.home_ready, dut.u_lw.state);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ------------------------------------------------------ reference model
  typedef logic [31:0] img_t [NADDR];
  img_t snaps [$];      // snaps[i]: image after i committed transactions
  img_t cur;            // committed image plus the running transaction
  int   durable = 0;    // committed transactions covered by completed windows
  int   ncommit = 0;
  int   seq = 1;
  int   n_abort = 0, n_flush = 0, n_recover = 0, n_loads = 0, n_rec_kept = 0;
  int   win_seen = 0;

  // NADDR blocks spread over 4 sets of the cache, so that versions overflow
  function automatic baddr_t addr_of(int i);
    return baddr_t'((i % 4) + SETS * (i / 4));
  endfunction
  function automatic int set_of(int i);
    return int'(addr_of(i)) % SETS;
  endfunction
  function automatic blk_t data_of(logic [31:0] v);
    return {16{v}};
  endfunction

  // a window completion covers every transaction committed before it began
  int commits_at_hold = 0;
  always @(posedge clk) if (rst_n && ready) begin
    if (!dut.cpu_hold) commits_at_hold <= ncommit;
    if (windows_done != 32'(win_seen)) begin
      win_seen = int'(windows_done);
      durable  = commits_at_hold;
    end
  end

  task automatic cmd(logic [1:0] op);
    @(negedge clk);
    tx_cmd_valid = 1; tx_cmd_op = op;
    do @(posedge clk); while (!tx_cmd_ready);
    #1 tx_cmd_valid = 0;
  endtask

  task automatic store(int i, logic [31:0] v);
    @(negedge clk);
    req_valid = 1; req_we = 1; req_tx = 1; req_addr = addr_of(i); req_wdata = data_of(v);
    do @(posedge clk); while (!req_ready);
    #1 req_valid = 0;
  endtask

  task automatic load_check(int i);
    @(negedge clk);
    req_valid = 1; req_we = 0; req_tx = 0; req_addr = addr_of(i);
    do @(posedge clk); while (!req_ready);
    #1 req_valid = 0;
    @(posedge clk); #1;
    n_loads++;
    if (resp_hit) check(resp_rdata == data_of(cur[i]), $sformatf("load %0d newest value: got %0h want %0h", i, resp_rdata[31:0], cur[i]));
  endtask

  task automatic recover();
    @(negedge clk); recover_start = 1;
    @(negedge clk); recover_start = 0;
    while (!ready) @(posedge clk);
    #1;
  endtask

  task automatic run_program(int ntx);
    int in_set [SETS];
    bit wrote [NADDR];
    for (int t = 0; t < ntx; t++) begin
      int nw, r;
      foreach (wrote[i]) wrote[i] = 1'b0;
      cmd(2'd0);                                   // TxBegin
      nw = int'($urandom_range(1, 6));
      for (int s = 0; s < SETS; s++) in_set[s] = 0;
      for (int w = 0; w < nw; w++) begin
        int i;
        // a transaction keeps all its versions in the cache, so it may
        // write at most WAYS different blocks of one set
        do i = int'($urandom_range(0, NADDR - 1));
        while (in_set[set_of(i)] >= WAYS && !wrote[i]);
        if (!wrote[i]) in_set[set_of(i)]++;
        wrote[i] = 1'b1;
        cur[i] = 32'(seq++);
        store(i, cur[i]);
        if ($urandom_range(0, 3) == 0) load_check(int'($urandom_range(0, NADDR - 1)));
      end
      r = int'($urandom_range(0, 99));
      if (r < 6) begin
        cmd(2'd2);                                 // TxAbort
        n_abort++;
        cur = snaps[ncommit];
      end else begin
        cmd(2'd1);                                 // TxCommit
        ncommit++;
        snaps.push_back(cur);
        check(last_committed == cur_txid, "LastCommittedTxID follows commit");
      end
      if (r >= 95) begin cmd(2'd3); n_flush++; end // TxFlush
    end
  endtask

  // the design's counters restart at every reset: keep running totals
  longint t_stalls = 0, t_coal = 0, t_ovf = 0, t_full = 0, t_win = 0, t_pairs = 0, t_groups = 0;
  task automatic add_counters();
    t_stalls += begin_stalls; t_coal += coalesced; t_ovf += overflows; t_full += full_stalls;
    t_win += windows_done; t_pairs += pairs_total; t_groups += groups_written;
  endtask

  task automatic crash_and_check();
    int found, dur;
    img_t home;
    #2 dur = durable;
    add_counters();
    rst_n = 0;
    win_seen = 0;
    tx_cmd_valid = 0; req_valid = 0;
    #20 rst_n = 1;
    recover();
    n_recover++;
    $display("recovery %0d: committed=%0d discarded=%0d restored=%0d (dur %0d of %0d) at %0t",
             n_recover, rec_committed, rec_discarded, rec_restored, dur, snaps.size() - 1, $time);
    if (rec_committed != 0) n_rec_kept++;
    for (int i = 0; i < NADDR; i++) home[i] = u_nvm.peek(addr_of(i))[31:0];
    found = -1;
    for (int j = snaps.size() - 1; j >= dur; j--)
      if (home == snaps[j]) begin found = j; break; end
    check(found >= 0, $sformatf("recovered image is a committed prefix >= %0d of %0d",
                                dur, snaps.size() - 1));
    if (found < 0)
      for (int i = 0; i < NADDR; i++)
        if (home[i] != snaps[snaps.size() - 1][i])
          $display("  addr %0d home %0h last %0h dur %0h", i, home[i],
                   snaps[snaps.size() - 1][i], snaps[dur][i]);
    // continue from the recovered state
    if (found < 0) found = dur;
    while (snaps.size() > found + 1) void'(snaps.pop_back());
    ncommit = found; durable = found; commits_at_hold = found;
    cur = snaps[found];
    check(!tx_active && ready, "ready after recovery");
    check(last_committed + 1'b1 == dut.u_crl.next_txid,
          "TxIDs continue after the recovered ones");
  endtask

  initial begin
    img_t z;
    foreach (z[i]) z[i] = '0;
    cur = z;
    snaps.push_back(z);
    repeat (3) @(posedge clk);
    rst_n = 1;
    recover();                                   // empty memory: fresh log
    check(ready && rec_committed == 0, "fresh start");
    // directed version overflow in set 0: T1 writes WAYS/2 blocks of it and
    // commits; T2 writes them again and then one more, which finds the set
    // holding only versions and evicts T1's oldest version to the log
    begin
      int ovf0;
      ovf0 = int'(overflows);
      for (int t = 0; t < 2; t++) begin
        cmd(2'd0);
        for (int k = 0; k < WAYS / 2; k++) begin cur[4 * k] = 32'(seq++); store(4 * k, cur[4 * k]); end
        if (t == 1) begin cur[2 * WAYS] = 32'(seq++); store(2 * WAYS, cur[2 * WAYS]); end
        cmd(2'd1); ncommit++; snaps.push_back(cur);
      end
      check(int'(overflows) == ovf0 + 1, "directed version overflow");
    end
    // directed full-set stall in set 1: T3 fills it with WAYS new blocks and
    // commits; T4's store to one more block finds no victim, raises
    // need_flush, and goes on once the window has been written back
    begin
      int fs0;
      fs0 = int'(full_stalls);
      cmd(2'd0);
      for (int k = 0; k < WAYS; k++) begin cur[4 * k + 1] = 32'(seq++); store(4 * k + 1, cur[4 * k + 1]); end
      cmd(2'd1); ncommit++; snaps.push_back(cur);
      cmd(2'd0);
      cur[4 * WAYS + 1] = 32'(seq++); store(4 * WAYS + 1, cur[4 * WAYS + 1]);
      cmd(2'd1); ncommit++; snaps.push_back(cur);
      check(int'(full_stalls) > fs0, "directed full-set stall");
    end
    for (int c = 0; c < CRASHES; c++) begin
      // power failure at a random cycle, wherever the program then is
      fork
        run_program(NTXS);
        repeat ($urandom_range(CRASH_MIN, CRASH_MAX)) @(posedge clk);
      join_any
      disable fork;
      @(posedge clk);
      crash_and_check();
    end
    // one more power failure in the middle of a window's in-place writes
    // of a window (controller step HOME, value 9): recovery must replay it
    fork
      run_program(NTXS);
      begin
        do @(posedge clk); while (!(dut.u_crl.cs == 4'd9 && dut.u_crl.win_n >= 2));
        repeat ($urandom_range(1, 20)) @(posedge clk);
      end
    join_any
    disable fork;
    @(posedge clk);
    crash_and_check();
    check(rec_committed != 0 && rec_restored != 0, "crash during in-place writes: window replayed");
    run_program(NTXS / 4);
    cmd(2'd3);                                   // final flush: everything home
    n_flush++;
    repeat (3) @(posedge clk);
    while (dut.cpu_hold) @(posedge clk);
    durable = ncommit;
    begin
      img_t home;
      for (int i = 0; i < NADDR; i++) home[i] = u_nvm.peek(addr_of(i))[31:0];
      check(home == snaps[ncommit], "after TxFlush home holds every committed transaction");
    end
    check(!err, "no error flag");
    add_counters();
    $display("mechanisms: begin_stalls=%0d coalesced=%0d overflows=%0d full_stalls=%0d windows=%0d",
             t_stalls, t_coal, t_ovf, t_full, t_win);
    $display("            aborts=%0d flushes=%0d recoveries=%0d (kept tx in %0d) pairs=%0d groups=%0d loads=%0d",
             n_abort, n_flush, n_recover, n_rec_kept, t_pairs, t_groups, n_loads);
    check(t_stalls > 0, "mechanism: TxBegin stall");
    check(t_coal > 0,       "mechanism: coalescing of superseded versions");
    check(t_ovf > 0,        "mechanism: version overflow");
    check(t_full > 0,       "mechanism: full-set stall");
    check(t_win > 0,        "mechanism: window completion");
    check(n_abort > 0,      "mechanism: abort");
    check(n_flush > 0,      "mechanism: flush");
    check(n_rec_kept > 0,   "mechanism: recovery of committed transactions");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
