// tb_tx_cache: self-checking test of the LOC last-level cache (4 sets x 4
// ways to keep the scenario small).
//
// Part 1 replays the speculation-window example of the paper's Speculative
// Persistence figure: T1={A,B,C,D}, T2={A,F}, T3={B,C,E}, T4={D,E,F,G}, with
// T1..T3 committed and T4 still running. Expected, worked out by hand: the
// DROP sweep coalesces T1's A (into T2) and T1's B and C (into T3); the LOG
// sweep writes exactly T1:D, T2:A, T2:F, T3:B, T3:C, T3:E to the log and
// leaves T4 alone; the HOME sweep writes the same six blocks home; aborting
// T4 removes its versions. Loads must see the newest version; an older
// version that a running transaction superseded is dropped once written home.
// Part 2 checks victim choice inside one set: version overflow evicts the
// oldest version that has a newer one, a superseded committed version is
// dropped with a dependency event, and a set holding only single versions of
// a running transaction stalls the store with need_flush.
//
// From the paper: the window example and the cache behaviour it shows. Own
// choices: the reduced geometry and the extra overflow and full-set cases.
module tb_tx_cache;
  import loc_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic req_valid = 0, req_ready, req_we = 0, req_tx = 0;
  baddr_t req_addr = 0;
  blk_t req_wdata = 0;
  txid_t req_txid = 0;
  cid_t req_cid = 3'd2;
  tid_t req_tid = 1'b0;
  logic resp_valid, resp_hit;
  blk_t resp_rdata;
  txid_t last_committed = 8'hFF;
  logic sweep_valid = 0;
  logic [1:0] sweep_op = 0;
  txid_t sweep_txid = 0;
  logic sweep_busy, sweep_done;
  logic log_valid, log_ready = 1;
  log_blk_t log_blk;
  logic home_valid, home_ready = 1;
  baddr_t home_addr;
  blk_t home_data;
  logic ev_alloc, ev_super, ev_overflow, need_flush;
  txid_t ev_alloc_txid, ev_super_ta, ev_super_tb;
  int checks = 0, failures = 0;

  tx_cache #(.SETS(4), .WAYS(4)) dut (.*);

  task automatic check(bit c, string what);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", what); end
  endtask

  // monitors
  string log_q[$], home_q[$], sup_q[$];
  int alloc_cnt[256];
  int ovf = 0;
  always @(posedge clk) if (rst_n) begin
    if (log_valid && log_ready) log_q.push_back($sformatf("T%0d:%0h:%0h", log_blk.txid, log_blk.addr, log_blk.data[31:0]));
    if (home_valid && home_ready) home_q.push_back($sformatf("%0h:%0h", home_addr, home_data[31:0]));
    if (ev_super) sup_q.push_back($sformatf("%0d>%0d", ev_super_ta, ev_super_tb));
    if (ev_alloc) alloc_cnt[ev_alloc_txid]++;
    if (ev_overflow) ovf++;
  end
  always @(posedge clk) begin
    log_ready  <= ($urandom % 3) != 0;
    home_ready <= ($urandom % 3) != 0;
  end

  function automatic blk_t val(int t, baddr_t a);
    return {480'd0, 32'(t * 256) + 32'(a)};
  endfunction

  task automatic store(int t, baddr_t a);
    @(negedge clk);
    req_valid = 1; req_we = 1; req_tx = 1; req_txid = txid_t'(t); req_addr = a; req_wdata = val(t, a);
    do @(posedge clk); while (!req_ready);
    #1 req_valid = 0;
  endtask

  task automatic load(baddr_t a, output logic hit, output blk_t d);
    @(negedge clk);
    req_valid = 1; req_we = 0; req_addr = a;
    do @(posedge clk); while (!req_ready);
    #1 req_valid = 0;
    @(posedge clk); #1;
    hit = resp_hit; d = resp_rdata;
  endtask

  task automatic sweep(logic [1:0] op, txid_t t = 0);
    @(negedge clk); sweep_valid = 1; sweep_op = op; sweep_txid = t;
    @(negedge clk); sweep_valid = 0;
    while (!sweep_done) @(posedge clk);
    #1;
  endtask

  // multiset comparison of two string queues
  function automatic bit same_set(string a[$], string b[$]);
    string sa[$], sb[$];
    sa = a; sb = b;
    if (sa.size() != sb.size()) return 0;
    sa.sort(); sb.sort();
    foreach (sa[i]) if (sa[i] != sb[i]) return 0;
    return 1;
  endfunction

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  localparam baddr_t A = 32'h10, B = 32'h11, C = 32'h12, D = 32'h13,
                     E = 32'h20, F = 32'h21, G = 32'h22;

  initial begin
    logic hit;
    blk_t d;
    string exp_log[$], exp_home[$];
    repeat (3) @(posedge clk);
    rst_n = 1;
    // ---------------- part 1: the paper's window example
    store(1, A); store(1, B); store(1, C); store(1, D);
    store(1, A);                                  // rewrite by the same tx: no new version
    store(2, A); store(2, F);
    store(3, B); store(3, C); store(3, E);
    store(4, D); store(4, E); store(4, F); store(4, G);
    check(alloc_cnt[1] == 4 && alloc_cnt[2] == 2 && alloc_cnt[3] == 3 && alloc_cnt[4] == 4,
          "one new version per block and transaction (TxCnt)");
    load(A, hit, d); check(hit && d == val(2, A), "load A sees T2 version");
    load(D, hit, d); check(hit && d == val(4, D), "load D sees T4 version");
    last_committed = 8'd3;                        // T1..T3 committed, T4 running
    sweep(2'd0);                                  // DROP
    check(same_set(sup_q, '{"1>2", "1>3", "1>3"}), $sformatf("coalesced versions (%0d)", sup_q.size()));
    sweep(2'd1);                                  // LOG
    exp_log = '{$sformatf("T1:%0h:%0h", D, 256 + D), $sformatf("T2:%0h:%0h", A, 512 + A),
                $sformatf("T2:%0h:%0h", F, 512 + F), $sformatf("T3:%0h:%0h", B, 768 + B),
                $sformatf("T3:%0h:%0h", C, 768 + C), $sformatf("T3:%0h:%0h", E, 768 + E)};
    check(same_set(log_q, exp_log), $sformatf("log writes (%0d)", log_q.size()));
    sweep(2'd2);                                  // HOME
    exp_home = '{$sformatf("%0h:%0h", D, 256 + D), $sformatf("%0h:%0h", A, 512 + A),
                 $sformatf("%0h:%0h", F, 512 + F), $sformatf("%0h:%0h", B, 768 + B),
                 $sformatf("%0h:%0h", C, 768 + C), $sformatf("%0h:%0h", E, 768 + E)};
    check(same_set(home_q, exp_home), $sformatf("home writes (%0d)", home_q.size()));
    log_q.delete(); home_q.delete();
    sweep(2'd1);
    check(log_q.size() == 0, "second LOG sweep writes nothing (T4 still running)");
    sweep(2'd3, 8'd4);                            // abort T4
    load(G, hit, d); check(!hit, "aborted T4 version of G gone");
    // T1's D and T3's E had a later (T4) version, so the HOME sweep wrote
    // them home and dropped them; F's T2 copy had T4's too, A's had none
    load(D, hit, d); check(!hit, "D: home-written older version dropped");
    load(E, hit, d); check(!hit, "E: home-written older version dropped");
    load(A, hit, d); check(hit && d == val(2, A), "A keeps its T2 copy as a plain line");
    check(ovf == 0, "no overflow in part 1");

    // ---------------- part 2: victim choice in set 0 (A, E live there)
    sup_q.delete(); log_q.delete();
    last_committed = 8'd4;
    store(6, A); store(7, A);                      // set 0: A(plain) E(plain) -> versions
    store(8, A); store(9, A);                      // set now: 4 versions of A (T6..T9)
    check(ovf == 0, "clean lines reused before overflow");
    store(10, A);                                  // overflow: evicts oldest version, T6
    check(ovf == 1 && log_q.size() == 1 && log_q[0] == $sformatf("T6:%0h:%0h", A, 6 * 256 + A),
          "version overflow evicts the oldest version (T6) to the log");
    last_committed = 8'd8;                          // T7, T8 committed; T7 superseded by T8
    store(11, 32'h30);                             // new block in set 0
    check(sup_q.size() == 1 && sup_q[0] == "7>8", "superseded committed version dropped as victim");
    // set 0 now: T8 A, T9 A, T10 A, T11 X. A new block by T11 evicts T8 (oldest with newer)
    store(11, 32'h40);
    check(ovf == 2 && log_q[1] == $sformatf("T8:%0h:%0h", A, 8 * 256 + A), "second overflow evicts T8");
    // set 0: T9 A, T10 A, T11 30, T11 40 -> T9 evicted next; then only single versions
    store(11, 32'h50);
    check(ovf == 3, "third overflow evicts T9");
    // set 0: T10 A, T11 30, 40, 50: T10's A has no newer version -> no victim
    @(negedge clk);
    req_valid = 1; req_we = 1; req_tx = 1; req_txid = 8'd11; req_addr = 32'h60; req_wdata = '1;
    repeat (3) @(posedge clk);
    #1 check(need_flush && !req_ready, "full set of single versions stalls with need_flush");
    req_valid = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
