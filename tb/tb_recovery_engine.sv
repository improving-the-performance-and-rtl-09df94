// tb_recovery_engine: self-checking test of crash recovery from a log image
// built by hand in the persistent-memory model (speculation depth 4, a
// 1024-block log with 16 dependency blocks, 3-cycle reads).
//
// Case 1, empty memory: no magic word, so a fresh head is written and the
// log pointers start at group 0, SID 1.
// Case 2, one window T8..T11 in group 2 (SID 5), ended by a stale group:
//   T8  two blocks, TxCnt 2 on the second          -> committed
//   T9  one block with TxCnt 2, one version coalesced into T10, pair <9,10,1>
//       -> committed through the pair
//   T10 two blocks (one rewrites T8's block), TxCnt 2 -> committed
//   T11 one of its blocks, no TxCnt                -> discarded
// Expected: the five blocks of T8..T10 copied home in log order (so T10's
// version of the shared block wins), T11's block not, head truncated to
// group 3 / SID 6, next TxID 12.
// Case 3, the same window but T8's TxCnt-bearing block missing: T8 is not
// committed, so all later transactions are discarded too (in-order cut).
// Case 4, a pair whose Tb is not committed (<9,11,1>) makes Ta fail, and the
// cut discards T9 and everything after it.
//
// From the paper: count-based commit, the pair rule and the in-order cut.
// Own choices: the log layout the images are built in, and the scenarios.
module tb_recovery_engine;
  import loc_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  localparam logic [31:0] LB = 32'h0000_8000;
  localparam int LBLKS = 1024, DBLKS = 16, SD = 4;
  localparam logic [31:0] GB = LB + 1 + DBLKS;

  logic start = 0, busy, done;
  logic rd_valid, rd_ready, rresp_valid;
  baddr_t rd_addr;
  blk_t rresp_data;
  logic wvalid, wready;
  baddr_t waddr;
  blk_t wdata;
  logic [31:0] load_group, n_restored;
  logic [63:0] load_sid;
  txid_t load_txid;
  logic [15:0] n_committed, n_discarded;
  int checks = 0, failures = 0;

  recovery_engine #(.LOG_BASE(LB), .LOG_BLKS(LBLKS), .DEP_BLKS(DBLKS), .SD(SD)) dut (.*);

  nvm_model #(.READ_LAT(3), .STALL_PCT(25)) u_nvm (
    .clk, .wvalid, .wready, .waddr, .wdata, .rvalid(rd_valid), .rready(rd_ready),
    .raddr(rd_addr), .rresp_valid, .rresp_data
  );

  task automatic check(bit c, string what);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  bit seen_done = 0;
  always @(posedge clk) if (rst_n && done) seen_done <= 1;
  baddr_t wa_q[$];
  always @(posedge clk) if (rst_n && wvalid && wready) wa_q.push_back(waddr);

  function automatic blk_t dat(int t, baddr_t a);
    return {16{32'(t * 4096) + a}};
  endfunction

  function automatic blk_tag_t tg(int t, int cnt, baddr_t a);
    return '{cid: 3'd2, tid: 1'b0, txid: txid_t'(t), txcnt: txcnt_t'(cnt), addr: a, resv: 4'b0001};
  endfunction

  // write a log image: head, one dependency block, group 2 with the given
  // tags/data, and a stale group 3
  task automatic build(blk_tag_t tags[7], int npairs, dep_pair_t p);
    log_head_t h;
    meta_blk_t m;
    blk_t d;
    h = '0;
    h.magic = LOG_MAGIC; h.start_group = 2; h.start_sid = 64'd5; h.win_base = 8'd8;
    h.dep_count = 16'(npairs);
    u_nvm.poke(LB, blk_t'(h));
    d = '0;
    if (npairs > 0) d[31:0] = p;
    u_nvm.poke(LB + 1, d);
    m = '0;
    m.sid = 64'd5;
    for (int s = 0; s < 7; s++) begin
      m.tags[s] = tags[s];
      if (tags[s].resv[0]) u_nvm.poke(GB + 16 + s, dat(int'(tags[s].txid), tags[s].addr));
    end
    u_nvm.poke(GB + 16 + 7, blk_t'(m));
    m = '0; m.sid = 64'd99;                        // stale group after the end
    u_nvm.poke(GB + 24 + 7, blk_t'(m));
    for (int a = 'h100; a < 'h105; a++) u_nvm.poke(baddr_t'(a), '0);
  endtask

  task automatic run();
    wa_q.delete();
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    while (!seen_done) @(negedge clk);
    seen_done = 0;
  endtask

  initial begin
    blk_tag_t tags[7];
    log_head_t h;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // ---- case 1: empty memory
    run();
    h = u_nvm.peek(LB);
    check(h.magic == LOG_MAGIC && h.start_group == 0 && h.start_sid == 1, "fresh head written");
    check(load_group == 0 && load_sid == 1 && n_committed == 0 && wa_q.size() == 1, "fresh start values");

    // ---- case 2: the window of the header comment
    tags = '{tg(8, 0, 'h100), tg(8, 2, 'h101), tg(9, 2, 'h102), tg(10, 0, 'h100),
             tg(10, 2, 'h103), tg(11, 0, 'h104), '0};
    build(tags, 1, '{ta: 8'd9, tb: 8'd10, n: 16'd1});
    run();
    check(n_committed == 3 && n_discarded == 1, $sformatf("committed %0d discarded %0d", n_committed, n_discarded));
    check(n_restored == 5, $sformatf("restored %0d", n_restored));
    check(u_nvm.peek('h100) == dat(10, 'h100), "shared block holds the later (T10) version");
    check(u_nvm.peek('h101) == dat(8, 'h101) && u_nvm.peek('h102) == dat(9, 'h102) &&
          u_nvm.peek('h103) == dat(10, 'h103), "committed blocks home");
    check(u_nvm.peek('h104) == '0, "discarded T11 block not written");
    h = u_nvm.peek(LB);
    check(h.magic == LOG_MAGIC && h.start_group == 3 && h.start_sid == 6, "log truncated after the window");
    check(load_group == 3 && load_sid == 6 && load_txid == 8'd12, "log pointers and next TxID");

    // ---- case 3: T8's TxCnt block missing
    tags = '{tg(8, 0, 'h100), '0, tg(9, 2, 'h102), tg(10, 0, 'h100),
             tg(10, 2, 'h103), tg(11, 0, 'h104), '0};
    build(tags, 1, '{ta: 8'd9, tb: 8'd10, n: 16'd1});
    run();
    check(n_committed == 0 && n_restored == 0, "in-order cut: nothing after uncommitted T8");
    check(u_nvm.peek('h100) == '0 && u_nvm.peek('h103) == '0, "no home writes after the cut");

    // ---- case 4: pair on an uncommitted transaction
    tags = '{tg(8, 0, 'h100), tg(8, 2, 'h101), tg(9, 2, 'h102), tg(10, 0, 'h100),
             tg(10, 2, 'h103), tg(11, 0, 'h104), '0};
    build(tags, 1, '{ta: 8'd9, tb: 8'd11, n: 16'd1});
    run();
    check(n_committed == 1 && n_restored == 2, $sformatf("failed pair: committed %0d restored %0d",
                                                         n_committed, n_restored));
    check(u_nvm.peek('h100) == dat(8, 'h100) && u_nvm.peek('h103) == '0, "only T8 restored");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
