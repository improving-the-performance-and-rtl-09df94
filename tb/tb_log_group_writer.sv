// tb_log_group_writer: self-checking test of the block-group log writer.
// Sends 17 tagged log blocks with random memory back-pressure, then a flush,
// and checks every memory write against an independently built expectation:
// 7 data blocks then the META block (SID, 7 BLK-TAGs with the valid bit) per
// group, META last, SIDs counting up, the partial third group closed with
// invalid tags, dependency-pair and head writes at their addresses, and that
// a truncating head write moves the log start. Also checks one write per
// cycle without back-pressure (8 cycles per full group).
//
// From the paper: 7 data blocks plus a META block per group, SID and
// BLK-TAG contents. Own choices: the log-area addresses, the META-last order
// and the head format that are checked.
module tb_log_group_writer;
  import loc_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  localparam logic [31:0] LB = 32'h0000_1000;
  localparam int LBLKS = 1024, DBLKS = 16;
  localparam logic [31:0] GB = LB + 1 + DBLKS;

  logic blk_valid = 0, blk_ready;
  blk_tag_t blk_tag = '0;
  blk_t blk_data = '0;
  logic flush = 0, idle;
  logic dep_valid = 0, dep_ready;
  logic [3:0] dep_idx = 0;
  blk_t dep_data = '0;
  logic head_valid = 0, head_ready, head_trunc = 0;
  txid_t head_win_base = 0;
  logic [15:0] head_dep_count = 0;
  logic load_valid = 0;
  logic [31:0] load_group = 0;
  logic [63:0] load_sid = 0;
  logic [31:0] next_group, start_group, groups_written;
  logic [63:0] next_sid, start_sid;
  logic mem_wvalid, mem_wready = 1;
  baddr_t mem_waddr;
  blk_t mem_wdata;
  int checks = 0, failures = 0;
  bit stall = 1;

  log_group_writer #(.LOG_BASE(LB), .LOG_BLKS(LBLKS), .DEP_BLKS(DBLKS)) dut (.*);

  task automatic check(bit c, string what);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", what); end
  endtask

  // capture memory writes
  baddr_t wa_q [$];
  blk_t   wd_q [$];
  always @(posedge clk) begin
    if (mem_wvalid && mem_wready) begin wa_q.push_back(mem_waddr); wd_q.push_back(mem_wdata); end
    mem_wready <= stall ? ($urandom % 4 != 0) : 1'b1;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  blk_tag_t tags_sent [17];
  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 17; i++) begin
      blk_tag_t t;
      t = '{cid: 3'(i), tid: 1'(i), txid: 8'(i / 3), txcnt: (i % 3 == 2) ? 16'd3 : 16'd0,
            addr: 32'h5000 + 32'(i), resv: 4'b0};
      tags_sent[i] = t;
      @(negedge clk); blk_valid = 1; blk_tag = t; blk_data = {16{32'(i + 100)}};
      do @(posedge clk); while (!blk_ready);
      #1;
    end
    @(negedge clk); blk_valid = 0; flush = 1;
    @(negedge clk); flush = 0;
    wait (idle);
    @(negedge clk); dep_valid = 1; dep_idx = 4'd2; dep_data = {16{32'hABCD_0001}};
    do @(posedge clk); while (!dep_ready);
    @(negedge clk); dep_valid = 0; head_valid = 1; head_trunc = 0; head_win_base = 8'd7; head_dep_count = 16'd33;
    do @(posedge clk); while (!head_ready);
    @(negedge clk); head_trunc = 1;
    do @(posedge clk); while (!head_ready);
    @(negedge clk); head_valid = 0;
    repeat (3) @(posedge clk);

    // expected: groups 0,1 full, group 2 with 3 blocks, then dep, head, head
    check(wa_q.size() == 8 + 8 + 4 + 1 + 2, $sformatf("write count %0d", wa_q.size()));
    for (int g = 0; g < 3; g++) begin
      int n;
      int base;
      meta_blk_t m;
      n = (g < 2) ? 7 : 3;
      base = g * 8;
      for (int s = 0; s < n; s++) begin
        check(wa_q[base + s] == GB + 32'(g * 8 + s), $sformatf("data addr g%0d s%0d", g, s));
        check(wd_q[base + s] == {16{32'(g * 7 + s + 100)}}, $sformatf("data g%0d s%0d", g, s));
      end
      check(wa_q[base + n] == GB + 32'(g * 8 + 7), $sformatf("META addr g%0d (after data)", g));
      m = wd_q[base + n];
      check(m.sid == 64'(g + 1), $sformatf("SID g%0d", g));
      for (int s = 0; s < 7; s++) begin
        if (s < n) begin
          blk_tag_t e;
          e = tags_sent[g * 7 + s]; e.resv = 4'b0001;
          check(m.tags[s] == e, $sformatf("tag g%0d s%0d", g, s));
        end else check(m.tags[s].resv[0] == 1'b0, $sformatf("unused tag invalid g%0d s%0d", g, s));
      end
    end
    check(wa_q[20] == LB + 1 + 2 && wd_q[20] == {16{32'hABCD_0001}}, "dep block write");
    begin
      log_head_t h1, h2;
      h1 = wd_q[21]; h2 = wd_q[22];
      check(wa_q[21] == LB && h1.magic == LOG_MAGIC && h1.start_group == 0 && h1.start_sid == 1 &&
            h1.win_base == 8'd7 && h1.dep_count == 16'd33, "head write");
      check(h2.start_group == 3 && h2.start_sid == 4, "truncating head");
    end
    check(start_group == 3 && next_group == 3 && next_sid == 4 && groups_written == 3, "pointers");

    // throughput: 7 blocks without back-pressure take 8 write cycles
    stall = 0;
    repeat (2) @(posedge clk);
    wa_q.delete(); wd_q.delete();
    begin
      int c0, c1;
      @(negedge clk); blk_valid = 1;
      c0 = $time / 10;
      for (int i = 0; i < 7; i++) begin
        do @(posedge clk); while (!blk_ready);
      end
      #1 blk_valid = 0;
      do @(posedge clk); while (wa_q.size() < 8);
      c1 = $time / 10;
      check(c1 - c0 == 8, $sformatf("8 cycles per group, got %0d", c1 - c0));
      check(wa_q[7] == GB + 32'(3 * 8 + 7), "META of group 3 last");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
