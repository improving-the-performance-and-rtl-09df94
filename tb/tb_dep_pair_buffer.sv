// tb_dep_pair_buffer: self-checking test of the dependency-pair buffer.
// Pushes random pairs, reads them back as 16-pair blocks, checks zero padding
// of the last block, the full flag at the 32 KB capacity (8192 pairs),
// the sticky overflow flag and clear.
//
// From the paper: the 32 KB capacity. Own choices: the 32-bit pair packing
// and the padding/overflow behaviour that is checked.
module tb_dep_pair_buffer;
  import loc_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  localparam int DEPTH = 8192;
  logic       clear = 0, push = 0;
  dep_pair_t  push_pair = '0;
  logic [$clog2(DEPTH):0] count;
  logic       full, overflow;
  logic [$clog2(DEPTH)-1:0] rd_blk_idx = '0;
  blk_t       rd_blk;
  int checks = 0, failures = 0;
  dep_pair_t  ref_q [$];

  dep_pair_buffer dut (.*);

  task automatic check(bit c, string what);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    check(count == 0 && !full, "empty after reset");
    for (int i = 0; i < 37; i++) begin
      dep_pair_t p;
      p = '{ta: 8'($urandom), tb: 8'($urandom), n: 16'($urandom_range(1, 65535))};
      ref_q.push_back(p);
      @(negedge clk); push = 1; push_pair = p;
    end
    @(negedge clk); push = 0;
    check(count == 37, "count after 37 pushes");
    for (int b = 0; b < 3; b++) begin
      rd_blk_idx = 13'(b); #1;
      for (int k = 0; k < 16; k++) begin
        int i;
        i = b * 16 + k;
        if (i < 37) check(rd_blk[32*k +: 32] == ref_q[i], $sformatf("pair %0d", i));
        else        check(rd_blk[32*k +: 32] == '0, $sformatf("pad %0d", i));
      end
    end
    // check field packing: ta in the top byte
    rd_blk_idx = 0; #1 check(rd_blk[31:24] == ref_q[0].ta && rd_blk[15:0] == ref_q[0].n, "packing");
    // fill to capacity
    @(negedge clk); push = 1; push_pair = '{ta: 8'd1, tb: 8'd2, n: 16'd3};
    while (!full) @(negedge clk);
    push = 0;
    check(count == 14'(DEPTH), "full at 8192 pairs (32 KB)");
    check(!overflow, "no overflow at exactly full");
    @(negedge clk); push = 1;
    @(negedge clk); push = 0;
    check(overflow && count == 14'(DEPTH), "overflow on push when full");
    rd_blk_idx = 13'(DEPTH / 16 - 1); #1 check(rd_blk[31:0] == {8'd1, 8'd2, 16'd3}, "last pair stored");
    @(negedge clk); clear = 1;
    @(negedge clk); clear = 0;
    check(count == 0 && !overflow, "clear");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
