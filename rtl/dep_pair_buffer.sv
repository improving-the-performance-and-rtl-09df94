// dep_pair_buffer: the Commit/Recovery Logic's volatile buffer of Transaction
// Dependency Pairs for the current speculation window.
//
// A pair <Ta, Tb, n> says that transaction Ta had n of its writes overwritten
// (coalesced away) by the later transaction Tb. Pairs are appended with push
// during the window; when the window completes they are read out 16 at a time
// as 64-byte blocks (pair k of a block in bits [32*k +: 32]) and written to the
// memory log area, after which clear empties the buffer.
//
// Size: 32 KB as in the paper, i.e. 8192 pairs of 32 bits. The 32-bit packing
// (Ta 8, Tb 8, n 16 bits) and the block layout are this design's choice; the
// paper gives the buffer's size and purpose only. A push to a full buffer is
// dropped and raises the sticky overflow flag. Read is combinational.
module dep_pair_buffer
  import loc_pkg::*;
#(
  parameter int DEPTH = 8192
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       clear,
  input  logic       push,
  input  dep_pair_t  push_pair,
  output logic [$clog2(DEPTH):0] count,
  output logic       full,
  output logic       overflow,
  input  logic [$clog2(DEPTH)-1:0] rd_blk_idx,   // block index (pairs 16*idx..)
  output blk_t       rd_blk
);
  localparam int CW = $clog2(DEPTH) + 1;
  dep_pair_t mem [DEPTH];

  assign full = (count == CW'(DEPTH));

  always_ff @(posedge clk) begin
    if (push && !full) mem[count[CW-2:0]] <= push_pair;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      count    <= '0;
      overflow <= 1'b0;
    end else if (clear) begin
      count    <= '0;
      overflow <= 1'b0;
    end else if (push) begin
      if (full) overflow <= 1'b1;
      else      count    <= count + 1'b1;
    end
  end

  // Pairs at or beyond count read as zero so that a partial last block is
  // padded with empty pairs (n = 0 carries no dependency).
  always_comb begin
    for (int k = 0; k < PAIRS_PER_BLK; k++) begin
      logic [CW-1:0] idx;
      idx = CW'(rd_blk_idx) * CW'(PAIRS_PER_BLK) + CW'(k);
      if (idx < count) rd_blk[32*k +: 32] = mem[idx[CW-2:0]];
      else             rd_blk[32*k +: 32] = '0;
    end
  end

endmodule
