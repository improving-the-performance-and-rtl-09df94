// log_group_writer: memory-controller extension that owns the memory log area.
//
// Log blocks arriving from the cache (a 64-byte data block plus its BLK-TAG,
// TxCnt already stamped) are allocated at that moment to the next free slot of
// the current block group, as the paper describes for Eager Commit. A block
// group is 8 blocks: 7 data blocks then one META block holding the group's
// sequence ID (SID) and the 7 BLK-TAGs. The 8 writes of a group are issued
// serially on one in-order memory write port and META is always written last,
// so a META block in memory implies its 7 data blocks are already there. A
// flush request closes a partly filled group: its unused tags have the valid
// bit (RESV[0]) clear.
//
// The writer also writes the dependency-pair region and the log head on
// request of the Commit/Recovery controller, and keeps the log pointers:
// start (first live group and its SID) and next (group being filled, its SID).
// A head write with trunc set first moves start up to next, i.e. truncates
// the log. load_* sets both pointers after recovery.
//
// Log area layout (block addresses, own choice; the paper gives only "a log
// head, then the block groups and the dependency pairs"):
//   LOG_BASE                    log head (loc_pkg::log_head_t)
//   LOG_BASE+1 .. +DEP_BLKS     dependency pairs, 16 per block
//   LOG_BASE+1+DEP_BLKS ...     NGROUPS block groups, used circularly
// Default size 32 MB (524288 blocks) as in the paper's evaluation; the
// dependency region is 512 blocks (the 32 KB pair buffer).
//
// Timing: one memory write per cycle when mem_wready is high; a data block is
// accepted in the cycle it is written; closing a group costs one extra write.
module log_group_writer
  import loc_pkg::*;
#(
  parameter logic [31:0] LOG_BASE = 32'hFFF8_0000,
  parameter int          LOG_BLKS = 524288,
  parameter int          DEP_BLKS = 512
) (
  input  logic        clk,
  input  logic        rst_n,
  // log data blocks
  input  logic        blk_valid,
  output logic        blk_ready,
  input  blk_tag_t    blk_tag,
  input  blk_t        blk_data,
  // control
  input  logic        flush,          // close the current group (pulse)
  output logic        idle,           // nothing pending
  input  logic        dep_valid,
  output logic        dep_ready,
  input  logic [$clog2(DEP_BLKS)-1:0] dep_idx,
  input  blk_t        dep_data,
  input  logic        head_valid,
  output logic        head_ready,
  input  logic        head_trunc,
  input  txid_t       head_win_base,
  input  logic [15:0] head_dep_count,
  input  logic        load_valid,
  input  logic [31:0] load_group,
  input  logic [63:0] load_sid,
  output logic [31:0] next_group,
  output logic [63:0] next_sid,
  output logic [31:0] start_group,
  output logic [63:0] start_sid,
  output logic [31:0] groups_written,
  // memory write port
  output logic        mem_wvalid,
  input  logic        mem_wready,
  output baddr_t      mem_waddr,
  output blk_t        mem_wdata
);
  localparam int NGROUPS = (LOG_BLKS - 1 - DEP_BLKS) / GROUP_BLKS;
  localparam logic [31:0] GROUP_BASE = LOG_BASE + 32'(1 + DEP_BLKS);

  typedef enum logic [0:0] {S_FILL, S_META} state_e;
  state_e                    state;
  logic [2:0]                slot;
  blk_tag_t [GROUP_DATA-1:0] tags;
  logic                      flush_pend;
  log_head_t                 head_w;
  meta_blk_t                 meta_w;

  assign meta_w = '{sid: next_sid, tags: tags};

  function automatic baddr_t group_addr(logic [31:0] g, logic [2:0] s);
    return GROUP_BASE + g * GROUP_BLKS + 32'(s);
  endfunction

  assign idle = (state == S_FILL) && !(flush_pend && slot != 0) && !blk_valid;

  always_comb begin
    head_w            = '0;
    head_w.magic      = LOG_MAGIC;
    head_w.start_group = head_trunc ? next_group : start_group;
    head_w.start_sid   = head_trunc ? next_sid   : start_sid;
    head_w.win_base    = head_win_base;
    head_w.dep_count   = head_dep_count;
  end

  always_comb begin
    mem_wvalid = 1'b0;
    mem_waddr  = '0;
    mem_wdata  = '0;
    blk_ready  = 1'b0;
    dep_ready  = 1'b0;
    head_ready = 1'b0;
    if (state == S_META) begin
      mem_wvalid = 1'b1;
      mem_waddr  = group_addr(next_group, 3'd7);
      mem_wdata  = meta_w;
    end else if (blk_valid) begin
      mem_wvalid = 1'b1;
      mem_waddr  = group_addr(next_group, slot);
      mem_wdata  = blk_data;
      blk_ready  = mem_wready;
    end else if (flush_pend && slot != 0) begin
      mem_wvalid = 1'b0;              // goes to S_META next cycle
    end else if (dep_valid) begin
      mem_wvalid = 1'b1;
      mem_waddr  = LOG_BASE + 32'd1 + 32'(dep_idx);
      mem_wdata  = dep_data;
      dep_ready  = mem_wready;
    end else if (head_valid) begin
      mem_wvalid = 1'b1;
      mem_waddr  = LOG_BASE;
      mem_wdata  = head_w;
      head_ready = mem_wready;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state          <= S_FILL;
      slot           <= '0;
      tags           <= '0;
      flush_pend     <= 1'b0;
      next_group     <= '0;
      next_sid       <= 64'd1;
      start_group    <= '0;
      start_sid      <= 64'd1;
      groups_written <= '0;
    end else begin
      if (flush) flush_pend <= 1'b1;
      if (load_valid) begin
        next_group  <= load_group;
        start_group <= load_group;
        next_sid    <= load_sid;
        start_sid   <= load_sid;
        slot        <= '0;
        tags        <= '0;
      end else if (state == S_META) begin
        if (mem_wready) begin
          state          <= S_FILL;
          slot           <= '0;
          tags           <= '0;
          flush_pend     <= 1'b0;
          next_group     <= (next_group == 32'(NGROUPS - 1)) ? '0 : next_group + 1'b1;
          next_sid       <= next_sid + 1'b1;
          groups_written <= groups_written + 1'b1;
        end
      end else if (blk_valid) begin
        if (mem_wready) begin
          tags[slot]         <= blk_tag;
          tags[slot].resv[0] <= 1'b1;
          slot               <= slot + 1'b1;
          if (slot == 3'(GROUP_DATA - 1)) state <= S_META;
        end
      end else if (flush_pend) begin
        if (slot != 0) state <= S_META;
        else           flush_pend <= 1'b0;
      end
      if (head_ready && head_trunc) begin
        start_group <= next_group;
        start_sid   <= next_sid;
      end
    end
  end

  // A group's META must never be written while data slots are still empty
  // unless a flush asked for it.
  assert property (@(posedge clk) disable iff (!rst_n)
                   (state == S_META && mem_wready) |-> (slot == 3'(GROUP_DATA) || flush_pend));

endmodule
