// nvm_model: behavioural model of the persistent main memory (not
// synthesizable; simulation only).
//
// Contents are kept in an associative array of 64-byte blocks indexed by
// block address; unwritten blocks read as zero. Contents survive a reset of
// the design, which is how the testbenches model a power failure. Writes are
// taken in order, one per cycle, with random back-pressure when STALL_PCT is
// non-zero. Reads are answered after READ_LAT cycles (168 cycles in the
// evaluated system), one outstanding at a time.
//
// From the paper: only that persistent memory is block-addressed and that reads
// take longer than writes are accepted (168-cycle read latency in its
// evaluation). Own choices: the handshake, the random write stall, and the
// peek/poke tasks that a testbench uses to build or inspect memory images.
module nvm_model
  import loc_pkg::*;
#(
  parameter int READ_LAT  = 168,
  parameter int STALL_PCT = 0
) (
  input  logic   clk,
  input  logic   wvalid,
  output logic   wready,
  input  baddr_t waddr,
  input  blk_t   wdata,
  input  logic   rvalid,
  output logic   rready,
  input  baddr_t raddr,
  output logic   rresp_valid,
  output blk_t   rresp_data
);
  blk_t   mem [baddr_t];
  int     writes;
  int     rcnt;
  baddr_t ra;
  logic   rbusy;

  initial begin
    writes = 0; rbusy = 1'b0; rcnt = 0; ra = '0;
    wready = 1'b1; rresp_valid = 1'b0; rresp_data = '0;
  end

  assign rready = !rbusy;

  function automatic blk_t peek(baddr_t a);
    return mem.exists(a) ? mem[a] : '0;
  endfunction

  task automatic poke(baddr_t a, blk_t d);
    mem[a] = d;
  endtask

  always @(posedge clk) begin
    if (wvalid && wready) begin
      mem[waddr] = wdata;
      writes++;
    end
    wready <= (STALL_PCT == 0) ? 1'b1 : (($urandom % 100) >= STALL_PCT);
    rresp_valid <= 1'b0;
    if (rbusy) begin
      if (rcnt <= 1) begin
        rresp_valid <= 1'b1;
        rresp_data  <= peek(ra);
        rbusy       <= 1'b0;
      end else rcnt <= rcnt - 1;
    end else if (rvalid) begin
      rbusy <= 1'b1;
      ra    <= raddr;
      rcnt  <= READ_LAT;
    end
  end

endmodule
