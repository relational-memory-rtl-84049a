// rme_meta_spm: the Metadata SPM of the Reorganization Buffer.
//
// One entry per Data SPM line, holding the tuple the paper names:
// P, the epoch in which the line became complete; K, the count of valid
// bytes written so far; and the ID of a CPU read stalled on the line (with
// a flag saying the ID is in use, since ID 0 is a legal AXI ID). The
// Monitor Bypass is its only user. One synchronous read port, one write
// port; rdata shows the entry addressed in the cycle re was high and holds
// it until the next read; a read and a write of one entry in the same cycle
// return the old entry. Contents are not reset here: the Monitor Bypass
// clears every entry after reset. Port shape and the in-use flag are this
// design's choices.
module rme_meta_spm
  import rme_pkg::*;
#(
  parameter int unsigned DEPTH = SPM_LINES,
  parameter int unsigned AW    = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          re,
  input  logic [AW-1:0] raddr,
  output rme_meta_t     rdata,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  rme_meta_t     wdata
);

  rme_meta_t mem [DEPTH];

  always_ff @(posedge clk) begin
    if (re) rdata <= mem[raddr];
    if (we) mem[waddr] <= wdata;
  end

endmodule
