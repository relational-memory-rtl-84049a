// rme_data_spm: the Data SPM of the Reorganization Buffer.
//
// Holds the projected (packed) table, one 64-byte cache line per word:
// 32768 lines, 2 MB, the size of the paper's prototype. One synchronous
// read port and one write port with a byte enable per byte, the usual
// simple dual-port block-RAM shape. rdata shows the line addressed in the
// cycle re was high and holds it until the next read. Writing and reading
// the same line in one cycle returns the old content. The port shape and
// the read-during-write rule are this design's choices.
module rme_data_spm
  import rme_pkg::*;
#(
  parameter int unsigned DEPTH = SPM_LINES,
  parameter int unsigned AW    = $clog2(DEPTH)
) (
  input  logic                  clk,
  input  logic                  re,
  input  logic [AW-1:0]         raddr,
  output logic [LINE_W-1:0]     rdata,
  input  logic                  we,
  input  logic [AW-1:0]         waddr,
  input  logic [LINE_BYTES-1:0] wbe,
  input  logic [LINE_W-1:0]     wdata
);

  logic [LINE_W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (re) rdata <= mem[raddr];
    if (we)
      for (int b = 0; b < LINE_BYTES; b++)
        if (wbe[b]) mem[waddr][8*b +: 8] <= wdata[8*b +: 8];
  end

endmodule
