// rme_writer: the Writer of the Fetch Unit.
//
// Receives packed data (cnt bytes starting at byte 0) with its byte
// position pos in the Reorganization Buffer and forms a single write
// request {line, byte enables, data} for the Monitor Bypass: the line is
// pos / 64, the data and the enables are shifted to pos % 64. Data that
// would run past the end of the line is cut off (the Packer always sends
// whole, line-aligned lines, so this does not happen in the engine). The
// paper gives the Writer's task; the request format is this design's.
//
// Timing: one register stage; a request is taken whenever the output is
// free or being emptied in the same cycle.
module rme_writer
  import rme_pkg::*;
(
  input  logic                clk,
  input  logic                rst_n,
  input  logic                flush,
  input  logic                in_valid,
  output logic                in_ready,
  input  logic [LINE_W-1:0]   in_data,
  input  logic [31:0]         in_pos,
  input  logic [LINE_OFF_W:0] in_cnt,
  output logic                out_valid,
  input  logic                out_ready,
  output rme_wr_t             out
);

  logic [LINE_OFF_W-1:0] off;
  logic [LINE_BYTES-1:0] be;
  logic [2*LINE_BYTES-1:0] be_wide;

  assign off     = in_pos[LINE_OFF_W-1:0];
  assign be_wide = ((2*LINE_BYTES)'(1) << in_cnt) - (2*LINE_BYTES)'(1);
  assign be      = LINE_BYTES'(be_wide << off);
  assign in_ready = !out_valid || out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out       <= '0;
    end else if (flush) begin
      out_valid <= 1'b0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (in_valid && in_ready) begin
        out_valid <= 1'b1;
        out.line  <= in_pos[LINE_OFF_W +: LINE_IDX_W];
        out.be    <= be;
        out.data  <= in_data << (8 * int'(off));
      end
    end
  end

  a_hold: assert property (@(posedge clk) disable iff (!rst_n || flush)
    out_valid && !out_ready |=> out_valid && $stable(out));

endmodule
