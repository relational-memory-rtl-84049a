// rme_fetch_unit: the Fetch Unit, in the configuration of the paper's MLP
// revision.
//
// A chain of four stages: the Reader turns each request descriptor into a
// variable-length AXI burst towards main memory (up to MAX_OUT in flight)
// and tags every returning beat with its useful byte range; the Column
// Extractor keeps only those bytes and shifts them to byte 0; the Packer
// gathers them into whole 64-byte cache lines; the Writer turns each line
// into one write request for the Reorganization Buffer, which reaches it
// through the Monitor Bypass. Back-pressure runs from the Monitor Bypass
// back to RREADY. `flush` (software reset) empties every stage; reads in
// flight are drained and dropped by the Reader.
//
// Timing: from an R beat to the write request that carries its last byte
// is two cycles (Packer register, Writer register).
module rme_fetch_unit
  import rme_pkg::*;
#(
  parameter int unsigned MAX_OUT = MAX_OUTSTANDING
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      flush,
  input  logic      desc_valid,
  output logic      desc_ready,
  input  rme_desc_t desc,
  output logic      m_arvalid,
  input  logic      m_arready,
  output axi_ar_t   m_ar,
  input  logic      m_rvalid,
  output logic      m_rready,
  input  axi_r_t    m_r,
  output logic      wr_valid,
  input  logic      wr_ready,
  output rme_wr_t   wr,
  output logic [$clog2(MAX_OUT+1)-1:0] outstanding
);

  logic               b_valid, b_ready, b_fend;
  logic [BUS_W-1:0]   b_data;
  logic [BUS_OFF_W:0] b_lo, b_hi;
  logic               x_valid, x_ready, x_fend;
  logic [BUS_W-1:0]   x_data;
  logic [BUS_OFF_W:0] x_cnt;
  logic               p_valid, p_ready;
  logic [LINE_W-1:0]  p_data;
  logic [31:0]        p_pos;
  logic [LINE_OFF_W:0] p_cnt;

  rme_reader #(.MAX_OUT(MAX_OUT)) u_reader (
    .clk, .rst_n, .flush,
    .desc_valid, .desc_ready, .desc,
    .m_arvalid, .m_arready, .m_ar, .m_rvalid, .m_rready, .m_r,
    .out_valid(b_valid), .out_ready(b_ready), .out_data(b_data),
    .out_lo(b_lo), .out_hi(b_hi), .out_frame_end(b_fend),
    .outstanding
  );

  rme_column_extractor u_extractor (
    .in_valid(b_valid), .in_ready(b_ready), .in_data(b_data),
    .in_lo(b_lo), .in_hi(b_hi), .in_frame_end(b_fend),
    .out_valid(x_valid), .out_ready(x_ready), .out_data(x_data),
    .out_cnt(x_cnt), .out_frame_end(x_fend)
  );

  rme_packer u_packer (
    .clk, .rst_n, .flush,
    .in_valid(x_valid), .in_ready(x_ready), .in_data(x_data),
    .in_cnt(x_cnt), .in_frame_end(x_fend),
    .out_valid(p_valid), .out_ready(p_ready), .out_data(p_data),
    .out_pos(p_pos), .out_cnt(p_cnt)
  );

  rme_writer u_writer (
    .clk, .rst_n, .flush,
    .in_valid(p_valid), .in_ready(p_ready), .in_data(p_data),
    .in_pos(p_pos), .in_cnt(p_cnt),
    .out_valid(wr_valid), .out_ready(wr_ready), .out(wr)
  );

endmodule
