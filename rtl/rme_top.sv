// rme_top: the Relational Memory Engine (RME).
//
// The engine sits on the path between the CPU and main memory and makes
// any group of up to 11 columns of a row-oriented table readable as a
// dense array. Software programs the geometry through the configuration
// port (AXI4-Lite), issues a software reset, then reads the ephemeral
// window through the CPU-facing AXI port: line k of the window holds bytes
// 64k..64k+63 of the projected table, i.e. row after row of the selected
// columns packed back to back. The first read that misses starts the
// Requestor, whose descriptors drive the Fetch Unit's reads of main memory
// through the DRAM-facing AXI port; packed lines fill the Data SPM, and
// reads stalled on a line are answered as soon as it is complete; later
// reads of complete lines are answered from the SPM directly.
//
// Blocks and links as in the paper's architecture figure: Configuration
// Port (0), Trapper (1, 2, 4, 5), Monitor Bypass, Requestor (A, B), Fetch
// Unit (C, D) and the Metadata and Data SPMs (3, E). Clocking: one clock
// for the whole engine (the paper's prototype runs it at 100 MHz); the
// crossing into the CPU's clock domain belongs to the platform. Only read
// channels are provided on the two memory-mapped data ports.
module rme_top
  import rme_pkg::*;
#(
  parameter int unsigned SPM_DEPTH = SPM_LINES,       // Data SPM lines
  parameter int unsigned MAX_OUT   = MAX_OUTSTANDING, // Fetch Unit reads in flight
  parameter int unsigned REQ_DEPTH = 8                // CPU reads queued in the Trapper
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // configuration port, AXI4-Lite secondary
  input  logic [CFG_ADDR_W-1:0] cfg_awaddr,
  input  logic                  cfg_awvalid,
  output logic                  cfg_awready,
  input  logic [31:0]           cfg_wdata,
  input  logic [3:0]            cfg_wstrb,
  input  logic                  cfg_wvalid,
  output logic                  cfg_wready,
  output logic [1:0]            cfg_bresp,
  output logic                  cfg_bvalid,
  input  logic                  cfg_bready,
  input  logic [CFG_ADDR_W-1:0] cfg_araddr,
  input  logic                  cfg_arvalid,
  output logic                  cfg_arready,
  output logic [31:0]           cfg_rdata,
  output logic [1:0]            cfg_rresp,
  output logic                  cfg_rvalid,
  input  logic                  cfg_rready,
  // CPU side, AXI read secondary (ephemeral window)
  input  logic                  s_arvalid,
  output logic                  s_arready,
  input  axi_ar_t               s_ar,
  output logic                  s_rvalid,
  input  logic                  s_rready,
  output axi_r_t                s_r,
  // main memory side, AXI read primary
  output logic                  m_arvalid,
  input  logic                  m_arready,
  output axi_ar_t               m_ar,
  input  logic                  m_rvalid,
  output logic                  m_rready,
  input  axi_r_t                m_r,
  // status
  output logic [EPOCH_W-1:0]    epoch,
  output logic                  engine_ready,
  output logic                  requestor_busy,
  output logic [$clog2(MAX_OUT+1)-1:0] reads_in_flight,
  output logic                  ev_hit,      // CPU read served from the SPM
  output logic                  ev_miss,     // CPU read stalled
  output logic                  ev_release,  // stalled read answered
  output logic                  ev_retry     // read held back for ordering
);

  localparam int unsigned AW = $clog2(SPM_DEPTH);

  rme_cfg_t      cfg;
  logic          sw_reset;
  logic          rq_valid, rq_ready;
  rme_cpu_req_t  rq;
  logic          rs_valid, rs_ready;
  rme_cpu_resp_t rs;
  logic          wr_valid, wr_ready;
  rme_wr_t       wr;
  logic          start;
  logic          d_valid, d_ready;
  rme_desc_t     desc;

  logic          meta_re, meta_we;
  logic [AW-1:0] meta_raddr, meta_waddr;
  rme_meta_t     meta_rdata, meta_wdata;
  logic          data_re, data_we;
  logic [AW-1:0] data_raddr, data_waddr;
  logic [LINE_W-1:0] data_rdata, data_wdata;
  logic [LINE_BYTES-1:0] data_wbe;

  rme_config_port u_cfg (
    .clk, .rst_n,
    .s_awaddr(cfg_awaddr), .s_awvalid(cfg_awvalid), .s_awready(cfg_awready),
    .s_wdata(cfg_wdata), .s_wstrb(cfg_wstrb), .s_wvalid(cfg_wvalid), .s_wready(cfg_wready),
    .s_bresp(cfg_bresp), .s_bvalid(cfg_bvalid), .s_bready(cfg_bready),
    .s_araddr(cfg_araddr), .s_arvalid(cfg_arvalid), .s_arready(cfg_arready),
    .s_rdata(cfg_rdata), .s_rresp(cfg_rresp), .s_rvalid(cfg_rvalid), .s_rready(cfg_rready),
    .cfg, .sw_reset
  );

  rme_trapper #(.REQ_DEPTH(REQ_DEPTH)) u_trapper (
    .clk, .rst_n,
    .s_arvalid, .s_arready, .s_ar, .s_rvalid, .s_rready, .s_r,
    .req_valid(rq_valid), .req_ready(rq_ready), .req(rq),
    .resp_valid(rs_valid), .resp_ready(rs_ready), .resp(rs)
  );

  rme_monitor_bypass #(.DEPTH(SPM_DEPTH)) u_monitor (
    .clk, .rst_n, .sw_reset,
    .req_valid(rq_valid), .req_ready(rq_ready), .req(rq),
    .resp_valid(rs_valid), .resp_ready(rs_ready), .resp(rs),
    .wr_valid, .wr_ready, .wr,
    .start,
    .meta_re, .meta_raddr, .meta_rdata, .meta_we, .meta_waddr, .meta_wdata,
    .data_re, .data_raddr, .data_rdata, .data_we, .data_waddr, .data_wbe, .data_wdata,
    .epoch, .ready(engine_ready),
    .ev_hit, .ev_miss, .ev_release, .ev_retry
  );

  rme_requestor #(.SPM_CAPACITY(SPM_DEPTH * LINE_BYTES)) u_requestor (
    .clk, .rst_n, .cfg, .start, .flush(sw_reset),
    .busy(requestor_busy),
    .desc_valid(d_valid), .desc_ready(d_ready), .desc
  );

  rme_fetch_unit #(.MAX_OUT(MAX_OUT)) u_fetch (
    .clk, .rst_n, .flush(sw_reset),
    .desc_valid(d_valid), .desc_ready(d_ready), .desc,
    .m_arvalid, .m_arready, .m_ar, .m_rvalid, .m_rready, .m_r,
    .wr_valid, .wr_ready, .wr,
    .outstanding(reads_in_flight)
  );

  rme_meta_spm #(.DEPTH(SPM_DEPTH)) u_meta_spm (
    .clk, .re(meta_re), .raddr(meta_raddr), .rdata(meta_rdata),
    .we(meta_we), .waddr(meta_waddr), .wdata(meta_wdata)
  );

  rme_data_spm #(.DEPTH(SPM_DEPTH)) u_data_spm (
    .clk, .re(data_re), .raddr(data_raddr), .rdata(data_rdata),
    .we(data_we), .waddr(data_waddr), .wbe(data_wbe), .wdata(data_wdata)
  );

endmodule
