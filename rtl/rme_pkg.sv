// rme_pkg: constants and types shared by the Relational Memory Engine (RME).
//
// The RME sits between the CPU and main memory. Software describes a
// row-oriented table (row size R, row count N, and up to 11 columns of
// interest with widths C_j and offsets O_j); CPU reads of an "ephemeral"
// address window then return those columns densely packed, as if the
// projection were stored in memory. The numbers below follow the paper's
// prototype where it gives them: 16-byte bus (B_w), 64-byte cache lines,
// 11 columns of at most 64 bytes, a 2 MB data scratch-pad and 16
// outstanding DRAM reads. Address, ID and epoch widths are this design's
// own choices.
package rme_pkg;

  // ---- sizes taken from the paper --------------------------------------
  localparam int unsigned BUS_BYTES       = 16;        // B_w, bus width in bytes
  localparam int unsigned LINE_BYTES      = 64;        // CPU cache-line size
  localparam int unsigned MAX_COLS        = 11;        // columns of interest
  localparam int unsigned MAX_COL_BYTES   = 64;        // widest column
  localparam int unsigned SPM_BYTES       = 2*1024*1024; // Data SPM
  localparam int unsigned MAX_OUTSTANDING = 16;        // MLP revision

  // ---- derived ---------------------------------------------------------
  localparam int unsigned BEATS_PER_LINE  = LINE_BYTES / BUS_BYTES;    // 4
  localparam int unsigned BUS_W           = BUS_BYTES * 8;             // 128
  localparam int unsigned LINE_W          = LINE_BYTES * 8;            // 512
  localparam int unsigned SPM_LINES       = SPM_BYTES / LINE_BYTES;    // 32768
  localparam int unsigned LINE_IDX_W      = $clog2(SPM_LINES);         // 15
  localparam int unsigned BUS_OFF_W       = $clog2(BUS_BYTES);         // 4
  localparam int unsigned LINE_OFF_W      = $clog2(LINE_BYTES);        // 6
  localparam int unsigned BEAT_IDX_W      = $clog2(BEATS_PER_LINE);    // 2

  // ---- this design's own choices ---------------------------------------
  localparam int unsigned ADDR_W          = 40;  // physical address width
  localparam int unsigned ID_W            = 6;   // AXI ID width, CPU side
  localparam int unsigned EPOCH_W         = 8;   // width of the epoch P
  localparam int unsigned PAGE_SHIFT      = 12;  // F is a 4 KiB page frame
  localparam int unsigned BURST_W         = 4;   // up to 5 beats per column
  localparam int unsigned CFG_ADDR_W      = 6;   // 64-byte register window

  // AXI encodings
  localparam logic [1:0] AXI_BURST_INCR = 2'b01;
  localparam logic [1:0] AXI_BURST_WRAP = 2'b10;
  localparam logic [1:0] AXI_RESP_OKAY  = 2'b00;
  localparam logic [1:0] AXI_RESP_SLVERR = 2'b10;
  localparam logic [2:0] AXI_SIZE_BUS   = 3'($clog2(BUS_BYTES));

  // Table geometry as written through the configuration port (Table 1).
  typedef struct packed {
    logic [31:0]                 row_size;    // R
    logic [31:0]                 row_count;   // N
    logic [31:0]                 col_count;   // Q
    logic [MAX_COLS-1:0][15:0]   col_width;   // C_Aj
    logic [MAX_COLS-1:0][15:0]   col_offset;  // O_Aj, relative to column j-1
    logic [31:0]                 frame;       // F, page frame of the table
  } rme_cfg_t;

  // Request descriptor produced by the Requestor (Eq. 2-6).
  typedef struct packed {
    logic [ADDR_W-1:0]    raddr;   // R^addr, bus-aligned
    logic [BURST_W-1:0]   burst;   // R^burst, beats
    logic [31:0]          waddr;   // W^addr, byte position in the Data SPM
    logic [BUS_OFF_W-1:0] es;      // E^s, leading bytes to drop
    logic [BUS_OFF_W-1:0] ee;      // E^e, end position in last beat (0 = full)
    logic                 last;    // last descriptor of this frame
  } rme_desc_t;

  // AXI read address / read data payloads (valid/ready carried apart).
  typedef struct packed {
    logic [ID_W-1:0]   id;
    logic [ADDR_W-1:0] addr;
    logic [7:0]        len;
    logic [2:0]        size;
    logic [1:0]        burst;
  } axi_ar_t;

  typedef struct packed {
    logic [ID_W-1:0]  id;
    logic [BUS_W-1:0] data;
    logic [1:0]       resp;
    logic             last;
  } axi_r_t;

  // Trapper -> Monitor Bypass: the {A, ID} tuple of a CPU read.
  typedef struct packed {
    logic [LINE_IDX_W-1:0] line;   // line of the ephemeral window
    logic [BEAT_IDX_W-1:0] beat;   // first beat asked for (A[5:4])
    logic [BEAT_IDX_W-1:0] len;    // beats - 1
    logic [ID_W-1:0]       id;
  } rme_cpu_req_t;

  // Monitor Bypass -> Trapper: the {ID, RD} tuple of an answer.
  typedef struct packed {
    logic [BEAT_IDX_W-1:0] beat;
    logic [BEAT_IDX_W-1:0] len;
    logic [ID_W-1:0]       id;
    logic [LINE_W-1:0]     data;
  } rme_cpu_resp_t;

  // Writer -> Monitor Bypass: one write into the Reorganization Buffer.
  typedef struct packed {
    logic [LINE_IDX_W-1:0] line;
    logic [LINE_BYTES-1:0] be;
    logic [LINE_W-1:0]     data;
  } rme_wr_t;

  // One Metadata SPM entry: {P, K, ID} plus a flag that the ID is in use.
  typedef struct packed {
    logic [EPOCH_W-1:0]     epoch;   // P
    logic [LINE_OFF_W:0]    count;   // K, valid bytes 0..64
    logic                   pend;    // a stalled request waits on this line
    logic [ID_W-1:0]        id;      // its AXI ID
  } rme_meta_t;

  localparam int unsigned META_W = $bits(rme_meta_t);

endpackage
