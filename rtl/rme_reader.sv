// rme_reader: the Reader of the Fetch Unit, the RME's AXI read primary
// towards main memory.
//
// For each request descriptor it issues one INCR read of R_burst beats of
// B_w = 16 bytes at R_addr, so only bus-width-aligned beats holding useful
// bytes are fetched. As in the paper's MLP revision up to MAX_OUT reads may
// be in flight; their descriptors wait in a FIFO. All reads use one AXI
// ID, so main memory returns them in order, and each returning beat is
// tagged with the byte range [lo, hi) that holds useful data: lo = E_s on
// the first beat of a descriptor, else 0; hi = E_e (16 when E_e is 0) on
// its last beat, else 16. `frame_end` marks the final beat of the frame's
// last descriptor.
//
// `flush` (software reset) stops new reads; the reads already issued are
// still received and their beats dropped until none is left in flight, so
// the AXI rules are kept. This design's choices: the AR register stage, a
// single ARID of 0, RRESP ignored.
//
// Timing: a descriptor is taken the cycle the AR register is free and fewer
// than MAX_OUT reads are outstanding; ARVALID rises the next cycle. Beats
// pass combinationally from R to the output (RREADY = out_ready).
module rme_reader
  import rme_pkg::*;
#(
  parameter int unsigned MAX_OUT = MAX_OUTSTANDING
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 flush,
  // descriptors from the Requestor
  input  logic                 desc_valid,
  output logic                 desc_ready,
  input  rme_desc_t            desc,
  // AXI read primary (main memory)
  output logic                 m_arvalid,
  input  logic                 m_arready,
  output axi_ar_t              m_ar,
  input  logic                 m_rvalid,
  output logic                 m_rready,
  input  axi_r_t               m_r,
  // tagged beats towards the Column Extractor
  output logic                 out_valid,
  input  logic                 out_ready,
  output logic [BUS_W-1:0]     out_data,
  output logic [BUS_OFF_W:0]   out_lo,
  output logic [BUS_OFF_W:0]   out_hi,
  output logic                 out_frame_end,
  output logic [$clog2(MAX_OUT+1)-1:0] outstanding
);

  typedef struct packed {
    logic [BURST_W-1:0]   burst;
    logic [BUS_OFF_W-1:0] es;
    logic [BUS_OFF_W-1:0] ee;
    logic                 last;
  } inflight_t;

  inflight_t in_d, head;
  logic [$bits(inflight_t)-1:0] head_bits;
  logic fifo_in_ready, fifo_out_valid, fifo_pop;
  logic draining;
  logic take;

  assign in_d = '{burst: desc.burst, es: desc.es, ee: desc.ee, last: desc.last};

  // ---------------- AR side ----------------
  assign take       = desc_valid && fifo_in_ready && !draining && !flush &&
                      (!m_arvalid || m_arready);
  assign desc_ready = take;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      m_arvalid <= 1'b0;
      m_ar      <= '0;
    end else begin
      if (m_arvalid && m_arready) m_arvalid <= 1'b0;
      if (take) begin
        m_arvalid  <= 1'b1;
        m_ar.id    <= '0;
        m_ar.addr  <= desc.raddr;
        m_ar.len   <= 8'(desc.burst) - 8'd1;
        m_ar.size  <= AXI_SIZE_BUS;
        m_ar.burst <= AXI_BURST_INCR;
      end
    end
  end

  rme_fifo #(.WIDTH($bits(inflight_t)), .DEPTH(MAX_OUT)) u_inflight (
    .clk, .rst_n, .clear(1'b0),
    .in_valid(take), .in_ready(fifo_in_ready), .din(in_d),
    .out_valid(fifo_out_valid), .out_ready(fifo_pop), .dout(head_bits),
    .count(outstanding)
  );
  assign head = inflight_t'(head_bits);

  // ---------------- R side ----------------
  logic [BURST_W-1:0] bcnt;
  logic               first_b, last_b, beat_fire;

  assign first_b  = (bcnt == '0);
  assign last_b   = (bcnt == head.burst - BURST_W'(1));
  assign out_data = m_r.data;
  assign out_lo   = first_b ? (BUS_OFF_W+1)'(head.es) : '0;
  assign out_hi   = (last_b && head.ee != '0) ? (BUS_OFF_W+1)'(head.ee)
                                              : (BUS_OFF_W+1)'(BUS_BYTES);
  assign out_frame_end = last_b && head.last;
  assign out_valid = m_rvalid && fifo_out_valid && !draining;
  assign m_rready  = fifo_out_valid && (draining || out_ready);
  assign beat_fire = m_rvalid && m_rready;
  assign fifo_pop  = beat_fire && last_b;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      bcnt     <= '0;
      draining <= 1'b0;
    end else begin
      if (beat_fire) bcnt <= last_b ? '0 : bcnt + BURST_W'(1);
      if (flush) draining <= 1'b1;
      else if (draining && !fifo_out_valid && !m_arvalid) draining <= 1'b0;
    end
  end

  a_rlast: assert property (@(posedge clk) disable iff (!rst_n)
    beat_fire |-> (m_r.last == last_b));
  a_ar_hold: assert property (@(posedge clk) disable iff (!rst_n)
    m_arvalid && !m_arready |=> m_arvalid && $stable(m_ar));

endmodule
