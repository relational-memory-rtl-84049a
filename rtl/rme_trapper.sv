// rme_trapper: the RME's AXI read secondary facing the CPU.
//
// Every CPU read of the ephemeral window arrives here first. The Trapper
// takes the tuple {A, ID} from the AR channel and queues it towards the
// Monitor Bypass (REQ_DEPTH reads may be outstanding); it then turns each
// {ID, RD} answer, a whole 64-byte line, into AXI read beats of 16 bytes
// with RLAST on the final one. That split of work is the paper's. This
// design's choices: the line index is the address offset within the
// window, modulo the Data SPM size (A[LINE_OFF_W +: LINE_IDX_W]); a read
// may ask for 1 to 4 beats of one line, INCR or WRAP, starting at beat
// A[5:4] (a cache-line fill with critical word first is a 4-beat WRAP);
// RRESP is always OKAY. Answers may leave in a different order than the
// reads came for different IDs, as AXI allows; the Monitor Bypass keeps
// the order within one ID. The write channels of the window are not part
// of this block: ephemeral data is read-only.
//
// Timing: AR is accepted while the queue has room; the first R beat of an
// answer appears the cycle after the answer is taken, then one beat per
// cycle while RREADY is high.
module rme_trapper
  import rme_pkg::*;
#(
  parameter int unsigned REQ_DEPTH = 8
) (
  input  logic          clk,
  input  logic          rst_n,
  // AXI read secondary (CPU side)
  input  logic          s_arvalid,
  output logic          s_arready,
  input  axi_ar_t       s_ar,
  output logic          s_rvalid,
  input  logic          s_rready,
  output axi_r_t        s_r,
  // {A, ID} towards the Monitor Bypass
  output logic          req_valid,
  input  logic          req_ready,
  output rme_cpu_req_t  req,
  // {ID, RD} from the Monitor Bypass
  input  logic          resp_valid,
  output logic          resp_ready,
  input  rme_cpu_resp_t resp
);

  rme_cpu_req_t ar_req;
  assign ar_req.line = s_ar.addr[LINE_OFF_W +: LINE_IDX_W];
  assign ar_req.beat = s_ar.addr[BUS_OFF_W +: BEAT_IDX_W];
  assign ar_req.len  = s_ar.len[BEAT_IDX_W-1:0];
  assign ar_req.id   = s_ar.id;

  logic [$clog2(REQ_DEPTH+1)-1:0] qcount;   // not needed here
  logic [$bits(rme_cpu_req_t)-1:0] qout;

  rme_fifo #(.WIDTH($bits(rme_cpu_req_t)), .DEPTH(REQ_DEPTH)) u_reqq (
    .clk, .rst_n, .clear(1'b0),
    .in_valid(s_arvalid), .in_ready(s_arready), .din(ar_req),
    .out_valid(req_valid), .out_ready(req_ready), .dout(qout),
    .count(qcount)
  );
  assign req = rme_cpu_req_t'(qout);

  // ---------------- R beat serializer ----------------
  logic                  busy;
  logic [BEAT_IDX_W-1:0] beat_q, left_q;
  logic [ID_W-1:0]       id_q;
  logic [LINE_W-1:0]     line_q;

  assign resp_ready = !busy;
  assign s_rvalid   = busy;
  assign s_r.id     = id_q;
  assign s_r.data   = line_q[BUS_W*beat_q +: BUS_W];
  assign s_r.resp   = AXI_RESP_OKAY;
  assign s_r.last   = (left_q == '0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy   <= 1'b0;
      beat_q <= '0;
      left_q <= '0;
      id_q   <= '0;
      line_q <= '0;
    end else if (!busy) begin
      if (resp_valid) begin
        busy   <= 1'b1;
        beat_q <= resp.beat;
        left_q <= resp.len;
        id_q   <= resp.id;
        line_q <= resp.data;
      end
    end else if (s_rready) begin
      if (left_q == '0) busy <= 1'b0;
      else begin
        left_q <= left_q - BEAT_IDX_W'(1);
        beat_q <= beat_q + BEAT_IDX_W'(1);   // wraps within the line
      end
    end
  end

  // A read must stay within one cache line and use full bus beats.
  a_ar_len: assert property (@(posedge clk) disable iff (!rst_n)
    s_arvalid |-> s_ar.len < 8'(BEATS_PER_LINE) && s_ar.size == AXI_SIZE_BUS);
  a_ar_incr: assert property (@(posedge clk) disable iff (!rst_n)
    s_arvalid && s_ar.burst != AXI_BURST_WRAP |->
      32'(s_ar.addr[BUS_OFF_W +: BEAT_IDX_W]) + 32'(s_ar.len) < BEATS_PER_LINE);
  a_r_hold: assert property (@(posedge clk) disable iff (!rst_n)
    s_rvalid && !s_rready |=> s_rvalid && $stable(s_r));

endmodule
