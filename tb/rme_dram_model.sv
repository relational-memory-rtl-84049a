// rme_dram_model: behavioural model of main memory behind its controller,
// seen as an AXI read secondary with a 16-byte data bus. Not synthesizable
// logic of the engine: it stands in for the platform's DRAM in testbenches.
//
// Read addresses are queued (up to QDEPTH), each becomes ready LATENCY
// cycles after it was accepted, and bursts are returned in order, one beat
// per cycle with random gaps when GAPS is set. Data comes from
// rme_tb_pkg::mem_byte(). Counts reads, beats, multi-beat bursts and the
// largest number of reads seen in flight.
module rme_dram_model
  import rme_pkg::*;
  import rme_tb_pkg::*;
#(
  parameter int unsigned LATENCY = 20,
  parameter int unsigned QDEPTH  = 32,
  parameter bit          GAPS    = 1'b1
) (
  input  logic    clk,
  input  logic    rst_n,
  input  logic    arvalid,
  output logic    arready,
  input  axi_ar_t ar,
  output logic    rvalid,
  input  logic    rready,
  output axi_r_t  r,
  output int      n_reads,
  output int      n_beats,
  output int      n_multi,
  output int      max_inflight
);

  axi_ar_t q_ar [$];
  longint  q_t  [$];
  longint  now;
  int      beat;
  logic    gap;

  assign arready = rst_n && (q_ar.size() < QDEPTH);

  always_comb begin
    rvalid = 1'b0;
    r      = '0;
    if (q_ar.size() > 0 && q_t[0] <= now && !gap) begin
      rvalid = 1'b1;
      r.id   = q_ar[0].id;
      r.resp = AXI_RESP_OKAY;
      r.last = (beat == int'(q_ar[0].len));
      for (int b = 0; b < BUS_BYTES; b++)
        r.data[8*b +: 8] = mem_byte(q_ar[0].addr + 40'(beat * BUS_BYTES + b));
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      now <= 0; beat <= 0; gap <= 1'b0;
      n_reads <= 0; n_beats <= 0; n_multi <= 0; max_inflight <= 0;
      q_ar.delete(); q_t.delete();
    end else begin
      now <= now + 1;
      gap <= GAPS ? ($urandom_range(0, 3) == 0) : 1'b0;
      if (rvalid && rready) begin
        n_beats <= n_beats + 1;
        if (r.last) begin
          beat <= 0;
          void'(q_ar.pop_front());
          void'(q_t.pop_front());
        end else beat <= beat + 1;
      end
      if (arvalid && arready) begin
        q_ar.push_back(ar);
        q_t.push_back(now + longint'(LATENCY));
        n_reads <= n_reads + 1;
        if (ar.len != 0) n_multi <= n_multi + 1;
        // the address must be bus-aligned, the burst INCR
        if (ar.addr[BUS_OFF_W-1:0] != 0 || ar.burst != AXI_BURST_INCR)
          $display("DRAM: bad read addr=%h burst=%0d", ar.addr, ar.burst);
      end
      if (q_ar.size() > max_inflight) max_inflight <= q_ar.size();
    end
  end

endmodule
