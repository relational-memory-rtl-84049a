// tb_rme_reader: random descriptors into the Reader in front of the
// behavioural DRAM (latency 24). Checks each AXI read (address, length,
// INCR, 16-byte beats), each output beat's data and byte range tag
// [lo, hi) and the frame-end flag, that up to 16 and never more than 16
// reads are in flight (the MLP revision's figure), and that after a flush
// the reads in flight are drained without reaching the output.
`timescale 1ns/1ps
module tb_rme_reader;
  import rme_pkg::*;
  import rme_tb_pkg::*;
  logic clk = 0, rst_n = 0, flush = 0;
  always #5 clk = ~clk;
  logic desc_valid = 0, desc_ready;
  rme_desc_t desc = '0;
  logic m_arvalid, m_arready, m_rvalid, m_rready;
  axi_ar_t m_ar;
  axi_r_t m_r;
  logic out_valid, out_ready = 0, out_fe;
  logic [BUS_W-1:0] out_data;
  logic [BUS_OFF_W:0] out_lo, out_hi;
  logic [4:0] outstanding;
  int n_reads, n_beats, n_multi, max_inflight;
  int checks = 0, failures = 0, max_out = 0;
  bit sink = 1;

  rme_reader dut (.clk, .rst_n, .flush, .desc_valid, .desc_ready, .desc,
    .m_arvalid, .m_arready, .m_ar, .m_rvalid, .m_rready, .m_r,
    .out_valid, .out_ready, .out_data, .out_lo, .out_hi, .out_frame_end(out_fe),
    .outstanding);

  rme_dram_model #(.LATENCY(24)) mem (.clk, .rst_n, .arvalid(m_arvalid),
    .arready(m_arready), .ar(m_ar), .rvalid(m_rvalid), .rready(m_rready), .r(m_r),
    .n_reads, .n_beats, .n_multi, .max_inflight);

  typedef struct { rme_desc_t d; int beat; } exp_t;
  rme_desc_t sent [$];     // descriptors in order, for the AR check
  rme_desc_t beats [$];    // descriptors whose beats are still expected
  int bno = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // AR checker
  always @(negedge clk) if (rst_n && m_arvalid && m_arready) begin
    rme_desc_t d;
    d = sent.pop_front();
    check(m_ar.addr == d.raddr && m_ar.len == 8'(d.burst - 1) &&
          m_ar.burst == AXI_BURST_INCR && m_ar.size == 3'd4, "AR fields");
  end

  always @(posedge clk) if (rst_n && int'(outstanding) > max_out) max_out = int'(outstanding);

  // output checker, drives out_ready at the falling edge
  always @(negedge clk) if (rst_n) begin
    out_ready = sink && ($urandom_range(0, 4) != 0);
    if (out_valid && out_ready) begin
      rme_desc_t d;
      int lo, hi;
      logic [BUS_W-1:0] e;
      d = beats[0];
      lo = (bno == 0) ? int'(d.es) : 0;
      hi = (bno == int'(d.burst) - 1 && d.ee != 0) ? int'(d.ee) : 16;
      for (int b = 0; b < 16; b++) e[8*b +: 8] = mem_byte(d.raddr + 40'(16 * bno + b));
      check(out_data == e, "beat data");
      check(int'(out_lo) == lo && int'(out_hi) == hi, $sformatf("lo/hi %0d/%0d exp %0d/%0d", out_lo, out_hi, lo, hi));
      check(out_fe == (d.last && bno == int'(d.burst) - 1), "frame end");
      if (bno == int'(d.burst) - 1) begin bno = 0; void'(beats.pop_front()); end
      else bno++;
    end
  end

  task automatic send(input int n, input bit record);
    for (int k = 0; k < n; k++) begin
      rme_desc_t d;
      d.raddr = 40'($urandom) << 4;
      d.burst = 4'($urandom_range(1, 5));
      d.es = 4'($urandom); d.ee = 4'($urandom);
      d.waddr = 0;
      d.last = (k == n - 1);
      @(negedge clk);
      desc = d; desc_valid = 1;
      #1;
      while (!desc_ready) begin @(negedge clk); #1; end
      sent.push_back(d);
      if (record) beats.push_back(d);
      @(posedge clk); #1;
      desc_valid = 0;
    end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    send(400, 1);
    while (beats.size() > 0) @(negedge clk);
    check(max_out == 16, $sformatf("most reads in flight %0d (16 expected)", max_out));
    // flush with reads in flight: nothing of them may reach the output
    sink = 0;
    send(10, 0);
    repeat (3) @(negedge clk);
    flush = 1; @(negedge clk); flush = 0;
    sink = 1;
    while (outstanding != 0) @(negedge clk);
    check(n_beats == mem.n_beats, "drained");
    send(20, 1);
    while (beats.size() > 0) @(negedge clk);
    check(sent.size() == 0, "all AR seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
