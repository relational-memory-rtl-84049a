// tb_rme_q1_frames: workload test of query Q1 (SELECT A1..A4 FROM S) at
// full size. The table is 32 MB: 524,288 rows of 64 bytes, four 4-byte
// columns at byte offsets 0, 16, 32 and 48. The projection is 8 MB, four
// times the 2 MB buffer, so software processes it as four frames of
// 131,072 rows. For each frame it points F at the frame's first row (each
// frame is 8 MB of table, 2048 pages further on), sets N to the rows left,
// issues the software reset and scans the 32,768 lines of the window,
// checking every beat against the projection recomputed from memory. It
// checks that the engine stops each frame at the buffer's capacity, that
// each frame costs 4 one-beat DRAM reads per row, that the epoch advances
// once per frame, and it sums column A1 over the whole table as the query's
// consumer would, comparing with the sum computed directly from memory.
`timescale 1ns/1ps
module tb_rme_q1_frames;
  import rme_pkg::*;
  import rme_tb_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [CFG_ADDR_W-1:0] cfg_awaddr, cfg_araddr;
  logic cfg_awvalid, cfg_awready, cfg_wvalid, cfg_wready, cfg_bvalid, cfg_bready;
  logic cfg_arvalid, cfg_arready, cfg_rvalid, cfg_rready;
  logic [31:0] cfg_wdata, cfg_rdata;
  logic [3:0]  cfg_wstrb;
  logic [1:0]  cfg_bresp, cfg_rresp;
  logic s_arvalid, s_arready, s_rvalid, s_rready;
  axi_ar_t s_ar, m_ar;
  axi_r_t  s_r, m_r;
  logic m_arvalid, m_arready, m_rvalid, m_rready;
  logic [EPOCH_W-1:0] epoch;
  logic engine_ready, requestor_busy;
  logic [$clog2(MAX_OUTSTANDING+1)-1:0] reads_in_flight;
  logic ev_hit, ev_miss, ev_release, ev_retry;
  int n_reads, n_beats, n_multi, max_inflight;

  rme_top dut (
    .clk, .rst_n,
    .cfg_awaddr, .cfg_awvalid, .cfg_awready, .cfg_wdata, .cfg_wstrb, .cfg_wvalid,
    .cfg_wready, .cfg_bresp, .cfg_bvalid, .cfg_bready, .cfg_araddr, .cfg_arvalid,
    .cfg_arready, .cfg_rdata, .cfg_rresp, .cfg_rvalid, .cfg_rready,
    .s_arvalid, .s_arready, .s_ar, .s_rvalid, .s_rready, .s_r,
    .m_arvalid, .m_arready, .m_ar, .m_rvalid, .m_rready, .m_r,
    .epoch, .engine_ready, .requestor_busy, .reads_in_flight,
    .ev_hit, .ev_miss, .ev_release, .ev_retry
  );

  rme_dram_model #(.LATENCY(24)) mem (
    .clk, .rst_n, .arvalid(m_arvalid), .arready(m_arready), .ar(m_ar),
    .rvalid(m_rvalid), .rready(m_rready), .r(m_r),
    .n_reads, .n_beats, .n_multi, .max_inflight
  );

  rme_tb_cpu #(.MAX_OUT(6)) cpu (
    .clk, .rst_n,
    .cfg_awaddr, .cfg_awvalid, .cfg_awready, .cfg_wdata, .cfg_wstrb, .cfg_wvalid,
    .cfg_wready, .cfg_bresp, .cfg_bvalid, .cfg_bready, .cfg_araddr, .cfg_arvalid,
    .cfg_arready, .cfg_rdata, .cfg_rresp, .cfg_rvalid, .cfg_rready,
    .arvalid(s_arvalid), .arready(s_arready), .ar(s_ar),
    .rvalid(s_rvalid), .rready(s_rready), .r(s_r)
  );

  int checks = 0, failures = 0;
  int n_hit = 0, n_miss = 0, max_fl = 0;
  always @(posedge clk) if (rst_n) begin
    n_hit  += int'(ev_hit);
    n_miss += int'(ev_miss);
    if (int'(reads_in_flight) > max_fl) max_fl = int'(reads_in_flight);
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  initial begin
    repeat (40_000_000) @(posedge clk);
    $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks + cpu.checks, failures + cpu.failures);
    $finish;
  end

  initial begin
    int lines, r0, e0;
    longint sum_a1, sum_ref;
    sum_a1 = 0; sum_ref = 0;
    cpu.R = 64; cpu.Q = 4;
    for (int j = 0; j < MAX_COLS; j++) begin cpu.C[j] = 0; cpu.O[j] = 0; end
    for (int j = 0; j < 4; j++) begin cpu.C[j] = 4; cpu.O[j] = (j == 0) ? 0 : 16; end
    repeat (5) @(posedge clk);
    rst_n = 1;
    wait (engine_ready);
    for (int fr = 0; fr < 4; fr++) begin
      cpu.F = 'h100 + 2048 * fr;
      cpu.N = 524288 - 131072 * fr;
      r0 = n_reads; e0 = int'(epoch);
      cpu.program_table();
      wait (engine_ready);
      check(int'(epoch) == e0 + 1, $sformatf("frame %0d: epoch advanced", fr));
      lines = int'(cpu.lines_held());
      check(cpu.rows_held() == 131072 && lines == SPM_LINES,
            $sformatf("frame %0d: %0d rows held", fr, cpu.rows_held()));
      for (int l = 0; l < lines; l++) cpu.add_read(l, 1'b1);
      cpu.run_reads();
      wait (!requestor_busy && reads_in_flight == 0);
      check(n_reads - r0 == 4 * 131072,
            $sformatf("frame %0d: %0d DRAM reads, expected %0d", fr, n_reads - r0, 4 * 131072));
      // A1 of each row of this frame, read back through the buffer image the
      // CPU checked, and straight from memory
      for (int i = 0; i < 131072; i++) begin
        logic [31:0] a1, ref_a1;
        for (int b = 0; b < 4; b++) begin
          a1[8*b +: 8] = cpu.proj_byte(i * 16 + b);
          ref_a1[8*b +: 8] = mem_byte(40'((longint'(cpu.F) << 12) + longint'(i) * 64 + b));
        end
        sum_a1 += a1; sum_ref += ref_a1;
      end
    end
    check(sum_a1 == sum_ref, "SUM(A1) over the table");
    check(max_fl == MAX_OUTSTANDING, $sformatf("%0d reads in flight at most", max_fl));
    $display("Q1 over 4 frames: %0d DRAM reads, %0d hits, %0d misses, SUM(A1) = %0d",
             n_reads, n_hit, n_miss, sum_a1);
    $display("TB_RESULT checks=%0d failures=%0d", checks + cpu.checks, failures + cpu.failures);
    $finish;
  end
endmodule
