// tb_rme_top_full: the Relational Memory Engine at its full size (2 MB
// Data SPM, 32768 lines, 16 reads in flight toward main memory) running one
// complete operation: a table of 524,288 rows of 64 bytes (32 MB, the
// default data size of the evaluation) is projected to its first 4-byte
// column, which fills the Data SPM exactly (524,288 x 4 bytes = 2 MB). The
// behavioural CPU programs the geometry through the configuration port,
// issues the software reset, and then scans the whole ephemeral window
// once in order, with random IDs, several reads outstanding and mixed
// burst lengths; every returned beat is compared with the projection
// recomputed from the memory contents. Afterwards it checks the number of
// main-memory reads and beats against the descriptor equations (one 1-beat
// read per row), that the number of reads in flight reached 16, and that
// a second scan of some lines is served from the buffer within 10 cycles.
`timescale 1ns/1ps
module tb_rme_top_full;
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
    repeat (20_000_000) @(posedge clk);
    $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks + cpu.checks, failures + cpu.failures);
    $finish;
  end

  initial begin
    int lines;
    longint t0, t1;
    cpu.R = 64; cpu.N = 524288; cpu.Q = 1; cpu.F = 'h100;
    for (int j = 0; j < MAX_COLS; j++) begin cpu.C[j] = 0; cpu.O[j] = 0; end
    cpu.C[0] = 4;
    repeat (5) @(posedge clk);
    rst_n = 1;
    wait (engine_ready);
    cpu.program_table();
    wait (engine_ready);
    lines = int'(cpu.lines_held());
    check(lines == SPM_LINES, $sformatf("projection fills the buffer (%0d lines)", lines));
    t0 = cpu.cyc;
    for (int l = 0; l < lines; l++) cpu.add_read(l, 1'b0);
    cpu.run_reads();
    t1 = cpu.cyc;
    wait (!requestor_busy && reads_in_flight == 0);
    check(n_reads == 524288, $sformatf("%0d main-memory reads, expected 524288", n_reads));
    check(n_beats == 524288, $sformatf("%0d main-memory beats, expected 524288", n_beats));
    check(max_fl == MAX_OUTSTANDING, $sformatf("%0d reads in flight at most", max_fl));
    check(n_miss > 0, "the scan caught up with the engine at least once");
    // a few lines again: now resident
    for (int l = 0; l < 64; l++) cpu.add_read($urandom_range(0, lines - 1), 1'b1);
    cpu.run_reads();
    check(n_hit >= 64, "second scan served from the buffer");
    cpu.max_lat = 0;
    cpu.add_read(lines - 1, 1'b1);
    cpu.run_reads();
    check(cpu.max_lat <= 10, $sformatf("resident lines answered in %0d cycles", cpu.max_lat));
    $display("scan of %0d lines: %0d cycles, %0d hits, %0d misses, %0d DRAM reads",
             lines, t1 - t0, n_hit, n_miss, n_reads);
    $display("TB_RESULT checks=%0d failures=%0d", checks + cpu.checks, failures + cpu.failures);
    $finish;
  end
endmodule
