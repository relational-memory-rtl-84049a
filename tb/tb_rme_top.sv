// tb_rme_top: end-to-end test of the Relational Memory Engine.
//
// The engine runs with a 16 KB Data SPM (256 lines) between a behavioural
// CPU (rme_tb_cpu) and a behavioural main memory (rme_dram_model). Five
// table geometries are programmed one after the other through the
// configuration port, each followed by a software reset: the example row
// of the paper's Listing 1 projected to num_fld1/num_fld3/num_fld4, a
// 4-byte column at offset 13 that straddles two bus beats, a 64-byte
// column, all 11 columns with random widths and offsets, and a table
// larger than the SPM. For each, every line of the projection is read cold
// (random order, random IDs, partial and wrapping bursts, several reads in
// flight) and then hot, and each beat is compared with the projection
// recomputed from the memory contents. The number of main-memory reads and
// beats is checked against the descriptor equations. Then 255 further
// software resets wrap the epoch, and the first table is read again.
// Counts how often each mechanism happened (hit, miss, release of a
// stalled read, ordering retry, multi-beat burst, several DRAM reads in
// flight, padded last line, SPM-capacity stop, epoch wrap) and fails any
// that never did.
`timescale 1ns/1ps
module tb_rme_top;
  import rme_pkg::*;
  import rme_tb_pkg::*;

  localparam int unsigned DEPTH = 256;

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

  rme_top #(.SPM_DEPTH(DEPTH)) dut (
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
  int n_hit = 0, n_miss = 0, n_release = 0, n_retry = 0, n_wrap = 0, n_pad = 0, n_cap = 0;
  int n_starts = 0;

  always @(posedge clk) if (rst_n) begin
    n_hit     += int'(ev_hit);
    n_miss    += int'(ev_miss);
    n_release += int'(ev_release);
    n_retry   += int'(ev_retry);
    n_starts  += int'(dut.start);
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // beats the descriptor equations ask for
  function automatic int exp_beats();
    int unsigned p, s = 0;
    int rows = int'(cpu.rows_held());
    for (int i = 0; i < rows; i++) begin
      int unsigned os = 0;
      for (int k = 0; k < int'(cpu.Q); k++) begin
        os += cpu.O[k];
        p = cpu.R * i + os;
        s += ((p % BUS_BYTES) + cpu.C[k] + BUS_BYTES - 1) / BUS_BYTES;
      end
    end
    return int'(s);
  endfunction

  task automatic run_table(input string name);
    int r0, b0, lines, m0, h0, hot_lat;
    int unsigned order [$];
    cpu.program_table();
    wait (engine_ready);
    lines = int'(cpu.lines_held());
    r0 = n_reads; b0 = n_beats; m0 = n_miss; h0 = n_hit;
    // cold pass: every line in random order, line 0 first
    order.push_back(0);
    for (int l = 1; l < lines; l++) order.push_back(l);
    for (int l = lines - 1; l > 1; l--) begin
      int k = $urandom_range(1, l);
      int unsigned t = order[l]; order[l] = order[k]; order[k] = t;
    end
    foreach (order[l]) cpu.add_read(order[l], 1'b0);
    cpu.run_reads();
    wait (!requestor_busy && reads_in_flight == 0);
    repeat (20) @(posedge clk);
    check(n_miss > m0, {name, ": cold pass had misses"});
    check(n_reads - r0 == int'(cpu.rows_held() * cpu.Q),
          $sformatf("%s: %0d DRAM reads, expected %0d", name, n_reads - r0,
                    cpu.rows_held() * cpu.Q));
    check(n_beats - b0 == exp_beats(),
          $sformatf("%s: %0d DRAM beats, expected %0d", name, n_beats - b0, exp_beats()));
    if ((cpu.rows_held() * cpu.row_bytes()) % LINE_BYTES != 0) n_pad++;
    if (cpu.rows_held() < cpu.N) n_cap++;
    // hot pass: full lines
    for (int l = 0; l < lines; l++) cpu.add_read(l, 1'b1);
    cpu.run_reads();
    check(n_hit - h0 >= lines, {name, ": hot pass served from the SPM"});
    // latency of one hot read alone
    cpu.max_lat = 0;
    cpu.add_read(lines / 2, 1'b1);
    cpu.run_reads();
    hot_lat = cpu.max_lat;
    check(hot_lat <= 10, $sformatf("%s: hot read took %0d cycles", name, hot_lat));
    $display("%s: %0d lines, %0d DRAM reads, hot read %0d cycles", name, lines,
             n_reads - r0, hot_lat);
  endtask

  task automatic set_cols(input int unsigned q);
    cpu.Q = q;
    for (int j = 0; j < MAX_COLS; j++) begin cpu.C[j] = 0; cpu.O[j] = 0; end
  endtask

  initial begin : watchdog
    repeat (3_000_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks + cpu.checks, failures + cpu.failures);
    $finish;
  end

  initial begin
    logic [31:0] rd;
    logic [EPOCH_W-1:0] e0;
    cpu.capacity = DEPTH * LINE_BYTES;
    repeat (5) @(posedge clk);
    rst_n = 1;
    wait (engine_ready);

    // register read-back
    cpu.R = 104; cpu.N = 60; cpu.F = 'h100;
    set_cols(3);
    cpu.O[0] = 64; cpu.O[1] = 16; cpu.O[2] = 8;
    cpu.C[0] = 8;  cpu.C[1] = 8;  cpu.C[2] = 8;
    cpu.program_table();
    cpu.cfg_read('h00, rd); check(rd == 104, "R reads back");
    cpu.cfg_read('h24, rd); check(rd[31:16] == 64, "O_0 reads back");
    cpu.cfg_read('h08, rd); check(rd == 0, "SW reads back 0");

    // 1: Listing 1 row, column group {num_fld1, num_fld3, num_fld4}
    run_table("listing1");

    // 2: 4-byte column at offset 13 (two beats)
    cpu.R = 64; cpu.N = 300; cpu.F = 'h230; set_cols(1);
    cpu.O[0] = 13; cpu.C[0] = 4;
    run_table("offset13");

    // 3: a full 64-byte column and a 40-byte one
    cpu.R = 160; cpu.N = 40; cpu.F = 'h77; set_cols(2);
    cpu.O[0] = 8; cpu.C[0] = 64; cpu.O[1] = 72; cpu.C[1] = 40;
    run_table("wide");

    // 4: eleven columns of random widths and gaps
    begin
      int unsigned end_ = 0;
      cpu.N = 50; cpu.F = 'h400; set_cols(11);
      for (int j = 0; j < 11; j++) begin
        cpu.C[j] = $urandom_range(1, 16);
        cpu.O[j] = (j == 0) ? $urandom_range(0, 7) : cpu.C[j-1] + $urandom_range(0, 8);
        end_ += cpu.O[j];
      end
      cpu.R = end_ + cpu.C[10] + $urandom_range(0, 20);
      run_table("eleven");
    end

    // 5: a table larger than the SPM
    cpu.R = 64; cpu.N = 400; cpu.F = 'h800; set_cols(1);
    cpu.O[0] = 0; cpu.C[0] = 64;
    run_table("capacity");

    // epoch wrap: 255 more software resets, then the first table again
    e0 = epoch;
    for (int k = 0; k < 255; k++) begin
      cpu.cfg_write('h08, 32'h1, 4'hf);
      if (!engine_ready) n_wrap++;
      wait (engine_ready);
    end
    check(epoch == e0, $sformatf("epoch back to %0d after 255 resets (is %0d)", e0, epoch));
    cpu.R = 104; cpu.N = 60; cpu.F = 'h100; set_cols(3);
    cpu.O[0] = 64; cpu.O[1] = 16; cpu.O[2] = 8;
    cpu.C[0] = 8;  cpu.C[1] = 8;  cpu.C[2] = 8;
    run_table("after-wrap");

    $display("events: hit=%0d miss=%0d release=%0d retry=%0d starts=%0d multi-beat=%0d max-dram-inflight=%0d pad=%0d cap=%0d wrap=%0d",
             n_hit, n_miss, n_release, n_retry, n_starts, n_multi, max_inflight, n_pad, n_cap, n_wrap);
    check(n_hit > 0, "hit happened");
    check(n_miss > 0, "miss happened");
    check(n_release > 0, "stalled read released");
    check(n_retry > 0, "ordering retry happened");
    check(n_starts == 6, $sformatf("requestor started once per table (%0d)", n_starts));
    check(n_multi > 0, "multi-beat burst happened");
    check(max_inflight > 1, "several DRAM reads in flight");
    check(n_pad > 0, "padded last line happened");
    check(n_cap > 0, "SPM capacity stop happened");
    check(n_wrap > 0, "epoch wrap clear happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks + cpu.checks, failures + cpu.failures);
    $finish;
  end

endmodule
