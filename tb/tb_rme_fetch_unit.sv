// tb_rme_fetch_unit: the Fetch Unit (Reader, Column Extractor, Packer,
// Writer) fed by a Requestor and reading from a behavioural DRAM model.
// For several table geometries (the example table with offsets 0/24/24,
// columns that straddle bus words, 64-byte columns, all eleven columns)
// it collects every line written toward the Data SPM and compares each
// byte with the projection worked out here from the table layout: column
// j of row i lands at i*S + sum(C_k, k<j), where S is the sum of the
// widths, and the last partial line is padded with zeros. It also checks
// that every byte is written exactly once, that up to MAX_OUT reads are in
// flight at once and never more (memory-level parallelism), and that a
// flush in the middle of a frame leaves no stray write behind before the
// next frame. The write side is stalled at random.
`timescale 1ns/1ps
module tb_rme_fetch_unit;
  import rme_pkg::*;
  import rme_tb_pkg::*;
  localparam int unsigned MAX_OUT = 16;
  localparam int unsigned CAP = 16384;
  logic clk = 0, rst_n = 0, flush = 0, start = 0;
  always #5 clk = ~clk;
  rme_cfg_t cfg = '0;
  logic busy, desc_valid, desc_ready;
  rme_desc_t desc;
  logic m_arvalid, m_arready, m_rvalid, m_rready;
  axi_ar_t m_ar;
  axi_r_t m_r;
  logic wr_valid, wr_ready = 0;
  rme_wr_t wr;
  logic [$clog2(MAX_OUT+1)-1:0] outstanding;
  int n_reads, n_beats, n_multi, max_inflight;
  int checks = 0, failures = 0, max_out_seen = 0;

  rme_requestor #(.SPM_CAPACITY(CAP)) u_req (.clk, .rst_n, .cfg, .start, .flush,
    .busy, .desc_valid, .desc_ready, .desc);
  rme_fetch_unit #(.MAX_OUT(MAX_OUT)) dut (.*);
  rme_dram_model #(.LATENCY(20), .QDEPTH(32), .GAPS(1'b1)) u_dram (.clk, .rst_n,
    .arvalid(m_arvalid), .arready(m_arready), .ar(m_ar), .rvalid(m_rvalid),
    .rready(m_rready), .r(m_r), .n_reads, .n_beats, .n_multi, .max_inflight);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // collected Data SPM image
  logic [7:0] got [int];
  int         wcnt [int];
  int         n_lines = 0;
  int         stall_pct = 30;
  always @(negedge clk) begin
    wr_ready = ($urandom_range(99) >= stall_pct);
    #1;
    if (rst_n && wr_valid && wr_ready) begin
      n_lines++;
      for (int b = 0; b < LINE_BYTES; b++)
        if (wr.be[b]) begin
          int p;
          p = int'(wr.line) * LINE_BYTES + b;
          got[p] = wr.data[8*b +: 8];
          wcnt[p] = wcnt.exists(p) ? wcnt[p] + 1 : 1;
        end
    end
  end
  always @(posedge clk) if (rst_n && int'(outstanding) > max_out_seen)
    max_out_seen = int'(outstanding);

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // table geometry under test
  int R, N, Q, F;
  int C [MAX_COLS];
  int O [MAX_COLS];

  task automatic load_cfg();
    cfg = '0;
    cfg.row_size = 32'(R); cfg.row_count = 32'(N); cfg.col_count = 32'(Q);
    cfg.frame = 32'(F);
    for (int j = 0; j < MAX_COLS; j++) begin
      cfg.col_width[j] = 16'(j < Q ? C[j] : 0);
      cfg.col_offset[j] = 16'(j < Q ? O[j] : 0);
    end
  endtask

  task automatic pulse(ref logic s);
    @(negedge clk); s = 1; @(negedge clk); s = 0;
  endtask

  // rows that fit in the buffer, as the Requestor limits a frame
  function automatic int rows_held(input int s);
    int n;
    n = CAP / s;
    return (n < N) ? n : N;
  endfunction

  task automatic run_and_check(input string name);
    int s, rows, bytes, lines, pos, start_j, errs, lc;
    got.delete(); wcnt.delete(); n_lines = 0;
    load_cfg();
    pulse(start);
    s = 0;
    for (int j = 0; j < Q; j++) s += C[j];
    rows = rows_held(s);
    bytes = rows * s;
    lines = (bytes + LINE_BYTES - 1) / LINE_BYTES;
    lc = 0;
    while ((busy || outstanding != 0 || n_lines < lines) && lc < 100000) begin
      @(negedge clk); lc++;
    end
    repeat (40) @(negedge clk);
    errs = 0;
    for (int i = 0; i < rows; i++) begin
      int p;
      pos = i * s;
      p = 0;
      for (int j = 0; j < Q; j++) begin
        p += O[j];
        for (int b = 0; b < C[j]; b++) begin
          logic [7:0] e;
          e = mem_byte(40'((longint'(F) << 12) + longint'(i) * R + p + b));
          if (!got.exists(pos) || got[pos] !== e || wcnt[pos] != 1) errs++;
          pos++;
        end
      end
    end
    for (int q = bytes; q < lines * LINE_BYTES; q++)
      if (!got.exists(q) || got[q] != 8'h00 || wcnt[q] != 1) errs++;
    check(errs == 0, {name, ": projected bytes and padding"});
    check(got.size() == lines * LINE_BYTES, {name, ": nothing written past the frame"});
    if (errs != 0 || got.size() != lines * LINE_BYTES)
      $display("  %s: %0d bad bytes, %0d written, %0d expected", name, errs,
               got.size(), lines * LINE_BYTES);
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    repeat (3) @(negedge clk);
    // the example table: three 4-byte columns at offsets 0, 24, 48
    R = 64; N = 200; Q = 3; F = 16;
    C[0] = 4; C[1] = 4; C[2] = 4; O[0] = 0; O[1] = 24; O[2] = 24;
    run_and_check("example");
    check(max_out_seen == MAX_OUT, "reads in flight reach the limit");
    // columns straddling bus words, odd row size
    R = 37; N = 150; Q = 2; F = 3;
    C[0] = 13; C[1] = 5; O[0] = 3; O[1] = 13;
    run_and_check("straddle");
    // one 64-byte column, unaligned
    R = 96; N = 60; Q = 1; F = 7; C[0] = 64; O[0] = 20;
    run_and_check("wide");
    // all eleven columns, widths 1..11, frame larger than the buffer
    R = 128; N = 400; Q = 11; F = 40;
    for (int j = 0; j < 11; j++) begin C[j] = j + 1; O[j] = (j == 0) ? 2 : j + 1; end
    stall_pct = 60;
    run_and_check("eleven");
    stall_pct = 30;
    // flush in the middle of a frame, then a clean frame
    R = 64; N = 300; Q = 2; F = 9; C[0] = 8; C[1] = 8; O[0] = 0; O[1] = 32;
    load_cfg();
    pulse(start);
    repeat (60) @(negedge clk);
    pulse(flush);
    begin
      int lc = 0;
      while ((busy || outstanding != 0) && lc < 1000) begin @(negedge clk); lc++; end
      check(lc < 1000, "flush drains the reads in flight");
    end
    repeat (60) @(negedge clk);
    R = 48; N = 90; Q = 2; F = 11; C[0] = 6; C[1] = 10; O[0] = 1; O[1] = 17;
    run_and_check("after flush");
    check(max_inflight <= MAX_OUT && max_out_seen <= MAX_OUT, "never more than MAX_OUT in flight");
    check(n_multi > 0, "multi-beat bursts issued");
    $display("reads=%0d beats=%0d multi=%0d max_in_flight=%0d", n_reads, n_beats, n_multi,
             max_out_seen);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
