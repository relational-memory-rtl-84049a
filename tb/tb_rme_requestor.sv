// tb_rme_requestor: random table geometries (1..11 columns, widths 1..64,
// random offsets and row sizes); every descriptor is compared with Eq. 1-6
// of the design (R_addr, R_burst, W_addr, E_s, E_e) recomputed here, the
// count must be N*Q and only the final one may carry `last`. With the
// consumer always ready one descriptor must leave per cycle. Also checks
// the stop at the SPM capacity, that nothing starts for Q = 0, and flush.
`timescale 1ns/1ps
module tb_rme_requestor;
  import rme_pkg::*;
  localparam int unsigned CAP = 8192;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  rme_cfg_t cfg;
  logic start = 0, flush = 0, busy, desc_valid, desc_ready = 0;
  rme_desc_t desc;
  int checks = 0, failures = 0;

  rme_requestor #(.SPM_CAPACITY(CAP)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (500000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input bit always_ready);
    int unsigned S = 0, rows, n = 0, cyc = 0, exp_n;
    for (int k = 0; k < int'(cfg.col_count); k++) S += cfg.col_width[k];
    rows = (cfg.row_count < CAP / S) ? cfg.row_count : CAP / S;
    exp_n = rows * cfg.col_count;
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    for (int i = 0; i < int'(rows); i++) begin
      int unsigned os = 0, cs = 0;
      for (int j = 0; j < int'(cfg.col_count); j++) begin
        longint unsigned P;
        os += cfg.col_offset[j];
        P = longint'(cfg.row_size) * i + os;
        desc_ready = always_ready ? 1'b1 : 1'($urandom);
        #1;
        while (!(desc_valid && desc_ready)) begin
          @(negedge clk); cyc++;
          desc_ready = always_ready ? 1'b1 : 1'($urandom);
          #1;
        end
        check(desc.raddr == 40'(cfg.frame) * 4096 + 40'((P / 16) * 16),
              $sformatf("raddr (%0d,%0d) %h", i, j, desc.raddr));
        check(desc.burst == 4'(((P % 16) + cfg.col_width[j] + 15) / 16),
              $sformatf("burst (%0d,%0d)", i, j));
        check(desc.waddr == i * S + cs, $sformatf("waddr (%0d,%0d)", i, j));
        check(desc.es == 4'(P % 16) && desc.ee == 4'((P + cfg.col_width[j]) % 16),
              $sformatf("es/ee (%0d,%0d)", i, j));
        n++;
        check(desc.last == (n == int'(exp_n)), $sformatf("last (%0d,%0d)", i, j));
        cs += cfg.col_width[j];
        @(negedge clk); cyc++;
      end
    end
    desc_ready = 0;
    repeat (3) @(negedge clk);
    check(!busy && !desc_valid, "idle after last");
    if (always_ready)
      check(cyc <= exp_n + 1, $sformatf("%0d descriptors took %0d cycles", exp_n, cyc));
  endtask

  task automatic random_cfg(input int unsigned q);
    cfg = '0;
    cfg.col_count = q;
    cfg.frame = $urandom_range(0, 'hfffff);
    for (int j = 0; j < int'(q); j++) begin
      cfg.col_width[j]  = 16'($urandom_range(1, 64));
      cfg.col_offset[j] = 16'((j == 0) ? $urandom_range(0, 40) :
                              cfg.col_width[j-1] + $urandom_range(0, 20));
    end
    cfg.row_size = 0;
    for (int j = 0; j < int'(q); j++) cfg.row_size += cfg.col_offset[j];
    cfg.row_size += cfg.col_width[q-1] + $urandom_range(0, 50);
    cfg.row_count = $urandom_range(1, 40);
  endtask

  initial begin
    cfg = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 60; t++) begin
      random_cfg($urandom_range(1, 11));
      run(t % 2 == 0);
    end
    // the capacity stop: 64-byte rows of one 64-byte column, 200 rows
    cfg = '0; cfg.col_count = 1; cfg.col_width[0] = 64; cfg.row_size = 64;
    cfg.row_count = 200;
    run(1'b1);
    // Q = 0 starts nothing
    cfg.col_count = 0;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    repeat (3) @(negedge clk);
    check(!busy && !desc_valid, "Q=0 starts nothing");
    // flush stops a walk
    random_cfg(3); cfg.row_count = 30;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    repeat (5) @(negedge clk);
    flush = 1; @(negedge clk); flush = 0;
    repeat (3) @(negedge clk);
    check(!busy && !desc_valid, "flush stops the walk");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
