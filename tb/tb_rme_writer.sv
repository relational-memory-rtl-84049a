// tb_rme_writer: random positions and byte counts (within one line);
// checks the line index, the byte enables and the shifted data of each
// write request, the hold under back-pressure, and flush.
`timescale 1ns/1ps
module tb_rme_writer;
  import rme_pkg::*;
  logic clk = 0, rst_n = 0, flush = 0;
  always #5 clk = ~clk;
  logic in_valid = 0, in_ready, out_valid, out_ready = 0;
  logic [LINE_W-1:0] in_data = '0;
  logic [31:0] in_pos = 0;
  logic [LINE_OFF_W:0] in_cnt = 0;
  rme_wr_t out;
  int checks = 0, failures = 0;
  bit consume = 1;

  rme_writer dut (.*);

  typedef struct { int unsigned pos; int cnt; logic [LINE_W-1:0] d; } item_t;
  item_t q [$];

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // consumer: random ready, compares each accepted request
  always @(negedge clk) if (rst_n) begin
    out_ready = consume ? 1'($urandom) : 1'b0;
    if (out_valid && out_ready) begin
      item_t it;
      logic [LINE_BYTES-1:0] be;
      logic [LINE_W-1:0] d;
      int off;
      it = q.pop_front();
      off = int'(it.pos % LINE_BYTES);
      be = '0; d = '0;
      for (int b = 0; b < it.cnt; b++) begin
        be[off + b] = 1'b1;
        d[8*(off+b) +: 8] = it.d[8*b +: 8];
      end
      checks++;
      if (out.line != LINE_IDX_W'(it.pos / LINE_BYTES) || out.be != be ||
          (out.data & {LINE_BYTES{8'hff}}) !== d) begin
        failures++;
        if (failures < 5) $display("pos %0d cnt %0d wrong", it.pos, it.cnt);
      end
    end
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 1500; n++) begin
      item_t it;
      @(negedge clk);
      #1;
      it.cnt = $urandom_range(1, 64);
      it.pos = $urandom_range(0, 1 << 20) & ~32'h3f;
      it.pos += $urandom_range(0, 64 - it.cnt);
      for (int k = 0; k < 16; k++) it.d[32*k +: 32] = $urandom;
      for (int b = it.cnt; b < 64; b++) it.d[8*b +: 8] = 8'h00;
      in_valid = 1; in_data = it.d; in_pos = it.pos; in_cnt = 7'(it.cnt);
      while (!in_ready) begin @(negedge clk); #1; end
      q.push_back(it);
      @(posedge clk);
      #1;
      in_valid = 0;
    end
    while (q.size() > 0) @(negedge clk);
    // flush drops a request that waits
    consume = 0;
    @(negedge clk);
    in_valid = 1; in_pos = 0; in_cnt = 64;
    @(negedge clk); in_valid = 0; flush = 1;
    @(negedge clk); flush = 0;
    checks++;
    if (out_valid) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
