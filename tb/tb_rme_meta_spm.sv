// tb_rme_meta_spm: random writes and reads of the Metadata SPM (reduced to
// 64 entries) against a reference array; checks the one-cycle read latency
// and old-data return on a same-cycle read and write of one entry.
`timescale 1ns/1ps
module tb_rme_meta_spm;
  import rme_pkg::*;
  localparam int unsigned DEPTH = 64;
  logic clk = 0;
  always #5 clk = ~clk;
  logic re = 0, we = 0;
  logic [5:0] raddr = 0, waddr = 0;
  rme_meta_t rdata, wdata = '0, ref_mem [DEPTH];
  int checks = 0, failures = 0;

  rme_meta_spm #(.DEPTH(DEPTH)) dut (.*);

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int l = 0; l < DEPTH; l++) begin
      @(negedge clk);
      we = 1; waddr = 6'(l); wdata = rme_meta_t'($urandom); ref_mem[l] = wdata;
    end
    @(negedge clk); we = 0;
    for (int n = 0; n < 3000; n++) begin
      rme_meta_t expect_q;
      @(negedge clk);
      re = 1; raddr = 6'($urandom_range(0, DEPTH - 1));
      we = ($urandom_range(0, 1) == 1);
      waddr = ($urandom_range(0, 3) == 0) ? raddr : 6'($urandom_range(0, DEPTH - 1));
      wdata = rme_meta_t'($urandom);
      expect_q = ref_mem[raddr];
      if (we) ref_mem[waddr] = wdata;
      @(negedge clk);
      re = 0; we = 0;
      checks++;
      if (rdata !== expect_q) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
