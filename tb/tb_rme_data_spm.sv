// tb_rme_data_spm: random byte-enabled writes and reads of the Data SPM
// (reduced to 64 lines) against a reference array; checks the one-cycle
// read latency, that rdata holds without a read, and old-data return when
// a line is read and written in the same cycle.
`timescale 1ns/1ps
module tb_rme_data_spm;
  import rme_pkg::*;
  localparam int unsigned DEPTH = 64;
  logic clk = 0;
  always #5 clk = ~clk;
  logic re = 0, we = 0;
  logic [5:0] raddr = 0, waddr = 0;
  logic [LINE_W-1:0] rdata, wdata = '0, ref_mem [DEPTH];
  logic [LINE_BYTES-1:0] wbe = '0;
  int checks = 0, failures = 0;

  rme_data_spm #(.DEPTH(DEPTH)) dut (.*);

  function automatic logic [LINE_W-1:0] rnd_line();
    logic [LINE_W-1:0] v;
    for (int k = 0; k < LINE_W / 32; k++) v[32*k +: 32] = $urandom;
    return v;
  endfunction

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // fill every line with whole-line writes
    for (int l = 0; l < DEPTH; l++) begin
      @(negedge clk);
      we = 1; waddr = 6'(l); wbe = '1; wdata = rnd_line(); ref_mem[l] = wdata;
    end
    @(negedge clk); we = 0;
    for (int n = 0; n < 2000; n++) begin
      logic [LINE_W-1:0] expect_q;
      @(negedge clk);
      re = 1; raddr = 6'($urandom_range(0, DEPTH - 1));
      we = ($urandom_range(0, 1) == 1);
      waddr = ($urandom_range(0, 3) == 0) ? raddr : 6'($urandom_range(0, DEPTH - 1));
      wdata = rnd_line();
      wbe = {$urandom, $urandom};
      expect_q = ref_mem[raddr];                // old data on a collision
      if (we)
        for (int b = 0; b < LINE_BYTES; b++)
          if (wbe[b]) ref_mem[waddr][8*b +: 8] = wdata[8*b +: 8];
      @(negedge clk);
      re = 0; we = 0;
      checks++;
      if (rdata !== expect_q) begin
        failures++;
        if (failures < 5) $display("read %0d mismatch", raddr);
      end
      @(negedge clk);
      checks++;
      if (rdata !== expect_q) failures++;      // held without a read
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
