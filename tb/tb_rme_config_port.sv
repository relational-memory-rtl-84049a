// tb_rme_config_port: writes the geometry registers of Table 1 through
// AXI4-Lite (whole words and 16-bit halves under WSTRB) and checks the
// decoded configuration and the read-back; checks that a write to SW gives
// a one-cycle sw_reset pulse, leaves the other registers alone and reads
// back 0, and that a write completes in at most 3 cycles.
`timescale 1ns/1ps
module tb_rme_config_port;
  import rme_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [CFG_ADDR_W-1:0] s_awaddr = 0, s_araddr = 0;
  logic s_awvalid = 0, s_awready, s_wvalid = 0, s_wready, s_bvalid, s_bready = 0;
  logic s_arvalid = 0, s_arready, s_rvalid, s_rready = 0;
  logic [31:0] s_wdata = 0, s_rdata;
  logic [3:0] s_wstrb = 0;
  logic [1:0] s_bresp, s_rresp;
  rme_cfg_t cfg;
  logic sw_reset;
  int checks = 0, failures = 0, pulses = 0, wcycles;

  rme_config_port dut (.*);

  always @(posedge clk) if (rst_n && sw_reset) pulses++;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic wr(input int unsigned a, input logic [31:0] d, input logic [3:0] st);
    @(negedge clk);
    s_awaddr = CFG_ADDR_W'(a); s_wdata = d; s_wstrb = st; s_awvalid = 1; s_wvalid = 1;
    wcycles = 0;
    #1;
    while (!(s_awready && s_wready)) begin @(negedge clk); wcycles++; #1; end
    @(negedge clk); wcycles++;
    s_awvalid = 0; s_wvalid = 0; s_bready = 1;
    while (!s_bvalid) begin @(negedge clk); wcycles++; end
    @(negedge clk);
    s_bready = 0;
  endtask

  task automatic rd(input int unsigned a, output logic [31:0] d);
    @(negedge clk);
    s_araddr = CFG_ADDR_W'(a); s_arvalid = 1;
    while (!s_arready) @(negedge clk);
    @(negedge clk);
    s_arvalid = 0; s_rready = 1;
    while (!s_rvalid) @(negedge clk);
    d = s_rdata;
    @(negedge clk);
    s_rready = 0;
  endtask

  task automatic wr16(input int unsigned a, input logic [15:0] v);
    if (a % 4 == 0) wr(a, {16'h0, v}, 4'b0011);
    else            wr(a & ~3, {v, 16'h0}, 4'b1100);
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [15:0] cw [11], co [11];
    logic [31:0] d;
    repeat (3) @(negedge clk);
    rst_n = 1;
    check(cfg == '0, "reset values are 0");
    wr('h00, 32'd104, 4'hf);
    check(wcycles <= 3, $sformatf("write took %0d cycles", wcycles));
    wr('h04, 32'd44000, 4'hf);
    wr('h0c, 32'd3, 4'hf);
    wr('h3c, 32'h0001_2345, 4'hf);
    for (int j = 0; j < 11; j++) begin
      cw[j] = 16'($urandom_range(1, 64)); co[j] = 16'($urandom);
      wr16('h10 + 2*j, cw[j]);
      wr16('h26 + 2*j, co[j]);
    end
    check(cfg.row_size == 104 && cfg.row_count == 44000 && cfg.col_count == 3 &&
          cfg.frame == 32'h0001_2345, "word registers");
    for (int j = 0; j < 11; j++)
      check(cfg.col_width[j] == cw[j] && cfg.col_offset[j] == co[j],
            $sformatf("column %0d width/offset", j));
    rd('h10, d); check(d == {cw[1], cw[0]}, "read C_0/C_1");
    rd('h24, d); check(d[31:16] == co[0] && d[15:0] == cw[10], "read C_10/O_0");
    rd('h3c, d); check(d == 32'h0001_2345, "read F");
    // byte write into R
    wr('h00, 32'h0000_ff00, 4'b0010);
    check(cfg.row_size == 32'h0000_ff68, "byte write under WSTRB");
    // software reset
    pulses = 0;
    wr('h08, 32'h1, 4'hf);
    repeat (3) @(negedge clk);
    check(pulses == 1, $sformatf("one sw_reset pulse (%0d)", pulses));
    rd('h08, d); check(d == 0, "SW reads 0");
    check(cfg.row_count == 44000, "SW leaves geometry");
    wr('h08, 32'h0, 4'hf);
    repeat (3) @(negedge clk);
    check(pulses == 1, "writing 0 to SW is no reset");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
