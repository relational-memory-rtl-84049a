// rme_config_port: the RME configuration port, an AXI4-Lite register file.
//
// Software writes the geometry of the table to project into a 64-byte
// register window laid out as in the paper's Table 1 (offsets from the
// port's base):
//   0x00 R   row size in bytes          0x04 N  row count
//   0x08 SW  software reset             0x0c Q  number of enabled columns
//   0x10 + 2j  C_Aj, 16-bit column width of column j   (j = 0..10)
//   0x26 + 2j  O_Aj, 16-bit offset of column j from column j-1
//   0x3c F   frame number
// The window is kept as 64 bytes and written byte by byte under WSTRB, so
// the 16-bit fields at 2-byte-aligned addresses fall out naturally.
// Writing any non-zero byte to SW raises sw_reset for exactly one cycle;
// SW itself reads back as 0 (the paper names the register, its
// self-clearing is this design's choice). The register layout follows the
// paper; the AXI4-Lite protocol, the 32-bit data width, reset values of 0
// and the reading of F as the table's 4 KiB page frame are this design's
// choices.
//
// Timing: a write completes one cycle after both AW and W are seen (BVALID
// then); a read returns RDATA the cycle after ARVALID&ARREADY. The new
// configuration is visible on cfg the cycle after the write.
module rme_config_port
  import rme_pkg::*;
(
  input  logic                  clk,
  input  logic                  rst_n,
  // AXI4-Lite secondary
  input  logic [CFG_ADDR_W-1:0] s_awaddr,
  input  logic                  s_awvalid,
  output logic                  s_awready,
  input  logic [31:0]           s_wdata,
  input  logic [3:0]            s_wstrb,
  input  logic                  s_wvalid,
  output logic                  s_wready,
  output logic [1:0]            s_bresp,
  output logic                  s_bvalid,
  input  logic                  s_bready,
  input  logic [CFG_ADDR_W-1:0] s_araddr,
  input  logic                  s_arvalid,
  output logic                  s_arready,
  output logic [31:0]           s_rdata,
  output logic [1:0]            s_rresp,
  output logic                  s_rvalid,
  input  logic                  s_rready,
  // to the engine
  output rme_cfg_t              cfg,
  output logic                  sw_reset
);

  localparam int unsigned NREG = 2**CFG_ADDR_W;   // 64 bytes
  localparam int unsigned SW_ADDR = 'h08;
  localparam int unsigned C_BASE  = 'h10;
  localparam int unsigned O_BASE  = 'h26;

  logic [7:0] regs [NREG];

  // ---------------- write channel ----------------
  logic do_write;
  assign s_awready = s_awvalid && s_wvalid && !s_bvalid;
  assign s_wready  = s_awready;
  assign do_write  = s_awready;
  assign s_bresp   = AXI_RESP_OKAY;

  logic [CFG_ADDR_W-1:0] wbase;
  assign wbase = {s_awaddr[CFG_ADDR_W-1:2], 2'b00};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NREG; i++) regs[i] <= '0;
      s_bvalid <= 1'b0;
      sw_reset <= 1'b0;
    end else begin
      sw_reset <= 1'b0;
      if (s_bvalid && s_bready) s_bvalid <= 1'b0;
      if (do_write) begin
        s_bvalid <= 1'b1;
        for (int b = 0; b < 4; b++) begin
          if (s_wstrb[b]) begin
            if (int'(wbase) + b >= SW_ADDR && int'(wbase) + b < SW_ADDR + 4) begin
              if (s_wdata[8*b +: 8] != 8'h00) sw_reset <= 1'b1;
            end else begin
              regs[int'(wbase) + b] <= s_wdata[8*b +: 8];
            end
          end
        end
      end
    end
  end

  // ---------------- read channel ----------------
  assign s_arready = !s_rvalid;
  assign s_rresp   = AXI_RESP_OKAY;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s_rvalid <= 1'b0;
      s_rdata  <= '0;
    end else begin
      if (s_rvalid && s_rready) s_rvalid <= 1'b0;
      if (s_arvalid && s_arready) begin
        s_rvalid <= 1'b1;
        for (int b = 0; b < 4; b++)
          s_rdata[8*b +: 8] <= regs[{s_araddr[CFG_ADDR_W-1:2], 2'b00} + CFG_ADDR_W'(b)];
      end
    end
  end

  // ---------------- decoded configuration ----------------
  function automatic logic [31:0] word32(input int unsigned a);
    return {regs[a+3], regs[a+2], regs[a+1], regs[a]};
  endfunction

  always_comb begin
    cfg.row_size  = word32('h00);
    cfg.row_count = word32('h04);
    cfg.col_count = word32('h0c);
    cfg.frame     = word32('h3c);
    for (int j = 0; j < MAX_COLS; j++) begin
      cfg.col_width[j]  = {regs[C_BASE + 2*j + 1], regs[C_BASE + 2*j]};
      cfg.col_offset[j] = {regs[O_BASE + 2*j + 1], regs[O_BASE + 2*j]};
    end
  end

  // Handshake rules of AXI4-Lite: a response stays valid until taken.
  a_b_hold: assert property (@(posedge clk) disable iff (!rst_n)
    s_bvalid && !s_bready |=> s_bvalid);
  a_r_hold: assert property (@(posedge clk) disable iff (!rst_n)
    s_rvalid && !s_rready |=> s_rvalid && $stable(s_rdata));

endmodule
