// rme_tb_cpu: behavioural CPU side for the engine testbenches.
//
// Holds the test's view of the configured table and drives the engine's
// AXI4-Lite configuration port and its AXI read port the way software and
// the cache would. Reads are issued from a list (line, first beat, beats,
// burst type, ID) with up to MAX_OUT in flight, answers are matched per ID
// in order and every beat is compared with the projection recomputed from
// rme_tb_pkg::mem_byte(). Counts checks, failures and the worst latency
// from AR to RLAST.
module rme_tb_cpu
  import rme_pkg::*;
  import rme_tb_pkg::*;
#(
  parameter int unsigned MAX_OUT = 6
) (
  input  logic                  clk,
  input  logic                  rst_n,
  output logic [CFG_ADDR_W-1:0] cfg_awaddr,
  output logic                  cfg_awvalid,
  input  logic                  cfg_awready,
  output logic [31:0]           cfg_wdata,
  output logic [3:0]            cfg_wstrb,
  output logic                  cfg_wvalid,
  input  logic                  cfg_wready,
  input  logic [1:0]            cfg_bresp,
  input  logic                  cfg_bvalid,
  output logic                  cfg_bready,
  output logic [CFG_ADDR_W-1:0] cfg_araddr,
  output logic                  cfg_arvalid,
  input  logic                  cfg_arready,
  input  logic [31:0]           cfg_rdata,
  input  logic [1:0]            cfg_rresp,
  input  logic                  cfg_rvalid,
  output logic                  cfg_rready,
  output logic                  arvalid,
  input  logic                  arready,
  output axi_ar_t               ar,
  input  logic                  rvalid,
  output logic                  rready,
  input  axi_r_t                r
);

  // ---------------- the table as software sees it ----------------
  int unsigned R, N, Q, F;
  int unsigned C [MAX_COLS];
  int unsigned O [MAX_COLS];
  int unsigned capacity = SPM_BYTES;

  int checks = 0, failures = 0;
  int max_lat = 0;

  function automatic int unsigned row_bytes();
    int unsigned s = 0;
    for (int k = 0; k < int'(Q); k++) s += C[k];
    return s;
  endfunction

  // rows that the engine projects: all N, or as many as fit in the SPM
  function automatic int unsigned rows_held();
    int unsigned s = row_bytes();
    int unsigned m = capacity / s;
    return (N < m) ? N : m;
  endfunction

  // expected byte p of the projected table (0 past the last row)
  function automatic logic [7:0] proj_byte(input int unsigned p);
    int unsigned s = row_bytes();
    int unsigned i = p / s, q = p % s, cs = 0, os = 0;
    if (i >= rows_held()) return 8'h00;
    for (int k = 0; k < int'(Q); k++) begin
      os += O[k];
      if (q < cs + C[k])
        return mem_byte(40'(F) * 40'd4096 + 40'(R) * 40'(i) + 40'(os) + 40'(q - cs));
      cs += C[k];
    end
    return 8'h00;
  endfunction

  function automatic int unsigned lines_held();
    return (rows_held() * row_bytes() + LINE_BYTES - 1) / LINE_BYTES;
  endfunction

  // ---------------- configuration port ----------------
  initial begin
    cfg_awvalid = 0; cfg_wvalid = 0; cfg_bready = 0; cfg_arvalid = 0; cfg_rready = 0;
    cfg_awaddr = 0; cfg_wdata = 0; cfg_wstrb = 0; cfg_araddr = 0;
  end

  // All handshakes are driven and sampled on the falling edge: a
  // valid/ready pair seen high there completes on the next rising edge.
  task automatic cfg_write(input int unsigned addr, input logic [31:0] data,
                           input logic [3:0] strb);
    @(negedge clk);
    cfg_awaddr = CFG_ADDR_W'(addr); cfg_wdata = data; cfg_wstrb = strb;
    cfg_awvalid = 1; cfg_wvalid = 1;
    #1;
    while (!(cfg_awready && cfg_wready)) begin @(negedge clk); #1; end
    @(negedge clk);
    cfg_awvalid = 0; cfg_wvalid = 0; cfg_bready = 1;
    while (!cfg_bvalid) @(negedge clk);
    @(negedge clk);
    cfg_bready = 0;
  endtask

  task automatic cfg_write16(input int unsigned addr, input int unsigned v);
    if (addr % 4 == 0) cfg_write(addr, 32'(v & 16'hffff), 4'b0011);
    else               cfg_write(addr & ~3, 32'(v & 16'hffff) << 16, 4'b1100);
  endtask

  task automatic cfg_read(input int unsigned addr, output logic [31:0] data);
    @(negedge clk);
    cfg_araddr = CFG_ADDR_W'(addr); cfg_arvalid = 1;
    while (!cfg_arready) @(negedge clk);
    @(negedge clk);
    cfg_arvalid = 0; cfg_rready = 1;
    while (!cfg_rvalid) @(negedge clk);
    data = cfg_rdata;
    @(negedge clk);
    cfg_rready = 0;
  endtask

  // write the geometry held in R..F, then the software reset
  task automatic program_table();
    cfg_write('h00, R, 4'hf);
    cfg_write('h04, N, 4'hf);
    cfg_write('h0c, Q, 4'hf);
    for (int j = 0; j < MAX_COLS; j++) begin
      cfg_write16('h10 + 2*j, C[j]);
      cfg_write16('h26 + 2*j, O[j]);
    end
    cfg_write('h3c, F, 4'hf);
    cfg_write('h08, 32'h1, 4'hf);
  endtask

  // ---------------- reads of the ephemeral window ----------------
  typedef struct packed {
    logic [ID_W-1:0] id;
    int unsigned     line;
    logic [1:0]      beat;
    logic [1:0]      len;
    logic            wrap;
  } rd_t;

  rd_t    todo [$];
  rd_t    pend [64][$];
  longint t_issue [64][$];
  longint cyc = 0;
  int     inflight = 0;
  int     got_beat [64];

  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    arvalid = 0; ar = '0; rready = 0;
  end

  // add a read of one line: random ID, start beat and length
  task automatic add_read(input int unsigned line, input bit full_line);
    rd_t t;
    t.id   = ID_W'($urandom_range(0, 7));
    t.line = line;
    t.wrap = full_line ? 1'b1 : ($urandom_range(0, 1) == 1);
    if (full_line) begin
      t.beat = 2'($urandom_range(0, 3)); t.len = 2'd3;
    end else if (t.wrap) begin
      t.beat = 2'($urandom_range(0, 3)); t.len = 2'($urandom_range(0, 3));
    end else begin
      t.beat = 2'($urandom_range(0, 3));
      t.len  = 2'($urandom_range(0, 3 - int'(t.beat)));
    end
    todo.push_back(t);
  endtask

  // issue everything in `todo`, wait for all answers
  task automatic run_reads();
    fork
      begin : issue
        while (todo.size() > 0) begin
          @(negedge clk);
          if (inflight < int'(MAX_OUT)) begin
            rd_t t = todo.pop_front();
            ar.id    = t.id;
            ar.addr  = 40'(t.line) * 40'(LINE_BYTES) + 40'(t.beat) * 40'(BUS_BYTES)
                       + 40'h80_0000_0000 / 2;   // arbitrary window base
            ar.len   = 8'(t.len);
            ar.size  = AXI_SIZE_BUS;
            ar.burst = t.wrap ? AXI_BURST_WRAP : AXI_BURST_INCR;
            arvalid  = 1;
            while (!arready) @(negedge clk);
            pend[t.id].push_back(t);
            t_issue[t.id].push_back(cyc);
            inflight++;
            @(negedge clk);
            arvalid = 0;
          end
        end
      end
    join_none
    @(negedge clk);
    rready = 1;
    while (todo.size() > 0 || inflight > 0 || arvalid) begin
      @(negedge clk);
      if (rvalid && rready) collect();
    end
    rready = 0;
  endtask

  int beat_no [64];
  task automatic collect();
    rd_t t;
    int unsigned bt, base;
    logic [BUS_W-1:0] exp;
    if (pend[r.id].size() == 0) begin
      failures++; checks++;
      $display("CPU: answer for id %0d with no read pending", r.id);
      return;
    end
    t  = pend[r.id][0];
    bt = (int'(t.beat) + beat_no[r.id]) % BEATS_PER_LINE;
    base = t.line * LINE_BYTES + bt * BUS_BYTES;
    for (int b = 0; b < BUS_BYTES; b++) exp[8*b +: 8] = proj_byte(base + b);
    checks++;
    if (r.data !== exp || r.resp != AXI_RESP_OKAY) begin
      failures++;
      if (failures < 10)
        $display("CPU: line %0d beat %0d id %0d got %h exp %h", t.line, bt, r.id, r.data, exp);
    end
    checks++;
    if (r.last != (beat_no[r.id] == int'(t.len))) begin
      failures++;
      $display("CPU: RLAST wrong on line %0d", t.line);
    end
    if (r.last || beat_no[r.id] == int'(t.len)) begin
      int lat = int'(cyc - t_issue[r.id][0]);
      if (lat > max_lat) max_lat = lat;
      void'(pend[r.id].pop_front());
      void'(t_issue[r.id].pop_front());
      beat_no[r.id] = 0;
      inflight--;
    end else beat_no[r.id]++;
  endtask

  initial for (int k = 0; k < 64; k++) beat_no[k] = 0;

endmodule
