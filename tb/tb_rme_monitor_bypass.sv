// tb_rme_monitor_bypass: the Monitor Bypass with its two SPMs (reduced to
// 64 lines), driven by scripted CPU reads and Fetch Unit writes. Checks:
// no read is served before the initial clear ends; a miss stores the ID
// and the first miss (only) starts the Requestor; the write that completes
// a line answers the stalled read with the merged line (two partial
// writes); a later read hits and is answered within 3 cycles; a second
// read of a busy ID, or of a line that already has a waiter, is held back
// and served afterwards in order; writes win over reads in the same
// cycle; a software reset makes every line incomplete and re-arms the
// start; the epoch wraps after 255 resets with a clear of all entries.
`timescale 1ns/1ps
module tb_rme_monitor_bypass;
  import rme_pkg::*;
  localparam int unsigned DEPTH = 64;
  logic clk = 0, rst_n = 0, sw_reset = 0;
  always #5 clk = ~clk;
  logic req_valid = 0, req_ready, resp_valid, resp_ready = 1, wr_valid = 0, wr_ready;
  rme_cpu_req_t req = '0;
  rme_cpu_resp_t resp;
  rme_wr_t wr = '0;
  logic start;
  logic meta_re, meta_we, data_re, data_we;
  logic [5:0] meta_raddr, meta_waddr, data_raddr, data_waddr;
  rme_meta_t meta_rdata, meta_wdata;
  logic [LINE_W-1:0] data_rdata, data_wdata;
  logic [LINE_BYTES-1:0] data_wbe;
  logic [EPOCH_W-1:0] epoch;
  logic ready, ev_hit, ev_miss, ev_release, ev_retry;
  int checks = 0, failures = 0;
  int n_start = 0, n_hit = 0, n_miss = 0, n_rel = 0, n_retry = 0;

  rme_monitor_bypass #(.DEPTH(DEPTH)) dut (.*);
  rme_meta_spm #(.DEPTH(DEPTH)) u_meta (.clk, .re(meta_re), .raddr(meta_raddr),
    .rdata(meta_rdata), .we(meta_we), .waddr(meta_waddr), .wdata(meta_wdata));
  rme_data_spm #(.DEPTH(DEPTH)) u_data (.clk, .re(data_re), .raddr(data_raddr),
    .rdata(data_rdata), .we(data_we), .waddr(data_waddr), .wbe(data_wbe), .wdata(data_wdata));

  always @(posedge clk) if (rst_n) begin
    n_start += int'(start); n_hit += int'(ev_hit); n_miss += int'(ev_miss);
    n_rel += int'(ev_release); n_retry += int'(ev_retry);
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // CPU read queue feeding the req port
  rme_cpu_req_t rq [$];
  // The handshake is sampled at the falling edge, completes at the next
  // rising edge, and only after that edge is the next request presented.
  logic hs = 1'b0;
  always @(negedge clk) begin #1; hs = rst_n && req_valid && req_ready; end
  always @(posedge clk) begin
    #1;
    if (hs) void'(rq.pop_front());
    hs = 1'b0;
    req_valid = (rq.size() > 0);
    if (rq.size() > 0) req = rq[0];
  end

  // answers
  typedef struct { logic [ID_W-1:0] id; logic [LINE_W-1:0] d; longint t; } ans_t;
  ans_t ans [$];
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;
  always @(negedge clk) if (rst_n && resp_valid && resp_ready) begin
    ans_t a;
    a.id = resp.id; a.d = resp.data; a.t = cyc;
    ans.push_back(a);
  end

  task automatic read(input int line, input int id);
    rme_cpu_req_t t;
    t.line = 15'(line); t.id = 6'(id); t.beat = 0; t.len = 3;
    rq.push_back(t);
  endtask

  task automatic write(input int line, input logic [LINE_BYTES-1:0] be,
                       input logic [LINE_W-1:0] d);
    @(negedge clk); #3;
    wr.line = 15'(line); wr.be = be; wr.data = d; wr_valid = 1;
    #1;
    while (!wr_ready) begin @(negedge clk); #4; end
    @(posedge clk); #1;
    wr_valid = 0;
  endtask

  function automatic logic [LINE_W-1:0] pat(input int k);
    logic [LINE_W-1:0] v;
    for (int w = 0; w < 16; w++) v[32*w +: 32] = 32'(k * 1000 + w);
    return v;
  endfunction

  task automatic expect_ans(input int id, input logic [LINE_W-1:0] d, input string what);
    int w = 0;
    while (ans.size() == 0 && w < 50) begin @(negedge clk); w++; end
    check(ans.size() > 0 && ans[0].id == ID_W'(id) && ans[0].d == d, what);
    if (ans.size() > 0) void'(ans.pop_front());
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint t0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    read(5, 1);
    repeat (10) @(negedge clk);
    check(!ready && n_miss == 0 && n_hit == 0, "nothing served during the clear");
    wait (ready);
    repeat (4) @(negedge clk);
    check(n_miss == 1 && n_start == 1, "first miss starts the Requestor");
    write(5, '1, pat(5));
    expect_ans(1, pat(5), "stalled read answered on completion");
    check(n_rel == 1, "release counted");
    // hit and its latency
    repeat (3) @(negedge clk);
    t0 = cyc;
    read(5, 2);
    expect_ans(2, pat(5), "hit answered from the SPM");
    check(n_hit == 1, "hit counted");
    // partial writes merge; no second start
    read(7, 3);
    repeat (6) @(negedge clk);
    write(7, {32'h0, 32'hffff_ffff}, pat(7));
    repeat (4) @(negedge clk);
    check(ans.size() == 0, "half a line does not answer");
    write(7, {32'hffff_ffff, 32'h0}, pat(70));
    expect_ans(3, {pat(70)[511:256], pat(7)[255:0]}, "merged line answered");
    check(n_start == 1, "only the first miss starts");
    // same ID twice: the second waits for the first
    read(8, 4); read(9, 4);
    repeat (10) @(negedge clk);
    check(n_retry > 0 && rq.size() == 1, "read of a busy ID held back");
    write(9, '1, pat(9));
    repeat (4) @(negedge clk);
    check(ans.size() == 0, "no answer out of order for one ID");
    write(8, '1, pat(8));
    expect_ans(4, pat(8), "first read of ID 4 first");
    expect_ans(4, pat(9), "then the second");
    // two waiters on one line
    read(10, 6); read(10, 7);
    repeat (10) @(negedge clk);
    check(rq.size() == 1, "second waiter on a line held back");
    write(10, '1, pat(10));
    expect_ans(6, pat(10), "waiter answered");
    expect_ans(7, pat(10), "held read then hits");
    // software reset: line 5 no longer complete, start re-armed
    @(negedge clk); sw_reset = 1; @(negedge clk); sw_reset = 0;
    check(epoch == 2, "epoch advanced");
    read(5, 1);
    repeat (8) @(negedge clk);
    check(ans.size() == 0 && n_start == 2, "after reset: miss and a new start");
    write(5, '1, pat(55));
    expect_ans(1, pat(55), "refilled line answered");
    // epoch wrap
    for (int k = 0; k < 254; k++) begin
      @(negedge clk); sw_reset = 1; @(negedge clk); sw_reset = 0;
    end
    check(!ready && epoch == 1, "wrap: back to epoch 1 with a clear");
    wait (ready);
    read(5, 2);
    repeat (8) @(negedge clk);
    check(ans.size() == 0, "after the wrap the old line is incomplete");
    write(5, '1, pat(56));
    expect_ans(2, pat(56), "answered after the wrap");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
