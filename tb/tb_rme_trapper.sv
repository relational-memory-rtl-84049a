// tb_rme_trapper: random CPU reads (IDs, lines, first beat, 1-4 beats,
// INCR or WRAP) into the Trapper. A stand-in for the Monitor Bypass takes
// the {A, ID} tuples with random delays, checks their fields, and answers
// them in a shuffled order (kept in order per ID) with a line whose bytes
// encode the line number. Checks every R beat (ID, data of the right beat
// with wrap-around, RLAST), that the first beat is out the cycle after an
// answer is taken, and that the 8-entry queue fills up (AR back-pressure).
`timescale 1ns/1ps
module tb_rme_trapper;
  import rme_pkg::*;
  import rme_tb_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic s_arvalid = 0, s_arready, s_rvalid, s_rready = 0;
  axi_ar_t s_ar = '0;
  axi_r_t s_r;
  logic req_valid, req_ready = 0, resp_valid = 0, resp_ready;
  rme_cpu_req_t req;
  rme_cpu_resp_t resp = '0;
  int checks = 0, failures = 0, full_seen = 0;

  rme_trapper dut (.*);

  function automatic logic [LINE_W-1:0] line_data(input int unsigned l);
    logic [LINE_W-1:0] v;
    for (int b = 0; b < LINE_BYTES; b++) v[8*b +: 8] = mem_byte(40'(l * 64 + b));
    return v;
  endfunction

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  rme_cpu_req_t issued [$];     // in AR order
  rme_cpu_req_t held [$];       // taken by the stand-in, not answered
  rme_cpu_req_t expect_r [64][$];
  int bno [64];
  int total = 300, done = 0, cyc = 0;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // CPU: issue reads
  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < total; n++) begin
      rme_cpu_req_t t;
      t.id = 6'($urandom_range(0, 5));
      t.line = 15'($urandom);
      t.beat = 2'($urandom);
      if ($urandom_range(0, 1) == 1) begin
        t.len = 2'($urandom); s_ar.burst = AXI_BURST_WRAP;
      end else begin
        t.len = 2'($urandom_range(0, 3 - int'(t.beat))); s_ar.burst = AXI_BURST_INCR;
      end
      @(negedge clk);
      s_ar.id = t.id; s_ar.addr = {25'h1_2345, t.line, t.beat, 4'h0};
      s_ar.len = 8'(t.len); s_ar.size = 3'd4; s_arvalid = 1;
      #1;
      while (!s_arready) begin full_seen++; @(negedge clk); #1; end
      issued.push_back(t);
      expect_r[t.id].push_back(t);
      @(posedge clk); #1;
      s_arvalid = 0;
    end
  end

  // stand-in Monitor Bypass: take requests
  always @(negedge clk) if (rst_n) begin
    cyc++;
    req_ready = (cyc < 100) ? 1'b0 : ($urandom_range(0, 2) == 0);  // queue fills first
    if (req_valid && req_ready) begin
      rme_cpu_req_t e;
      e = issued.pop_front();
      check(req == e, "request tuple {A, ID}");
      held.push_back(req);
    end
  end

  // answer in shuffled order, in order per ID
  initial begin
    @(posedge rst_n);
    forever begin
      @(negedge clk);
      if (held.size() > 0 && $urandom_range(0, 1) == 1) begin
        int k, pick;
        k = $urandom_range(0, held.size() - 1);
        pick = k;
        // oldest of that ID
        for (int m = 0; m < k; m++) if (held[m].id == held[k].id) begin pick = m; break; end
        resp.id = held[pick].id; resp.beat = held[pick].beat; resp.len = held[pick].len;
        resp.data = line_data(held[pick].line);
        held.delete(pick);
        resp_valid = 1;
        #1;
        while (!resp_ready) begin @(negedge clk); #1; end
        @(posedge clk); #1;
        resp_valid = 0;
        @(negedge clk);
        check(s_rvalid, "first beat the cycle after the answer");
      end
    end
  end

  // CPU: receive beats
  always @(negedge clk) if (rst_n) begin
    s_rready = ($urandom_range(0, 3) != 0);
    if (s_rvalid && s_rready) begin
      rme_cpu_req_t t;
      int bt;
      logic [LINE_W-1:0] ld;
      t = expect_r[s_r.id][0];
      bt = (int'(t.beat) + bno[s_r.id]) % 4;
      ld = line_data(t.line);
      check(s_r.data == ld[128*bt +: 128],
            $sformatf("beat data id %0d line %0d beat %0d", s_r.id, t.line, bt));
      check(s_r.last == (bno[s_r.id] == int'(t.len)) && s_r.resp == 2'b00, "RLAST/RRESP");
      if (bno[s_r.id] == int'(t.len)) begin
        bno[s_r.id] = 0; void'(expect_r[s_r.id].pop_front()); done++;
      end else bno[s_r.id]++;
      if (done == total) begin
        check(full_seen > 0, "request queue filled");
        $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
        $finish;
      end
    end
  end

  initial for (int k = 0; k < 64; k++) bno[k] = 0;
endmodule
