// tb_rme_packer: streams of random chunks (1..16 bytes) forming frames of
// random length; rebuilds the expected byte stream and checks that every
// line leaves whole, at the right position, with a zero-padded last line
// per frame and the position restarting at 0 after it; random
// back-pressure. Also checks that a full line leaves one cycle after the
// chunk that completes it.
`timescale 1ns/1ps
module tb_rme_packer;
  import rme_pkg::*;
  logic clk = 0, rst_n = 0, flush = 0;
  always #5 clk = ~clk;
  logic in_valid = 0, in_ready, in_fe = 0, out_valid, out_ready = 0;
  logic [BUS_W-1:0] in_data = '0;
  logic [BUS_OFF_W:0] in_cnt = 0;
  logic [LINE_W-1:0] out_data;
  logic [31:0] out_pos;
  logic [LINE_OFF_W:0] out_cnt;
  int checks = 0, failures = 0, lines = 0, pads = 0;

  rme_packer dut (.clk, .rst_n, .flush, .in_valid, .in_ready, .in_data, .in_cnt,
                  .in_frame_end(in_fe), .out_valid, .out_ready, .out_data,
                  .out_pos, .out_cnt);

  logic [7:0] stream [$];     // expected bytes of the current frame, padded
  int unsigned exp_pos = 0;
  int frame_lines [$];        // lines of each frame still to come
  int line_in_frame = 0;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) if (rst_n) begin
    out_ready = ($urandom_range(0, 3) != 0);
    if (out_valid && out_ready) begin
      logic [LINE_W-1:0] e;
      for (int b = 0; b < LINE_BYTES; b++) e[8*b +: 8] = stream.pop_front();
      checks++;
      if (out_data !== e || out_pos != exp_pos || out_cnt != 7'd64) begin
        failures++;
        if (failures < 5) $display("line at %0d (exp %0d) wrong", out_pos, exp_pos);
      end
      exp_pos += LINE_BYTES;
      line_in_frame++;
      if (frame_lines.size() > 0 && line_in_frame == frame_lines[0]) begin
        void'(frame_lines.pop_front());
        exp_pos = 0; line_in_frame = 0;
      end
      lines++;
    end
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int f = 0; f < 40; f++) begin
      int total, sent;
      total = $urandom_range(1, 700); sent = 0;
      frame_lines.push_back((total + 63) / 64);
      while (sent < total) begin
        int c;
        c = $urandom_range(1, 16);
        if (c > total - sent) c = total - sent;
        @(negedge clk); #1;
        in_data = '0;
        for (int b = 0; b < c; b++) begin
          in_data[8*b +: 8] = 8'($urandom);
        end
        in_cnt = 5'(c); in_valid = 1; in_fe = (sent + c == total);
        while (!in_ready) begin @(negedge clk); #1; end
        for (int b = 0; b < c; b++) stream.push_back(in_data[8*b +: 8]);
        sent += c;
        if (sent == total && total % LINE_BYTES != 0) begin
          pads++;
          for (int b = total % LINE_BYTES; b < LINE_BYTES; b++) stream.push_back(8'h00);
        end
        @(posedge clk); #1;
        in_valid = 0;
        if ($urandom_range(0, 3) == 0) @(negedge clk);
      end
      while (stream.size() > 0) @(negedge clk);
    end
    // timing: with the output free, a completing chunk gives a line next cycle
    frame_lines.push_back(1);
    @(negedge clk);
    in_valid = 1; in_cnt = 16; in_fe = 0; in_data = '1;
    for (int k = 0; k < 4; k++) begin
      if (k == 3) in_fe = 1;
      #1;
      while (!in_ready) begin @(negedge clk); #1; end
      for (int b = 0; b < 16; b++) stream.push_back(8'hff);
      @(negedge clk);
    end
    in_valid = 0;
    checks++;
    if (!out_valid && stream.size() != 0) begin
      failures++; $display("line not out one cycle after");
    end
    while (stream.size() > 0) @(negedge clk);
    checks++;
    if (pads == 0 || lines < 100) failures++;
    $display("lines=%0d padded=%0d", lines, pads);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
