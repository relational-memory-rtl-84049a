// tb_rme_column_extractor: random beats and byte ranges [lo, hi); checks
// that exactly bytes lo..hi-1 come out, moved to byte 0, the rest zero,
// and that valid/ready and the frame-end flag pass through.
`timescale 1ns/1ps
module tb_rme_column_extractor;
  import rme_pkg::*;
  logic in_valid, in_ready, out_valid, out_ready, in_fe, out_fe;
  logic [BUS_W-1:0] in_data, out_data, exp;
  logic [BUS_OFF_W:0] in_lo, in_hi, out_cnt;
  int checks = 0, failures = 0;

  rme_column_extractor dut (
    .in_valid, .in_ready, .in_data, .in_lo, .in_hi, .in_frame_end(in_fe),
    .out_valid, .out_ready, .out_data, .out_cnt, .out_frame_end(out_fe)
  );

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 5000; n++) begin
      int lo, hi;
      lo = $urandom_range(0, 15);
      hi = $urandom_range(lo + 1, 16);
      in_data = {$urandom, $urandom, $urandom, $urandom};
      in_lo = 5'(lo); in_hi = 5'(hi);
      in_valid = 1'($urandom); out_ready = 1'($urandom); in_fe = 1'($urandom);
      exp = '0;
      for (int b = 0; b < hi - lo; b++) exp[8*b +: 8] = in_data[8*(lo+b) +: 8];
      #1;
      checks++;
      if (out_data !== exp || out_cnt != 5'(hi - lo)) begin
        failures++;
        if (failures < 5) $display("lo=%0d hi=%0d got %h exp %h", lo, hi, out_data, exp);
      end
      checks++;
      if (out_valid != in_valid || in_ready != out_ready || out_fe != in_fe) failures++;
      #9;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
