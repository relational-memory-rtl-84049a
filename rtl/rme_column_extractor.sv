// rme_column_extractor: the Column Extractor of the Fetch Unit.
//
// Takes one 16-byte beat from the Reader together with the byte range
// [lo, hi) that belongs to the projected columns, discards the leading lo
// bytes (E_s) and the bytes from hi on (those past E_e), and shifts the
// remaining hi-lo bytes down to byte 0, so the Packer receives a dense
// chunk. The paper describes this dropping and shifting; doing it one beat
// at a time and leaving the accumulation of a column across beats to the
// Packer is this design's choice. Unused output bytes are zero.
//
// Timing: combinational; valid/ready pass straight through.
module rme_column_extractor
  import rme_pkg::*;
(
  input  logic                in_valid,
  output logic                in_ready,
  input  logic [BUS_W-1:0]    in_data,
  input  logic [BUS_OFF_W:0]  in_lo,
  input  logic [BUS_OFF_W:0]  in_hi,
  input  logic                in_frame_end,
  output logic                out_valid,
  input  logic                out_ready,
  output logic [BUS_W-1:0]    out_data,
  output logic [BUS_OFF_W:0]  out_cnt,
  output logic                out_frame_end
);

  logic [BUS_W-1:0] shifted, mask;

  always_comb begin
    shifted  = in_data >> (8 * int'(in_lo));
    out_cnt  = in_hi - in_lo;
    mask     = '0;
    for (int b = 0; b < BUS_BYTES; b++)
      if (b < int'(out_cnt)) mask[8*b +: 8] = 8'hff;
    out_data = shifted & mask;
  end

  assign out_valid     = in_valid;
  assign in_ready      = out_ready;
  assign out_frame_end = in_frame_end;

endmodule
