// rme_packer: the packing register of the Fetch Unit (the paper's PCK
// revision, kept in MLP).
//
// Extracted chunks of 1..16 bytes arrive in the order of the projected
// table, which is dense: row after row, column after column. The Packer
// appends each chunk at its fill level in an 80-byte register and, each
// time 64 bytes are present, hands one full cache line to the Writer
// together with its byte position in the Data SPM, so the Reorganization
// Buffer is written once per line instead of once per column. At the end
// of a frame a partly filled last line is handed over too, padded with
// zero bytes and counted as a full line so that the line can complete and
// a CPU waiting on it is answered; that padding is this design's choice.
// The position restarts at 0 after the frame's last line and on `flush`.
//
// Timing: a chunk is taken whenever the output register is free or being
// emptied in the same cycle; a line is on the output one cycle after the
// chunk that completed it. A frame end that leaves bytes over after a full
// line costs one extra cycle for the padded line.
module rme_packer
  import rme_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  input  logic               flush,
  input  logic               in_valid,
  output logic               in_ready,
  input  logic [BUS_W-1:0]   in_data,
  input  logic [BUS_OFF_W:0] in_cnt,
  input  logic               in_frame_end,
  output logic               out_valid,
  input  logic               out_ready,
  output logic [LINE_W-1:0]  out_data,
  output logic [31:0]        out_pos,
  output logic [LINE_OFF_W:0] out_cnt
);

  localparam int unsigned ACC_BYTES = LINE_BYTES + BUS_BYTES;   // 80
  localparam int unsigned FW = $clog2(ACC_BYTES + 1);

  logic [8*ACC_BYTES-1:0] acc_q, comb;
  logic [FW-1:0]          fill_q, nf;
  logic [31:0]            pos_q;
  logic                   tail_q;    // padded last line still to send
  logic                   out_free, fire;

  assign out_free = !out_valid || out_ready;
  assign in_ready = out_free && !tail_q;
  assign fire     = in_valid && in_ready;
  assign comb     = acc_q | ((8*ACC_BYTES)'(in_data) << (8 * int'(fill_q)));
  assign nf       = fill_q + FW'(in_cnt);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc_q     <= '0;
      fill_q    <= '0;
      pos_q     <= '0;
      tail_q    <= 1'b0;
      out_valid <= 1'b0;
      out_data  <= '0;
      out_pos   <= '0;
      out_cnt   <= '0;
    end else if (flush) begin
      acc_q     <= '0;
      fill_q    <= '0;
      pos_q     <= '0;
      tail_q    <= 1'b0;
      out_valid <= 1'b0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (tail_q && out_free) begin
        out_valid <= 1'b1;
        out_data  <= acc_q[LINE_W-1:0];
        out_pos   <= pos_q;
        out_cnt   <= (LINE_OFF_W+1)'(LINE_BYTES);
        acc_q     <= '0;
        fill_q    <= '0;
        pos_q     <= '0;
        tail_q    <= 1'b0;
      end else if (fire) begin
        if (nf >= FW'(LINE_BYTES)) begin
          out_valid <= 1'b1;
          out_data  <= comb[LINE_W-1:0];
          out_pos   <= pos_q;
          out_cnt   <= (LINE_OFF_W+1)'(LINE_BYTES);
          acc_q     <= comb >> LINE_W;
          fill_q    <= nf - FW'(LINE_BYTES);
          pos_q     <= pos_q + 32'(LINE_BYTES);
          if (in_frame_end) begin
            if (nf != FW'(LINE_BYTES)) tail_q <= 1'b1;
            else                       pos_q  <= '0;
          end
        end else if (in_frame_end && nf != '0) begin
          out_valid <= 1'b1;
          out_data  <= comb[LINE_W-1:0];
          out_pos   <= pos_q;
          out_cnt   <= (LINE_OFF_W+1)'(LINE_BYTES);
          acc_q     <= '0;
          fill_q    <= '0;
          pos_q     <= '0;
        end else begin
          acc_q  <= comb;
          fill_q <= nf;
        end
      end
    end
  end

  a_cnt: assert property (@(posedge clk) disable iff (!rst_n)
    in_valid |-> in_cnt != '0 && in_cnt <= (BUS_OFF_W+1)'(BUS_BYTES));

endmodule
