// rme_requestor: turns the table geometry into a stream of request
// descriptors, one per (row i, column j) of the projection.
//
// Following the paper, the absolute byte position of column j in row i is
//   P(i,j) = R*i + sum_{k<=j} O_k                                  (Eq. 1)
// and each descriptor carries
//   R_addr  = (P // B_w) * B_w           bus-aligned read address  (Eq. 2)
//   R_burst = ceil((P % B_w + C_j) / B_w) beats to read            (Eq. 3)
//   W_addr  = i*S + sum_{k<j} C_k        byte position in the SPM  (Eq. 4)
//   E_s     = P % B_w                    leading bytes to drop      (Eq. 5)
//   E_e     = (P + C_j) % B_w            end of useful data, 0=full (Eq. 6)
// with S = sum_{k<Q} C_k the width of one projected row. The paper prints
// Eq. 4 as (i-1)*sum_{k=0}^{Q} C_k + ...; with i counted from 0 and Q
// columns numbered 0..Q-1 that would place row 0 at a negative address,
// so this design uses i and k<Q. R_addr is added to the table base,
// F << 12 (F read as a 4 KiB page frame number: this design's reading).
//
// All products are formed incrementally (adds only): one descriptor leaves
// per cycle while desc_ready is high. The walk starts on `start` (the
// Monitor Bypass's first miss after a reset) and stops after the last
// row, or earlier once the next projected row would no longer fit in the
// Data SPM; the final descriptor has `last` set. `flush` (software reset)
// returns it to idle at once. Q is clamped to MAX_COLS; rows with Q, N or
// S equal to zero produce nothing.
module rme_requestor
  import rme_pkg::*;
#(
  parameter int unsigned SPM_CAPACITY = SPM_BYTES   // bytes of the Data SPM
) (
  input  logic      clk,
  input  logic      rst_n,
  input  rme_cfg_t  cfg,
  input  logic      start,
  input  logic      flush,
  output logic      busy,
  output logic      desc_valid,
  input  logic      desc_ready,
  output rme_desc_t desc
);

  logic [3:0]  q_eff;
  logic [31:0] row_bytes;         // S
  always_comb begin
    q_eff = (cfg.col_count > 32'(MAX_COLS)) ? 4'(MAX_COLS) : cfg.col_count[3:0];
    row_bytes = '0;
    for (int k = 0; k < MAX_COLS; k++)
      if (k < int'(q_eff)) row_bytes += 32'(cfg.col_width[k]);
  end

  logic              running;
  logic [31:0]       i_q;         // row index
  logic [3:0]        j_q;         // column index
  logic [ADDR_W-1:0] rowbase_q;   // R*i
  logic [ADDR_W-1:0] colpos_q;    // sum_{k<=j} O_k
  logic [31:0]       wrow_q;      // i*S
  logic [31:0]       wcol_q;      // sum_{k<j} C_k

  logic [ADDR_W-1:0] pos, base, raddr;
  logic [15:0]       cw;
  logic [BUS_OFF_W-1:0] es, ee;
  logic [16:0]       span;
  logic              last_col, last_row, last_d;
  logic              advance;
  logic [15:0]       next_off;

  assign next_off = (int'(j_q) + 1 < MAX_COLS) ? cfg.col_offset[j_q + 4'd1] : 16'd0;

  assign base  = ADDR_W'(cfg.frame) << PAGE_SHIFT;
  assign pos   = rowbase_q + colpos_q;
  assign cw    = cfg.col_width[j_q];
  assign es    = pos[BUS_OFF_W-1:0];
  assign ee    = BUS_OFF_W'(pos + ADDR_W'(cw));
  assign span  = 17'(es) + 17'(cw) + 17'(BUS_BYTES - 1);
  assign raddr = base + {pos[ADDR_W-1:BUS_OFF_W], {BUS_OFF_W{1'b0}}};
  assign last_col = (j_q == q_eff - 4'd1);
  // the next row must fit entirely: (i+2)*S <= capacity
  assign last_row = (i_q == cfg.row_count - 32'd1) ||
                    (33'(wrow_q) + 33'(row_bytes) + 33'(row_bytes) > 33'(SPM_CAPACITY));
  assign last_d   = last_col && last_row;
  assign advance  = running && (!desc_valid || desc_ready);
  assign busy     = running || desc_valid;

  logic start_ok;
  assign start_ok = (q_eff != 0) && (cfg.row_count != 0) && (row_bytes != 0) &&
                    (row_bytes <= SPM_CAPACITY);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      running    <= 1'b0;
      desc_valid <= 1'b0;
      desc       <= '0;
      i_q <= '0; j_q <= '0; rowbase_q <= '0; colpos_q <= '0;
      wrow_q <= '0; wcol_q <= '0;
    end else if (flush) begin
      running    <= 1'b0;
      desc_valid <= 1'b0;
    end else begin
      if (desc_valid && desc_ready) desc_valid <= 1'b0;
      if (!running && start && start_ok) begin
        running   <= 1'b1;
        i_q       <= '0;
        j_q       <= '0;
        rowbase_q <= '0;
        colpos_q  <= ADDR_W'(cfg.col_offset[0]);
        wrow_q    <= '0;
        wcol_q    <= '0;
      end else if (advance) begin
        desc_valid  <= 1'b1;
        desc.raddr  <= raddr;
        desc.burst  <= BURST_W'(span >> BUS_OFF_W);
        desc.waddr  <= wrow_q + wcol_q;
        desc.es     <= es;
        desc.ee     <= ee;
        desc.last   <= last_d;
        if (last_d) running <= 1'b0;
        if (last_col) begin
          j_q       <= '0;
          i_q       <= i_q + 32'd1;
          rowbase_q <= rowbase_q + ADDR_W'(cfg.row_size);
          colpos_q  <= ADDR_W'(cfg.col_offset[0]);
          wrow_q    <= wrow_q + row_bytes;
          wcol_q    <= '0;
        end else begin
          j_q       <= j_q + 4'd1;
          colpos_q  <= colpos_q + ADDR_W'(next_off);
          wcol_q    <= wcol_q + 32'(cw);
        end
      end
    end
  end

  // A column may span at most MAX_COL_BYTES (the prototype's limit).
  a_colw: assert property (@(posedge clk) disable iff (!rst_n)
    advance |-> cw <= 16'(MAX_COL_BYTES));
  a_desc_hold: assert property (@(posedge clk) disable iff (!rst_n || flush)
    desc_valid && !desc_ready |=> desc_valid && $stable(desc));

endmodule
