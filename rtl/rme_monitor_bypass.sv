// rme_monitor_bypass: the central controller of the RME.
//
// It serves two kinds of operation, one at a time:
//  * a CPU read {A, ID} from the Trapper. The line's Metadata SPM entry
//    and, speculatively, its Data SPM line are read. If the entry's epoch
//    P equals the current epoch the line is complete (hit) and {ID, RD}
//    goes back to the Trapper. Otherwise (miss) the ID is stored in the
//    entry and the read waits; the first miss after a reset starts the
//    Requestor.
//  * a write {line, byte enables, data} from the Fetch Unit's Writer. The
//    bytes go into the Data SPM and K grows by their count. When K
//    reaches 64 the line is complete: K returns to 0, P takes the current
//    epoch, and a read stalled on the line is answered at once with the
//    merged line.
// A software reset advances the epoch, which makes every line incomplete
// in one cycle, and re-arms the first-miss start. This much follows the
// paper. This design's own choices: each operation takes two cycles
// (read the SPMs, then decide and write), with writes from the Fetch Unit
// served before CPU reads; an ID is stored only if the line has no
// stalled read yet, and at most one read per AXI ID may be stalled, so
// answers for one ID leave in the order the reads came (a read that
// cannot be stalled waits at the head of the queue and is retried); the
// epoch runs 1..2^EPOCH_W-1, and after reset, and each time it wraps, all
// Metadata SPM entries are cleared to epoch 0 (one entry per cycle) so no
// stale line can look complete. A software reset is meant to be issued
// while no CPU read is stalled; reads stalled at that moment stay stalled
// until the line is filled again.
module rme_monitor_bypass
  import rme_pkg::*;
#(
  parameter int unsigned DEPTH = SPM_LINES,
  parameter int unsigned AW    = $clog2(DEPTH)
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               sw_reset,
  // from/to the Trapper
  input  logic               req_valid,
  output logic               req_ready,
  input  rme_cpu_req_t       req,
  output logic               resp_valid,
  input  logic               resp_ready,
  output rme_cpu_resp_t      resp,
  // from the Writer
  input  logic               wr_valid,
  output logic               wr_ready,
  input  rme_wr_t            wr,
  // to the Requestor
  output logic               start,
  // Metadata SPM
  output logic               meta_re,
  output logic [AW-1:0]      meta_raddr,
  input  rme_meta_t          meta_rdata,
  output logic               meta_we,
  output logic [AW-1:0]      meta_waddr,
  output rme_meta_t          meta_wdata,
  // Data SPM
  output logic               data_re,
  output logic [AW-1:0]      data_raddr,
  input  logic [LINE_W-1:0]  data_rdata,
  output logic               data_we,
  output logic [AW-1:0]      data_waddr,
  output logic [LINE_BYTES-1:0] data_wbe,
  output logic [LINE_W-1:0]  data_wdata,
  // status and event pulses
  output logic [EPOCH_W-1:0] epoch,
  output logic               ready,      // initial clear finished
  output logic               ev_hit,
  output logic               ev_miss,
  output logic               ev_release, // stalled read answered
  output logic               ev_retry    // read could not be stalled yet
);

  typedef enum logic [1:0] {S_INIT, S_IDLE, S_EVAL} state_e;
  typedef enum logic {OP_RD, OP_WR} op_e;

  localparam logic [EPOCH_W-1:0] EPOCH_MAX = '1;
  localparam int unsigned NID = 2**ID_W;

  state_e        state;
  op_e           op;
  logic [AW-1:0] line_q;
  logic [AW-1:0] init_q;
  logic          started;
  logic [NID-1:0] id_busy;
  // beat/len of the stalled read of each ID (at most one per ID)
  logic [BEAT_IDX_W-1:0] id_beat [NID];
  logic [BEAT_IDX_W-1:0] id_len  [NID];

  logic [LINE_OFF_W+1:0] wr_cnt;
  logic [LINE_OFF_W+1:0] k_new;
  logic [LINE_W-1:0]     merged;
  logic                  hit;

  assign ready = (state != S_INIT);

  always_comb begin
    wr_cnt = '0;
    for (int b = 0; b < LINE_BYTES; b++) wr_cnt += (LINE_OFF_W+2)'(wr.be[b]);
    k_new = (LINE_OFF_W+2)'(meta_rdata.count) + wr_cnt;
    for (int b = 0; b < LINE_BYTES; b++)
      merged[8*b +: 8] = wr.be[b] ? wr.data[8*b +: 8] : data_rdata[8*b +: 8];
    hit = (meta_rdata.epoch == epoch);
  end

  // --------- combinational decisions of the EVAL state ---------------
  logic do_pop_rd, do_pop_wr, rd_stall, wr_complete;
  always_comb begin
    do_pop_rd   = 1'b0;
    do_pop_wr   = 1'b0;
    rd_stall    = 1'b0;
    wr_complete = 1'b0;
    resp_valid  = 1'b0;
    resp        = '0;
    meta_we     = 1'b0;
    meta_waddr  = line_q;
    meta_wdata  = meta_rdata;
    data_we     = 1'b0;
    data_waddr  = line_q;
    data_wbe    = wr.be;
    data_wdata  = wr.data;
    ev_hit      = 1'b0;
    ev_miss     = 1'b0;
    ev_release  = 1'b0;
    ev_retry    = 1'b0;
    if (state == S_INIT) begin
      meta_we    = 1'b1;
      meta_waddr = init_q;
      meta_wdata = '0;
    end else if (state == S_EVAL && !sw_reset) begin
      if (op == OP_RD) begin
        if (id_busy[req.id]) begin
          ev_retry = 1'b1;                       // back to IDLE, retried
        end else if (hit) begin
          resp_valid = 1'b1;
          resp.beat  = req.beat;
          resp.len   = req.len;
          resp.id    = req.id;
          resp.data  = data_rdata;
          if (resp_ready) begin
            do_pop_rd = 1'b1;
            ev_hit    = 1'b1;
          end
        end else if (meta_rdata.pend) begin
          ev_retry = 1'b1;                       // line already has a waiter
        end else begin
          do_pop_rd       = 1'b1;
          rd_stall        = 1'b1;
          ev_miss         = 1'b1;
          meta_we         = 1'b1;
          meta_wdata.pend = 1'b1;
          meta_wdata.id   = req.id;
        end
      end else begin
        wr_complete = (k_new >= (LINE_OFF_W+2)'(LINE_BYTES));
        if (!(wr_complete && meta_rdata.pend)) begin
          do_pop_wr = 1'b1;
        end else begin
          resp_valid = 1'b1;
          resp.beat  = id_beat[meta_rdata.id];
          resp.len   = id_len[meta_rdata.id];
          resp.id    = meta_rdata.id;
          resp.data  = merged;
          if (resp_ready) begin
            do_pop_wr  = 1'b1;
            ev_release = 1'b1;
          end
        end
        if (do_pop_wr) begin
          data_we = 1'b1;
          meta_we = 1'b1;
          if (wr_complete) begin
            meta_wdata.epoch = epoch;
            meta_wdata.count = '0;
            meta_wdata.pend  = 1'b0;
          end else begin
            meta_wdata.count = (LINE_OFF_W+1)'(k_new);
          end
        end
      end
    end
  end

  assign req_ready = do_pop_rd;
  assign wr_ready  = do_pop_wr;

  // SPM reads are issued from IDLE; writes have priority over CPU reads.
  logic pick_wr, pick_rd;
  assign pick_wr = (state == S_IDLE) && !sw_reset && wr_valid;
  assign pick_rd = (state == S_IDLE) && !sw_reset && !wr_valid && req_valid;
  assign meta_re    = pick_wr || pick_rd;
  assign data_re    = meta_re;
  assign meta_raddr = pick_wr ? AW'(wr.line) : AW'(req.line);
  assign data_raddr = meta_raddr;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_INIT;
      op      <= OP_RD;
      line_q  <= '0;
      init_q  <= '0;
      epoch   <= EPOCH_W'(1);
      started <= 1'b0;
      start   <= 1'b0;
      id_busy <= '0;
      for (int k = 0; k < NID; k++) begin
        id_beat[k] <= '0;
        id_len[k]  <= '0;
      end
    end else begin
      start <= 1'b0;
      if (sw_reset) begin
        started <= 1'b0;
        if (epoch == EPOCH_MAX) begin
          epoch  <= EPOCH_W'(1);
          state  <= S_INIT;
          init_q <= '0;
        end else begin
          epoch <= epoch + EPOCH_W'(1);
          if (state != S_INIT) state <= S_IDLE;
        end
      end else begin
        unique case (state)
          S_INIT: begin
            init_q <= init_q + AW'(1);
            if (init_q == AW'(DEPTH - 1)) state <= S_IDLE;
          end
          S_IDLE: begin
            if (pick_wr) begin
              op <= OP_WR; line_q <= AW'(wr.line); state <= S_EVAL;
            end else if (pick_rd) begin
              op <= OP_RD; line_q <= AW'(req.line); state <= S_EVAL;
            end
          end
          S_EVAL: begin
            if (op == OP_RD) begin
              if (do_pop_rd || ev_retry) state <= S_IDLE;
              if (rd_stall) begin
                id_busy[req.id] <= 1'b1;
                id_beat[req.id] <= req.beat;
                id_len[req.id]  <= req.len;
                if (!started) begin
                  started <= 1'b1;
                  start   <= 1'b1;
                end
              end
            end else if (do_pop_wr) begin
              state <= S_IDLE;
              if (ev_release) id_busy[meta_rdata.id] <= 1'b0;
            end
          end
          default: state <= S_IDLE;
        endcase
      end
    end
  end

  a_resp_hold: assert property (@(posedge clk) disable iff (!rst_n || sw_reset)
    resp_valid && !resp_ready |=> resp_valid && $stable(resp));

endmodule
