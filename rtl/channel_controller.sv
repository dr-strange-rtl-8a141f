// channel_controller: the DR-STRaNGe part of one DRAM channel's memory controller.
//
// Each channel holds a regular read queue, a write queue and a separate RNG queue (32
// entries each), a simple idleness predictor and an RNG-aware scheduler. It is always in
// one of two execution modes:
//   Regular Execution Mode - it issues regular reads (FR-FCFS with a column cap) and
//                            writes on its command port;
//   RNG Mode               - a TRNG batch runs on all banks of the channel; regular
//                            requests wait, because the reduced timing used to make random
//                            bits could corrupt data in other rows.
// Whenever no batch is running the channel decides what to do next, in this order:
//   1. an on-demand RNG request, when the RNG-aware scheduler selects the RNG queue;
//   2. a buffer-filling batch, when the idleness predictor expects a long idle or
//      low-utilisation period (fill_go), the RNG queue is empty, the buffer grants space
//      (fill_req/fill_gnt) and no regular read has interrupted filling since the last read
//      was issued. Filling while reads wait is the low-utilisation mode: it stalls the few
//      waiting reads;
//   3. a regular read selected by the scheduler, unless the write queue is full;
//   4. a write, when no read was selected or the write queue is full.
// Starting a batch puts the channel in RNG Mode; trng_done returns it to Regular Execution
// Mode unless another batch starts in the same cycle, so an idle channel keeps filling the
// buffer batch after batch. A regular read arriving during a fill batch ends the fill run
// after that batch (at least 8 bits are always completed).
//
// The modes, the predictor, the RNG queue, the scheduling rules and the stop conditions
// follow the paper. The decision order, the write-drain rule (writes when no read is
// chosen or the write queue is full), open-page bank tracking, closing all rows after a
// TRNG batch and the interrupt-until-next-read rule are this design's choices.
//
// Timing: one decision per cycle; a command is issued when cmd_valid && cmd_ready. The
// TRNG engine is started with a one-cycle trng_start pulse and answers with trng_done.
module channel_controller
  import drs_pkg::*;
#(
  parameter int unsigned RD_DEPTH    = 32,
  parameter int unsigned WR_DEPTH    = 32,
  parameter int unsigned RNG_DEPTH   = 32,
  parameter int unsigned PRED_ENTRIES = 256,
  parameter int unsigned PERIOD_THRESHOLD   = 40,
  parameter int unsigned LOW_UTIL_THRESHOLD = 4,
  parameter int unsigned STALL_LIMIT = 100,
  parameter int unsigned COLUMN_CAP  = 16
) (
  input  logic        clk,
  input  logic        rst_n,
  // regular requests routed to this channel
  input  logic        req_valid,
  input  logic        req_write,
  input  addr_t       req_addr,
  input  app_t        req_app,
  output logic        req_ready,
  // on-demand RNG requests (one 8-bit batch each)
  input  logic        rng_req_valid,
  input  app_t        rng_req_app,
  output logic        rng_req_ready,
  // application state
  input  prio_t       app_prio [NUM_APPS],
  input  logic [NUM_APPS-1:0] app_is_rng,
  input  logic        prio_changed,
  // buffer-fill space request and grant
  output logic        fill_req,
  input  logic        fill_gnt,
  // regular command port towards the DRAM command backend
  output logic        cmd_valid,
  output logic        cmd_write,
  output addr_t       cmd_addr,
  output app_t        cmd_app,
  input  logic        cmd_ready,
  // TRNG engine of this channel
  output logic        trng_start,
  input  logic        trng_done,
  // status
  output exec_mode_e  mode,
  output ch_events_t  ev
);

  localparam int unsigned SW = $clog2(COLUMN_CAP+1);
  localparam int unsigned RDI = $clog2(RD_DEPTH);
  localparam int unsigned WRI = $clog2(WR_DEPTH);
  localparam int unsigned RDC = $clog2(RD_DEPTH+1);
  localparam int unsigned WRC = $clog2(WR_DEPTH+1);
  localparam int unsigned QCW = (RDC > WRC) ? RDC : WRC;

  ts_t ts_q;

  // ------------------------------------------------------------------ queues
  mem_req_t in_req;
  assign in_req = '{addr: req_addr, app: req_app, ts: ts_q};

  mem_req_t rd_e [RD_DEPTH];
  mem_req_t wr_e [WR_DEPTH];
  mem_req_t rng_e [RNG_DEPTH];
  logic [RD_DEPTH-1:0]  rd_v;
  logic [WR_DEPTH-1:0]  wr_v;
  logic [RNG_DEPTH-1:0] rng_v;
  logic [RDC-1:0] rd_cnt;
  logic [WRC-1:0] wr_cnt;
  logic [$clog2(RNG_DEPTH+1)-1:0] rng_cnt;
  logic rd_push_ready, wr_push_ready;
  logic rd_pop, wr_pop, rng_pop;
  logic [RDI-1:0] rd_pick_idx;
  logic [WRI-1:0] wr_pick_idx;
  logic rd_pick_valid, wr_pick_valid, rd_pick_hit, wr_pick_hit;
  logic rd_accept, wr_accept;

  assign req_ready = req_write ? wr_push_ready : rd_push_ready;
  assign rd_accept = req_valid && !req_write && rd_push_ready;
  assign wr_accept = req_valid &&  req_write && wr_push_ready;

  req_queue #(.DEPTH(RD_DEPTH)) u_rdq (
    .clk, .rst_n, .push_valid(req_valid && !req_write), .push_data(in_req),
    .push_ready(rd_push_ready), .pop_valid(rd_pop), .pop_idx(rd_pick_idx),
    .entry(rd_e), .valid(rd_v), .count(rd_cnt));

  req_queue #(.DEPTH(WR_DEPTH)) u_wrq (
    .clk, .rst_n, .push_valid(req_valid && req_write), .push_data(in_req),
    .push_ready(wr_push_ready), .pop_valid(wr_pop), .pop_idx(wr_pick_idx),
    .entry(wr_e), .valid(wr_v), .count(wr_cnt));

  req_queue #(.DEPTH(RNG_DEPTH)) u_rngq (
    .clk, .rst_n, .push_valid(rng_req_valid),
    .push_data('{addr: '0, app: rng_req_app, ts: ts_q}),
    .push_ready(rng_req_ready), .pop_valid(rng_pop), .pop_idx('0),
    .entry(rng_e), .valid(rng_v), .count(rng_cnt));

  // ------------------------------------------------------------------ bank state, FR-FCFS
  logic [NUM_BANKS-1:0] open_v_q;
  row_t                 open_row_q [NUM_BANKS];
  logic [SW-1:0]        streak_q   [NUM_BANKS];

  frfcfs_picker #(.DEPTH(RD_DEPTH), .CAP(COLUMN_CAP), .SW(SW)) u_rd_pick (
    .entry(rd_e), .valid(rd_v), .open_valid(open_v_q), .open_row(open_row_q),
    .hit_streak(streak_q), .pick_valid(rd_pick_valid), .pick_idx(rd_pick_idx),
    .pick_hit(rd_pick_hit));

  frfcfs_picker #(.DEPTH(WR_DEPTH), .CAP(COLUMN_CAP), .SW(SW)) u_wr_pick (
    .entry(wr_e), .valid(wr_v), .open_valid(open_v_q), .open_row(open_row_q),
    .hit_streak(streak_q), .pick_valid(wr_pick_valid), .pick_idx(wr_pick_idx),
    .pick_hit(wr_pick_hit));

  // ------------------------------------------------------------------ predictor
  logic pred_idle, pred_low, pred_long, fill_go;
  logic [7:0] idle_len;
  idleness_predictor #(
    .ENTRIES(PRED_ENTRIES), .PERIOD_THRESHOLD(PERIOD_THRESHOLD),
    .LOW_UTIL_THRESHOLD(LOW_UTIL_THRESHOLD), .QCW(QCW)
  ) u_pred (
    .clk, .rst_n, .rd_count(QCW'(rd_cnt)), .wr_count(QCW'(wr_cnt)),
    .req_valid(rd_accept || wr_accept), .req_addr(req_addr),
    .idle(pred_idle), .low_util(pred_low), .predict_long(pred_long),
    .fill_go(fill_go), .idle_len(idle_len));

  // ------------------------------------------------------------------ scheduler
  logic sel_rng, sel_read, take;
  logic s_rng_prio, s_read_prio, s_age, s_starve;
  rng_aware_scheduler #(.DEPTH(RD_DEPTH), .STALL_LIMIT(STALL_LIMIT)) u_sched (
    .clk, .rst_n, .rd_entry(rd_e), .rd_valid(rd_v), .rng_entry(rng_e), .rng_valid(rng_v),
    .app_prio, .app_is_rng, .prio_changed, .take,
    .sel_rng, .sel_read, .ev_rng_prio(s_rng_prio), .ev_read_prio(s_read_prio),
    .ev_age(s_age), .ev_starve(s_starve));

  // ------------------------------------------------------------------ decision
  exec_mode_e mode_q;
  logic       fill_batch_q;     // the running batch fills the buffer
  logic       fill_block_q;     // a read interrupted filling; no new fill until a read issues
  logic       free, start_demand, start_fill, issue_read, issue_write, wr_full;

  assign free         = (mode_q == MODE_REGULAR) || trng_done;
  assign wr_full      = !wr_push_ready;
  assign start_demand = free && sel_rng;
  assign fill_req     = free && !sel_rng && (rng_cnt == '0) && fill_go && !fill_block_q;
  assign start_fill   = fill_req && fill_gnt;
  assign issue_read   = free && !start_demand && !start_fill && sel_read && !wr_full
                        && rd_pick_valid && cmd_ready;
  assign issue_write  = free && !start_demand && !start_fill && !issue_read
                        && wr_pick_valid && cmd_ready && (wr_full || !sel_read);
  assign take         = start_demand || issue_read;

  assign rng_pop    = start_demand;
  assign rd_pop     = issue_read;
  assign wr_pop     = issue_write;
  assign trng_start = start_demand || start_fill;

  assign cmd_valid = issue_read || issue_write;
  assign cmd_write = issue_write;
  assign cmd_addr  = issue_write ? wr_e[wr_pick_idx].addr : rd_e[rd_pick_idx].addr;
  assign cmd_app   = issue_write ? wr_e[wr_pick_idx].app  : rd_e[rd_pick_idx].app;
  assign mode      = mode_q;

  logic fill_interrupt;
  assign fill_interrupt = (mode_q == MODE_RNG) && fill_batch_q && rd_accept;

  always_comb begin
    ev                = '0;
    ev.demand_batch   = start_demand;
    ev.fill_batch     = start_fill;
    ev.lowutil_fill   = start_fill && (rd_cnt != '0);
    ev.fill_stop      = fill_interrupt && !fill_block_q;
    ev.mode_switch    = trng_start && (mode_q == MODE_REGULAR);
    ev.rng_prio_pick  = take && s_rng_prio;
    ev.read_prio_pick = take && s_read_prio;
    ev.age_pick       = take && s_age;
    ev.starve_pick    = take && s_starve;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ts_q         <= '0;
      mode_q       <= MODE_REGULAR;
      fill_batch_q <= 1'b0;
      fill_block_q <= 1'b0;
      open_v_q     <= '0;
      for (int b = 0; b < NUM_BANKS; b++) begin
        open_row_q[b] <= '0;
        streak_q[b]   <= '0;
      end
    end else begin
      ts_q <= ts_q + ts_t'(1);

      if (trng_start) begin
        mode_q       <= MODE_RNG;
        fill_batch_q <= start_fill;
      end else if (trng_done) begin
        mode_q       <= MODE_REGULAR;
        fill_batch_q <= 1'b0;
      end

      if (issue_read)          fill_block_q <= 1'b0;
      else if (fill_interrupt) fill_block_q <= 1'b1;

      // Open-page bank tracking; a TRNG batch uses reserved rows in every bank.
      if (trng_done) begin
        open_v_q <= '0;
      end else if (cmd_valid) begin
        if (open_v_q[addr_bank(cmd_addr)] && open_row_q[addr_bank(cmd_addr)] == addr_row(cmd_addr)) begin
          if (streak_q[addr_bank(cmd_addr)] != '1)
            streak_q[addr_bank(cmd_addr)] <= streak_q[addr_bank(cmd_addr)] + SW'(1);
        end else begin
          open_v_q[addr_bank(cmd_addr)]   <= 1'b1;
          open_row_q[addr_bank(cmd_addr)] <= addr_row(cmd_addr);
          streak_q[addr_bank(cmd_addr)]   <= '0;
        end
      end
    end
  end

  // A TRNG completion only arrives while a batch runs.
  assert property (@(posedge clk) disable iff (!rst_n) trng_done |-> mode_q == MODE_RNG)
    else $error("channel_controller: trng_done outside RNG Mode");
  // No regular command is issued in RNG Mode (other than in the cycle the batch ends).
  assert property (@(posedge clk) disable iff (!rst_n) cmd_valid |-> free)
    else $error("channel_controller: command issued during a TRNG batch");

endmodule
