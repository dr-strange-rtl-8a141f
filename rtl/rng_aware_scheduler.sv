// rng_aware_scheduler: chooses, for one channel, between the regular read queue and the
// RNG queue.
//
// The choice follows the priorities the OS gives the applications that have requests
// waiting. pR is the highest priority among the RNG queue's requesters; pN the highest
// among the non-RNG applications with a request in the read queue (reads of RNG
// applications do not count towards pN). When only one queue holds requests it is chosen.
// When both do:
//   * RNG prioritized (pR > pN) and equal priorities (pR == pN): the RNG queue is chosen,
//     and kept chosen until it has been emptied (an RNG burst).
//   * Non-RNG prioritized (pN > pR): the read queue is chosen, except while the oldest
//     read is from an RNG application and arrived after the oldest RNG request; then the
//     older RNG requests go first.
//   * Only RNG applications have reads waiting: the older of the two queue heads goes.
//   * Starvation prevention: every cycle in which a priority decision keeps the other
//     queue waiting increments the stall time counter; once it reaches STALL_LIMIT (100)
//     the deprioritised queue is chosen. The counter clears when a deprioritised request
//     is scheduled, when priorities change, or when nothing is being held back.
// Inside each queue the requests are taken oldest first (RNG) or by FR-FCFS (reads), by
// other logic. The rules above are the paper's; the handling of reads that come only from
// RNG applications, and clearing the counter when nothing is held back, are this design's.
//
// Interface: sel_rng / sel_read are combinational and valid every cycle; `take` tells the
// scheduler that the controller acted on the selection this cycle (state advances then).
module rng_aware_scheduler
  import drs_pkg::*;
#(
  parameter int unsigned DEPTH       = 32,
  parameter int unsigned STALL_LIMIT = 100
) (
  input  logic              clk,
  input  logic              rst_n,
  input  mem_req_t          rd_entry  [DEPTH],
  input  logic [DEPTH-1:0]  rd_valid,
  input  mem_req_t          rng_entry [DEPTH],
  input  logic [DEPTH-1:0]  rng_valid,
  input  prio_t             app_prio  [NUM_APPS],
  input  logic [NUM_APPS-1:0] app_is_rng,
  input  logic              prio_changed,
  input  logic              take,
  output logic              sel_rng,
  output logic              sel_read,
  output logic              ev_rng_prio,
  output logic              ev_read_prio,
  output logic              ev_age,
  output logic              ev_starve
);

  localparam int unsigned SCW = $clog2(STALL_LIMIT+1);

  logic           burst_q;
  logic [SCW-1:0] stall_q;
  logic           fav_rng_q;

  logic  has_r, has_rd, has_n;
  prio_t p_r, p_n;

  always_comb begin
    has_r  = |rng_valid;
    has_rd = |rd_valid;
    has_n  = 1'b0;
    p_r    = '0;
    p_n    = '0;
    for (int i = 0; i < DEPTH; i++) begin
      if (rng_valid[i] && app_prio[rng_entry[i].app] > p_r) p_r = app_prio[rng_entry[i].app];
      if (rd_valid[i] && !app_is_rng[rd_entry[i].app]) begin
        has_n = 1'b1;
        if (app_prio[rd_entry[i].app] > p_n) p_n = app_prio[rd_entry[i].app];
      end
    end
  end

  // Decision before starvation prevention.
  logic both, prio_rng, prio_read, age_rng, age_read, rng_older;
  always_comb begin
    both      = has_r && has_rd;
    rng_older = ts_older(rng_entry[0].ts, rd_entry[0].ts);
    prio_rng  = 1'b0;
    prio_read = 1'b0;
    age_rng   = 1'b0;
    age_read  = 1'b0;
    if (both) begin
      if (burst_q)                 prio_rng = 1'b1;
      else if (!has_n)             begin age_rng = rng_older; age_read = !rng_older; end
      else if (p_r >= p_n)         prio_rng = 1'b1;
      else if (app_is_rng[rd_entry[0].app] && rng_older) age_rng = 1'b1;
      else                         prio_read = 1'b1;
    end
  end

  logic limit_hit;
  assign limit_hit = (32'(stall_q) >= STALL_LIMIT);

  always_comb begin
    ev_rng_prio  = 1'b0;
    ev_read_prio = 1'b0;
    ev_age       = 1'b0;
    ev_starve    = 1'b0;
    sel_rng      = 1'b0;
    sel_read     = 1'b0;
    if (!both) begin
      sel_rng  = has_r;
      sel_read = has_rd && !has_r;
    end else if ((prio_rng || prio_read) && limit_hit) begin
      ev_starve = 1'b1;
      sel_rng   = prio_read;
      sel_read  = prio_rng;
    end else begin
      sel_rng      = prio_rng || age_rng;
      sel_read     = prio_read || age_read;
      ev_rng_prio  = prio_rng;
      ev_read_prio = prio_read;
      ev_age       = age_rng;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      burst_q   <= 1'b0;
      stall_q   <= '0;
      fav_rng_q <= 1'b0;
    end else begin
      // RNG burst: kept until the RNG queue has drained.
      if (!has_r || prio_changed)            burst_q <= 1'b0;
      else if (take && ev_rng_prio)          burst_q <= 1'b1;

      // Stall time counter.
      fav_rng_q <= prio_rng;
      if (prio_changed || !(prio_rng || prio_read) || (prio_rng != fav_rng_q && stall_q != '0))
        stall_q <= '0;
      else if (take && ev_starve)
        stall_q <= '0;
      else if (!limit_hit)
        stall_q <= stall_q + SCW'(1);
    end
  end

endmodule
