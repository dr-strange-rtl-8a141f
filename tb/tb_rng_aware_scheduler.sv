// tb_rng_aware_scheduler: random traffic into an RNG queue and a read queue from 8
// applications (0-3 are RNG applications) with randomly changing priorities. Every cycle
// the selection is compared with a reference model of the scheduling rules. A directed
// phase then checks that a starved read queue is served after exactly STALL_LIMIT cycles.
module tb_rng_aware_scheduler;
  import drs_pkg::*;
  localparam int DEPTH = 8, LIMIT = 100;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  mem_req_t rd_entry [DEPTH], rng_entry [DEPTH];
  logic [DEPTH-1:0] rd_valid, rng_valid;
  prio_t app_prio [NUM_APPS];
  logic [NUM_APPS-1:0] app_is_rng;
  logic prio_changed, take;
  logic sel_rng, sel_read, ev_rng_prio, ev_read_prio, ev_age, ev_starve;

  rng_aware_scheduler #(.DEPTH(DEPTH), .STALL_LIMIT(LIMIT)) dut (.*);

  int checks = 0, failures = 0;
  int n_rp = 0, n_np = 0, n_age = 0, n_st = 0, n_burst = 0;
  mem_req_t rq[$], gq[$];   // read queue, RNG queue
  ts_t now = 0;
  bit  m_burst = 0, m_fav = 0;
  int  m_stall = 0;

  task automatic check(bit c, string msg);
    checks++;
    if (!c) begin failures++; if (failures < 10) $display("FAIL %s t=%0t", msg, $time); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic bit older(ts_t a, ts_t b);
    return signed'(16'(a - b)) < 0;
  endfunction

  // reference decision; returns {sel_rng, sel_read, kind} kind: 0 none 1 rp 2 np 3 age 4 starve
  task automatic model(output bit s_r, output bit s_d, output int kind, output bit prr, output bit prd);
    int pr = 0, pn = 0; bit hn = 0, both, ro;
    foreach (gq[i]) if (app_prio[gq[i].app] > pr) pr = app_prio[gq[i].app];
    foreach (rq[i]) if (!app_is_rng[rq[i].app]) begin hn = 1; if (app_prio[rq[i].app] > pn) pn = app_prio[rq[i].app]; end
    both = gq.size() > 0 && rq.size() > 0;
    prr = 0; prd = 0; kind = 0; s_r = 0; s_d = 0;
    if (!both) begin s_r = gq.size() > 0; s_d = !s_r && rq.size() > 0; return; end
    ro = older(gq[0].ts, rq[0].ts);
    if (m_burst) prr = 1;
    else if (!hn) begin s_r = ro; s_d = !ro; kind = ro ? 3 : 0; return; end
    else if (pr >= pn) prr = 1;
    else if (app_is_rng[rq[0].app] && ro) begin s_r = 1; kind = 3; return; end
    else prd = 1;
    if (m_stall >= LIMIT) begin s_r = prd; s_d = prr; kind = 4; end
    else begin s_r = prr; s_d = prd; kind = prr ? 1 : 2; end
  endtask

  task automatic drive_arrays();
    for (int i = 0; i < DEPTH; i++) begin
      rd_valid[i]  = i < rq.size();  rd_entry[i]  = (i < rq.size()) ? rq[i] : '0;
      rng_valid[i] = i < gq.size();  rng_entry[i] = (i < gq.size()) ? gq[i] : '0;
    end
  endtask

  task automatic step(int p_push_r, int p_push_d, int p_take, int p_prio);
    bit s_r, s_d, prr, prd; int kind;
    @(negedge clk);
    prio_changed = 0;
    if ($urandom_range(0, 999) < p_prio) begin
      app_prio[$urandom_range(0, 7)] = prio_t'($urandom_range(0, 3));
      prio_changed = 1;
    end
    if (gq.size() < DEPTH && $urandom_range(0, 99) < p_push_r)
      gq.push_back('{addr: '0, app: app_t'($urandom_range(0, 3)), ts: now});
    if (rq.size() < DEPTH && $urandom_range(0, 99) < p_push_d)
      rq.push_back('{addr: addr_t'($urandom), app: app_t'($urandom_range(0, 7)), ts: now});
    drive_arrays();
    take = $urandom_range(0, 99) < p_take;
    #1;
    model(s_r, s_d, kind, prr, prd);
    check(sel_rng == s_r && sel_read == s_d, $sformatf("sel got %b%b exp %b%b", sel_rng, sel_read, s_r, s_d));
    check(ev_rng_prio == (kind == 1) && ev_read_prio == (kind == 2) && ev_age == (kind == 3)
          && ev_starve == (kind == 4), "event flags");
    if (take) case (kind) 1: n_rp++; 2: n_np++; 3: n_age++; 4: n_st++; default: ; endcase
    if (m_burst && gq.size() > 0 && rq.size() > 0) n_burst++;
    @(posedge clk);
    // reference state update
    if (gq.size() == 0 || prio_changed) m_burst = 0;
    else if (take && kind == 1) m_burst = 1;
    if (prio_changed || !(prr || prd) || (prr != m_fav && m_stall != 0)) m_stall = 0;
    else if (take && kind == 4) m_stall = 0;
    else if (m_stall < LIMIT) m_stall++;
    m_fav = prr;
    if (take && s_r) void'(gq.pop_front());
    if (take && s_d) void'(rq.pop_front());
    now++;
  endtask

  initial begin
    for (int a = 0; a < NUM_APPS; a++) app_prio[a] = prio_t'(a % 4);
    app_is_rng = 16'h000f;
    prio_changed = 0; take = 0;
    drive_arrays();
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;
    for (int i = 0; i < 20000; i++)
      step(20 + (i / 2000 % 3) * 20, 40, 30 + (i / 3000 % 2) * 40, 5);
    #1;
    // Directed starvation check: a top-priority RNG application keeps its queue full.
    rq.delete(); gq.delete();
    for (int a = 0; a < 8; a++) app_prio[a] = (a == 0) ? 3'd7 : 3'd1;
    repeat (2) step(0, 0, 100, 0);   // empty queues clear the stall counter
    begin
      int first_stall, starve_at, st0;
      first_stall = -1; starve_at = -1; st0 = n_st;
      for (int i = 0; i < 300; i++) begin
        step(100, 100, 100, 0);
        if (first_stall < 0 && m_stall == 1) first_stall = i;
        if (starve_at < 0 && n_st > st0) starve_at = i;
      end
      $display("stall started %0d, starve pick %0d", first_stall, starve_at);
      // the counter reaches the limit after LIMIT stalled cycles; the next cycle serves the read
      check(starve_at - first_stall == LIMIT, "starvation limit timing");
    end
    check(n_rp > 0 && n_np > 0 && n_age > 0 && n_st > 0 && n_burst > 0, "every rule exercised");
    $display("rng_prio=%0d read_prio=%0d age=%0d starve=%0d burst=%0d", n_rp, n_np, n_age, n_st, n_burst);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
