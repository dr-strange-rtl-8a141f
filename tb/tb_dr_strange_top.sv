// tb_dr_strange_top: end-to-end run of the whole design with every parameter at its
// default (4 channels, 16-entry buffer, 32-entry queues, 256-entry predictor tables,
// stall limit 100). Four TRNG engine models (40 cycles per 8-bit batch) and command ports
// that are ready at random stand in for the DRAM side.
//
// Software is modelled as a register master: application 0 is an RNG application that
// reads RNG_DATA in bursts (and also makes ordinary reads), application 4 is a second,
// light RNG application, applications 1-3 make ordinary reads and writes. The run walks
// through quiet periods (the buffer fills), RNG bursts, heavy memory traffic and priority
// changes made through the PRIO registers.
//
// Checks: every random number request is answered, in order, by the right application,
// with the next 64 bits the TRNG engines delivered (no bit served twice); a request served
// from the buffer is answered the next cycle; every regular request is issued exactly once
// on the channel its address selects; no channel issues a command during its TRNG batch;
// RNG applications are marked. Each mechanism must occur at least once: buffer serve,
// enqueue, serve after generation, buffer full, fill batch, low-utilisation fill, fill
// stopped by a read, mode switch, on-demand batch, RNG-prioritised, read-prioritised and
// age-based picks, and a starvation-prevention pick.
module tb_dr_strange_top;
  import drs_pkg::*;
  localparam int NC = NUM_CHANNELS, LAT = 40;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic csr_valid, csr_write, csr_ready, rn_resp_valid;
  logic [7:0] csr_addr;
  logic [63:0] csr_wdata, csr_rdata;
  app_t csr_app, rn_resp_app, mem_req_app;
  rn_t rn_resp_data;
  logic mem_req_valid, mem_req_write, mem_req_ready;
  addr_t mem_req_addr;
  logic [NC-1:0] cmd_valid, cmd_write, cmd_ready, trng_start, trng_done, trng_busy;
  addr_t cmd_addr [NC];
  app_t cmd_app [NC];
  batch_t trng_bits [NC];
  exec_mode_e mode [NC];
  ch_events_t ch_ev [NC];
  logic buf_full, ev_buffer_serve, ev_enqueue, ev_generated_serve;

  dr_strange_top dut (.*);

  for (genvar c = 0; c < NC; c++) begin : g_trng
    trng_model #(.LATENCY(LAT)) u_trng (.clk, .rst_n, .start(trng_start[c]), .done(trng_done[c]),
                                        .bits(trng_bits[c]), .busy(trng_busy[c]));
  end

  int checks = 0, failures = 0;
  typedef enum int {E_BUF, E_ENQ, E_GEN, E_FULL, E_FILL, E_LOW, E_STOP, E_SW, E_DEM,
                    E_RP, E_NP, E_AGE, E_STARVE, E_N} ev_e;
  int cnt [E_N];
  string ev_name [E_N] = '{"buffer_serve", "enqueue", "generated_serve", "buffer_full",
                           "fill_batch", "lowutil_fill", "fill_stop", "mode_switch",
                           "demand_batch", "rng_prio_pick", "read_prio_pick", "age_pick",
                           "starve_pick"};
  app_t   exp_app[$];
  batch_t stream[$];
  int     pending [addr_t];
  int     n_req = 0, n_resp = 0, n_mem = 0, n_cmd = 0;
  bit     expect_next = 0;
  app_t   expect_app;
  bit     in_batch [NC];

  task automatic check(bit c, string msg);
    checks++;
    if (!c) begin failures++; if (failures < 10) $display("FAIL %s t=%0t", msg, $time); end
  endtask

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------------------------------------------------------- scoreboard
  always @(posedge clk) if (rst_n) begin
    for (int c = 0; c < NC; c++) begin
      if (trng_done[c]) stream.push_back(trng_bits[c]);
      if (cmd_valid[c] && cmd_ready[c]) begin
        check(int'(addr_channel(cmd_addr[c])) == c, "command on its address's channel");
        check(pending.exists(cmd_addr[c]), "command was requested");
        if (pending.exists(cmd_addr[c])) begin
          pending[cmd_addr[c]]--;
          if (pending[cmd_addr[c]] == 0) pending.delete(cmd_addr[c]);
        end
        check(!in_batch[c] || trng_done[c], "no command during a TRNG batch");
        n_cmd++;
      end
      if (trng_done[c]) in_batch[c] = 0;
      if (trng_start[c]) in_batch[c] = 1;
      if (ch_ev[c].fill_batch)     cnt[E_FILL]++;
      if (ch_ev[c].lowutil_fill)   cnt[E_LOW]++;
      if (ch_ev[c].fill_stop)      cnt[E_STOP]++;
      if (ch_ev[c].mode_switch)    cnt[E_SW]++;
      if (ch_ev[c].demand_batch)   cnt[E_DEM]++;
      if (ch_ev[c].rng_prio_pick)  cnt[E_RP]++;
      if (ch_ev[c].read_prio_pick) cnt[E_NP]++;
      if (ch_ev[c].age_pick)       cnt[E_AGE]++;
      if (ch_ev[c].starve_pick)    cnt[E_STARVE]++;
    end
    if (buf_full) cnt[E_FULL]++;
    if (ev_buffer_serve) cnt[E_BUF]++;
    if (ev_enqueue) cnt[E_ENQ]++;
    if (ev_generated_serve) cnt[E_GEN]++;
    if (mem_req_valid && mem_req_ready) begin
      pending[mem_req_addr] = pending.exists(mem_req_addr) ? pending[mem_req_addr] + 1 : 1;
      n_mem++;
    end
    if (csr_valid && csr_ready && !csr_write && csr_addr == 8'h00) begin
      exp_app.push_back(csr_app);
      n_req++;
    end
  end

  always @(negedge clk) if (rst_n) begin
    if (expect_next) begin
      check(rn_resp_valid && rn_resp_app == expect_app, "buffer hit answered next cycle");
      expect_next = 0;
    end
    if (rn_resp_valid) begin
      n_resp++;
      check(exp_app.size() > 0 && rn_resp_app == exp_app[0], "response order / application");
      if (exp_app.size() > 0) void'(exp_app.pop_front());
      check(stream.size() >= 8, "bits delivered before served");
      for (int k = 0; k < 8 && stream.size() > 0; k++) begin
        check(rn_resp_data[k*8 +: 8] == stream[0], "random number data");
        void'(stream.pop_front());
      end
    end
    if (ev_buffer_serve) begin expect_next = 1; expect_app = csr_app; end
  end

  // ---------------------------------------------------------------- drivers
  semaphore csr_lock = new(1);
  logic [63:0] last_rdata;

  task automatic csr_op(bit wr, logic [7:0] a, logic [63:0] d, app_t app);
    csr_lock.get(1);
    @(negedge clk);
    csr_valid = 1; csr_write = wr; csr_addr = a; csr_wdata = d; csr_app = app;
    @(posedge clk); #1;
    while (!csr_ready) begin @(posedge clk); #1; end
    last_rdata = csr_rdata;
    csr_valid = 0;
    csr_lock.put(1);
  endtask

  task automatic set_prio(int app, int p);
    csr_op(1, 8'h10 + 8'(app), 64'(p), '0);
  endtask

  task automatic rng_burst(int n, app_t app, int gap);
    repeat (n) begin
      csr_op(0, 8'h00, '0, app);
      repeat (gap) @(negedge clk);
    end
  endtask

  int uniq = 0;
  task automatic mem_op(bit wr, int app, int hot);
    @(negedge clk);
    mem_req_valid = 1; mem_req_write = wr; mem_req_app = app_t'(app);
    // hot lines repeat (one per channel) so the predictors learn; others are fresh
    mem_req_addr = (hot >= 0) ? addr_t'(hot << COL_BITS) : addr_t'({$urandom} ^ (uniq << 16));
    uniq++;
    @(posedge clk); #1;
    while (!mem_req_ready) begin @(posedge clk); #1; end
    mem_req_valid = 0;
  endtask

  task automatic mem_traffic(int n, int gap_max, int app_lo, int app_hi);
    repeat (n) begin
      mem_op($urandom_range(0, 3) == 0, $urandom_range(app_lo, app_hi), -1);
      repeat ($urandom_range(0, gap_max)) @(negedge clk);
    end
  endtask

  task automatic quiet(int rounds);
    repeat (rounds) begin
      for (int c = 0; c < NC; c++) mem_op(0, 1, c);
      repeat ($urandom_range(80, 200)) @(negedge clk);
    end
  endtask

  initial begin
    csr_valid = 0; csr_write = 0; csr_addr = 0; csr_wdata = 0; csr_app = 0;
    mem_req_valid = 0; mem_req_write = 0; mem_req_addr = '0; mem_req_app = '0;
    cmd_ready = '1;
    foreach (cnt[i]) cnt[i] = 0;
    foreach (in_batch[c]) in_batch[c] = 0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    fork
      forever begin @(negedge clk); for (int c = 0; c < NC; c++) cmd_ready[c] = $urandom_range(0, 7) != 0; end
    join_none

    for (int a = 0; a < 8; a++) set_prio(a, 2);

    for (int round = 0; round < 6; round++) begin
      // 1. quiet: predictors learn long idle periods, the buffer fills
      quiet(20);
      // 2. RNG application takes numbers, first from the buffer, then on demand,
      //    while light traffic keeps some channels at low utilisation
      fork
        rng_burst(40, 0, 4);
        mem_traffic(60, 30, 1, 3);
      join
      // 3. RNG application prioritised, heavy traffic from everybody: RNG bursts,
      //    starvation prevention
      set_prio(0, 6);
      fork
        rng_burst(40, 0, 0);
        mem_traffic(400, 1, 0, 3);
      join
      // 4. non-RNG applications prioritised; the RNG application also reads memory
      set_prio(0, 0); set_prio(4, 0);
      fork
        rng_burst(20, 0, 10);
        rng_burst(5, 4, 40);
        mem_traffic(400, 2, 0, 3);
      join
      set_prio(0, 2); set_prio(4, 2);
      repeat (2000) @(negedge clk);
    end
    repeat (5000) @(negedge clk);

    check(n_resp == n_req && exp_app.size() == 0, "every random number request answered");
    check(pending.size() == 0 && n_cmd == n_mem, "every memory request issued once");
    csr_op(0, 8'h01, '0, '0);  // RNG_APPS
    check(last_rdata[0] && last_rdata[4] && !last_rdata[1], "RNG applications marked");
    for (int i = 0; i < E_N; i++) begin
      $display("  %-16s %0d", ev_name[i], cnt[i]);
      check(cnt[i] > 0, {"mechanism never happened: ", ev_name[i]});
    end
    $display("rng requests=%0d answered=%0d memory requests=%0d issued=%0d", n_req, n_resp, n_mem, n_cmd);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
