// tb_channel_controller: one channel with a TRNG engine model (40 cycles per batch) and a
// command port that is ready at random. Traffic alternates between idle stretches with
// occasional reads from a few addresses (so the predictor learns long idle periods),
// light traffic, heavy read/write bursts and on-demand RNG requests, under changing
// priorities. Checks: every accepted read and write is issued exactly once; no regular
// command is issued while a TRNG batch runs; every batch keeps the channel in RNG Mode for
// exactly the engine latency; every on-demand RNG request starts exactly one batch; fill
// batches only start with a grant; and each mechanism (fill, low-utilisation fill, fill
// stopped by a read, mode switch, RNG- and read-prioritised picks) happens.
module tb_channel_controller;
  import drs_pkg::*;
  localparam int LAT = 40;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic req_valid, req_write, req_ready, rng_req_valid, rng_req_ready;
  addr_t req_addr, cmd_addr;
  app_t req_app, rng_req_app, cmd_app;
  prio_t app_prio [NUM_APPS];
  logic [NUM_APPS-1:0] app_is_rng;
  logic prio_changed, fill_req, fill_gnt, cmd_valid, cmd_write, cmd_ready;
  logic trng_start, trng_done, trng_busy;
  batch_t trng_bits;
  exec_mode_e mode;
  ch_events_t ev;

  channel_controller dut (.*);
  trng_model #(.LATENCY(LAT)) u_trng (.clk, .rst_n, .start(trng_start), .done(trng_done),
                                      .bits(trng_bits), .busy(trng_busy));

  int checks = 0, failures = 0;
  int n_fill = 0, n_low = 0, n_stop = 0, n_sw = 0, n_dem = 0, n_rp = 0, n_np = 0, n_starve = 0;
  int n_rng_acc = 0, n_issued = 0, n_acc = 0;
  int pending [addr_t];
  int batch_len = 0;
  bit in_batch = 0, gnt_ok = 0;

  task automatic check(bit c, string msg);
    checks++;
    if (!c) begin failures++; if (failures < 10) $display("FAIL %s t=%0t", msg, $time); end
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n) begin
    if (req_valid && req_ready) begin
      pending[req_addr] = pending.exists(req_addr) ? pending[req_addr] + 1 : 1;
      n_acc++;
    end
    if (cmd_valid && cmd_ready) begin
      check(pending.exists(cmd_addr) && pending[cmd_addr] > 0, "issued request was accepted");
      if (pending.exists(cmd_addr)) begin
        pending[cmd_addr]--;
        if (pending[cmd_addr] == 0) pending.delete(cmd_addr);
      end
      check(!in_batch || trng_done, "no command during a TRNG batch");
      n_issued++;
    end
    check(!cmd_valid || cmd_ready, "cmd_valid only with cmd_ready");
    if (rng_req_valid && rng_req_ready) n_rng_acc++;
    // batch length
    if (in_batch) batch_len++;
    if (trng_done) begin
      check(batch_len == LAT, $sformatf("batch length %0d", batch_len));
      in_batch = 0;
    end
    if (trng_start) begin
      check(!in_batch, "batch started while another runs");
      in_batch = 1; batch_len = 0;
    end
    check(mode == (in_batch ? MODE_RNG : MODE_REGULAR) || trng_start || trng_done, "mode");
    if (ev.fill_batch) begin n_fill++; check(fill_gnt && fill_req, "fill needs a grant"); end
    if (ev.lowutil_fill) n_low++;
    if (ev.fill_stop) n_stop++;
    if (ev.mode_switch) n_sw++;
    if (ev.demand_batch) n_dem++;
    if (ev.rng_prio_pick) n_rp++;
    if (ev.read_prio_pick) n_np++;
    if (ev.starve_pick) n_starve++;
    check(trng_start == (ev.fill_batch || ev.demand_batch), "start = fill or demand");
  end

  int rowctr = 0;
  task automatic send(bit wr, int app, int hot);
    @(negedge clk);
    req_valid = 1; req_write = wr; req_app = app_t'(app);
    // hot addresses repeat (predictor training); others are unique
    req_addr = hot >= 0 ? addr_t'(hot * 4096) : addr_t'({$urandom} ^ (rowctr << 12));
    rowctr++;
    @(posedge clk); #1;
    while (!req_ready) begin @(posedge clk); #1; end
    req_valid = 0;
  endtask

  initial begin
    req_valid = 0; req_write = 0; req_addr = '0; req_app = '0;
    rng_req_valid = 0; rng_req_app = '0; prio_changed = 0; fill_gnt = 0; cmd_ready = 1;
    for (int a = 0; a < NUM_APPS; a++) app_prio[a] = 3'd1;
    app_is_rng = 16'h0001;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;
    fork
      forever begin @(negedge clk); cmd_ready = $urandom_range(0, 9) != 0; end
      forever begin @(negedge clk); fill_gnt = fill_req && ($urandom_range(0, 4) != 0); end
    join_none
    for (int ph = 0; ph < 60; ph++) begin
      int kind;
      kind = ph % 4;
      @(negedge clk);
      app_prio[0] = (ph % 8 < 4) ? 3'd5 : 3'd0;     // RNG app high, then low
      prio_changed = 1; @(negedge clk); prio_changed = 0;
      case (kind)
        0: repeat (6) begin                         // idle: sparse reads to hot addresses
             send(0, 1, $urandom_range(0, 1));
             repeat ($urandom_range(60, 200)) @(negedge clk);
           end
        1: repeat (40) begin                        // light traffic
             send($urandom_range(0, 3) == 0, 2, $urandom_range(0, 1));
             repeat ($urandom_range(5, 30)) @(negedge clk);
           end
        2: fork                                     // heavy traffic with RNG demand
             repeat (150) send($urandom_range(0, 2) == 0, $urandom_range(0, 3), -1);
             repeat (12) begin
               @(negedge clk);
               rng_req_valid = 1; rng_req_app = 0;
               @(posedge clk); #1;
               while (!rng_req_ready) begin @(posedge clk); #1; end
               rng_req_valid = 0;
               repeat ($urandom_range(0, 20)) @(negedge clk);
             end
           join
        default: repeat (300) @(negedge clk);       // drain
      endcase
    end
    repeat (3000) @(negedge clk);
    check(pending.size() == 0, "every accepted request issued");
    check(n_dem == n_rng_acc, "one batch per RNG request");
    check(n_fill > 0 && n_low > 0 && n_stop > 0 && n_sw > 0 && n_dem > 0 && n_rp > 0 && n_np > 0,
          "every mechanism happened");
    $display("acc=%0d issued=%0d fill=%0d lowutil=%0d stop=%0d switch=%0d demand=%0d rngprio=%0d readprio=%0d starve=%0d",
             n_acc, n_issued, n_fill, n_low, n_stop, n_sw, n_dem, n_rp, n_np, n_starve);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
