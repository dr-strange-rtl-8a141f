// tb_rng_request_handler: the handler with the real random number buffer and four modelled
// channels (a 4-entry RNG queue, then 40 cycles per 8-bit batch; buffer fills when
// granted). Random number requests arrive in bursts from random applications. Checks:
// responses come in request order with the right application; each response holds the
// next 64 delivered bits (so no bit is served twice); a request that finds a whole number
// in the buffer is answered the next cycle; every request is answered; and each path
// (served from the buffer, enqueued, served after generation, fill grant) occurs.
module tb_rng_request_handler;
  import drs_pkg::*;
  localparam int NC = 4, LAT = 40;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic req_valid, req_ready, resp_valid;
  app_t req_app, resp_app, ch_req_app;
  rn_t resp_data, buf_rn_data;
  logic buf_rn_valid, buf_space, buf_pop, buf_reserve, buf_full;
  logic [7:0] buf_avail, buf_inflight;
  logic [NC-1:0] ch_req_valid, ch_req_ready, fill_req, fill_gnt, done;
  batch_t bits [NC];
  logic ev_buffer_serve, ev_enqueue, ev_generated_serve;

  rng_request_handler #(.NUM_CH(NC)) dut (.*);
  rn_buffer #(.ENTRIES(16), .NUM_CH(NC)) u_buf (
    .clk, .rst_n, .push_valid(done), .push_data(bits), .reserve(buf_reserve), .pop(buf_pop),
    .rn_valid(buf_rn_valid), .rn_data(buf_rn_data), .space(buf_space), .avail(buf_avail),
    .inflight(buf_inflight), .full(buf_full));

  // channel models
  int qcnt [NC];
  int busy [NC];
  always_comb for (int c = 0; c < NC; c++) ch_req_ready[c] = qcnt[c] < 4;
  bit fill_on;
  always_ff @(posedge clk) begin
    for (int c = 0; c < NC; c++) begin
      done[c] <= 1'b0;
      if (busy[c] > 0) begin
        busy[c] <= busy[c] - 1;
        if (busy[c] == 1) begin done[c] <= 1'b1; bits[c] <= batch_t'($urandom); end
      end
      if (ch_req_valid[c]) qcnt[c] <= qcnt[c] + 1;
      if (busy[c] <= 1 && (qcnt[c] > 0 || fill_gnt[c])) begin
        busy[c] <= LAT;
        if (qcnt[c] > 0) qcnt[c] <= qcnt[c] + int'(ch_req_valid[c]) - 1;
      end
    end
  end
  always_comb for (int c = 0; c < NC; c++) fill_req[c] = fill_on && qcnt[c] == 0 && busy[c] <= 1;

  int checks = 0, failures = 0;
  int n_2a = 0, n_2b = 0, n_5 = 0, n_fill = 0, n_dem = 0, n_resp = 0, n_req = 0;
  app_t exp_app[$];
  batch_t stream[$];
  bit expect_next;
  app_t expect_app;

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

  // scoreboard
  always @(posedge clk) if (rst_n) begin
    for (int c = 0; c < NC; c++) if (done[c]) stream.push_back(bits[c]);
    if (ev_buffer_serve) n_2a++;
    if (ev_enqueue) n_2b++;
    if (ev_generated_serve) n_5++;
    n_fill += $countones(fill_gnt);
    n_dem  += $countones(ch_req_valid);
    if (req_valid && req_ready) begin exp_app.push_back(req_app); n_req++; end
  end
  always @(negedge clk) if (rst_n) begin
    if (expect_next) begin
      check(resp_valid && resp_app == expect_app, "buffer-served request answered next cycle");
      expect_next = 0;
    end
    if (resp_valid) begin
      n_resp++;
      check(exp_app.size() > 0 && resp_app == exp_app[0], "response order / application");
      if (exp_app.size() > 0) void'(exp_app.pop_front());
      check(stream.size() >= 8, "bits delivered before served");
      for (int k = 0; k < 8 && stream.size() > 0; k++) begin
        check(resp_data[k*8 +: 8] == stream[0], "response data");
        void'(stream.pop_front());
      end
    end
    if (ev_buffer_serve) begin expect_next = 1; expect_app = req_app; end
  end

  initial begin
    req_valid = 0; req_app = '0; fill_on = 0; expect_next = 0;
    foreach (qcnt[c]) begin qcnt[c] = 0; busy[c] = 0; bits[c] = '0; end
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;
    for (int ph = 0; ph < 40; ph++) begin
      fill_on = (ph % 3) != 2;
      // quiet time lets the buffer fill, then a burst of requests
      repeat ($urandom_range(100, 2000)) @(negedge clk);
      repeat ($urandom_range(5, 40)) begin
        @(negedge clk);
        req_valid = $urandom_range(0, 1);
        req_app   = app_t'($urandom_range(0, 15));
        @(posedge clk); #1 req_valid = 0;
      end
    end
    fill_on = 0;
    repeat (3000) @(negedge clk);
    check(n_resp == n_req && exp_app.size() == 0, "every request answered");
    check(n_2a > 0 && n_2b > 0 && n_5 > 0 && n_fill > 0 && n_dem > 0, "every path taken");
    $display("req=%0d resp=%0d buffer=%0d enqueued=%0d generated=%0d fills=%0d demand=%0d",
             n_req, n_resp, n_2a, n_2b, n_5, n_fill, n_dem);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
