// tb_app_interface: priority register writes and read-back, prio_changed pulses,
// RNG_DATA reads turning into tagged random number requests (with back-pressure), the
// marking of RNG applications on their first request, and write-one-to-clear of the marks.
module tb_app_interface;
  import drs_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic csr_valid, csr_write, csr_ready;
  logic [7:0] csr_addr;
  logic [63:0] csr_wdata, csr_rdata;
  app_t csr_app;
  logic rng_req_valid, rng_req_ready, prio_changed;
  app_t rng_req_app;
  prio_t app_prio [NUM_APPS];
  logic [NUM_APPS-1:0] app_is_rng;

  app_interface dut (.*);

  int checks = 0, failures = 0;
  prio_t ref_prio [NUM_APPS];
  logic [NUM_APPS-1:0] ref_rng;

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

  initial begin
    csr_valid = 0; csr_write = 0; csr_addr = 0; csr_wdata = 0; csr_app = 0; rng_req_ready = 1;
    foreach (ref_prio[a]) ref_prio[a] = '0;
    ref_rng = '0;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;
    for (int t = 0; t < 5000; t++) begin
      int op;
      bit was_prio_write;
      @(negedge clk);
      op = $urandom_range(0, 9);
      csr_valid = 1;
      csr_app = app_t'($urandom_range(0, NUM_APPS-1));
      rng_req_ready = $urandom_range(0, 3) != 0;
      was_prio_write = 0;
      if (op < 3) begin                 // write a priority
        csr_write = 1; csr_addr = 8'h10 + 8'($urandom_range(0, NUM_APPS-1));
        csr_wdata = {$urandom, $urandom};
        was_prio_write = 1;
      end else if (op < 5) begin        // read a priority
        csr_write = 0; csr_addr = 8'h10 + 8'($urandom_range(0, NUM_APPS-1));
      end else if (op < 8) begin        // random number request
        csr_write = 0; csr_addr = 8'h00;
      end else if (op < 9) begin        // read RNG application marks
        csr_write = 0; csr_addr = 8'h01;
      end else begin                    // clear some marks
        csr_write = 1; csr_addr = 8'h01; csr_wdata = 64'($urandom_range(0, 65535) & $urandom_range(0, 65535));
      end
      #1;
      // combinational checks
      if (csr_addr == 8'h00) begin
        check(rng_req_valid && rng_req_app == csr_app, "rng request");
        check(csr_ready == rng_req_ready, "ready follows handler");
      end else begin
        check(!rng_req_valid && csr_ready, "no rng request");
      end
      if (!csr_write && csr_addr >= 8'h10) check(csr_rdata == 64'(ref_prio[csr_addr - 8'h10]), "prio read");
      if (!csr_write && csr_addr == 8'h01) check(csr_rdata == 64'(ref_rng), "marks read");
      for (int a = 0; a < NUM_APPS; a++) check(app_prio[a] == ref_prio[a], "app_prio");
      check(app_is_rng == ref_rng, "app_is_rng");
      @(posedge clk);
      if (csr_write && csr_addr >= 8'h10) ref_prio[csr_addr - 8'h10] = csr_wdata[2:0];
      if (csr_write && csr_addr == 8'h01) ref_rng &= ~csr_wdata[15:0];
      else if (csr_addr == 8'h00 && rng_req_ready) ref_rng[csr_app] = 1'b1;
      @(negedge clk);
      csr_valid = 0;
      #1 check(prio_changed == was_prio_write, "prio_changed pulse");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
