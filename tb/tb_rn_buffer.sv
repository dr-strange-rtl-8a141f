// tb_rn_buffer: reservations, deliveries from up to four channels per cycle and 64-bit
// reads, against a byte-queue reference. Checks served data (oldest batch in the lowest
// byte), counts, the space flag at the 1024-bit capacity, and that no batch is served twice.
module tb_rn_buffer;
  import drs_pkg::*;
  localparam int NC = 4, SLOTS = 128;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [NC-1:0] push_valid;
  batch_t push_data [NC];
  logic reserve, pop, rn_valid, space, full;
  rn_t rn_data;
  logic [7:0] avail, inflight;

  rn_buffer #(.ENTRIES(16), .NUM_CH(NC)) dut (.*);

  int checks = 0, failures = 0, n_full = 0, n_nospace = 0, n_multi = 0, n_pop = 0;
  batch_t ref_q[$];
  int ref_inflight = 0;
  int seq = 0;

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
    push_valid = '0; reserve = 0; pop = 0;
    foreach (push_data[c]) push_data[c] = '0;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;
    for (int cyc = 0; cyc < 20000; cyc++) begin
      int npush, prd, ppop;
      @(negedge clk);
      // phases: filling (rare pops) and draining (rare reservations)
      prd  = ((cyc / 1500) % 2) ? 20 : 90;
      ppop = ((cyc / 1500) % 2) ? 70 : 10;
      check(int'(avail) == ref_q.size(), "avail");
      check(int'(inflight) == ref_inflight, "inflight");
      check(space == (ref_q.size() + ref_inflight < SLOTS), "space");
      check(full == (ref_q.size() == SLOTS), "full");
      check(rn_valid == (ref_q.size() >= 8), "rn_valid");
      if (ref_q.size() >= 8)
        for (int k = 0; k < 8; k++) check(rn_data[k*8 +: 8] == ref_q[k], "rn_data");
      if (full) n_full++;
      if (!space) n_nospace++;
      reserve = $urandom_range(0, 99) < prd;
      pop     = $urandom_range(0, 99) < ppop;
      npush   = 0;
      for (int c = 0; c < NC; c++) begin
        push_valid[c] = (npush < ref_inflight) && ($urandom_range(0, 99) < 40);
        if (push_valid[c]) begin
          npush++;
          push_data[c] = batch_t'(seq);  // distinct values expose duplicates
          seq++;
        end
      end
      if (npush > 1) n_multi++;
      @(posedge clk);
      if (pop && ref_q.size() >= 8) begin
        repeat (8) void'(ref_q.pop_front());
        n_pop++;
      end
      begin
        bit res_ok;
        res_ok = reserve && space;
        for (int c = 0; c < NC; c++) if (push_valid[c]) ref_q.push_back(push_data[c]);
        ref_inflight = ref_inflight + int'(res_ok) - npush;
      end
    end
    check(n_full > 0, "buffer never full");
    check(n_nospace > 0, "space never withheld");
    check(n_multi > 0, "no multi-channel delivery");
    check(n_pop > 100, "too few reads");
    $display("full=%0d nospace=%0d multi=%0d pops=%0d", n_full, n_nospace, n_multi, n_pop);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
