// tb_req_queue: random pushes and pops (from any slot) against a reference queue.
// Checks count, ready, and every slot's contents in age order after each cycle.
module tb_req_queue;
  import drs_pkg::*;
  localparam int DEPTH = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic push_valid, push_ready, pop_valid;
  mem_req_t push_data;
  logic [$clog2(DEPTH)-1:0] pop_idx;
  mem_req_t entry [DEPTH];
  logic [DEPTH-1:0] valid;
  logic [$clog2(DEPTH+1)-1:0] count;

  req_queue #(.DEPTH(DEPTH)) dut (.*);

  int checks = 0, failures = 0;
  mem_req_t ref_q[$];
  int fulls = 0, pops_mid = 0;

  task automatic check(bit c, string msg);
    checks++;
    if (!c) begin failures++; if (failures < 10) $display("FAIL %s t=%0t", msg, $time); end
  endtask

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    push_valid = 0; pop_valid = 0; push_data = '0; pop_idx = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int cyc = 0; cyc < 4000; cyc++) begin
      @(negedge clk);
      // compare state
      check(count == ref_q.size(), "count");
      check(push_ready == (ref_q.size() < DEPTH), "push_ready");
      for (int i = 0; i < DEPTH; i++) begin
        check(valid[i] == (i < ref_q.size()), "valid");
        if (i < ref_q.size()) check(entry[i] == ref_q[i], "entry");
      end
      if (ref_q.size() == DEPTH) fulls++;
      // drive
      push_valid = ($urandom_range(0, 99) < ((cyc / 500) % 2 ? 70 : 40));
      push_data  = mem_req_t'({$urandom, $urandom});
      pop_valid  = (ref_q.size() > 0) && ($urandom_range(0, 99) < 50);
      pop_idx    = (ref_q.size() > 0) ? $urandom_range(0, ref_q.size() - 1) : 0;
      @(posedge clk);
      #1;
      begin
        bit pushed;
        pushed = push_valid && (ref_q.size() < DEPTH);
        if (pop_valid) begin
          if (pop_idx != 0 && pop_idx != ref_q.size() - 1) pops_mid++;
          ref_q.delete(pop_idx);
        end
        if (pushed) ref_q.push_back(push_data);
      end
    end
    check(fulls > 0, "queue never became full");
    check(pops_mid > 0, "no pop from the middle");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
