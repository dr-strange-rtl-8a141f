// tb_frfcfs_picker: random queue contents, open rows and hit counters; the chosen slot is
// compared with a reference FR-FCFS + column-cap selection written independently here.
module tb_frfcfs_picker;
  import drs_pkg::*;
  localparam int DEPTH = 32, CAP = 16, SW = 5;

  mem_req_t entry [DEPTH];
  logic [DEPTH-1:0] valid;
  logic [NUM_BANKS-1:0] open_valid;
  row_t open_row [NUM_BANKS];
  logic [SW-1:0] hit_streak [NUM_BANKS];
  logic pick_valid, pick_hit;
  logic [$clog2(DEPTH)-1:0] pick_idx;

  frfcfs_picker #(.DEPTH(DEPTH), .CAP(CAP), .SW(SW)) dut (.*);

  int checks = 0, failures = 0, hits_seen = 0, capped_seen = 0, oldest_seen = 0;

  task automatic check(bit c, string msg);
    checks++;
    if (!c) begin failures++; if (failures < 10) $display("FAIL %s", msg); end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 5000; t++) begin
      int n, exp_idx, exp_hit;
      bit capped_hit_present;
      n = $urandom_range(0, DEPTH);
      valid = '0;
      for (int b = 0; b < NUM_BANKS; b++) begin
        open_valid[b] = $urandom_range(0, 3) != 0;
        open_row[b]   = row_t'($urandom_range(0, 3));
        hit_streak[b] = SW'($urandom_range(0, 2) == 0 ? $urandom_range(CAP, 31) : $urandom_range(0, CAP-1));
      end
      for (int i = 0; i < DEPTH; i++) begin
        // rows 0..3 so that hits are common; the layout is {row, bank, channel, column}
        entry[i] = '{addr: {row_t'($urandom_range(0, 3)), bank_t'($urandom_range(0, NUM_BANKS-1)),
                            CH_BITS'($urandom), COL_BITS'($urandom)},
                     app: app_t'($urandom), ts: ts_t'($urandom)};
        valid[i] = i < n;
      end
      #1;
      exp_idx = -1; exp_hit = 0; capped_hit_present = 0;
      for (int i = 0; i < n; i++) begin
        int b, r;
        r = entry[i].addr >> (COL_BITS + CH_BITS + BANK_BITS);
        b = (entry[i].addr >> (COL_BITS + CH_BITS)) & (NUM_BANKS - 1);
        if (open_valid[b] && open_row[b] == r) begin
          if (hit_streak[b] < CAP) begin
            if (!exp_hit) begin exp_idx = i; exp_hit = 1; end
          end else capped_hit_present = 1;
        end
      end
      if (!exp_hit && n > 0) exp_idx = 0;
      check(pick_valid == (n > 0), "pick_valid");
      if (n > 0) begin
        check(int'(pick_idx) == exp_idx, $sformatf("pick_idx got %0d exp %0d", pick_idx, exp_idx));
        check(pick_hit == exp_hit, "pick_hit");
        if (exp_hit && exp_idx > 0) hits_seen++;
        if (!exp_hit && capped_hit_present) capped_seen++;
        if (!exp_hit) oldest_seen++;
      end
    end
    check(hits_seen > 0, "younger row hit never chosen");
    check(capped_seen > 0, "column cap never applied");
    check(oldest_seen > 0, "oldest-first never applied");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
