// tb_idleness_predictor: drives phases of idle, short-idle and busy cycles with requests
// from a few repeating addresses, and compares every output every cycle with a reference
// model of the predictor kept in this testbench.
module tb_idleness_predictor;
  import drs_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [5:0] rd_count, wr_count;
  logic req_valid;
  addr_t req_addr;
  logic idle, low_util, predict_long, fill_go;
  logic [7:0] idle_len;

  idleness_predictor dut (.*);

  int checks = 0, failures = 0;
  int n_long = 0, n_short = 0, n_fill_low = 0, n_inc = 0, n_dec = 0;
  int ref_tab [256];
  addr_t ref_last;
  int ref_idle;

  function automatic int fold(addr_t a);
    int x = 0;
    for (int s = 0; s < ADDR_BITS; s += 8) x ^= int'((a >> s) & 8'hff);
    return x;
  endfunction

  task automatic check(bit c, string msg);
    checks++;
    if (!c) begin failures++; if (failures < 10) $display("FAIL %s t=%0t", msg, $time); end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  addr_t pool [4];
  initial begin
    foreach (pool[i]) pool[i] = addr_t'({$urandom, $urandom});
    foreach (ref_tab[i]) ref_tab[i] = 1;
    ref_last = '0; ref_idle = 0;
    rd_count = 1; wr_count = 0; req_valid = 0; req_addr = '0;
    repeat (2) @(posedge clk);
    @(negedge clk);
    rst_n = 1;
    @(posedge clk);
    for (int ph = 0; ph < 600; ph++) begin
      int len, kind;
      kind = $urandom_range(0, 2);             // 0 long idle, 1 short idle, 2 busy
      // addresses 0/1 are always followed by long idle periods, 2/3 by short ones
      len  = (kind == 0) ? $urandom_range(40, 90) : (kind == 1) ? $urandom_range(1, 39) : $urandom_range(1, 20);
      for (int c = 0; c < len; c++) begin
        @(negedge clk);
        req_valid = 0;
        rd_count  = (kind == 2) ? 6'($urandom_range(1, 8)) : 0;
        wr_count  = (kind == 2) ? 6'($urandom_range(0, 3)) : 0;
        if (c == len - 1) begin
          int k;
          req_valid = 1;
          k = $urandom_range(0, 1) + ((ph % 2) ? 2 : 0);
          req_addr = pool[(kind == 0) ? $urandom_range(0, 1) : $urandom_range(2, 3)];
        end
        #1;
        check(idle == (rd_count == 0 && wr_count == 0), "idle");
        check(low_util == (rd_count < 4), "low_util");
        check(predict_long == (ref_tab[fold(ref_last)] >= 2), "predict_long");
        check(fill_go == ((rd_count < 4) && ref_tab[fold(ref_last)] >= 2), "fill_go");
        check(int'(idle_len) == ref_idle, $sformatf("idle_len %0d exp %0d", idle_len, ref_idle));
        if (fill_go && rd_count != 0) n_fill_low++;
        if (predict_long) n_long++; else n_short++;
        @(posedge clk);
        // reference update
        if (req_valid) begin
          int ix;
          ix = fold(ref_last);
          if (ref_idle >= 40) begin if (ref_tab[ix] < 3) ref_tab[ix]++; n_inc++; end
          else begin if (ref_tab[ix] > 0) ref_tab[ix]--; n_dec++; end
          ref_idle = 0;
          ref_last = req_addr;
        end else if (rd_count == 0 && wr_count == 0 && ref_idle < 255) ref_idle++;
      end
    end
    check(n_long > 0 && n_short > 0, "both predictions seen");
    check(n_fill_low > 0, "low-utilisation trigger never seen");
    check(n_inc > 0 && n_dec > 0, "counter never trained both ways");
    $display("long=%0d short=%0d lowutil_fill=%0d", n_long, n_short, n_fill_low);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
