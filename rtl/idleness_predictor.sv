// idleness_predictor: simple DRAM idleness predictor of one channel, with the
// low-utilisation extension.
//
// State: a table of 2-bit saturating counters (256 entries), the last accessed address and
// an idle-period-length counter that starts at 0. Every cycle in which the channel's read
// and write queues are both empty the idle counter counts up. Whenever the channel receives
// a regular request, the counter entry of the *previous* last address is trained: +1 if the
// idle period just observed reached PERIOD_THRESHOLD (40) cycles, -1 otherwise; then the
// idle counter is cleared and the new address becomes the last address.
//
// Prediction: the coming idle period is "long" when the last address's counter is 2 or
// more. The channel has low utilisation when fewer than LOW_UTIL_THRESHOLD (4) requests
// wait in its read queue (an empty channel is the special case of no request at all).
// fill_go asks for buffer-filling TRNG batches when utilisation is low and the period is
// predicted long.
//
// All of the above follows the paper. This design's own choices: the table index is the
// XOR of the 8-bit slices of the cache-line address (the paper says only "the last
// accessed address"); counters reset to 1 (weakly short); the idle counter saturates.
// Timing: outputs are combinational from registered state; training happens at the edge
// that accepts the request.
module idleness_predictor
  import drs_pkg::*;
#(
  parameter int unsigned ENTRIES            = 256,
  parameter int unsigned CNT_BITS           = 2,
  parameter int unsigned PERIOD_THRESHOLD   = 40,
  parameter int unsigned LOW_UTIL_THRESHOLD = 4,
  parameter int unsigned QCW                = 6,    // width of the queue counts
  parameter int unsigned IDLE_BITS          = 8     // idle-length counter width
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic [QCW-1:0]  rd_count,
  input  logic [QCW-1:0]  wr_count,
  input  logic            req_valid,    // a regular request is accepted by the channel
  input  addr_t           req_addr,
  output logic            idle,         // read and write queues are empty
  output logic            low_util,
  output logic            predict_long,
  output logic            fill_go,
  output logic [IDLE_BITS-1:0] idle_len
);

  localparam int unsigned IW = $clog2(ENTRIES);
  localparam logic [CNT_BITS-1:0] CNT_MAX  = '1;
  localparam logic [CNT_BITS-1:0] CNT_INIT = CNT_BITS'(1);
  localparam logic [CNT_BITS-1:0] CNT_LONG = CNT_BITS'(2);

  logic [CNT_BITS-1:0]  table_q [ENTRIES];
  addr_t                last_addr_q;
  logic [IDLE_BITS-1:0] idle_len_q;

  function automatic logic [IW-1:0] table_index(addr_t a);
    logic [IW-1:0] x;
    x = '0;
    for (int i = 0; i < ADDR_BITS; i += IW)
      for (int j = 0; j < IW; j++)
        if (i + j < ADDR_BITS) x[j] = x[j] ^ a[i+j];
    return x;
  endfunction

  logic [IW-1:0]       last_idx;
  logic [CNT_BITS-1:0] last_cnt;
  assign last_idx = table_index(last_addr_q);
  assign last_cnt = table_q[last_idx];

  assign idle         = (rd_count == '0) && (wr_count == '0);
  assign low_util     = 32'(rd_count) < LOW_UTIL_THRESHOLD;
  assign predict_long = last_cnt >= CNT_LONG;
  assign fill_go      = low_util && predict_long;
  assign idle_len     = idle_len_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < ENTRIES; i++) table_q[i] <= CNT_INIT;
      last_addr_q <= '0;
      idle_len_q  <= '0;
    end else if (req_valid) begin
      if (32'(idle_len_q) >= PERIOD_THRESHOLD) begin
        if (last_cnt != CNT_MAX) table_q[last_idx] <= last_cnt + CNT_BITS'(1);
      end else begin
        if (last_cnt != '0) table_q[last_idx] <= last_cnt - CNT_BITS'(1);
      end
      idle_len_q  <= '0;
      last_addr_q <= req_addr;
    end else if (idle && idle_len_q != '1) begin
      idle_len_q <= idle_len_q + IDLE_BITS'(1);
    end
  end

endmodule
