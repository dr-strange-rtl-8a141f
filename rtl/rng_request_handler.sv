// rng_request_handler: what happens to a random number request when it reaches the
// memory controller.
//
//  1  The buffer is checked.
//  2a If it holds a whole random number and no earlier request is waiting, the number is
//     served from the buffer (response one cycle after the request).
//  2b Otherwise the request waits in a pending FIFO, and RNG requests are enqueued to the
//     channels: whenever the bits buffered or in flight fall short of what the pending
//     requests need, one 8-bit TRNG batch is requested per cycle from the next channel
//     (round robin) whose RNG queue has room. The RNG request carries the application id
//     of the oldest pending request it will help serve, so the scheduler sees its priority.
//  5  As soon as the buffer holds a whole number, the oldest pending request is served.
// The handler also grants buffer space to channels that want to fill the buffer during
// predicted idle periods (one grant per cycle, round robin, only when no on-demand batch
// reserves space in that cycle).
//
// Steps 1, 2a, 2b and 5 follow the paper's flow. Splitting a 64-bit request into 8-bit
// batches spread over the channels, the pending FIFO (PEND_DEPTH 32) and in-order service
// are this design's choices. Generated bits always pass through the buffer.
module rng_request_handler
  import drs_pkg::*;
#(
  parameter int unsigned NUM_CH     = NUM_CHANNELS,
  parameter int unsigned PEND_DEPTH = 32,
  parameter int unsigned BW         = 8     // width of the buffer's batch counts
) (
  input  logic              clk,
  input  logic              rst_n,
  // random number requests from the application interface
  input  logic              req_valid,
  input  app_t              req_app,
  output logic              req_ready,
  output logic              resp_valid,
  output app_t              resp_app,
  output rn_t               resp_data,
  // random number buffer
  input  logic              buf_rn_valid,
  input  rn_t               buf_rn_data,
  input  logic [BW-1:0]     buf_avail,
  input  logic [BW-1:0]     buf_inflight,
  input  logic              buf_space,
  output logic              buf_pop,
  output logic              buf_reserve,
  // on-demand RNG requests into the channels' RNG queues
  output logic [NUM_CH-1:0] ch_req_valid,
  output app_t              ch_req_app,
  input  logic [NUM_CH-1:0] ch_req_ready,
  // buffer-fill grants
  input  logic [NUM_CH-1:0] fill_req,
  output logic [NUM_CH-1:0] fill_gnt,
  // events
  output logic              ev_buffer_serve,   // 2a
  output logic              ev_enqueue,        // 2b
  output logic              ev_generated_serve // 5
);

  localparam int unsigned PW = $clog2(PEND_DEPTH);
  localparam int unsigned CW = $clog2(PEND_DEPTH+1);
  localparam int unsigned PER_RN = RN_BITS / BATCH_BITS;
  localparam int unsigned CHW = (NUM_CH > 1) ? $clog2(NUM_CH) : 1;

  app_t          pend_q [PEND_DEPTH];
  logic [PW-1:0] head_q;
  logic [CW-1:0] count_q;
  logic [CHW-1:0] rr_dem_q, rr_fill_q;

  logic direct, serve_pend, push_pend;
  assign req_ready  = (count_q != CW'(PEND_DEPTH));
  assign direct     = req_valid && (count_q == '0) && buf_rn_valid;
  assign serve_pend = (count_q != '0) && buf_rn_valid;
  assign push_pend  = req_valid && req_ready && !direct;
  assign buf_pop    = direct || serve_pend;

  // On-demand generation.
  logic [31:0] have, need, covered;
  logic        deficit;
  always_comb begin
    have    = 32'(buf_avail) + 32'(buf_inflight);
    need    = 32'(count_q) * PER_RN;
    deficit = have < need;
    covered   = have / PER_RN;                 // pending requests already covered
    ch_req_app = pend_q[head_q + PW'(covered)];
  end

  function automatic logic [CHW-1:0] rot(logic [CHW-1:0] base, int k);
    return CHW'((int'(base) + k) % NUM_CH);
  endfunction

  logic [NUM_CH-1:0] dem_sel, fill_sel;
  always_comb begin
    dem_sel  = '0;
    fill_sel = '0;
    if (deficit && buf_space) begin
      for (int k = NUM_CH-1; k >= 0; k--) begin
        if (ch_req_ready[rot(rr_dem_q, k)]) begin
          dem_sel = '0;
          dem_sel[rot(rr_dem_q, k)] = 1'b1;
        end
      end
    end
    if (dem_sel == '0 && buf_space) begin
      for (int k = NUM_CH-1; k >= 0; k--) begin
        if (fill_req[rot(rr_fill_q, k)]) begin
          fill_sel = '0;
          fill_sel[rot(rr_fill_q, k)] = 1'b1;
        end
      end
    end
  end

  assign ch_req_valid = dem_sel;
  assign fill_gnt     = fill_sel;
  assign buf_reserve  = (dem_sel != '0) || (fill_sel != '0);

  assign ev_buffer_serve    = direct;
  assign ev_enqueue         = push_pend;
  assign ev_generated_serve = serve_pend;

  function automatic logic [CHW-1:0] next_rr(logic [NUM_CH-1:0] sel);
    logic [CHW-1:0] r;
    r = '0;
    for (int c = 0; c < NUM_CH; c++)
      if (sel[c]) r = CHW'((c + 1) % NUM_CH);
    return r;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      head_q     <= '0;
      count_q    <= '0;
      rr_dem_q   <= '0;
      rr_fill_q  <= '0;
      resp_valid <= 1'b0;
      resp_app   <= '0;
      resp_data  <= '0;
      for (int i = 0; i < PEND_DEPTH; i++) pend_q[i] <= '0;
    end else begin
      resp_valid <= buf_pop;
      if (buf_pop) begin
        resp_app  <= direct ? req_app : pend_q[head_q];
        resp_data <= buf_rn_data;
      end
      if (push_pend) pend_q[head_q + PW'(count_q)] <= req_app;
      if (serve_pend) head_q <= head_q + PW'(1);
      count_q <= count_q + CW'(push_pend) - CW'(serve_pend);
      if (dem_sel != '0)  rr_dem_q  <= next_rr(dem_sel);
      if (fill_sel != '0) rr_fill_q <= next_rr(fill_sel);
    end
  end

endmodule
