// dr_strange_top: DR-STRaNGe, an end-to-end system design for a DRAM-based true random
// number generator, as an extension of a 4-channel DDR3 memory controller.
//
// Software requests 64-bit random numbers through memory-mapped registers
// (app_interface). A request is served from a 16-entry random number buffer when it holds
// a whole number; otherwise the rng_request_handler enqueues 8-bit RNG requests to the
// channels' RNG queues and serves the request once the bits arrive. Each channel
// (channel_controller) separates RNG from regular requests, chooses between them with the
// RNG-aware scheduler, and, when its idleness predictor expects a long idle or
// low-utilisation period, runs TRNG batches to fill the buffer ahead of demand.
//
// Not inside this module, and brought out as ports:
//   * mem_req_*     regular requests from the last-level cache (one per cycle), routed to
//                   a channel by the channel bits of the address;
//   * cmd_*[c]      regular commands to channel c's DDR3 command/timing backend;
//   * trng_*[c]     channel c's TRNG engine (the reduced-timing command sequence of a DRAM
//                   TRNG such as D-RaNGe): start a batch, and receive 8 random bits (one
//                   per bank) with trng_done;
//   * mode, buf_full channel modes and buffer-full status;
//   * ch_ev, ev_*   event pulses for performance counters.
// The register map is described in app_interface (csr_rdata[63:16] always reads zero). Everything runs on the memory
// controller clock (DRAM bus cycles).
module dr_strange_top
  import drs_pkg::*;
#(
  parameter int unsigned RNBUF_ENTRIES      = 16,
  parameter int unsigned QUEUE_DEPTH        = 32,
  parameter int unsigned RNG_QUEUE_DEPTH    = 32,
  parameter int unsigned PRED_ENTRIES       = 256,
  parameter int unsigned PERIOD_THRESHOLD   = 40,
  parameter int unsigned LOW_UTIL_THRESHOLD = 4,
  parameter int unsigned STALL_LIMIT        = 100,
  parameter int unsigned COLUMN_CAP         = 16
) (
  input  logic        clk,
  input  logic        rst_n,
  // application interface registers
  input  logic        csr_valid,
  input  logic        csr_write,
  input  logic [7:0]  csr_addr,
  input  logic [63:0] csr_wdata,
  input  app_t        csr_app,
  output logic        csr_ready,
  output logic [63:0] csr_rdata,
  output logic        rn_resp_valid,
  output app_t        rn_resp_app,
  output rn_t         rn_resp_data,
  // regular memory requests
  input  logic        mem_req_valid,
  input  logic        mem_req_write,
  input  addr_t       mem_req_addr,
  input  app_t        mem_req_app,
  output logic        mem_req_ready,
  // per-channel DRAM command ports
  output logic [NUM_CHANNELS-1:0] cmd_valid,
  output logic [NUM_CHANNELS-1:0] cmd_write,
  output addr_t       cmd_addr [NUM_CHANNELS],
  output app_t        cmd_app  [NUM_CHANNELS],
  input  logic [NUM_CHANNELS-1:0] cmd_ready,
  // per-channel TRNG engines
  output logic [NUM_CHANNELS-1:0] trng_start,
  input  logic [NUM_CHANNELS-1:0] trng_done,
  input  batch_t      trng_bits [NUM_CHANNELS],
  // status and events
  output exec_mode_e  mode [NUM_CHANNELS],
  output ch_events_t  ch_ev [NUM_CHANNELS],
  output logic        buf_full,
  output logic        ev_buffer_serve,
  output logic        ev_enqueue,
  output logic        ev_generated_serve
);

  localparam int unsigned BW = $clog2(RNBUF_ENTRIES*RN_BITS/BATCH_BITS+1);

  // application interface
  logic  rq_valid, rq_ready, prio_changed;
  app_t  rq_app;
  prio_t app_prio [NUM_APPS];
  logic [NUM_APPS-1:0] app_is_rng;

  app_interface u_app (
    .clk, .rst_n, .csr_valid, .csr_write, .csr_addr, .csr_wdata, .csr_app,
    .csr_ready, .csr_rdata, .rng_req_valid(rq_valid), .rng_req_app(rq_app),
    .rng_req_ready(rq_ready), .app_prio, .app_is_rng, .prio_changed);

  // random number buffer
  logic          buf_rn_valid, buf_space, buf_pop, buf_reserve;
  rn_t           buf_rn_data;
  logic [BW-1:0] buf_avail, buf_inflight;

  rn_buffer #(.ENTRIES(RNBUF_ENTRIES), .NUM_CH(NUM_CHANNELS)) u_buf (
    .clk, .rst_n, .push_valid(trng_done), .push_data(trng_bits), .reserve(buf_reserve),
    .pop(buf_pop), .rn_valid(buf_rn_valid), .rn_data(buf_rn_data), .space(buf_space),
    .avail(buf_avail), .inflight(buf_inflight), .full(buf_full));

  // request handler
  logic [NUM_CHANNELS-1:0] ch_rng_valid, ch_rng_ready, fill_req, fill_gnt;
  app_t                    ch_rng_app;

  rng_request_handler #(.NUM_CH(NUM_CHANNELS), .PEND_DEPTH(RNG_QUEUE_DEPTH), .BW(BW)) u_hdl (
    .clk, .rst_n, .req_valid(rq_valid), .req_app(rq_app), .req_ready(rq_ready),
    .resp_valid(rn_resp_valid), .resp_app(rn_resp_app), .resp_data(rn_resp_data),
    .buf_rn_valid, .buf_rn_data, .buf_avail, .buf_inflight, .buf_space, .buf_pop,
    .buf_reserve, .ch_req_valid(ch_rng_valid), .ch_req_app(ch_rng_app),
    .ch_req_ready(ch_rng_ready), .fill_req, .fill_gnt,
    .ev_buffer_serve, .ev_enqueue, .ev_generated_serve);

  // channels
  logic [CH_BITS-1:0]      req_ch;
  logic [NUM_CHANNELS-1:0] ch_req_ready;
  assign req_ch        = addr_channel(mem_req_addr);
  assign mem_req_ready = ch_req_ready[req_ch];

  for (genvar c = 0; c < NUM_CHANNELS; c++) begin : g_ch
    channel_controller #(
      .RD_DEPTH(QUEUE_DEPTH), .WR_DEPTH(QUEUE_DEPTH), .RNG_DEPTH(RNG_QUEUE_DEPTH),
      .PRED_ENTRIES(PRED_ENTRIES), .PERIOD_THRESHOLD(PERIOD_THRESHOLD),
      .LOW_UTIL_THRESHOLD(LOW_UTIL_THRESHOLD), .STALL_LIMIT(STALL_LIMIT),
      .COLUMN_CAP(COLUMN_CAP)
    ) u_ch (
      .clk, .rst_n,
      .req_valid(mem_req_valid && req_ch == CH_BITS'(c)), .req_write(mem_req_write),
      .req_addr(mem_req_addr), .req_app(mem_req_app), .req_ready(ch_req_ready[c]),
      .rng_req_valid(ch_rng_valid[c]), .rng_req_app(ch_rng_app),
      .rng_req_ready(ch_rng_ready[c]),
      .app_prio, .app_is_rng, .prio_changed,
      .fill_req(fill_req[c]), .fill_gnt(fill_gnt[c]),
      .cmd_valid(cmd_valid[c]), .cmd_write(cmd_write[c]), .cmd_addr(cmd_addr[c]),
      .cmd_app(cmd_app[c]), .cmd_ready(cmd_ready[c]),
      .trng_start(trng_start[c]), .trng_done(trng_done[c]),
      .mode(mode[c]), .ev(ch_ev[c]));
  end

endmodule
