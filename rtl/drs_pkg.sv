// drs_pkg: types and constants shared by the DR-STRaNGe memory-controller extension.
//
// The design sits in a DDR3-1600 memory controller with 4 channels, 1 rank per channel,
// 8 banks per rank and 64K rows per bank; these sizes follow the evaluated system. All
// cycle counts in the design are memory-controller (DRAM bus) cycles at 800 MHz.
//
// Requests carry a cache-line address laid out, from most to least significant bit, as
// {row, bank, channel, column}. The layout and the column width (128 lines per row) are
// this design's choice; the evaluated system does not state its address mapping.
// Applications are identified by a 4-bit id (up to 16 cores) and carry a 3-bit
// OS-assigned priority; both widths are this design's choice.
package drs_pkg;

  localparam int unsigned NUM_CHANNELS = 4;
  localparam int unsigned CH_BITS      = $clog2(NUM_CHANNELS);
  localparam int unsigned NUM_BANKS    = 8;
  localparam int unsigned BANK_BITS    = $clog2(NUM_BANKS);
  localparam int unsigned ROW_BITS     = 16;   // 64K rows per bank
  localparam int unsigned COL_BITS     = 7;    // cache lines per row (assumed)
  localparam int unsigned ADDR_BITS    = ROW_BITS + BANK_BITS + CH_BITS + COL_BITS;

  localparam int unsigned NUM_APPS     = 16;
  localparam int unsigned APP_BITS     = $clog2(NUM_APPS);
  localparam int unsigned PRIO_BITS    = 3;
  localparam int unsigned TS_BITS      = 16;

  localparam int unsigned RN_BITS      = 64;   // width of one served random number
  localparam int unsigned BATCH_BITS   = 8;    // bits produced by one TRNG batch (1 per bank)

  typedef logic [ADDR_BITS-1:0] addr_t;
  typedef logic [APP_BITS-1:0]  app_t;
  typedef logic [PRIO_BITS-1:0] prio_t;
  typedef logic [TS_BITS-1:0]   ts_t;
  typedef logic [ROW_BITS-1:0]  row_t;
  typedef logic [BANK_BITS-1:0] bank_t;
  typedef logic [BATCH_BITS-1:0] batch_t;
  typedef logic [RN_BITS-1:0]   rn_t;

  // One queued memory request. In the RNG queue the address is unused.
  typedef struct packed {
    addr_t addr;
    app_t  app;
    ts_t   ts;     // arrival time in the channel, for age comparisons across queues
  } mem_req_t;

  // Execution mode of a channel.
  typedef enum logic {
    MODE_REGULAR = 1'b0,   // only regular reads and writes are issued
    MODE_RNG     = 1'b1    // a TRNG batch is running; regular requests wait
  } exec_mode_e;

  // Per-channel event pulses, exported so that a system can count them.
  typedef struct packed {
    logic demand_batch;     // a TRNG batch for a queued RNG request started
    logic fill_batch;       // a TRNG batch to fill the buffer started
    logic lowutil_fill;     // ... while regular reads were waiting (low-utilisation fill)
    logic fill_stop;        // a fill run ended because a regular read arrived
    logic mode_switch;      // the channel went from Regular Execution Mode to RNG Mode
    logic rng_prio_pick;    // RNG queue chosen over waiting reads because of priority
    logic read_prio_pick;   // read queue chosen over waiting RNG requests because of priority
    logic age_pick;         // RNG queue chosen because it holds older requests (non-RNG prioritized)
    logic starve_pick;      // deprioritised queue chosen because the stall limit was reached
  } ch_events_t;

  function automatic bank_t addr_bank(addr_t a);
    return a[COL_BITS+CH_BITS +: BANK_BITS];
  endfunction

  function automatic row_t addr_row(addr_t a);
    return a[COL_BITS+CH_BITS+BANK_BITS +: ROW_BITS];
  endfunction

  function automatic logic [CH_BITS-1:0] addr_channel(addr_t a);
    return a[COL_BITS +: CH_BITS];
  endfunction

  // True when time stamp a is strictly older than b (wrap-around safe while the two
  // are less than 2^(TS_BITS-1) cycles apart).
  function automatic logic ts_older(ts_t a, ts_t b);
    ts_t d;
    d = a - b;
    return d[TS_BITS-1];
  endfunction

endpackage
