// app_interface: memory-mapped registers through which software uses DR-STRaNGe.
//
// A modified getrandom() system call reads the RNG_DATA register; each accepted read is
// one 64-bit random number request on behalf of the calling application (csr_app), and
// the number returns later on the rn_resp port, tagged with that application. The first
// such request marks the application as an RNG application, which the RNG-aware scheduler
// needs to tell RNG from non-RNG applications. The OS writes each application's priority
// into PRIO[app]; a write pulses prio_changed, which clears the scheduler's stall counter.
//
// Register map (word addresses, 64-bit data):
//   0x00       RNG_DATA  read : request a random number (answer on rn_resp_*)
//   0x01       RNG_APPS  read : bit a set when application a is an RNG application
//                        write: write-one-to-clear (the OS clears an exited application)
//   0x10+a     PRIO[a]   read/write: priority of application a (PRIO_BITS bits, larger wins)
// Register reads other than RNG_DATA return csr_rdata in the cycle they are accepted.
// csr_ready is low for RNG_DATA while the request handler cannot take a request.
// The data bus is 64 bits wide for a 64-bit system; the widest register (RNG_APPS) has
// NUM_APPS = 16 bits, so csr_rdata[63:16] always reads as zero.
//
// The paper proposes memory-mapped registers behind getrandom(), OS-set priority bits and
// the first-request marking. The register map, widths and handshake are this design's.
module app_interface
  import drs_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        csr_valid,
  input  logic        csr_write,
  input  logic [7:0]  csr_addr,
  input  logic [63:0] csr_wdata,
  input  app_t        csr_app,
  output logic        csr_ready,
  output logic [63:0] csr_rdata,
  // random number requests to the request handler
  output logic        rng_req_valid,
  output app_t        rng_req_app,
  input  logic        rng_req_ready,
  // application state for the scheduler
  output prio_t       app_prio [NUM_APPS],
  output logic [NUM_APPS-1:0] app_is_rng,
  output logic        prio_changed
);

  localparam logic [7:0] A_RNG_DATA = 8'h00;
  localparam logic [7:0] A_RNG_APPS = 8'h01;
  localparam logic [7:0] A_PRIO     = 8'h10;

  prio_t               prio_q [NUM_APPS];
  logic [NUM_APPS-1:0] is_rng_q;
  logic                prio_changed_q;

  logic is_data, is_apps, is_prio;
  app_t prio_idx;
  assign is_data  = csr_addr == A_RNG_DATA;
  assign is_apps  = csr_addr == A_RNG_APPS;
  assign is_prio  = csr_addr[7:APP_BITS] == A_PRIO[7:APP_BITS];
  assign prio_idx = csr_addr[APP_BITS-1:0];

  assign csr_ready     = (is_data && !csr_write) ? rng_req_ready : 1'b1;
  assign rng_req_valid = csr_valid && is_data && !csr_write;
  assign rng_req_app   = csr_app;

  always_comb begin
    csr_rdata = '0;
    if (is_apps)      csr_rdata = 64'(is_rng_q);
    else if (is_prio) csr_rdata = 64'(prio_q[prio_idx]);
  end

  always_comb
    for (int a = 0; a < NUM_APPS; a++) app_prio[a] = prio_q[a];
  assign app_is_rng   = is_rng_q;
  assign prio_changed = prio_changed_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int a = 0; a < NUM_APPS; a++) prio_q[a] <= '0;
      is_rng_q       <= '0;
      prio_changed_q <= 1'b0;
    end else begin
      prio_changed_q <= 1'b0;
      if (csr_valid && csr_write && is_prio) begin
        prio_q[prio_idx] <= csr_wdata[PRIO_BITS-1:0];
        prio_changed_q   <= 1'b1;
      end
      if (csr_valid && csr_write && is_apps)
        is_rng_q <= is_rng_q & ~csr_wdata[NUM_APPS-1:0];
      else if (rng_req_valid && rng_req_ready)
        is_rng_q[csr_app] <= 1'b1;
    end
  end

endmodule
