// rn_buffer: the random number buffer in the memory controller.
//
// It holds ENTRIES (16) random numbers of RN_BITS (64) bits, stored as a circular FIFO of
// 8-bit batches, because the TRNG delivers 8 bits (one per bank) per batch while
// applications take 64 bits at a time. Up to NUM_CH batches, one from each channel, can be
// written in a cycle; one 64-bit number can be read. A read removes its bits and clears
// their storage, so no bit is served twice.
//
// So that the buffer never overflows, every TRNG batch reserves its place before it
// starts (`reserve`, one batch per cycle): `inflight` counts batches started but not yet
// delivered, and `space` says whether one more batch can be reserved. `avail` is the number
// of whole batches held, `rn_valid` that a full random number can be read.
//
// Capacity, widths and the serve-once rule follow the paper; the batch-granular storage
// and the reservation scheme are this design's. Timing: writes, reads and reservations
// take effect at the clock edge; rn_data is combinational from the head of the FIFO.
module rn_buffer
  import drs_pkg::*;
#(
  parameter int unsigned ENTRIES    = 16,
  parameter int unsigned NUM_CH     = NUM_CHANNELS
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic [NUM_CH-1:0]  push_valid,
  input  batch_t             push_data [NUM_CH],
  input  logic               reserve,
  input  logic               pop,
  output logic               rn_valid,
  output rn_t                rn_data,
  output logic               space,
  output logic [$clog2(ENTRIES*RN_BITS/BATCH_BITS+1)-1:0] avail,
  output logic [$clog2(ENTRIES*RN_BITS/BATCH_BITS+1)-1:0] inflight,
  output logic               full
);

  localparam int unsigned SLOTS = ENTRIES * RN_BITS / BATCH_BITS;   // 128 batches
  localparam int unsigned PER_RN = RN_BITS / BATCH_BITS;            // 8 batches per number
  localparam int unsigned PW = $clog2(SLOTS);
  localparam int unsigned CW = $clog2(SLOTS+1);

  batch_t        mem_q [SLOTS];
  logic [PW-1:0] rd_ptr_q, wr_ptr_q;
  logic [CW-1:0] count_q, inflight_q;

  logic do_pop;
  logic [CW-1:0] n_push;

  assign rn_valid = count_q >= CW'(PER_RN);
  assign do_pop   = pop && rn_valid;
  assign space    = (32'(count_q) + 32'(inflight_q)) < SLOTS;
  assign avail    = count_q;
  assign inflight = inflight_q;
  assign full     = count_q == CW'(SLOTS);

  always_comb begin
    for (int k = 0; k < PER_RN; k++)
      rn_data[k*BATCH_BITS +: BATCH_BITS] = mem_q[rd_ptr_q + PW'(k)];
    n_push = '0;
    for (int c = 0; c < NUM_CH; c++) n_push = n_push + CW'(push_valid[c]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_ptr_q   <= '0;
      wr_ptr_q   <= '0;
      count_q    <= '0;
      inflight_q <= '0;
      for (int i = 0; i < SLOTS; i++) mem_q[i] <= '0;
    end else begin
      logic [PW-1:0] wp;
      if (do_pop) begin
        for (int k = 0; k < PER_RN; k++) mem_q[rd_ptr_q + PW'(k)] <= '0;
        rd_ptr_q <= rd_ptr_q + PW'(PER_RN);
      end
      wp = wr_ptr_q;
      for (int c = 0; c < NUM_CH; c++) begin
        if (push_valid[c]) begin
          mem_q[wp] <= push_data[c];
          wp = wp + PW'(1);
        end
      end
      wr_ptr_q   <= wp;
      count_q    <= count_q + n_push - (do_pop ? CW'(PER_RN) : '0);
      inflight_q <= inflight_q + CW'(reserve && space) - n_push;
    end
  end

  // Every delivered batch was reserved beforehand.
  assert property (@(posedge clk) disable iff (!rst_n) 32'(n_push) <= 32'(inflight_q))
    else $error("rn_buffer: batch delivered without a reservation");

endmodule
