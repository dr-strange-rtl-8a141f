// req_queue: age-ordered memory request queue (regular read queue, write queue and RNG
// queue of a channel).
//
// Entries are kept compacted in arrival order: slot 0 always holds the oldest request,
// slot count-1 the youngest. Any slot can be removed (pop_idx), which lets an FR-FCFS
// picker take a younger row hit; the slots above it move down by one in the same cycle.
// A push and a pop may happen in the same cycle. All slots are visible to the scheduler,
// which needs the applications and ages of every waiting request.
//
// Timing: push and pop take effect at the next clock edge; push_ready is low when full.
// Depth 32 follows the evaluated controller (32-entry read/write queues and a 32-entry
// RNG queue). The compacting organisation is this design's choice.
module req_queue
  import drs_pkg::*;
#(
  parameter int unsigned DEPTH = 32
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     push_valid,
  input  mem_req_t                 push_data,
  output logic                     push_ready,
  input  logic                     pop_valid,
  input  logic [$clog2(DEPTH)-1:0] pop_idx,
  output mem_req_t                 entry [DEPTH],
  output logic [DEPTH-1:0]         valid,
  output logic [$clog2(DEPTH+1)-1:0] count
);

  localparam int unsigned CW = $clog2(DEPTH+1);

  mem_req_t        mem_q [DEPTH];
  logic [CW-1:0]   count_q;

  assign push_ready = (count_q != CW'(DEPTH));
  assign count      = count_q;

  always_comb begin
    for (int i = 0; i < DEPTH; i++) begin
      entry[i] = mem_q[i];
      valid[i] = (CW'(i) < count_q);
    end
  end

  logic do_push, do_pop;
  logic [CW-1:0] wr_slot;
  assign wr_slot = do_pop ? count_q - CW'(1) : count_q;
  assign do_push = push_valid && push_ready;
  assign do_pop  = pop_valid && (CW'(pop_idx) < count_q);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      count_q <= '0;
      for (int i = 0; i < DEPTH; i++) mem_q[i] <= '0;
    end else begin
      // Remove the popped slot by shifting the younger entries down.
      if (do_pop) begin
        for (int i = 0; i < DEPTH-1; i++)
          if (i >= int'(pop_idx)) mem_q[i] <= mem_q[i+1];
      end
      if (do_push) mem_q[wr_slot[$clog2(DEPTH)-1:0]] <= push_data;
      count_q <= count_q + CW'(do_push) - CW'(do_pop);
    end
  end

  // A pop must name a valid slot.
  assert property (@(posedge clk) disable iff (!rst_n) pop_valid |-> (CW'(pop_idx) < count_q))
    else $error("req_queue: pop of an empty slot");

endmodule
