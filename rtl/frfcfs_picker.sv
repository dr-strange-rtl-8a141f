// frfcfs_picker: FR-FCFS choice with a column cap, inside one age-ordered request queue.
//
// This is the baseline policy of the memory controller that DR-STRaNGe extends, and the
// rule the RNG-aware scheduler falls back to between requests of equal standing: row-buffer
// hits first, then the oldest request. The column cap (16) stops a bank's open row from
// being favoured once 16 hits have been served from it since it was opened; requests to
// that bank then compete on age only.
//
// Purely combinational. Inputs are the queue slots (slot 0 oldest), the open row of every
// bank and the number of hits served from each open row. Output is the chosen slot and
// whether it is a row hit. Open-page operation (the row stays open after an access) and
// a per-bank cap counter are this design's choices.
module frfcfs_picker
  import drs_pkg::*;
#(
  parameter int unsigned DEPTH = 32,
  parameter int unsigned CAP   = 16,
  parameter int unsigned SW    = 5      // width of the per-bank hit counters
) (
  input  mem_req_t                 entry      [DEPTH],
  input  logic [DEPTH-1:0]         valid,
  input  logic [NUM_BANKS-1:0]     open_valid,
  input  row_t                     open_row   [NUM_BANKS],
  input  logic [SW-1:0]            hit_streak [NUM_BANKS],
  output logic                     pick_valid,
  output logic [$clog2(DEPTH)-1:0] pick_idx,
  output logic                     pick_hit
);

  logic [DEPTH-1:0] hit;

  always_comb begin
    for (int i = 0; i < DEPTH; i++) begin
      bank_t b;
      b = addr_bank(entry[i].addr);
      hit[i] = valid[i] && open_valid[b] && (open_row[b] == addr_row(entry[i].addr))
               && (32'(hit_streak[b]) < CAP);
    end
  end

  // Oldest capped row hit if there is one, otherwise the oldest request.
  always_comb begin
    pick_valid = |valid;
    pick_hit   = |hit;
    pick_idx   = '0;
    if (|hit) begin
      for (int i = DEPTH-1; i >= 0; i--) if (hit[i]) pick_idx = i[$clog2(DEPTH)-1:0];
    end else begin
      for (int i = DEPTH-1; i >= 0; i--) if (valid[i]) pick_idx = i[$clog2(DEPTH)-1:0];
    end
  end

endmodule
