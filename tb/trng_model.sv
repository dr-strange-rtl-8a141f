// trng_model: behavioural model of one channel's DRAM TRNG engine (not synthesizable).
//
// A start pulse begins a batch; LATENCY cycles later the model pulses done with 8 random
// bits, standing in for one bit read from a reserved row in each of the 8 banks. The
// default of 40 memory cycles is the time the evaluated system needs for an 8-bit batch.
// The bits come from $urandom, so the model says nothing about randomness quality.
module trng_model
  import drs_pkg::*;
#(
  parameter int unsigned LATENCY = 40
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   start,
  output logic   done,
  output batch_t bits,
  output logic   busy
);
  int unsigned cnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt  <= 0;
      busy <= 1'b0;
      done <= 1'b0;
      bits <= '0;
    end else begin
      done <= 1'b0;
      if (start) begin
        busy <= 1'b1;
        cnt  <= LATENCY - 1;
      end else if (busy) begin
        if (cnt == 1) begin
          busy <= 1'b0;
          done <= 1'b1;
          bits <= batch_t'($urandom);
        end
        cnt <= cnt - 1;
      end
    end
  end
endmodule
