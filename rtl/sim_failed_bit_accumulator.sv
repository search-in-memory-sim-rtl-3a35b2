// sim_failed_bit_accumulator: collects the outputs of all M failed-bit
// counters of a plane.
//
// On `capture` it latches the M comparator outputs as the match bitmap (bit i
// is one when slot i MATCHES, i.e. its counter saw no mismatch) and the sum of
// all group counts as the number of failed bits, which the control logic uses
// to judge a program verify. The bitmap latch holds the result steady while it
// is shifted out on the I/O bus.
//
// The block, its M-bit bitmap output and its failed-bit output to the control
// logic follow the published chip diagram. The polarity (one = match) is this
// implementation's choice, taken from the published range-query example where
// a one marks a key that satisfies the query.
//
// Timing: both outputs are registered and change on the edge where `capture`
// is high.
module sim_failed_bit_accumulator
  import sim_pkg::*;
#(
  parameter int unsigned M  = PAGE_SLOTS,
  parameter int unsigned CW = $clog2(SLOT_BITS+1),   // width of one group count
  parameter int unsigned TW = $clog2(M*SLOT_BITS+1)  // width of the total
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                capture,
  input  logic [M-1:0]        mismatch,
  input  logic [M-1:0][CW-1:0] count,
  output logic [M-1:0]        bitmap,
  output logic [TW-1:0]       failed_bits
);

  logic [TW-1:0] total;

  always_comb begin
    total = '0;
    for (int unsigned g = 0; g < M; g++)
      total = total + TW'(count[g]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      bitmap      <= '0;
      failed_bits <= '0;
    end else if (capture) begin
      bitmap      <= ~mismatch;
      failed_bits <= total;
    end
  end

endmodule
