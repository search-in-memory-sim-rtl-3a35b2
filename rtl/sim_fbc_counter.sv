// sim_fbc_counter: failed-bit counter (CNT) of one 64-bitline match group.
//
// In the chip the switch currents of a group's page buffers are summed by an
// analog counter and a one-bit voltage comparator reports whether the sum is
// non-zero. Here the sum is a population count of the switch outputs and the
// comparator is a test for zero: `mismatch` is high when any compared bit of
// the slot differs from the key. `count` is also used for program verify,
// where the number of failed bits matters.
//
// The grouping of 64 PBs per counter and the non-zero comparison follow the
// published design; replacing the current summation by a digital count is
// this implementation's choice. Purely combinational.
module sim_fbc_counter
  import sim_pkg::*;
#(
  parameter int unsigned W = SLOT_BITS
) (
  input  logic [W-1:0]           sw,
  output logic [$clog2(W+1)-1:0] count,
  output logic                   mismatch
);

  always_comb begin
    count = '0;
    for (int unsigned i = 0; i < W; i++)
      count = count + ($clog2(W+1))'(sw[i]);
  end

  assign mismatch = (count != '0);

endmodule
