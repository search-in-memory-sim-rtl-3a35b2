// sim_page_buffer: the 64 page buffers (PBs) of one match group, i.e. the
// bitlines under one 8-byte slot of the page.
//
// Each PB holds four one-bit data latches and an XOR gate. Latch 1 (stage)
// receives sensed data or bus input, Latch 2 (active) holds the page being
// matched, Latch 4 holds the query key bit, and Latch 3 takes the XOR of
// Latch 2 and Latch 4, where a one marks a mismatch. The FBC switch of each PB
// conducts when Latch 3 is one and its gate, the OR of "Enable FBC" and the
// PB's mask bit, is one; the switch currents are the `fbc_sw` outputs that the
// group's failed-bit counter adds up. In storage mode the program-verify result
// is formed the same way (Latch 2 = intended data, Latch 4 = sensed data) with
// Enable FBC high, so every bit is counted.
//
// The latch roles, the XOR of Latch 2 and Latch 4 into Latch 3 and the OR gate
// on the FBC switch follow the published page buffer. Latches are modelled as
// flip-flops on the core clock and cleared by reset; the use of Latch 4 for
// the sensed verify data and the explicit `sense_to_l4` strobe are this
// implementation's choices.
//
// Timing: every load takes effect at the clock edge on which its strobe is
// high; `fbc_sw` is combinational from Latch 3, `en_fbc` and `mask`.
module sim_page_buffer
  import sim_pkg::*;
#(
  parameter int unsigned W = SLOT_BITS          // bitlines per group
) (
  input  logic         clk,
  input  logic         rst_n,
  // Latch 1 loads: sensed data or one byte of bus input
  input  logic         sense_to_l1,
  input  logic         sense_to_l4,
  input  logic [W-1:0] sense_data,
  input  logic         din_we,
  input  logic [$clog2(W/8)-1:0] din_lane,      // byte lane, 0 = most significant byte
  input  logic [7:0]   din_byte,
  // Latch 1 -> Latch 2 transfer (page activation)
  input  logic         l1_to_l2,
  // Latch 4 load from the deserializer
  input  logic         l4_we,
  input  logic [W-1:0] l4_data,
  // Latch 3 <= Latch 2 ^ Latch 4
  input  logic         xor_en,
  // FBC switch gate controls
  input  logic         en_fbc,
  input  logic [W-1:0] mask,
  output logic [W-1:0] l1_q,
  output logic [W-1:0] l2_q,
  output logic [W-1:0] fbc_sw
);

  logic [W-1:0] l1, l2, l3, l4;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      l1 <= '0;
      l2 <= '0;
      l3 <= '0;
      l4 <= '0;
    end else begin
      if (sense_to_l1)
        l1 <= sense_data;
      else if (din_we)
        l1[(W/8-1-32'(din_lane))*8 +: 8] <= din_byte;
      if (l1_to_l2)
        l2 <= l1;
      if (sense_to_l4)
        l4 <= sense_data;
      else if (l4_we)
        l4 <= l4_data;
      if (xor_en)
        l3 <= l2 ^ l4;
    end
  end

  // FBC switch: Latch 3 in series with the OR-gated enable.
  assign fbc_sw = l3 & ({W{en_fbc}} | mask);
  assign l1_q   = l1;
  assign l2_q   = l2;

endmodule
