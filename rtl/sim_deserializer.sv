// sim_deserializer: distributes bus input across the page buffers.
//
// Match mode: on `key_load` it takes the 64-bit query key and, over the next
// CHUNK_SLOTS (8) cycles, writes it into Latch 4 of every slot of the page, one
// slot position per cycle for all chunks at once (cycle s writes slot s of
// every chunk). Each copy is XORed with the data randomizer's word for that
// slot, so that the key is scrambled exactly as the stored page was and the
// in-buffer XOR cancels the scrambling. Each chunk has its own generator,
// seeded from the row address and the chunk index, so any chunk can be
// de-scrambled on its own.
//
// Storage mode: bytes written on the bus (`din_valid`) are numbered from 0 at
// `din_start` and presented as (column, byte) pairs to the page buffers;
// columns at and above PAGE_BYTES address the spare area. The byte and its
// strobe pass straight through; only the column is generated here.
//
// Replicating the key to Latch 4 of every page buffer, randomizing it with the
// page's seed and seeding per chunk follow the published design. The generator
// (64-bit xorshift 13/7/17), the seed formula and filling one slot position per
// cycle are this implementation's choices; together with the XOR cycle and the
// counter capture they make a search take the published 10 core cycles.
//
// Interface timing: `key_load` at edge T; Latch 4 writes at edges T+1..T+8
// (`l4_slot_we` one-hot), `key_done` is high in the cycle after the last write.
module sim_deserializer
  import sim_pkg::*;
#(
  parameter int unsigned M         = PAGE_SLOTS,
  parameter int unsigned NCHUNK    = M / CHUNK_SLOTS,
  parameter int unsigned SPARE     = HDR_BYTES + PARITY_BYTES*NCHUNK,
  parameter int unsigned COLW      = $clog2(M*SLOT_BYTES + SPARE),
  parameter bit          RANDOMIZE = 1'b1
) (
  input  logic                         clk,
  input  logic                         rst_n,
  // match mode
  input  logic                         key_load,
  input  logic [SLOT_BITS-1:0]         key,
  input  row_addr_t                    row,
  output logic [CHUNK_SLOTS-1:0]       l4_slot_we,
  output logic [NCHUNK-1:0][SLOT_BITS-1:0] l4_word,
  output logic                         key_busy,
  output logic                         key_done,
  // storage mode
  input  logic                         din_start,
  input  logic                         din_valid,
  input  logic [7:0]                   din_byte,
  output logic                         pb_we,
  output logic [COLW-1:0]              pb_col,
  output logic [7:0]                   pb_byte
);

  logic [SLOT_BITS-1:0]               key_q;
  logic [NCHUNK-1:0][SLOT_BITS-1:0]   state;
  logic [$clog2(CHUNK_SLOTS+1)-1:0]   slot;   // CHUNK_SLOTS = idle
  localparam int unsigned SW = $clog2(CHUNK_SLOTS+1);
  localparam logic [SW-1:0] SLOT_IDLE = SW'(CHUNK_SLOTS);
  logic [COLW-1:0]                    col;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      key_q    <= '0;
      state    <= '0;
      slot     <= SLOT_IDLE;
      key_done <= 1'b0;
    end else begin
      key_done <= 1'b0;
      if (key_load) begin
        key_q <= key;
        slot  <= '0;
        for (int unsigned c = 0; c < NCHUNK; c++)
          state[c] <= RANDOMIZE ? rnd_next(rnd_seed(row, 6'(c))) : '0;
      end else if (slot < SLOT_IDLE) begin
        slot <= slot + 1'b1;
        for (int unsigned c = 0; c < NCHUNK; c++)
          state[c] <= RANDOMIZE ? rnd_next(state[c]) : '0;
        if (slot == SLOT_IDLE - 1'b1)
          key_done <= 1'b1;
      end
    end
  end

  assign key_busy = (slot < SLOT_IDLE);

  always_comb begin
    l4_slot_we = '0;
    if (slot < SLOT_IDLE)
      l4_slot_we[slot[$clog2(CHUNK_SLOTS)-1:0]] = 1'b1;
    for (int unsigned c = 0; c < NCHUNK; c++)
      l4_word[c] = key_q ^ state[c];
  end

  // Storage-mode byte stream.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)
      col <= '0;
    else if (din_start)
      col <= '0;
    else if (din_valid)
      col <= col + 1'b1;
  end

  assign pb_we   = din_valid;
  assign pb_col  = col;
  assign pb_byte = din_byte;

endmodule
