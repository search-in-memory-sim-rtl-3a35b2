// sim_pkg: constants, command codes and shared types of the Search-in-Memory
// (SiM) NAND flash chip.
//
// Page geometry: a 4 KiB page is an array of 512 eight-byte slots; eight
// slots form a 64-byte chunk, so a page has 64 chunks. Every slot is compared
// by one group of 64 page buffers, whose failed-bit counter reports one match
// bit, which gives a 512-bit match bitmap per search. These numbers, the die
// organisation (2 dies, 1 plane, 32 blocks, 128 pages) and the read, program
// and erase times (16 us, 80 us, 1 ms at a 33 MHz core clock) follow the
// published design. The spare area layout, the command codes and the bus
// framing are this implementation's own choices and are documented below.
//
// Bit order: byte 0 of a slot is its most significant byte, so a slot read
// as a 64-bit number is big-endian and "bit 0" in the sense of the published
// range-query example (the most significant bit) is bit 63 here.
package sim_pkg;

  // ---------------------------------------------------------------- geometry
  localparam int unsigned SLOT_BITS    = 64;   // key / mask / slot width
  localparam int unsigned SLOT_BYTES   = 8;
  localparam int unsigned CHUNK_SLOTS  = 8;    // slots per chunk
  localparam int unsigned CHUNK_BYTES  = 64;
  localparam int unsigned PAGE_SLOTS   = 512;  // M, match groups per page
  localparam int unsigned PAGE_BYTES   = 4096;

  // Spare (out-of-band) area: verification header then per-chunk parity.
  localparam int unsigned HDR_TS_OFF     = 0;   // 8-byte write timestamp
  localparam int unsigned HDR_MAGIC_OFF  = 8;   // 8-byte magic number
  localparam int unsigned HDR_CRC_OFF    = 16;  // 8-byte CRC
  localparam int unsigned HDR_BYTES      = 24;
  localparam int unsigned PARITY_BYTES   = 4;   // ECC parity per chunk
  localparam int unsigned PARITY_OFF     = HDR_BYTES;

  // Die organisation and array timing (core clock 33 MHz).
  localparam int unsigned DIES            = 2;
  localparam int unsigned BLOCKS          = 32;
  localparam int unsigned PAGES_PER_BLOCK = 128;
  localparam int unsigned T_READ_CYC      = 528;    // 16 us
  localparam int unsigned T_PROG_CYC      = 2640;   // 80 us
  localparam int unsigned T_ERASE_CYC     = 33000;  // 1 ms

  // Row address field: {die, block, page}; 16 bits carried in two bytes.
  localparam int unsigned ROW_BITS = 16;
  typedef logic [ROW_BITS-1:0] row_addr_t;

  // Program-verify allowance: failed bits tolerated after a program.
  localparam int unsigned FAIL_BIT_LIMIT = 0;

  // ---------------------------------------------------------- command codes
  typedef enum logic [7:0] {
    OP_READ       = 8'h00,  // storage mode: full page (data + spare) out
    OP_PROGRAM    = 8'h80,  // storage mode: full page in, program, verify
    OP_ERASE      = 8'h60,  // storage mode: erase the block
    OP_STATUS     = 8'h70,  // one status byte out
    OP_PAGE_OPEN  = 8'hA0,  // match mode: sense page into Latch 1
    OP_SEARCH     = 8'hA1,  // match mode: key + mask in, 512-bit bitmap out
    OP_GATHER     = 8'hA2,  // match mode: chunk bitmap in, chunks out
    OP_PAGE_CLOSE = 8'hA3   // match mode: release Latch 2
  } opcode_e;

  // Data returned on the bus is tagged so that a listener can tell responses apart.
  typedef enum logic [2:0] {
    DK_NONE   = 3'd0,
    DK_STATUS = 3'd1,
    DK_PAGE   = 3'd2,   // full page read
    DK_OPEN   = 3'd3,   // page-open response: header then chunk 0
    DK_BITMAP = 3'd4,   // search result
    DK_CHUNK  = 3'd5    // gather result
  } dkind_e;

  // Status byte, modelled on the ONFI status register.
  typedef struct packed {
    logic       rdy;       // [7] accepting commands
    logic       ardy;      // [6] array idle (no sense/program/erase running)
    logic       active;    // [5] Latch 2 holds an active page
    logic       staged;    // [4] Latch 1 holds a sensed page waiting for Latch 2
    logic       match_mode;// [3]
    logic [1:0] rsvd;      // [2:1]
    logic       fail;      // [0] last program failed verify or last command rejected
  } status_t;

  // A decoded command, from the I/O control to the control logic.
  typedef struct packed {
    opcode_e               op;
    row_addr_t             row;
    logic [SLOT_BITS-1:0]  key;     // search key, big-endian slot order
    logic [SLOT_BITS-1:0]  mask;    // 1 = compare this bit
    logic [63:0]           chunks;  // gather: bit c selects chunk c
  } cmd_t;

  // Data randomizer step: 64-bit xorshift (13, 7, 17). Linear over GF(2),
  // so XORing the same stream twice cancels it.
  function automatic logic [63:0] rnd_next(input logic [63:0] x);
    logic [63:0] y;
    y = x ^ (x << 13);
    y = y ^ (y >> 7);
    y = y ^ (y << 17);
    return y;
  endfunction

  // Seed of one chunk's random stream, from the row address and chunk index.
  function automatic logic [63:0] rnd_seed(input row_addr_t row, input logic [5:0] chunk);
    return 64'h9E37_79B9_7F4A_7C15 ^ {38'd0, row, chunk, 4'hB};
  endfunction

endpackage
