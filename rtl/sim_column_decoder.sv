// sim_column_decoder: selects which bytes of a page buffer leave the chip.
//
// It expands a 64-bit chunk bitmap into the sequence of columns of the
// selected chunks and reads them, one byte per cycle, from a page image
// (the data latches plus the spare-area latches). Three sequences exist:
//   gather : for every selected chunk c in ascending order, its 64 data bytes
//            followed by its 4 parity bytes from the spare area;
//   open   : the 24-byte verification header, then the 64 bytes of chunk 0;
//   page   : all data bytes, then the whole spare area (storage-mode read).
// Chunks are found with a priority encoder on the remaining bitmap, so a
// gather of k chunks takes k*68 cycles with no gaps.
//
// Chunk-granular transfer driven by a chunk bitmap and the transfer of the
// header plus the first chunk on page open follow the published design.
// Sending each chunk's 4-byte parity after it, the spare layout and the byte
// order are this implementation's choices.
//
// Interface: pulse one `start_*` while `busy` is low; `dout_valid` is high for
// each output byte, starting the cycle after the start pulse, and `dout_last`
// marks the final one. A gather with an empty bitmap returns no byte.
module sim_column_decoder
  import sim_pkg::*;
#(
  parameter int unsigned M      = PAGE_SLOTS,
  parameter int unsigned NCHUNK = M / CHUNK_SLOTS,
  parameter int unsigned SPARE  = HDR_BYTES + PARITY_BYTES*NCHUNK
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        start_gather,
  input  logic                        start_open,
  input  logic                        start_page,
  input  logic [63:0]                 chunks,
  input  logic [M-1:0][SLOT_BITS-1:0] page,
  input  logic [SPARE-1:0][7:0]       spare,
  output logic                        busy,
  output logic [7:0]                  dout,
  output logic                        dout_valid,
  output logic                        dout_last
);

  localparam int unsigned PB   = M * SLOT_BYTES;       // data bytes per page
  localparam int unsigned CB   = CHUNK_BYTES + PARITY_BYTES;
  localparam int unsigned AW   = $clog2(PB + SPARE + 1);

  typedef enum logic [1:0] {S_IDLE, S_GATHER, S_OPEN, S_PAGE} state_e;
  state_e              st;
  logic [NCHUNK-1:0]   remain;     // chunks still to send, current one included
  logic [$clog2(NCHUNK)-1:0] cur;  // current chunk
  logic [AW-1:0]       idx;        // byte index inside the current sequence item
  logic [AW-1:0]       addr;       // byte address: < PB data, else spare

  // lowest set bit of a chunk mask
  function automatic logic [$clog2(NCHUNK)-1:0] first_one(input logic [NCHUNK-1:0] v);
    first_one = '0;
    for (int i = NCHUNK - 1; i >= 0; i--)
      if (v[i]) first_one = ($clog2(NCHUNK))'(i);
  endfunction

  logic [NCHUNK-1:0] rest;         // remaining chunks after the current one
  always_comb begin
    rest      = remain;
    rest[cur] = 1'b0;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st     <= S_IDLE;
      remain <= '0;
      cur    <= '0;
      idx    <= '0;
    end else begin
      unique case (st)
        S_IDLE: begin
          idx <= '0;
          if (start_gather && chunks[NCHUNK-1:0] != '0) begin
            st     <= S_GATHER;
            remain <= chunks[NCHUNK-1:0];
            cur    <= first_one(chunks[NCHUNK-1:0]);
          end else if (start_open) begin
            st <= S_OPEN;
          end else if (start_page) begin
            st <= S_PAGE;
          end
        end
        S_GATHER: begin
          if (idx == AW'(CB - 1)) begin
            idx    <= '0;
            remain <= rest;
            cur    <= first_one(rest);
            if (rest == '0) st <= S_IDLE;
          end else begin
            idx <= idx + 1'b1;
          end
        end
        S_OPEN: begin
          if (idx == AW'(HDR_BYTES + CHUNK_BYTES - 1)) st <= S_IDLE;
          idx <= idx + 1'b1;
        end
        S_PAGE: begin
          if (idx == AW'(PB + SPARE - 1)) st <= S_IDLE;
          idx <= idx + 1'b1;
        end
        default: st <= S_IDLE;
      endcase
    end
  end

  // Byte address of the current output byte.
  always_comb begin
    addr = '0;
    unique case (st)
      S_GATHER: addr = (idx < AW'(CHUNK_BYTES))
                       ? AW'(cur) * AW'(CHUNK_BYTES) + idx
                       : AW'(PB + PARITY_OFF) + AW'(cur) * AW'(PARITY_BYTES) + idx - AW'(CHUNK_BYTES);
      S_OPEN:   addr = (idx < AW'(HDR_BYTES)) ? AW'(PB + HDR_TS_OFF) + idx : idx - AW'(HDR_BYTES);
      S_PAGE:   addr = idx;
      default:  addr = '0;
    endcase
  end

  // Read mux: data byte b sits in slot b/8, lane b%8 (lane 0 = MSB).
  always_comb begin
    if (addr < AW'(PB))
      dout = page[addr / AW'(SLOT_BYTES)][(SLOT_BYTES - 1 - 32'(addr % AW'(SLOT_BYTES)))*8 +: 8];
    else
      dout = spare[addr - AW'(PB)];
  end

  assign busy       = (st != S_IDLE);
  assign dout_valid = (st != S_IDLE);
  assign dout_last  = (st == S_GATHER && idx == AW'(CB - 1) && rest == '0) ||
                      (st == S_OPEN   && idx == AW'(HDR_BYTES + CHUNK_BYTES - 1)) ||
                      (st == S_PAGE   && idx == AW'(PB + SPARE - 1));

  // A new transfer may only be started while the previous one is idle.
  a_no_overlap: assert property (@(posedge clk) disable iff (!rst_n)
    busy |-> !(start_gather || start_open || start_page));

endmodule
